// tb_out_feat_buf: mixes whole-entry writes (PE array side), single-pixel
// writes (host side), single-pixel reads and whole-entry reads, and checks
// all reads (one cycle latency) against a shadow copy; a host write in the
// same cycle as an array write must lose.
module tb_out_feat_buf;
  import fsl_pkg::*;
  localparam int LANES = 64, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic arr_wr_en, host_wr_en, host_rd_en, wide_rd_en;
  logic [4:0] arr_wr_addr, host_addr, wide_rd_addr;
  logic [5:0] host_lane;
  bf16_t arr_wr_data [LANES], host_wr_data, host_rd_data, wide_rd_data [LANES];
  bf16_t shadow [DEPTH][LANES], exp_h, exp_w [LANES];
  logic ev_h, ev_w;
  int checks = 0, failures = 0;

  out_feat_buf #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  initial begin
    arr_wr_en = 0; host_wr_en = 0; host_rd_en = 0; wide_rd_en = 0; ev_h = 0; ev_w = 0;
    arr_wr_addr = 0; host_addr = 0; wide_rd_addr = 0; host_lane = 0; host_wr_data = 0;
    for (int l = 0; l < LANES; l++) arr_wr_data[l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < DEPTH; e++) begin
      @(negedge clk);
      arr_wr_en = 1; arr_wr_addr = 5'(e);
      for (int l = 0; l < LANES; l++) begin arr_wr_data[l] = 16'($urandom); shadow[e][l] = arr_wr_data[l]; end
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (ev_h) begin
        checks++;
        if (host_rd_data !== exp_h) begin failures++; $display("FAIL host read %h exp %h", host_rd_data, exp_h); end
      end
      if (ev_w)
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (wide_rd_data[l] !== exp_w[l]) begin
            failures++;
            if (failures < 10) $display("FAIL wide lane %0d %h exp %h", l, wide_rd_data[l], exp_w[l]);
          end
        end
      arr_wr_en = ($urandom_range(0, 7) == 0); arr_wr_addr = 5'($urandom);
      for (int l = 0; l < LANES; l++) arr_wr_data[l] = 16'($urandom);
      host_wr_en = 1'($urandom); host_rd_en = 1'($urandom); host_addr = 5'($urandom);
      host_lane = 6'($urandom); host_wr_data = 16'($urandom);
      wide_rd_en = 1'($urandom); wide_rd_addr = 5'($urandom);
      ev_h = host_rd_en; ev_w = wide_rd_en;
      exp_h = shadow[host_addr][host_lane];
      for (int l = 0; l < LANES; l++) exp_w[l] = shadow[wide_rd_addr][l];
      if (arr_wr_en) for (int l = 0; l < LANES; l++) shadow[arr_wr_addr][l] = arr_wr_data[l];
      else if (host_wr_en) shadow[host_addr][host_lane] = host_wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
