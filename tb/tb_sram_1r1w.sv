// tb_sram_1r1w: writes random words with random lane enables into the
// memory, keeps a shadow copy, and checks every read (one cycle latency)
// against the shadow, including read-during-write of the same address
// (old data expected).
module tb_sram_1r1w;
  localparam int LW = 16, LN = 4, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [5:0] rd_addr, wr_addr;
  logic [LN*LW-1:0] rd_data, wr_data, shadow [DEPTH], exp_q;
  logic [LN-1:0] wr_be;
  logic exp_v;
  int checks = 0, failures = 0;

  sram_1r1w #(.LANE_W(LW), .LANES(LN), .DEPTH(DEPTH)) dut (.*);

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0; wr_be = 0; exp_v = 0; exp_q = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(i); wr_be = '1; wr_data = {$urandom, $urandom};
      shadow[i] = wr_data;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rd_data !== exp_q) begin
          failures++;
          if (failures < 10) $display("FAIL read %h expected %h", rd_data, exp_q);
        end
      end
      rd_en = 1'($urandom); rd_addr = 6'($urandom);
      wr_en = 1'($urandom); wr_addr = (n % 7 == 0) ? rd_addr : 6'($urandom);
      wr_be = 4'($urandom); wr_data = {$urandom, $urandom};
      exp_v = rd_en;
      if (rd_en) exp_q = shadow[rd_addr];
      if (wr_en) for (int l = 0; l < LN; l++) if (wr_be[l]) shadow[wr_addr][l*LW +: LW] = wr_data[l*LW +: LW];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
