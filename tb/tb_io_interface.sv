// tb_io_interface: pushes a command stream into the IO interface with
// simple models of the two engines and of the memories' read ports, and
// checks: configuration writes and read-back, decoded memory writes and
// reads (strobe, target, address, data), that RUN_FE / RUN_HDC start the
// engine once and hold later commands until done, that RUN_HDC answers
// with the result word, and that a full output FIFO stalls the stream
// without losing answers.
module tb_io_interface;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  cmd_t host_in_data;
  logic [63:0] host_out_data, wdata;
  fe_cfg_t fe_cfg;
  hdc_cfg_t hdc_cfg;
  logic fe_start, fe_done, hdc_start, hdc_train, hdc_done, hdc_correct, wr_en, rd_en;
  logic [6:0] hdc_label, hdc_class;
  logic [31:0] hdc_dist, dt_rd_data, stall_cycles;
  target_e tgt;
  logic [23:0] addr;
  logic [15:0] ob_rd_data, cls_rd_data;
  int checks = 0, failures = 0;
  int fe_starts = 0, hdc_starts = 0, writes = 0, fe_left = 0, hdc_left = 0;
  logic [63:0] answers [$];

  io_interface dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // engine models
  always @(posedge clk) begin
    fe_done <= 0; hdc_done <= 0;
    if (fe_start) begin fe_starts++; fe_left <= 20; end
    else if (fe_left > 0) begin fe_left <= fe_left - 1; if (fe_left == 1) fe_done <= 1; end
    if (hdc_start) begin
      hdc_starts++; hdc_left <= 30;
      check(hdc_train == 1 && hdc_label == 7'd42, "train flag and label");
    end else if (hdc_left > 0) begin hdc_left <= hdc_left - 1; if (hdc_left == 1) hdc_done <= 1; end
    check(!(wr_en && (fe_left > 0 || hdc_left > 0)), "no command while an engine runs");
    if (wr_en && tgt == T_WGT) begin
      writes++;
      check(addr == 24'h000123 && wdata == 64'hBEEF, "write decode");
    end
    // memory read ports: data one cycle after rd_en
    if (rd_en) begin
      ob_rd_data  <= 16'(addr) ^ 16'h5A5A;
      cls_rd_data <= 16'(addr) ^ 16'h1234;
      dt_rd_data  <= 32'(addr) + 32'd1000;
    end
  end
  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) answers.push_back(host_out_data);

  task automatic send(op_e op, target_e t, int a, longint d);
    @(negedge clk);
    host_in_valid = 1; host_in_data = '{op: op, tgt: t, addr: 24'(a), data: 64'(d)};
    while (!host_in_ready) @(negedge clk);
    @(posedge clk); #1;
    host_in_valid = 0;
  endtask

  initial begin
    host_in_valid = 0; host_in_data = '0; host_out_ready = 1;
    hdc_class = 7'd9; hdc_dist = 32'd777; hdc_correct = 1;
    ob_rd_data = 0; cls_rd_data = 0; dt_rd_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    send(OP_WRITE, T_CFG, CFG_CIN, 64);
    send(OP_WRITE, T_CFG, CFG_D, 4096);
    send(OP_WRITE, T_CFG, CFG_N, 10);
    send(OP_WRITE, T_CFG, CFG_HVBITS, 4);
    send(OP_WRITE, T_WGT, 'h123, 'hBEEF);
    send(OP_READ, T_CFG, CFG_D, 0);
    send(OP_READ, T_OUTBUF, 'h77, 0);
    send(OP_READ, T_CLASS, 'h99, 0);
    send(OP_READ, T_DIST, 5, 0);
    send(OP_RUN_FE, T_ACT, 0, 0);
    send(OP_WRITE, T_WGT, 'h123, 'hBEEF);   // must wait for the FE
    send(OP_RUN_HDC, T_ACT, 0, (42 << 8) | 1);
    send(OP_WRITE, T_WGT, 'h123, 'hBEEF);   // must wait for the HDC
    // back-pressure: 20 reads with the output FIFO blocked
    host_out_ready = 0;
    for (int i = 0; i < 20; i++) send(OP_READ, T_DIST, i, 0);
    repeat (40) @(posedge clk);
    host_out_ready = 1;
    repeat (60) @(posedge clk);
    check(fe_cfg.cin == 10'd64 && hdc_cfg.d == 14'd4096 && hdc_cfg.n == 8'd10 && hdc_cfg.hv_bits == 5'd4, "config registers");
    check(fe_starts == 1 && hdc_starts == 1, "engine starts");
    check(writes == 3, "memory writes");
    check(answers.size() == 25, $sformatf("%0d answers", answers.size()));
    if (answers.size() == 25) begin
      check(answers[0] == 64'd4096, "cfg read-back");
      check(answers[1] == 64'(16'h77 ^ 16'h5A5A), "outbuf read");
      check(answers[2] == 64'(16'h99 ^ 16'h1234), "class read");
      check(answers[3] == 64'd1005, "distance read");
      check(answers[4] == {1'b1, 24'd0, 7'd9, 32'd777}, "HDC result word");
      for (int i = 0; i < 20; i++) check(answers[5 + i] == 64'(1000 + i), "read under back-pressure");
    end
    check(stall_cycles > 40, "stalls counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
