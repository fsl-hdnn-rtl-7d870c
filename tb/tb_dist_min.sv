// tb_dist_min: streams random distances for N classes (with deliberate
// ties) into the table and minimum finder, checks the minimum and its
// class (the lowest class wins a tie) against a scan done here, and reads
// the whole table back. Repeats after clear.
module tb_dist_min;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, dist_valid, rd_en;
  logic [6:0] dist_class, min_class, rd_class;
  logic [31:0] distance, min_dist, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] dv [128];

  dist_min dut (.*);

  task automatic run(int n);
    int best, bi;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    best = -1; bi = 0;
    for (int k = 0; k < n; k++) begin
      dv[k] = ($urandom_range(0, 3) == 0 && k > 0) ? dv[$urandom_range(0, k - 1)] : 32'($urandom_range(1000, 100000));
      if (k == n - 1) dv[k] = 32'(best);  // tie with the current minimum
      if (best < 0 || dv[k] < 32'(best)) begin best = int'(dv[k]); bi = k; end
      @(negedge clk);
      dist_valid = 1; dist_class = 7'(k); distance = dv[k];
      if ($urandom_range(0, 2) == 0) begin @(negedge clk); dist_valid = 0; end
    end
    @(negedge clk); dist_valid = 0;
    checks += 2;
    if (min_dist != 32'(best)) begin failures++; $display("FAIL min %0d exp %0d", min_dist, best); end
    if (int'(min_class) != bi) begin failures++; $display("FAIL class %0d exp %0d", min_class, bi); end
    for (int k = 0; k < n; k++) begin
      @(negedge clk); rd_en = 1; rd_class = 7'(k);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_data != dv[k]) begin failures++; $display("FAIL table[%0d] %0d exp %0d", k, rd_data, dv[k]); end
    end
  endtask

  initial begin
    clear = 0; dist_valid = 0; rd_en = 0; dist_class = 0; rd_class = 0; distance = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(10); run(2); run(128); run(37);
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
