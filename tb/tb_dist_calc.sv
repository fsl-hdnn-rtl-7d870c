// tb_dist_calc: feeds random query/class word streams of several lengths
// and precisions and checks the distance, sum over elements of
// |(q >>> (16-bits)) - (c >>> (16-bits))|, computed here element by
// element; includes 1-bit precision, where the distance is the number of
// differing sign bits, and extreme values. The result must appear one
// cycle after the last word.
module tb_dist_calc;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] bits;
  logic in_valid, in_first, in_last, dist_valid;
  hv_elem_t q [16], c [16];
  logic [31:0] distance;
  int checks = 0, failures = 0;

  dist_calc dut (.*);

  task automatic run(int words, int b, bit extreme);
    longint exp;
    exp = 0;
    for (int w = 0; w < words; w++) begin
      @(negedge clk);
      in_valid = 1; in_first = (w == 0); in_last = (w == words - 1); bits = 5'(b);
      for (int l = 0; l < 16; l++) begin
        int qi, ci, qs, cs, dd;
        q[l] = extreme ? (($urandom % 2) ? 16'sh7FFF : 16'sh8000) : hv_elem_t'($urandom);
        c[l] = extreme ? (($urandom % 2) ? 16'sh7FFF : 16'sh8000) : hv_elem_t'($urandom);
        qi = int'(q[l]); ci = int'(c[l]);
        qs = qi >>> (16 - b); cs = ci >>> (16 - b);
        dd = qs - cs;
        exp += (dd < 0) ? -dd : dd;
      end
      if ($urandom_range(0, 3) == 0 && w != words - 1) begin  // bubble
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    checks += 2;
    if (!dist_valid) begin failures++; $display("FAIL no dist_valid"); end
    if (distance != 32'(exp)) begin failures++; $display("FAIL dist %0d exp %0d (bits %0d)", distance, exp, b); end
  endtask

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; bits = 16;
    for (int l = 0; l < 16; l++) begin q[l] = 0; c[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 1; b <= 16; b++) run(1 + b * 3, b, 0);
    run(64, 16, 1);
    run(64, 1, 0);
    run(512, 16, 0);
    run(512, 8, 1);
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
