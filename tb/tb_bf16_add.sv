// tb_bf16_add: checks the BF16 adder against real arithmetic. For random
// normal operands of both signs the result must lie within one unit in the
// last place of the exact sum, truncated toward zero; a few sums are also
// checked bit-exactly.
module tb_bf16_add;
  import fsl_pkg::*;
  bf16_t a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bf16_add dut (.a, .b, .y);

  function automatic real to_real(bf16_t v);
    real m;
    int  e;
    if (v[14:7] == 0) return 0.0;
    m = (128.0 + real'(v[6:0])) / 128.0;
    e = int'(v[14:7]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return v[15] ? -m : m;
  endfunction

  task automatic exact(bf16_t x, bf16_t z, bf16_t expct);
    a = x; b = z; #1;
    checks++;
    if (y !== expct) begin
      failures++;
      $display("FAIL %h + %h = %h, expected %h", x, z, y, expct);
    end
  endtask

  initial begin
    exact(16'h3F80, 16'h3F80, 16'h4000);  // 1 + 1 = 2
    exact(16'h3FC0, 16'hBF00, 16'h3F80);  // 1.5 - 0.5 = 1
    exact(16'h4040, 16'h0000, 16'h4040);  // 3 + 0 = 3
    exact(16'h3F80, 16'hBF80, 16'h0000);  // 1 - 1 = 0
    exact(16'h4120, 16'h3F80, 16'h4130);  // 10 + 1 = 11
    for (int i = 0; i < 4000; i++) begin
      real ex, got, tol;
      a = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 7'($urandom)};
      b = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 7'($urandom)};
      #1;
      ex  = to_real(a) + to_real(b);
      got = to_real(y);
      tol = (ex < 0 ? -ex : ex) / 128.0 + 1e-30;
      checks++;
      if ((got - ex > tol) || (ex - got > tol) || (got != 0.0 && ((got < 0) != (ex < 0)))
          || ((got < 0 ? -got : got) > (ex < 0 ? -ex : ex) * 1.0000001)) begin
        failures++;
        if (failures < 10) $display("FAIL %h + %h = %h (%f vs %f)", a, b, y, got, ex);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
