// tb_bf16_mul: checks the BF16 multiplier against real arithmetic. For random
// normal operands of both signs the result must lie within one unit in the
// last place of the exact product, truncated toward zero; a few products are also
// checked bit-exactly.
module tb_bf16_mul;
  import fsl_pkg::*;
  bf16_t a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  bf16_mul dut (.a, .b, .y);

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
      $display("FAIL %h * %h = %h, expected %h", x, z, y, expct);
    end
  endtask

  initial begin
    exact(16'h3F80, 16'h3F80, 16'h3F80);  // 1 * 1 = 1
    exact(16'h3FC0, 16'hC000, 16'hC040);  // 1.5 * -2 = -3
    exact(16'h4040, 16'h0000, 16'h0000);  // 3 * 0 = 0
    exact(16'h3F00, 16'h3F00, 16'h3E80);  // 0.5 * 0.5 = 0.25
    exact(16'h4120, 16'h4120, 16'h42C8);  // 10 * 10 = 100
    for (int i = 0; i < 4000; i++) begin
      real ex, got, tol;
      a = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 7'($urandom)};
      b = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 7'($urandom)};
      #1;
      ex  = to_real(a) * to_real(b);
      got = to_real(y);
      tol = (ex < 0 ? -ex : ex) / 128.0 + 1e-30;
      checks++;
      if ((got - ex > tol) || (ex - got > tol) || (got != 0.0 && ((got < 0) != (ex < 0)))
          || ((got < 0 ? -got : got) > (ex < 0 ? -ex : ex) * 1.0000001)) begin
        failures++;
        if (failures < 10) $display("FAIL %h * %h = %h (%f vs %f)", a, b, y, got, ex);
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
