// tb_hv_updater: random class and support words with both outcomes of the
// classification, checking c + s (prediction correct) or c - s (wrong),
// saturated to INT16, the address passed along, and the one-cycle latency.
module tb_hv_updater;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, correct, out_valid;
  logic [11:0] in_addr, out_addr;
  hv_elem_t cls [16], sup [16], out_word [16];
  int checks = 0, failures = 0;
  int expw [16];
  logic [11:0] expa;
  logic expv;

  hv_updater dut (.*);

  initial begin
    in_valid = 0; correct = 0; in_addr = 0; expv = 0; expa = 0;
    for (int l = 0; l < 16; l++) begin cls[l] = 0; sup[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== expv) begin failures++; $display("FAIL valid"); end
      if (expv) begin
        checks++;
        if (out_addr !== expa) begin failures++; $display("FAIL addr"); end
        for (int l = 0; l < 16; l++) begin
          checks++;
          if (int'(out_word[l]) != expw[l]) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d got %0d exp %0d", l, out_word[l], expw[l]);
          end
        end
      end
      in_valid = 1'($urandom); correct = 1'($urandom); in_addr = 12'($urandom);
      for (int l = 0; l < 16; l++) begin
        int v;
        cls[l] = (n % 5 == 0) ? hv_elem_t'($urandom) : hv_elem_t'($urandom_range(0, 2000) - 1000);
        sup[l] = (n % 5 == 0) ? hv_elem_t'($urandom) : hv_elem_t'($urandom_range(0, 2000) - 1000);
        v = correct ? int'(cls[l]) + int'(sup[l]) : int'(cls[l]) - int'(sup[l]);
        expw[l] = v > 32767 ? 32767 : v < -32768 ? -32768 : v;
      end
      expv = in_valid; expa = in_addr;
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
