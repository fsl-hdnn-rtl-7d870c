// tb_act_mem: loads all eight banks through the write port, then reads
// with four ports at once, each port on a different bank (a random
// permutation every cycle), and checks each port's data one cycle later
// against a shadow copy.
module tb_act_mem;
  import fsl_pkg::*;
  localparam int DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [2:0] rd_bank [4], wr_bank;
  logic [7:0] rd_addr [4], wr_addr;
  bf16_t rd_data [4], wr_data, shadow [8][DEPTH], exp_q [4];
  logic exp_v;
  int checks = 0, failures = 0;

  act_mem #(.BANKS(8), .DEPTH(DEPTH), .PORTS(4)) dut (.*);

  initial begin
    rd_en = 0; wr_en = 0; wr_bank = 0; wr_addr = 0; wr_data = 0; exp_v = 0;
    for (int p = 0; p < 4; p++) begin rd_bank[p] = 0; rd_addr[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 8; b++)
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 3'(b); wr_addr = 8'(i); wr_data = 16'($urandom);
        shadow[b][i] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 1000; n++) begin
      int perm [8];
      @(negedge clk);
      if (exp_v)
        for (int p = 0; p < 4; p++) begin
          checks++;
          if (rd_data[p] !== exp_q[p]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d %h expected %h", p, rd_data[p], exp_q[p]);
          end
        end
      for (int b = 0; b < 8; b++) perm[b] = b;
      for (int b = 7; b > 0; b--) begin
        int k, tmp;
        k = $urandom_range(0, b); tmp = perm[b]; perm[b] = perm[k]; perm[k] = tmp;
      end
      rd_en = 1'($urandom);
      for (int p = 0; p < 4; p++) begin
        rd_bank[p] = 3'(perm[p]); rd_addr[p] = 8'($urandom);
        exp_q[p] = shadow[perm[p]][rd_addr[p]];
      end
      exp_v = rd_en;
      if (!rd_en) for (int p = 0; p < 4; p++) exp_q[p] = rd_data[p];
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
