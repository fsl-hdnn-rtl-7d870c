// tb_fe_ctrl: runs the feature-extractor sequencer for two configurations
// and checks the schedule it produces: run length (tiles x (w_in+1) slots
// x max(3*cin, 16*noc) cycles + 3 drain cycles), the number of pixel
// accumulations per RF window, the number of multiplies, that every output
// buffer entry is written exactly once and two cycles after its last
// multiply, that the four PE rows never read the same activation bank, and
// the activation addresses of the first cycles.
module tb_fe_ctrl;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  fe_cfg_t cfg;
  logic start, busy, done, act_rd_en, cidx_rd_en, wgt_rd_en, out_wr_en;
  logic [2:0] act_rd_bank [PE_ROWS];
  logic [12:0] act_rd_addr [PE_ROWS];
  logic [8:0] cidx_rd_addr;
  logic [6:0] wgt_rd_addr;
  pe_ctrl_t pe_ctrl;
  logic [7:0] out_wr_addr;
  int checks = 0, failures = 0;

  fe_ctrl dut (.*);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(int cin, int w, int nt, int noc);
    int cyc = 0, accs = 0, macs = 0, writes = 0, masks = 0, last_pe_last = -10;
    int written [256];
    int L, exp_cyc;
    L = (3 * cin > 16 * noc) ? 3 * cin : 16 * noc;
    exp_cyc = nt * (w + 1) * L + 3;
    for (int i = 0; i < 256; i++) written[i] = 0;
    cfg = '{cin: 10'(cin), w_in: 9'(w), n_tiles: 7'(nt), noc: 4'(noc)};
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
      if (cyc == 1) begin
        // second run cycle: tile 0, x 0, ch 0, ky 1: rows 1..4, word 0
        for (int r = 0; r < 4; r++)
          check(act_rd_bank[r] == 3'(r + 1) && act_rd_addr[r] == 0, "act address (ky=1)");
      end
      if (cyc == 3 && cin > 1)  // ch 1, ky 0: rows 0..3, word 1
        for (int r = 0; r < 4; r++)
          check(act_rd_bank[r] == 3'(r) && act_rd_addr[r] == 1, "act address (ch=1)");
      if (cyc == L && w > 4)  // x 1, ch 0, ky 0: word cin
        for (int r = 0; r < 4; r++)
          check(act_rd_bank[r] == 3'(r) && act_rd_addr[r] == 13'(cin), "act address (x=1)");
      if (act_rd_en)
        for (int p = 0; p < 4; p++) for (int q = p + 1; q < 4; q++)
          check(act_rd_bank[p] != act_rd_bank[q], "bank conflict");
      if (pe_ctrl.acc_en) begin
        accs++;
        masks += $countones(pe_ctrl.acc_mask);
      end
      if (pe_ctrl.mac_en) macs++;
      if (pe_ctrl.mac_en && pe_ctrl.mac_last) last_pe_last = cyc;
      if (out_wr_en) begin
        writes++;
        written[out_wr_addr]++;
        check(last_pe_last == cyc - 1, "write one cycle after PE result");
      end
      if (cyc > exp_cyc + 10) break;
    end
    check(cyc == exp_cyc, $sformatf("run length %0d expected %0d", cyc, exp_cyc));
    check(accs == nt * w * 3 * cin, "accumulate cycles");
    check(masks == nt * (w - 2) * 3 * 3 * cin, "accumulations into windows");
    check(macs == nt * (w - 2) * 16 * noc, "multiply cycles");
    check(writes == nt * (w - 2) * noc, "output writes");
    for (int i = 0; i < nt * (w - 2) * noc; i++) check(written[i] == 1, $sformatf("entry %0d written %0d times", i, written[i]));
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 8, 2, 2);   // accumulate-bound slots
    run(8, 6, 3, 1);   // multiply part shorter
    run(2, 5, 1, 4);   // multiply-bound slots
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
