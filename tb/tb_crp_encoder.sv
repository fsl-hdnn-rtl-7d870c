// tb_crp_encoder: loads a random 256-bit base block and a random feature
// vector, encodes it, and checks every output element against a direct
// projection sum_f B[f][d] * x[f] where B is built from the closed form of
// the cyclic random projection: B[f][d] = P^(d/256)(base)[(f mod 256 -
// d mod 256) mod 256], bit 1 meaning -1, P(v)[i] = v[(5i+3) mod 256]. Runs
// two configurations (F spanning one and three 256-feature blocks, D
// crossing block boundaries) and checks the output rate of one element
// every ceil(F/256) cycles.
module tb_crp_encoder;
  import fsl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [10:0] cfg_f;
  logic [13:0] cfg_d;
  logic [4:0]  cfg_enc_shift;
  logic base_wr_en, feat_wr_en, start, busy, done, out_valid;
  logic [1:0] base_wr_word;
  logic [63:0] base_wr_data;
  logic [3:0] feat_wr_addr;
  hv_elem_t feat_wr_data [64], out_data;
  logic [13:0] out_idx;
  int checks = 0, failures = 0;

  crp_encoder dut (.*);

  logic [255:0] base;
  int x [1024];

  function automatic logic [255:0] perm(logic [255:0] v);
    logic [255:0] p;
    for (int i = 0; i < 256; i++) p[i] = v[(5 * i + 3) % 256];
    return p;
  endfunction

  task automatic run(int f, int d, int shift);
    logic [255:0] bj [32];
    int nout = 0, last_cyc = -1, cyc = 0, nch;
    nch = (f + 255) / 256;
    bj[0] = base;
    for (int j = 1; j < 32; j++) bj[j] = perm(bj[j-1]);
    for (int i = 0; i < 1024; i++) x[i] = int'($urandom_range(0, 2000)) - 1000;
    for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      feat_wr_en = 1; feat_wr_addr = 4'(a);
      for (int i = 0; i < 64; i++) feat_wr_data[i] = 16'(x[64*a + i]);
    end
    @(negedge clk);
    feat_wr_en = 0; cfg_f = 11'(f); cfg_d = 14'(d); cfg_enc_shift = 5'(shift); start = 1;
    @(negedge clk); start = 0;
    while (nout < d && cyc < d * nch + 20) begin
      @(posedge clk); #1; cyc++;
      if (out_valid) begin
        longint h;
        int dd, exp;
        dd = int'(out_idx);
        h = 0;
        for (int ff = 0; ff < f; ff++) begin
          logic b;
          b = bj[dd / 256][((ff % 256) - (dd % 256) + 256) % 256];
          h += b ? -x[ff] : x[ff];
        end
        h = h >>> shift;
        exp = (h > 32767) ? 32767 : (h < -32768) ? -32768 : int'(h);
        checks++;
        if (dd != nout || int'(out_data) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL d=%0d (expected index %0d) got %0d exp %0d", dd, nout, out_data, exp);
        end
        if (last_cyc >= 0) begin
          checks++;
          if (cyc - last_cyc != nch) begin failures++; $display("FAIL element spacing %0d", cyc - last_cyc); end
        end
        last_cyc = cyc;
        nout++;
        checks++;
        if ((nout == d) != done) begin failures++; $display("FAIL done flag at element %0d", nout); end
      end
    end
    checks++;
    if (nout != d) begin failures++; $display("FAIL %0d elements, expected %0d", nout, d); end
  endtask

  initial begin
    base_wr_en = 0; feat_wr_en = 0; start = 0; base_wr_word = 0; base_wr_data = 0; feat_wr_addr = 0;
    cfg_f = 16; cfg_d = 16; cfg_enc_shift = 0;
    for (int i = 0; i < 64; i++) feat_wr_data[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 4; w++) begin
      @(negedge clk);
      base_wr_en = 1; base_wr_word = 2'(w); base_wr_data = {$urandom, $urandom};
      base[64*w +: 64] = base_wr_data;
    end
    @(negedge clk); base_wr_en = 0;
    run(200, 320, 0);
    run(700, 544, 2);
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
