// tb_hdc_classifier: end-to-end test of the HDC engine. A feature vector
// (BF16) is served from a model of the output feature buffer; the test
// computes the expected encoded HV with the closed form of the cyclic
// random projection, sets one class HV close to it and the others random,
// and then checks: inference picks that class, every distance in the
// table (16-bit and 4-bit precision), training with the matching label
// adds the HV to the class, training with another label subtracts it from
// the chosen class, and the run lengths of inference and training.
module tb_hdc_classifier;
  import fsl_pkg::*;
  localparam int F = 300, D = 1024, N = 5, FS = 2, ES = 3, FB = 3, TGT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  hdc_cfg_t cfg;
  logic start, train, busy, done, result_correct;
  logic [6:0] label, result_class, dt_rd_class;
  logic [31:0] result_dist, dt_rd_data;
  logic ob_rd_en, base_wr_en, cls_wr_en, cls_rd_en, dt_rd_en;
  logic [7:0] ob_rd_addr;
  bf16_t ob_rd_data [64];
  logic [1:0] base_wr_word;
  logic [63:0] base_wr_data;
  logic [15:0] cls_addr;
  hv_elem_t cls_wr_data, cls_rd_data;
  int checks = 0, failures = 0;

  hdc_classifier dut (.*);

  bf16_t obuf [256][64];
  always @(posedge clk) if (ob_rd_en) for (int l = 0; l < 64; l++) ob_rd_data[l] <= obuf[ob_rd_addr][l];

  logic [255:0] base, bj [4];
  int x [F], q [D], cl [N][D];

  function automatic bf16_t int2bf(int v);
    int a, e;
    a = v < 0 ? -v : v;
    if (a == 0) return 16'h0000;
    e = 0;
    while ((a >> (e + 1)) != 0) e++;
    return {v < 0, 8'(127 + e), 7'((a << (7 - e)) & 8'h7F)};
  endfunction
  function automatic logic [255:0] perm(logic [255:0] v);
    logic [255:0] p;
    for (int i = 0; i < 256; i++) p[i] = v[(5 * i + 3) % 256];
    return p;
  endfunction
  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  task automatic run(bit tr, int lbl, output int cyc);
    @(negedge clk); start = 1; train = tr; label = 7'(lbl);
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
  endtask

  task automatic check_table(int bits);
    int best, bi;
    best = -1; bi = 0;
    for (int n = 0; n < N; n++) begin
      longint dd;
      dd = 0;
      for (int d = 0; d < D; d++) begin
        int a;
        a = (q[d] >>> (16 - bits)) - (cl[n][d] >>> (16 - bits));
        dd += a < 0 ? -a : a;
      end
      @(negedge clk); dt_rd_en = 1; dt_rd_class = 7'(n);
      @(negedge clk); dt_rd_en = 0;
      check(dt_rd_data == 32'(dd), $sformatf("distance class %0d: %0d expected %0d", n, dt_rd_data, dd));
      if (best < 0 || dd < longint'(best)) begin best = int'(dd); bi = n; end
    end
    check(int'(result_class) == bi, $sformatf("class %0d expected %0d", result_class, bi));
    check(result_dist == 32'(best), "result distance");
  endtask

  task automatic check_class(int n);
    for (int d = 0; d < D; d++) begin
      @(negedge clk); cls_rd_en = 1; cls_addr = 16'(n * D + d);
      @(negedge clk); cls_rd_en = 0;
      check(int'(cls_rd_data) == cl[n][d], $sformatf("class %0d elem %0d: %0d expected %0d", n, d, cls_rd_data, cl[n][d]));
    end
  endtask

  initial begin
    int cyc, nch, exp_inf, exp_tr;
    start = 0; train = 0; label = 0; base_wr_en = 0; cls_wr_en = 0; cls_rd_en = 0; dt_rd_en = 0;
    base_wr_word = 0; base_wr_data = 0; cls_addr = 0; cls_wr_data = 0; dt_rd_class = 0;
    cfg = '{f: 11'(F), d: 14'(D), n: 8'(N), hv_bits: 5'd16, enc_shift: 5'(ES), feat_shift: 5'(FS), feat_base: 8'(FB)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 4; w++) begin
      @(negedge clk); base_wr_en = 1; base_wr_word = 2'(w); base_wr_data = {$urandom, $urandom};
      base[64*w +: 64] = base_wr_data;
    end
    @(negedge clk); base_wr_en = 0;
    bj[0] = base;
    for (int j = 1; j < 4; j++) bj[j] = perm(bj[j-1]);
    // features: integers, scaled by 2^FS on conversion
    for (int f = 0; f < F; f++) begin
      x[f] = int'($urandom_range(0, 200)) - 100;
      obuf[FB + f / 64][f % 64] = int2bf(x[f]);
    end
    // expected encoded HV
    for (int d = 0; d < D; d++) begin
      longint h;
      h = 0;
      for (int f = 0; f < F; f++)
        h += bj[d / 256][((f % 256) - (d % 256) + 256) % 256] ? -(x[f] << FS) : (x[f] << FS);
      q[d] = sat(h >>> ES);
    end
    // class HVs: TGT near q, others random
    for (int n = 0; n < N; n++)
      for (int d = 0; d < D; d++) begin
        cl[n][d] = (n == TGT) ? sat(q[d] + int'($urandom_range(0, 400)) - 200)
                              : int'($urandom_range(0, 8000)) - 4000;
        @(negedge clk); cls_wr_en = 1; cls_addr = 16'(n * D + d); cls_wr_data = 16'(cl[n][d]);
      end
    @(negedge clk); cls_wr_en = 0;

    nch = (F + 255) / 256;
    exp_inf = ((F + 63) / 64 + 2) + D * nch + N * D / 16 + 4;  // load, encode, search
    exp_tr  = exp_inf + D / 16 + 3;
    // inference, 16 bit
    run(0, 0, cyc);
    $display("inference took %0d cycles", cyc);
    check(cyc == exp_inf, $sformatf("inference cycles %0d expected %0d", cyc, exp_inf));
    check_table(16);
    check(int'(result_class) == TGT, "prediction");
    // inference, 4 bit
    cfg.hv_bits = 5'd4;
    run(0, 0, cyc);
    check_table(4);
    cfg.hv_bits = 5'd16;
    // training, correct label: class TGT += q
    run(1, TGT, cyc);
    check(cyc == exp_tr, $sformatf("training cycles %0d expected %0d", cyc, exp_tr));
    check(result_correct && int'(result_class) == TGT, "training prediction correct");
    for (int d = 0; d < D; d++) cl[TGT][d] = sat(cl[TGT][d] + q[d]);
    check_class(TGT);
    // training, wrong label: chosen class TGT -= q
    run(1, 1, cyc);
    check(!result_correct && int'(result_class) == TGT, "training prediction wrong");
    for (int d = 0; d < D; d++) cl[TGT][d] = sat(cl[TGT][d] - q[d]);
    check_class(TGT);
    check_class(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
