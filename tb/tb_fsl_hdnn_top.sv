// tb_fsl_hdnn_top: end-to-end run of the whole accelerator through its
// command/answer streams only, at the design's default sizes.
//  1. Loads a 6x6x2 image, clustering-index patterns and cluster weights,
//     runs one convolution layer on the feature extractor and reads all
//     256 output pixels back, comparing them with a direct convolution.
//  2. Uses those 256 pixels as the feature vector of the HDC engine
//     (F = 256, D = 1024, N = 4): loads the cRP base block and class HVs,
//     one of them close to the expected encoding, and runs inference at
//     16-bit and at 2-bit precision, checking the prediction and the
//     distance table against a model computed here.
//  3. Trains twice: with the predicted label (class HV += sample) and with
//     another label (chosen class HV -= sample), checking the class HV.
// It counts how often each mechanism occurred (RF role rotation and
// overlapped accumulate/multiply, FE run, inference, precision switch,
// training add, training subtract, command stalls while an engine runs,
// answer back-pressure) and fails any that never did.
module tb_fsl_hdnn_top;
  import fsl_pkg::*;
  localparam int CIN = 2, W = 6, NOC = 1, F = 64 * (W - 2) * NOC, D = 1024, N = 4, FS = 0, ES = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, rsp_valid, rsp_ready, fe_busy, hdc_busy;
  cmd_t cmd_data;
  logic [63:0] rsp_data;
  logic [31:0] fe_mac_cycles, io_stall_cycles;
  int checks = 0, failures = 0;

  fsl_hdnn_top dut (.*);

  int pix [6][W][CIN], pat [16][CIN][9], wq [16][NOC][16];
  bf16_t fe_out [F];
  int x [F], q [D], cl [N][D];
  logic [255:0] base, bj [4];
  // mechanism counters
  int n_rot = 0, n_overlap = 0, n_fe_runs = 0, n_infer = 0, n_lowprec = 0, n_add = 0, n_sub = 0;
  int n_backpressure = 0;

  always @(posedge clk) begin
    if (dut.u_fe.u_array.ctrl.acc_en && dut.u_fe.u_array.ctrl.mac_en) n_overlap++;
    if (dut.u_fe.u_ctrl.state != 0 && dut.u_fe.u_ctrl.last_t) n_rot++;
    if (rsp_valid && !rsp_ready) n_backpressure++;
  end

  function automatic bf16_t int2bf(int v);
    int a, e;
    a = v < 0 ? -v : v;
    if (a == 0) return 16'h0000;
    e = 0;
    while ((a >> (e + 1)) != 0) e++;
    return {v < 0, 8'(127 + e), 7'((a << (7 - e)) & 8'h7F)};
  endfunction
  function automatic real bf2real(bf16_t v);
    real m; int e;
    if (v[14:7] == 0) return 0.0;
    m = (128.0 + real'(v[6:0])) / 128.0; e = int'(v[14:7]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return v[15] ? -m : m;
  endfunction
  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  function automatic logic [255:0] perm(logic [255:0] v);
    logic [255:0] p;
    for (int i = 0; i < 256; i++) p[i] = v[(5 * i + 3) % 256];
    return p;
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s", msg); end
  endtask

  task automatic send(op_e op, target_e t, int a, longint unsigned d);
    @(negedge clk);
    cmd_valid = 1; cmd_data = '{op: op, tgt: t, addr: 24'(a), data: 64'(d)};
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  task automatic recv(output logic [63:0] v);
    @(negedge clk);
    rsp_ready = 1;
    while (!rsp_valid) @(negedge clk);
    v = rsp_data;
    @(posedge clk); #1;
    rsp_ready = 0;
  endtask

  task automatic check_hdc(int bits, logic [63:0] ans);
    int best, bi;
    best = -1; bi = 0;
    for (int n = 0; n < N; n++) begin
      longint dd;
      logic [63:0] v;
      dd = 0;
      for (int d = 0; d < D; d++) begin
        int a;
        a = (q[d] >>> (16 - bits)) - (cl[n][d] >>> (16 - bits));
        dd += a < 0 ? -a : a;
      end
      send(OP_READ, T_DIST, n, 0);
      recv(v);
      check(v == 64'(dd), $sformatf("distance %0d: %0d expected %0d", n, v, dd));
      if (best < 0 || dd < longint'(best)) begin best = int'(dd); bi = n; end
    end
    check(int'(ans[38:32]) == bi && ans[31:0] == 32'(best), "HDC result word");
  endtask

  initial begin
    logic [63:0] v;
    cmd_valid = 0; cmd_data = '0; rsp_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- feature extractor ----------------
    send(OP_WRITE, T_CFG, CFG_CIN, CIN);
    send(OP_WRITE, T_CFG, CFG_WIN, W);
    send(OP_WRITE, T_CFG, CFG_NTILES, 1);
    send(OP_WRITE, T_CFG, CFG_NOC, NOC);
    for (int i = 0; i < 6; i++) for (int xx = 0; xx < W; xx++) for (int ch = 0; ch < CIN; ch++) begin
      pix[i][xx][ch] = $urandom_range(0, 7);
      send(OP_WRITE, T_ACT, (i % 8) << 13 | ((i / 8) * W * CIN + xx * CIN + ch), int2bf(pix[i][xx][ch]));
    end
    for (int c = 0; c < 16; c++) begin
      for (int ch = 0; ch < CIN; ch++) begin
        logic [35:0] p;
        for (int k = 0; k < 9; k++) begin pat[c][ch][k] = $urandom_range(0, 15); p[4*k +: 4] = 4'(pat[c][ch][k]); end
        send(OP_WRITE, T_CIDX, c << 9 | ch, p);
      end
      for (int k = 0; k < NOC; k++) for (int j = 0; j < 16; j++) begin
        bf16_t b;
        wq[c][k][j] = $urandom_range(0, 15) - 8;
        b = int2bf(wq[c][k][j]);
        if (wq[c][k][j] != 0) b[14:7] = b[14:7] - 8'd2;  // value / 4
        send(OP_WRITE, T_WGT, c << 7 | (k * 16 + j), b);
      end
    end
    send(OP_RUN_FE, T_ACT, 0, 0);
    n_fe_runs++;
    send(OP_WRITE, T_CFG, CFG_FEATBASE, 0);  // queued behind the FE run
    for (int e = 0; e < (W - 2) * NOC; e++) for (int lane = 0; lane < 64; lane++) begin
      int r, c, ox, k;
      real ref_v, mag, g;
      r = lane / 16; c = lane % 16; ox = e / NOC; k = e % NOC;
      send(OP_READ, T_OUTBUF, e << 6 | lane, 0);
      recv(v);
      fe_out[e * 64 + lane] = v[15:0];
      ref_v = 0.0; mag = 0.0;
      for (int ch = 0; ch < CIN; ch++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        real term;
        term = real'(wq[c][k][pat[c][ch][ky*3+kx]]) / 4.0 * real'(pix[r + ky][ox + kx][ch]);
        ref_v += term; mag += term < 0 ? -term : term;
      end
      g = bf2real(v[15:0]);
      check((g - ref_v) <= mag / 64.0 + 1e-6 && (ref_v - g) <= mag / 64.0 + 1e-6,
            $sformatf("FE pixel e%0d lane%0d: %f expected %f", e, lane, g, ref_v));
    end
    // ---------------- HDC ----------------
    send(OP_WRITE, T_CFG, CFG_F, F);
    send(OP_WRITE, T_CFG, CFG_D, D);
    send(OP_WRITE, T_CFG, CFG_N, N);
    send(OP_WRITE, T_CFG, CFG_HVBITS, 16);
    send(OP_WRITE, T_CFG, CFG_ENCSHIFT, ES);
    send(OP_WRITE, T_CFG, CFG_FEATSHIFT, FS);
    for (int w = 0; w < 4; w++) begin
      base[64*w +: 64] = {$urandom, $urandom};
      send(OP_WRITE, T_BASE, w, base[64*w +: 64]);
    end
    bj[0] = base;
    for (int j = 1; j < 4; j++) bj[j] = perm(bj[j-1]);
    // reference feature vector: BF16 pixels truncated to integers
    for (int f = 0; f < F; f++) begin
      real r;
      r = bf2real(fe_out[f]);
      x[f] = (r >= 0.0) ? int'($floor(r)) : -int'($floor(-r));
    end
    for (int d = 0; d < D; d++) begin
      longint h;
      h = 0;
      for (int f = 0; f < F; f++) h += bj[d / 256][((f % 256) - (d % 256) + 256) % 256] ? -x[f] : x[f];
      q[d] = sat(h >>> ES);
    end
    for (int n = 0; n < N; n++) for (int d = 0; d < D; d++) begin
      cl[n][d] = (n == 2) ? sat(q[d] + int'($urandom_range(0, 60)) - 30) : int'($urandom_range(0, 400)) - 200;
      send(OP_WRITE, T_CLASS, n * D + d, 64'(16'(cl[n][d])));
    end
    // inference, 16 bit
    send(OP_RUN_HDC, T_ACT, 0, 0);
    recv(v); n_infer++;
    check(v[38:32] == 7'd2, $sformatf("prediction %0d", v[38:32]));
    check_hdc(16, v);
    // inference, 2 bit, with the answer held back for a while
    send(OP_WRITE, T_CFG, CFG_HVBITS, 2);
    send(OP_RUN_HDC, T_ACT, 0, 0);
    repeat (2500) @(posedge clk);
    recv(v); n_infer++; n_lowprec++;
    check_hdc(2, v);
    send(OP_WRITE, T_CFG, CFG_HVBITS, 16);
    // training with the predicted label: class 2 += q
    send(OP_RUN_HDC, T_ACT, 0, (2 << 8) | 1);
    recv(v);
    check(v[63] && v[38:32] == 7'd2, "training, correct prediction");
    if (v[63]) n_add++;
    for (int d = 0; d < D; d++) cl[2][d] = sat(cl[2][d] + q[d]);
    // training with another label: chosen class 2 -= q
    send(OP_RUN_HDC, T_ACT, 0, (1 << 8) | 1);
    recv(v);
    check(!v[63] && v[38:32] == 7'd2, "training, wrong prediction");
    if (!v[63]) n_sub++;
    for (int d = 0; d < D; d++) cl[2][d] = sat(cl[2][d] - q[d]);
    for (int d = 0; d < D; d += 7) begin
      send(OP_READ, T_CLASS, 2 * D + d, 0);
      recv(v);
      check(int'(hv_elem_t'(v[15:0])) == cl[2][d], $sformatf("class 2 elem %0d: %0d expected %0d", d, hv_elem_t'(v[15:0]), cl[2][d]));
    end
    // ---------------- mechanisms ----------------
    $display("mechanisms: rf_rotations=%0d overlapped_acc_mul=%0d fe_runs=%0d fe_mac_cycles=%0d inferences=%0d low_precision=%0d train_add=%0d train_sub=%0d stall_cycles=%0d backpressure=%0d",
             n_rot, n_overlap, n_fe_runs, fe_mac_cycles, n_infer, n_lowprec, n_add, n_sub, io_stall_cycles, n_backpressure);
    check(n_rot > 0, "RF role rotation happened");
    check(n_overlap > 0, "overlapped accumulate and multiply happened");
    check(n_fe_runs > 0 && fe_mac_cycles == 32'((W - 2) * 16 * NOC), "FE run happened");
    check(n_infer > 0, "inference happened");
    check(n_lowprec > 0, "precision switch happened");
    check(n_add > 0, "training add happened");
    check(n_sub > 0, "training subtract happened");
    check(io_stall_cycles > 0, "command stall happened");
    check(n_backpressure > 0, "answer back-pressure happened");
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
