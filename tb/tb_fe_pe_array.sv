// tb_fe_pe_array: drives the 4x16 PE array with the clustered-convolution
// schedule (three RFs accumulating, one multiplying, roles rotating by one
// per input column) and compares every output pixel with a direct 3x3
// convolution computed in real arithmetic from the same clustered weights.
// Pixels are small integers and weights multiples of 1/4, so results are
// nearly exact in BF16; a tolerance of 2^-6 of the sum of |terms| covers
// truncation. Also checks that results appear exactly one cycle after the
// last multiply of each output channel and how many there are.
module tb_fe_pe_array;
  import fsl_pkg::*;
  localparam int R = PE_ROWS, C = PE_COLS;
  localparam int CIN = 3, W = 7, NOC = 2;
  localparam int ACC = 3 * CIN, MAC = 16 * NOC, L = (ACC > MAC) ? ACC : MAC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pe_ctrl_t ctrl;
  bf16_t act [R];
  logic [CIDX_W-1:0] cidx [C];
  bf16_t wgt [C];
  logic out_valid;
  bf16_t out_data [R][C];
  int checks = 0, failures = 0, n_out = 0;

  fe_pe_array dut (.clk, .rst_n, .ctrl, .act, .cidx, .wgt, .out_valid, .out_data);

  int   pix  [R+2][W][CIN];
  int   pat  [C][CIN][3][3];
  int   wq   [C][NOC][16];     // weight value * 4

  function automatic bf16_t int2bf(int v);
    int a, e;
    bf16_t r;
    a = v < 0 ? -v : v;
    if (a == 0) return 16'h0000;
    e = 0;
    while ((a >> (e + 1)) != 0) e++;
    r = {v < 0, 8'(127 + e), 7'((a << (7 - e)) & 8'h7F)};
    return r;
  endfunction
  function automatic real bf2real(bf16_t v);
    real m; int e;
    if (v[14:7] == 0) return 0.0;
    m = (128.0 + real'(v[6:0])) / 128.0; e = int'(v[14:7]) - 127;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return v[15] ? -m : m;
  endfunction
  function automatic bf16_t wbf(int q);  // q/4
    bf16_t b;
    b = int2bf(q);
    if (q != 0) b[14:7] = b[14:7] - 8'd2;
    return b;
  endfunction

  // reference: direct convolution with the clustered weights
  function automatic void ref_pix(int r, int c, int k, int ox, output real val, output real mag);
    val = 0.0; mag = 0.0;
    for (int ch = 0; ch < CIN; ch++)
      for (int ky = 0; ky < 3; ky++)
        for (int kx = 0; kx < 3; kx++) begin
          real term;
          term = real'(wq[c][k][pat[c][ch][ky][kx]]) / 4.0 * real'(pix[r + ky][ox + kx][ch]);
          val += term;
          mag += (term < 0 ? -term : term);
        end
  endfunction

  int pend_k, pend_ox;
  logic pend;

  // check outputs one cycle after the last multiply
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pend) begin
        failures++;
        $display("FAIL out_valid=%0d expected %0d at %0t", out_valid, pend, $time);
      end
      if (out_valid && pend) begin
        n_out++;
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) begin
            real v, m, g;
            ref_pix(r, c, pend_k, pend_ox, v, m);
            g = bf2real(out_data[r][c]);
            checks++;
            if ((g - v) > m / 64.0 + 1e-6 || (v - g) > m / 64.0 + 1e-6) begin
              failures++;
              if (failures < 10) $display("FAIL r%0d c%0d k%0d ox%0d got %f exp %f", r, c, pend_k, pend_ox, g, v);
            end
          end
      end
    end
  end

  initial begin
    for (int i = 0; i < R + 2; i++) for (int x = 0; x < W; x++) for (int ch = 0; ch < CIN; ch++)
      pix[i][x][ch] = $urandom_range(0, 7);
    for (int c = 0; c < C; c++) begin
      for (int ch = 0; ch < CIN; ch++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
        pat[c][ch][ky][kx] = $urandom_range(0, 15);
      for (int k = 0; k < NOC; k++) for (int j = 0; j < 16; j++) wq[c][k][j] = $urandom_range(0, 15) - 8;
    end
    ctrl = '0; pend = 0; pend_k = 0; pend_ox = 0;
    for (int r = 0; r < R; r++) act[r] = '0;
    for (int c = 0; c < C; c++) begin cidx[c] = '0; wgt[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int x = 0; x <= W; x++) begin
      for (int t = 0; t < L; t++) begin
        int ch, ky, k, j;
        @(negedge clk);
        ch = t / 3; ky = t % 3; k = t / 16; j = t % 16;
        ctrl = '0;
        ctrl.acc_en = (x < W) && (t < ACC);
        ctrl.ky     = 2'(ky);
        ctrl.phase  = 2'(x % 4);
        for (int r = 0; r < 4; r++) begin
          int kx;
          kx = ((x % 4) - r + 4) % 4;
          ctrl.acc_mask[r] = (kx != 3) && (x - kx >= 0) && (x - kx <= W - 3);
        end
        ctrl.mac_en    = (x >= 3) && (t < MAC);
        ctrl.mac_idx   = 4'(j);
        ctrl.mac_first = (j == 0);
        ctrl.mac_last  = (j == 15);
        ctrl.rf_clr    = (t == L - 1);
        for (int r = 0; r < R; r++) act[r] = (ctrl.acc_en) ? int2bf(pix[r + ky][x][ch]) : 16'h0;
        for (int c = 0; c < C; c++) begin
          cidx[c] = '0;
          if (ctrl.acc_en)
            for (int yy = 0; yy < 3; yy++) for (int xx = 0; xx < 3; xx++)
              cidx[c][4*(yy*3+xx) +: 4] = 4'(pat[c][ch][yy][xx]);
          wgt[c] = ctrl.mac_en ? wbf(wq[c][k][j]) : 16'h0;
        end
        @(posedge clk);
        pend    <= ctrl.mac_en && ctrl.mac_last;
        pend_k  <= k;
        pend_ox <= x - 3;
      end
    end
    @(negedge clk); ctrl = '0;
    @(posedge clk); pend <= 0;
    repeat (2) @(posedge clk);
    checks++;
    if (n_out != (W - 2) * NOC) begin
      failures++;
      $display("FAIL %0d results, expected %0d", n_out, (W - 2) * NOC);
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
