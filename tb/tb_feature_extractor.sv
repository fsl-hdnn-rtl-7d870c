// tb_feature_extractor: loads an image, clustering-index patterns and
// cluster weights through the host write ports, runs one 3x3 convolution
// layer of two 4-row tiles, reads every output pixel back through the
// output buffer's host port and compares it with a direct convolution
// computed in real arithmetic. Also checks the run length and the
// multiply count.
module tb_feature_extractor;
  import fsl_pkg::*;
  localparam int CIN = 3, W = 6, NT = 2, NOC = 2, H = 4 * NT + 2;
  localparam int L = (3 * CIN > 16 * NOC) ? 3 * CIN : 16 * NOC;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  fe_cfg_t cfg;
  logic start, busy, done;
  logic act_wr_en, cidx_wr_en, wgt_wr_en, ob_host_wr_en, ob_host_rd_en, ob_wide_rd_en;
  logic [2:0] act_wr_bank;
  logic [12:0] act_wr_addr;
  bf16_t act_wr_data, wgt_wr_data, ob_host_wr_data, ob_host_rd_data, ob_wide_rd_data [64];
  logic [3:0] cidx_wr_col, wgt_wr_col;
  logic [8:0] cidx_wr_addr;
  logic [CIDX_W-1:0] cidx_wr_data;
  logic [6:0] wgt_wr_addr;
  logic [7:0] ob_host_addr, ob_wide_rd_addr;
  logic [5:0] ob_host_lane;
  logic [31:0] mac_cycles;
  int checks = 0, failures = 0;

  feature_extractor dut (.*);

  int pix [H][W][CIN];
  int pat [PE_COLS][CIN][9];
  int wq  [PE_COLS][NOC][16];

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

  initial begin
    int cyc;
    {act_wr_en, cidx_wr_en, wgt_wr_en, ob_host_wr_en, ob_host_rd_en, ob_wide_rd_en, start} = '0;
    act_wr_bank = 0; act_wr_addr = 0; act_wr_data = 0; wgt_wr_data = 0; ob_host_wr_data = 0;
    cidx_wr_col = 0; wgt_wr_col = 0; cidx_wr_addr = 0; cidx_wr_data = 0; wgt_wr_addr = 0;
    ob_host_addr = 0; ob_wide_rd_addr = 0; ob_host_lane = 0;
    cfg = '{cin: 10'(CIN), w_in: 9'(W), n_tiles: 7'(NT), noc: 4'(NOC)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // image: row i in bank i%8, word (i/8)*W*CIN + x*CIN + ch
    for (int i = 0; i < H; i++) for (int x = 0; x < W; x++) for (int ch = 0; ch < CIN; ch++) begin
      pix[i][x][ch] = $urandom_range(0, 7);
      @(negedge clk);
      act_wr_en = 1; act_wr_bank = 3'(i % 8); act_wr_addr = 13'((i / 8) * W * CIN + x * CIN + ch);
      act_wr_data = int2bf(pix[i][x][ch]);
    end
    @(negedge clk); act_wr_en = 0;
    for (int c = 0; c < PE_COLS; c++) begin
      for (int ch = 0; ch < CIN; ch++) begin
        @(negedge clk);
        cidx_wr_en = 1; cidx_wr_col = 4'(c); cidx_wr_addr = 9'(ch);
        for (int k = 0; k < 9; k++) begin
          pat[c][ch][k] = $urandom_range(0, 15);
          cidx_wr_data[4*k +: 4] = 4'(pat[c][ch][k]);
        end
      end
      for (int k = 0; k < NOC; k++) for (int j = 0; j < 16; j++) begin
        @(negedge clk);
        cidx_wr_en = 0;
        wq[c][k][j] = $urandom_range(0, 15) - 8;
        wgt_wr_en = 1; wgt_wr_col = 4'(c); wgt_wr_addr = 7'(k * 16 + j);
        wgt_wr_data = int2bf(wq[c][k][j]);
        if (wq[c][k][j] != 0) wgt_wr_data[14:7] = wgt_wr_data[14:7] - 8'd2;  // value / 4
      end
      @(negedge clk); wgt_wr_en = 0;
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NT * (W + 1) * L + 4) begin  // counted from the cycle after start
      failures++; $display("FAIL run took %0d cycles, expected %0d", cyc, NT * (W + 1) * L + 4);
    end
    checks++;
    if (mac_cycles != 32'(NT * (W - 2) * 16 * NOC)) begin failures++; $display("FAIL mac cycles %0d", mac_cycles); end
    // read back and compare
    for (int t = 0; t < NT; t++) for (int ox = 0; ox < W - 2; ox++) for (int k = 0; k < NOC; k++)
      for (int r = 0; r < 4; r++) for (int c = 0; c < PE_COLS; c++) begin
        real v, m, g;
        @(negedge clk);
        ob_host_rd_en = 1; ob_host_addr = 8'((t * (W - 2) + ox) * NOC + k); ob_host_lane = 6'(r * 16 + c);
        v = 0.0; m = 0.0;
        for (int ch = 0; ch < CIN; ch++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          real term;
          term = real'(wq[c][k][pat[c][ch][ky*3+kx]]) / 4.0 * real'(pix[t*4 + r + ky][ox + kx][ch]);
          v += term; m += (term < 0 ? -term : term);
        end
        @(negedge clk);
        ob_host_rd_en = 0;
        g = bf2real(ob_host_rd_data);
        checks++;
        if ((g - v) > m / 64.0 + 1e-6 || (v - g) > m / 64.0 + 1e-6) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d ox%0d k%0d r%0d c%0d got %f exp %f", t, ox, k, r, c, g, v);
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
