// feature_extractor: the weight-clustering CNN feature extractor (left half
// of Fig. 2).
//
// Holds the activation memory (8 x 16 KB), one 512 x 36-bit clustering
// index memory per PE column (16 x 2.25 KB, printed as 2.2 KB), the weight
// memory (16 lanes x 128 BF16 words = 4 KB, printed as 4.2 KB), the
// sequencer, the 4x16 PE array and the output feature buffer. The host
// loads an image tile, index patterns and cluster weights, pulses start,
// and after done reads the output pixels, or lets the HDC engine take
// them as a feature vector through the wide read port.
//
// Memory layouts (own choice):
//   act:  image row i, column x, channel ch at bank i mod 8,
//         word (i/8)*w_in*cin + x*cin + ch
//   cidx: column c, word ch = nine 4-bit indices, field 3*ky+kx
//   wgt:  column c, word k*16+j = weight of cluster j of output channel
//         c*noc+k
//   out:  entry (tile*(w_in-2) + ox)*noc + k, lane r*16+c holds output
//         row tile*4+r, column ox, channel c*noc+k
// Timing: see fe_ctrl; host writes take effect at the next clock edge.
module feature_extractor
  import fsl_pkg::*;
#(
  parameter int unsigned ACT_DEPTH  = 8192,
  parameter int unsigned CIDX_DEPTH = 512,
  parameter int unsigned WGT_DEPTH  = 128,
  parameter int unsigned OUT_DEPTH  = 256,
  localparam int unsigned LANES = PE_ROWS * PE_COLS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fe_cfg_t     cfg,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // host writes
  input  logic        act_wr_en,
  input  logic [2:0]  act_wr_bank,
  input  logic [$clog2(ACT_DEPTH)-1:0] act_wr_addr,
  input  bf16_t       act_wr_data,
  input  logic        cidx_wr_en,
  input  logic [3:0]  cidx_wr_col,
  input  logic [$clog2(CIDX_DEPTH)-1:0] cidx_wr_addr,
  input  logic [CIDX_W-1:0] cidx_wr_data,
  input  logic        wgt_wr_en,
  input  logic [3:0]  wgt_wr_col,
  input  logic [$clog2(WGT_DEPTH)-1:0] wgt_wr_addr,
  input  bf16_t       wgt_wr_data,
  // output buffer, host port
  input  logic        ob_host_wr_en,
  input  logic        ob_host_rd_en,
  input  logic [$clog2(OUT_DEPTH)-1:0] ob_host_addr,
  input  logic [$clog2(LANES)-1:0]     ob_host_lane,
  input  bf16_t       ob_host_wr_data,
  output bf16_t       ob_host_rd_data,
  // output buffer, feature vector port to the HDC engine
  input  logic        ob_wide_rd_en,
  input  logic [$clog2(OUT_DEPTH)-1:0] ob_wide_rd_addr,
  output bf16_t       ob_wide_rd_data [LANES],
  // activity counter: cycles in which the PE array multiplied
  output logic [31:0] mac_cycles
);
  localparam int unsigned AW = $clog2(ACT_DEPTH);
  localparam int unsigned CW = $clog2(CIDX_DEPTH);
  localparam int unsigned WW = $clog2(WGT_DEPTH);
  localparam int unsigned OW = $clog2(OUT_DEPTH);

  logic          act_rd_en;
  logic [2:0]    act_rd_bank [PE_ROWS];
  logic [AW-1:0] act_rd_addr [PE_ROWS];
  bf16_t         act_bus     [PE_ROWS];
  logic          cidx_rd_en, wgt_rd_en;
  logic [CW-1:0] cidx_rd_addr;
  logic [WW-1:0] wgt_rd_addr;
  logic [CIDX_W-1:0] cidx_bus [PE_COLS];
  logic [PE_COLS*16-1:0] wgt_word;
  bf16_t         wgt_bus [PE_COLS];
  pe_ctrl_t      pe_ctrl;
  logic          out_valid, out_wr_en;
  logic [OW-1:0] out_wr_addr;
  bf16_t         pe_out [PE_ROWS][PE_COLS];
  bf16_t         pe_out_flat [LANES];

  fe_ctrl #(.ACT_BANKS(8), .ACT_DEPTH(ACT_DEPTH), .CIDX_DEPTH(CIDX_DEPTH),
            .WGT_DEPTH(WGT_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_ctrl (
    .clk, .rst_n, .cfg, .start, .busy, .done,
    .act_rd_en, .act_rd_bank, .act_rd_addr,
    .cidx_rd_en, .cidx_rd_addr, .wgt_rd_en, .wgt_rd_addr,
    .pe_ctrl, .out_wr_en, .out_wr_addr
  );

  act_mem #(.BANKS(8), .DEPTH(ACT_DEPTH), .PORTS(PE_ROWS)) u_act (
    .clk, .rst_n, .rd_en(act_rd_en), .rd_bank(act_rd_bank), .rd_addr(act_rd_addr),
    .rd_data(act_bus), .wr_en(act_wr_en), .wr_bank(act_wr_bank),
    .wr_addr(act_wr_addr), .wr_data(act_wr_data)
  );

  for (genvar c = 0; c < PE_COLS; c++) begin : g_cidx
    sram_1r1w #(.LANE_W(CIDX_W), .LANES(1), .DEPTH(CIDX_DEPTH)) u_cidx (
      .clk, .rst_n, .rd_en(cidx_rd_en), .rd_addr(cidx_rd_addr), .rd_data(cidx_bus[c]),
      .wr_en(cidx_wr_en && cidx_wr_col == 4'(c)), .wr_addr(cidx_wr_addr),
      .wr_be(1'b1), .wr_data(cidx_wr_data)
    );
    assign wgt_bus[c] = wgt_word[c*16 +: 16];
  end

  sram_1r1w #(.LANE_W(16), .LANES(PE_COLS), .DEPTH(WGT_DEPTH)) u_wgt (
    .clk, .rst_n, .rd_en(wgt_rd_en), .rd_addr(wgt_rd_addr), .rd_data(wgt_word),
    .wr_en(wgt_wr_en), .wr_addr(wgt_wr_addr),
    .wr_be(PE_COLS'(1) << wgt_wr_col), .wr_data({PE_COLS{wgt_wr_data}})
  );

  fe_pe_array #(.ROWS(PE_ROWS), .COLS(PE_COLS)) u_array (
    .clk, .rst_n, .ctrl(pe_ctrl), .act(act_bus), .cidx(cidx_bus), .wgt(wgt_bus),
    .out_valid, .out_data(pe_out)
  );

  always_comb begin
    for (int r = 0; r < PE_ROWS; r++)
      for (int c = 0; c < PE_COLS; c++)
        pe_out_flat[r*PE_COLS + c] = pe_out[r][c];
  end

  out_feat_buf #(.LANES(LANES), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk, .rst_n,
    .arr_wr_en(out_wr_en), .arr_wr_addr(out_wr_addr), .arr_wr_data(pe_out_flat),
    .host_wr_en(ob_host_wr_en), .host_addr(ob_host_addr), .host_lane(ob_host_lane),
    .host_wr_data(ob_host_wr_data), .host_rd_en(ob_host_rd_en), .host_rd_data(ob_host_rd_data),
    .wide_rd_en(ob_wide_rd_en), .wide_rd_addr(ob_wide_rd_addr), .wide_rd_data(ob_wide_rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              mac_cycles <= '0;
    else if (pe_ctrl.mac_en) mac_cycles <= mac_cycles + 32'd1;
  end

  // the controller's write strobe and the array's result flag coincide
  always_comb assert (!rst_n || out_valid == out_wr_en);
endmodule
