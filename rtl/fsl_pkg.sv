// fsl_pkg: types and constants shared by the FSL-HDnn blocks.
//
// The accelerator has two engines. The feature extractor (FE) computes 3x3
// convolutions in bfloat16 on a 4x16 PE array whose weights are clustered to
// 16 values per filter and stored as 4-bit cluster indices. The HDC engine
// encodes the resulting feature vector into a hypervector (HV) with a cyclic
// random projection and classifies or trains against INT16 class HVs.
//
// This package holds the sizes taken from the paper (4x16 array, 16 clusters,
// 3x3 kernels, BF16 / INT16 words, 256-bit cRP block, D <= 8192, F <= 1024,
// N <= 128), the PE control word, the host command format and the
// configuration registers. The command format, the register map and the
// BF16-to-INT16 feature conversion are this design's own choices.
package fsl_pkg;

  // ---------------- feature extractor ----------------
  localparam int unsigned PE_ROWS   = 4;    // PE array rows (output pixel rows)
  localparam int unsigned PE_COLS   = 16;   // PE array columns (output channel sets)
  localparam int unsigned N_CLUSTER = 16;   // unique weights per filter (4-bit index)
  localparam int unsigned N_RF      = 4;    // register files per PE
  localparam int unsigned KSIZE     = 3;    // 3x3 kernels
  localparam int unsigned CIDX_W    = KSIZE * KSIZE * 4;  // 36-bit index bus

  typedef logic [15:0] bf16_t;

  // Control word broadcast to every PE each cycle (same for the whole array).
  typedef struct packed {
    logic       acc_en;    // a pixel is on the row buses this cycle
    logic [3:0] acc_mask;  // RFs whose window is valid and takes the pixel
    logic [1:0] ky;        // kernel row of the pixel
    logic [1:0] phase;     // input column modulo 4 (selects RF roles)
    logic       mac_en;    // multiply RF entry mac_idx by the weight bus
    logic [3:0] mac_idx;   // cluster index read from the multiply RF
    logic       mac_first; // OutReg is loaded rather than accumulated
    logic       mac_last;  // OutReg holds a finished output pixel after this MAC
    logic       rf_clr;    // clear the multiply RF (end of its multiply slot)
  } pe_ctrl_t;

  // ---------------- HDC ----------------
  localparam int unsigned HV_LANES = 16;   // HV elements per memory word
  localparam int unsigned CRP_BLK  = 256;  // cRP block size
  localparam int unsigned D_MAX    = 8192;
  localparam int unsigned F_MAX    = 1024;
  localparam int unsigned N_MAX    = 128;

  typedef logic signed [15:0] hv_elem_t;

  // ---------------- host command interface ----------------
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_WRITE   = 4'd1,  // write data to target/addr
    OP_READ    = 4'd2,  // read target/addr, answer on the output FIFO
    OP_RUN_FE  = 4'd3,  // run the feature extractor with the current config
    OP_RUN_HDC = 4'd4   // run the HDC engine: data[0]=train, data[14:8]=label
  } op_e;

  typedef enum logic [3:0] {
    T_ACT    = 4'd0,  // addr = {bank[2:0], word[12:0]}
    T_CIDX   = 4'd1,  // addr = {col[3:0], cin[8:0]}, data[35:0]
    T_WGT    = 4'd2,  // addr = {col[3:0], word[6:0]}
    T_OUTBUF = 4'd3,  // addr = {entry[7:0], lane[5:0]}
    T_CLASS  = 4'd4,  // addr = element index n*D + d
    T_BASE   = 4'd5,  // addr = 64-bit word 0..3 of the cRP base block
    T_CFG    = 4'd6,  // addr = cfg_reg_e
    T_DIST   = 4'd7   // addr = class (read only)
  } target_e;

  typedef struct packed {
    op_e         op;
    target_e     tgt;
    logic [23:0] addr;
    logic [63:0] data;
  } cmd_t;  // 96 bits

  typedef enum logic [3:0] {
    CFG_CIN = 4'd0, CFG_WIN = 4'd1, CFG_NTILES = 4'd2, CFG_NOC = 4'd3,
    CFG_F = 4'd4, CFG_D = 4'd5, CFG_N = 4'd6, CFG_HVBITS = 4'd7,
    CFG_ENCSHIFT = 4'd8, CFG_FEATSHIFT = 4'd9, CFG_FEATBASE = 4'd10
  } cfg_reg_e;

  typedef struct packed {
    logic [9:0]  cin;        // input channels (1..512)
    logic [8:0]  w_in;       // input width in pixels (>= 3)
    logic [6:0]  n_tiles;    // 4-row output tiles (input height = 4*n_tiles+2)
    logic [3:0]  noc;        // output channels per PE column (1..8)
  } fe_cfg_t;

  typedef struct packed {
    logic [10:0] f;          // feature dimension F (16..1024)
    logic [13:0] d;          // HV dimension D (multiple of 16, <= 8192)
    logic [7:0]  n;          // classes N (2..128)
    logic [4:0]  hv_bits;    // inference precision 1..16
    logic [4:0]  enc_shift;  // encoder sum >>> enc_shift before saturation
    logic [4:0]  feat_shift; // feature = trunc(bf16 * 2^feat_shift)
    logic [7:0]  feat_base;  // first output-buffer entry of the feature vector
  } hdc_cfg_t;

  // BF16 -> INT16: truncate toward zero after scaling by 2^shift, saturate.
  function automatic hv_elem_t bf16_to_int16(input bf16_t x, input logic [4:0] shift);
    logic [7:0]  m;
    int          sh;
    logic [31:0] mag;
    logic [15:0] r;
    m   = {1'b1, x[6:0]};
    sh  = int'(x[14:7]) - 134 + int'(shift);  // value = m * 2^(e-127-7)
    if (x[14:7] == 8'd0)   mag = 32'd0;
    else if (sh >= 8)      mag = 32'hFFFF_FFFF;
    else if (sh >= 0)      mag = 32'(m) << sh;
    else if (sh > -9)      mag = 32'(m) >> (-sh);
    else                   mag = 32'd0;
    if (x[15]) r = (mag > 32'd32768) ? 16'h8000 : 16'(-mag);
    else       r = (mag > 32'd32767) ? 16'h7FFF : mag[15:0];
    return hv_elem_t'(r);
  endfunction

  // Saturate a 32-bit signed value to INT16.
  function automatic hv_elem_t sat16(input logic signed [31:0] v);
    if (v > 32'sd32767)       return 16'sh7FFF;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return hv_elem_t'(v[15:0]);
  endfunction

endpackage
