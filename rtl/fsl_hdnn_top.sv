// fsl_hdnn_top: FSL-HDnn, an end-to-end few-shot learning accelerator.
//
// A frozen CNN feature extractor turns an image into a feature vector; a
// hyperdimensional-computing (HDC) classifier encodes that vector into a
// hypervector, finds the nearest class hypervector and, in training, adds
// the sample to or subtracts it from the chosen class, so that new classes
// are learned from a few samples without back-propagation.
//
// Structure (Fig. 2): the host talks to the chip only through the FIFO/IO
// interface. The feature extractor (activation, index and weight memories,
// sequencer, 4x16 PE array, output feature buffer) computes 3x3 convolution
// layers with clustered weights. The HDC classifier / FSL learner (cRP
// encoder, query HV buffer, 128 KB class HV memory, distance calculator,
// distance table and min finder, HV updater) takes its feature vector from
// the output feature buffer. The clock gating cells and the pad ring of the
// chip are not part of this RTL.
//
// Ports: a 96-bit command stream in (valid/ready), a 64-bit answer stream
// out (valid/ready), and status: engine busy flags and activity counters.
// One clock, active-low asynchronous reset.
//
// Lint note: command address bits 23:16 are not decoded; the largest
// target (class HV memory, 65536 elements) needs 16 address bits.
module fsl_hdnn_top
  import fsl_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd_data,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output logic [63:0] rsp_data,
  output logic        fe_busy,
  output logic        hdc_busy,
  output logic [31:0] fe_mac_cycles,
  output logic [31:0] io_stall_cycles
);
  fe_cfg_t     fe_cfg;
  hdc_cfg_t    hdc_cfg;
  logic        fe_start, fe_done, hdc_start, hdc_train, hdc_done, hdc_correct;
  logic [6:0]  hdc_label, hdc_class;
  logic [31:0] hdc_dist;
  logic        wr_en, rd_en;
  target_e     tgt;
  logic [23:0] addr;
  logic [63:0] wdata;
  bf16_t       ob_host_rd;
  hv_elem_t    cls_rd;
  logic [31:0] dt_rd;
  logic        ob_wide_en;
  logic [7:0]  ob_wide_addr;
  bf16_t       ob_wide_data [64];

  io_interface u_io (
    .clk, .rst_n,
    .host_in_valid(cmd_valid), .host_in_ready(cmd_ready), .host_in_data(cmd_data),
    .host_out_valid(rsp_valid), .host_out_ready(rsp_ready), .host_out_data(rsp_data),
    .fe_cfg, .hdc_cfg, .fe_start, .fe_done, .hdc_start, .hdc_train, .hdc_label, .hdc_done,
    .hdc_class, .hdc_dist, .hdc_correct,
    .wr_en, .rd_en, .tgt, .addr, .wdata,
    .ob_rd_data(ob_host_rd), .cls_rd_data(cls_rd), .dt_rd_data(dt_rd),
    .stall_cycles(io_stall_cycles)
  );

  feature_extractor u_fe (
    .clk, .rst_n, .cfg(fe_cfg), .start(fe_start), .busy(fe_busy), .done(fe_done),
    .act_wr_en(wr_en && tgt == T_ACT), .act_wr_bank(addr[15:13]), .act_wr_addr(addr[12:0]),
    .act_wr_data(wdata[15:0]),
    .cidx_wr_en(wr_en && tgt == T_CIDX), .cidx_wr_col(addr[12:9]), .cidx_wr_addr(addr[8:0]),
    .cidx_wr_data(wdata[CIDX_W-1:0]),
    .wgt_wr_en(wr_en && tgt == T_WGT), .wgt_wr_col(addr[10:7]), .wgt_wr_addr(addr[6:0]),
    .wgt_wr_data(wdata[15:0]),
    .ob_host_wr_en(wr_en && tgt == T_OUTBUF), .ob_host_rd_en(rd_en && tgt == T_OUTBUF),
    .ob_host_addr(addr[13:6]), .ob_host_lane(addr[5:0]), .ob_host_wr_data(wdata[15:0]),
    .ob_host_rd_data(ob_host_rd),
    .ob_wide_rd_en(ob_wide_en), .ob_wide_rd_addr(ob_wide_addr), .ob_wide_rd_data(ob_wide_data),
    .mac_cycles(fe_mac_cycles)
  );

  hdc_classifier u_hdc (
    .clk, .rst_n, .cfg(hdc_cfg), .start(hdc_start), .train(hdc_train), .label(hdc_label),
    .busy(hdc_busy), .done(hdc_done), .result_class(hdc_class), .result_dist(hdc_dist),
    .result_correct(hdc_correct),
    .ob_rd_en(ob_wide_en), .ob_rd_addr(ob_wide_addr), .ob_rd_data(ob_wide_data),
    .base_wr_en(wr_en && tgt == T_BASE), .base_wr_word(addr[1:0]), .base_wr_data(wdata),
    .cls_wr_en(wr_en && tgt == T_CLASS), .cls_rd_en(rd_en && tgt == T_CLASS),
    .cls_addr(addr[15:0]), .cls_wr_data(hv_elem_t'(wdata[15:0])), .cls_rd_data(cls_rd),
    .dt_rd_en(rd_en && tgt == T_DIST), .dt_rd_class(addr[6:0]), .dt_rd_data(dt_rd)
  );
endmodule
