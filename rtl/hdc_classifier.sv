// hdc_classifier: HDC classifier and few-shot learner (right half of Fig. 2,
// Fig. 7).
//
// One run processes one sample whose feature vector sits in the feature
// extractor's output buffer:
//   LOAD    F features are read 64 per cycle from the output buffer
//           (entries feat_base ..), converted from BF16 to INT16
//           (x * 2^feat_shift, truncated, saturated) and written into the
//           encoder's feature register;
//   ENCODE  the cRP encoder produces the D-element query (or support) HV,
//           packed 16 elements per word into the query HV buffer;
//   SEARCH  for every class n < N, the distance calculator sums
//           |q - c_n| over D (at the configured 1..16-bit precision); the
//           distance table records it and the min finder keeps the class
//           with the smallest distance: the prediction;
//   UPDATE  (training only) the chosen class HV is rewritten as
//           c + s if the prediction equals the label, c - s otherwise.
// The steps and the update rule follow the paper; the memory word width
// (16 elements), the class memory layout (element d of class n at element
// address n*D + d, word n*D/16 + d/16, lane d mod 16) and the sequencing
// are this design's choices. The class HV memory is 128 KB of INT16
// elements, i.e. N*D <= 65536.
//
// Timing: start (with train and label) is taken when idle; done pulses
// when the run is over, with result_class/result_dist/result_correct
// valid from then until the next start. LOAD takes ceil(F/64)+1 cycles,
// ENCODE D*ceil(F/256), SEARCH N*D/16 + 3, UPDATE D/16 + 3.
module hdc_classifier
  import fsl_pkg::*;
#(
  parameter int unsigned CLS_DEPTH = 4096,   // 4096 x 16 x 16 bit = 128 KB
  parameter int unsigned OB_DEPTH  = 256,
  localparam int unsigned QDEPTH   = D_MAX / HV_LANES,
  localparam int unsigned CAW      = $clog2(CLS_DEPTH),
  localparam int unsigned QAW      = $clog2(QDEPTH),
  localparam int unsigned OAW      = $clog2(OB_DEPTH),
  localparam int unsigned NW       = $clog2(N_MAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  hdc_cfg_t       cfg,
  input  logic           start,
  input  logic           train,
  input  logic [NW-1:0]  label,
  output logic           busy,
  output logic           done,
  output logic [NW-1:0]  result_class,
  output logic [31:0]    result_dist,
  output logic           result_correct,
  // feature vector from the output feature buffer
  output logic           ob_rd_en,
  output logic [OAW-1:0] ob_rd_addr,
  input  bf16_t          ob_rd_data [64],
  // host access
  input  logic           base_wr_en,
  input  logic [1:0]     base_wr_word,
  input  logic [63:0]    base_wr_data,
  input  logic           cls_wr_en,
  input  logic           cls_rd_en,
  input  logic [CAW+3:0] cls_addr,       // element address
  input  hv_elem_t       cls_wr_data,
  output hv_elem_t       cls_rd_data,
  input  logic           dt_rd_en,
  input  logic [NW-1:0]  dt_rd_class,
  output logic [31:0]    dt_rd_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ENC, S_SEARCH, S_SWAIT, S_UPDATE, S_UWAIT} state_e;
  state_e state;

  logic          is_train;
  logic [NW-1:0] lbl;
  logic [4:0]    e, nload;
  logic          ld_v1;
  logic [3:0]    ld_a1;
  logic [9:0]    g, ngrp;
  logic [7:0]    n;
  logic [1:0]    wait_cnt;

  // encoder
  logic          enc_start, enc_done, enc_ov;
  logic [13:0]   enc_idx;
  hv_elem_t      enc_data;
  hv_elem_t      feat_conv [64];
  hv_elem_t      qpack [HV_LANES];

  // memories
  logic                      cls_rd, cls_we;
  logic [CAW-1:0]            cls_raddr, cls_waddr;
  logic [HV_LANES-1:0]       cls_be;
  logic [HV_LANES*16-1:0]    cls_q, cls_wd, q_q, q_wd;
  logic                      q_rd, q_we;
  logic [QAW-1:0]            q_raddr, q_waddr;
  hv_elem_t                  cls_e [HV_LANES];
  hv_elem_t                  q_e   [HV_LANES];
  logic [3:0]                host_lane_q;

  // search / update pipeline
  logic          s_v1, s_first1, s_last1;
  logic [NW-1:0] s_cls1, s_cls2;
  logic          dc_valid;
  logic [31:0]   dc_dist;
  logic          u_v1;
  logic [CAW-1:0] u_a1;
  logic          hu_valid;
  logic [CAW-1:0] hu_addr;
  hv_elem_t      hu_word [HV_LANES];
  logic [NW-1:0] min_class;
  logic [31:0]   min_dist;
  logic          dm_clear;

  assign nload = 5'((32'(cfg.f) + 63) / 64);
  assign ngrp  = 10'(cfg.d >> 4);

  crp_encoder #(.FMAX(F_MAX), .BLK(CRP_BLK)) u_enc (
    .clk, .rst_n, .cfg_f(cfg.f), .cfg_d(cfg.d), .cfg_enc_shift(cfg.enc_shift),
    .base_wr_en, .base_wr_word, .base_wr_data,
    .feat_wr_en(ld_v1), .feat_wr_addr(ld_a1), .feat_wr_data(feat_conv),
    .start(enc_start), .busy(), .done(enc_done),
    .out_valid(enc_ov), .out_idx(enc_idx), .out_data(enc_data)
  );

  always_comb begin
    for (int i = 0; i < 64; i++) feat_conv[i] = bf16_to_int16(ob_rd_data[i], cfg.feat_shift);
  end

  sram_1r1w #(.LANE_W(16), .LANES(HV_LANES), .DEPTH(CLS_DEPTH)) u_cls (
    .clk, .rst_n, .rd_en(cls_rd), .rd_addr(cls_raddr), .rd_data(cls_q),
    .wr_en(cls_we), .wr_addr(cls_waddr), .wr_be(cls_be), .wr_data(cls_wd)
  );

  sram_1r1w #(.LANE_W(16), .LANES(HV_LANES), .DEPTH(QDEPTH)) u_query (
    .clk, .rst_n, .rd_en(q_rd), .rd_addr(q_raddr), .rd_data(q_q),
    .wr_en(q_we), .wr_addr(q_waddr), .wr_be('1), .wr_data(q_wd)
  );

  always_comb begin
    for (int l = 0; l < HV_LANES; l++) begin
      cls_e[l] = hv_elem_t'(cls_q[16*l +: 16]);
      q_e[l]   = hv_elem_t'(q_q[16*l +: 16]);
    end
  end

  dist_calc #(.LANES(HV_LANES)) u_dist (
    .clk, .rst_n, .bits(cfg.hv_bits), .in_valid(s_v1), .in_first(s_first1), .in_last(s_last1),
    .q(q_e), .c(cls_e), .dist_valid(dc_valid), .distance(dc_dist)
  );

  dist_min #(.NMAX(N_MAX)) u_min (
    .clk, .rst_n, .clear(dm_clear), .dist_valid(dc_valid), .dist_class(s_cls2),
    .distance(dc_dist), .min_dist, .min_class,
    .rd_en(dt_rd_en), .rd_class(dt_rd_class), .rd_data(dt_rd_data)
  );

  hv_updater #(.LANES(HV_LANES), .AW(CAW)) u_upd (
    .clk, .rst_n, .in_valid(u_v1), .correct(min_class == lbl), .in_addr(u_a1),
    .cls(cls_e), .sup(q_e), .out_valid(hu_valid), .out_addr(hu_addr), .out_word(hu_word)
  );

  // ---------------- memory port muxes ----------------
  always_comb begin
    // query buffer: written by the encoder, read by search and update
    q_we    = enc_ov && (enc_idx[3:0] == 4'd15);
    q_waddr = QAW'(enc_idx >> 4);
    for (int l = 0; l < HV_LANES; l++)
      q_wd[16*l +: 16] = (l == HV_LANES - 1) ? enc_data : qpack[l];
    q_rd    = (state == S_SEARCH) || (state == S_UPDATE);
    q_raddr = QAW'(g);
    // class memory: engine when busy, host otherwise
    cls_rd    = 1'b0;
    cls_raddr = '0;
    if (state == S_SEARCH) begin
      cls_rd    = 1'b1;
      cls_raddr = CAW'(32'(n) * 32'(ngrp) + 32'(g));
    end else if (state == S_UPDATE) begin
      cls_rd    = 1'b1;
      cls_raddr = CAW'(32'(min_class) * 32'(ngrp) + 32'(g));
    end else if (state == S_IDLE && cls_rd_en) begin
      cls_rd    = 1'b1;
      cls_raddr = CAW'(cls_addr >> 4);
    end
    if (hu_valid) begin
      cls_we    = 1'b1;
      cls_waddr = hu_addr;
      cls_be    = '1;
      for (int l = 0; l < HV_LANES; l++) cls_wd[16*l +: 16] = hu_word[l];
    end else begin
      cls_we    = cls_wr_en && (state == S_IDLE);
      cls_waddr = CAW'(cls_addr >> 4);
      cls_be    = HV_LANES'(1) << cls_addr[3:0];
      cls_wd    = {HV_LANES{cls_wr_data}};
    end
  end
  assign cls_rd_data = cls_e[host_lane_q];

  // ---------------- sequencer ----------------
  always_comb begin
    ob_rd_en   = (state == S_LOAD) && (e < nload);
    ob_rd_addr = OAW'(32'(cfg.feat_base) + 32'(e));
    enc_start  = (state == S_LOAD) && (e == nload);
    dm_clear   = (state == S_ENC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; is_train <= 1'b0; lbl <= '0;
      e <= '0; ld_v1 <= 1'b0; ld_a1 <= '0; g <= '0; n <= '0; wait_cnt <= '0;
      s_v1 <= 1'b0; s_first1 <= 1'b0; s_last1 <= 1'b0; s_cls1 <= '0; s_cls2 <= '0;
      u_v1 <= 1'b0; u_a1 <= '0; done <= 1'b0; host_lane_q <= '0;
      result_class <= '0; result_dist <= '0; result_correct <= 1'b0;
      for (int l = 0; l < HV_LANES; l++) qpack[l] <= '0;
    end else begin
      done  <= 1'b0;
      ld_v1 <= ob_rd_en;
      ld_a1 <= e[3:0];
      s_v1  <= 1'b0;
      u_v1  <= 1'b0;
      s_cls2 <= s_cls1;
      if (cls_rd_en && state == S_IDLE) host_lane_q <= cls_addr[3:0];
      if (enc_ov) qpack[enc_idx[3:0]] <= enc_data;
      case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD; is_train <= train; lbl <= label; e <= '0;
        end
        S_LOAD: begin
          if (e == nload) state <= S_ENC;
          else            e <= e + 5'd1;
        end
        S_ENC: if (enc_done) begin
          state <= S_SEARCH; n <= '0; g <= '0;
        end
        S_SEARCH: begin
          s_v1     <= 1'b1;
          s_first1 <= (g == 10'd0);
          s_last1  <= (g == ngrp - 10'd1);
          s_cls1   <= NW'(n);
          if (g == ngrp - 10'd1) begin
            g <= '0;
            n <= n + 8'd1;
            if (n == cfg.n - 8'd1) begin
              state <= S_SWAIT; wait_cnt <= 2'd3;
            end
          end else begin
            g <= g + 10'd1;
          end
        end
        S_SWAIT: begin
          wait_cnt <= wait_cnt - 2'd1;
          if (wait_cnt == 2'd1) begin
            result_class   <= min_class;
            result_dist    <= min_dist;
            result_correct <= (min_class == lbl);
            g <= '0;
            if (is_train) state <= S_UPDATE;
            else begin
              state <= S_IDLE; done <= 1'b1;
            end
          end
        end
        S_UPDATE: begin
          u_v1 <= 1'b1;
          u_a1 <= CAW'(32'(min_class) * 32'(ngrp) + 32'(g));
          if (g == ngrp - 10'd1) begin
            state <= S_UWAIT; wait_cnt <= 2'd3;
          end else begin
            g <= g + 10'd1;
          end
        end
        default: begin  // S_UWAIT
          wait_cnt <= wait_cnt - 2'd1;
          if (wait_cnt == 2'd1) begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
