// fe_ctrl: sequencer of the feature extractor (the CTRL block of Fig. 2 as
// far as it drives the feature extractor).
//
// It computes one 3x3, stride-1, unpadded convolution layer tile by tile.
// A tile is 4 output rows (one per PE row); PE column c makes output
// channels c*noc .. c*noc+noc-1, which share one clustering-index pattern.
// Input columns x = 0 .. w_in are processed as "slots" of
// L = max(3*cin, 16*noc) cycles. In slot x:
//   * accumulate part (x < w_in, first 3*cin cycles): for each input
//     channel ch and kernel row ky, the pixel (row tile*4+r+ky, column x,
//     channel ch) is put on row bus r and the index pattern of ch on every
//     column bus; the three RFs whose windows hold column x take it;
//   * multiply part (x >= 3, first 16*noc cycles): for each output channel
//     k and cluster j, weight j of channel k is put on each column bus and
//     multiplied with entry j of the RF of output column x-3; after j = 15
//     the 64 finished pixels are written to the output buffer entry
//     (tile*(w_in-2) + x-3)*noc + k;
//   * the last cycle of the slot clears the multiply RF.
// The rotation of RF roles per input column and the overlap of the three
// accumulations with one multiplication follow Fig. 4(c). The slot length,
// loop order, image layout in the activation memory (row i in bank i mod 8,
// word (i/8)*w_in*cin + x*cin + ch) and the output layout are this
// design's choices; the paper does not give the controller.
//
// Timing: memory addresses are issued in cycle n, the matching PE control
// word leaves in cycle n+1 together with the memory data, and the output
// buffer write address in cycle n+2 together with the PE results. busy is
// high from the cycle after start until done, a one-cycle pulse.
module fe_ctrl
  import fsl_pkg::*;
#(
  parameter int unsigned ACT_BANKS = 8,
  parameter int unsigned ACT_DEPTH = 8192,
  parameter int unsigned CIDX_DEPTH = 512,
  parameter int unsigned WGT_DEPTH = 128,
  parameter int unsigned OUT_DEPTH = 256,
  localparam int unsigned BW  = $clog2(ACT_BANKS),
  localparam int unsigned AW  = $clog2(ACT_DEPTH),
  localparam int unsigned CW  = $clog2(CIDX_DEPTH),
  localparam int unsigned WW  = $clog2(WGT_DEPTH),
  localparam int unsigned OW  = $clog2(OUT_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  fe_cfg_t       cfg,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // activation memory
  output logic          act_rd_en,
  output logic [BW-1:0] act_rd_bank [PE_ROWS],
  output logic [AW-1:0] act_rd_addr [PE_ROWS],
  // index and weight memories (same address for all columns)
  output logic          cidx_rd_en,
  output logic [CW-1:0] cidx_rd_addr,
  output logic          wgt_rd_en,
  output logic [WW-1:0] wgt_rd_addr,
  // PE array
  output pe_ctrl_t      pe_ctrl,
  // output buffer
  output logic          out_wr_en,
  output logic [OW-1:0] out_wr_addr
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [6:0]  tile;
  logic [8:0]  x;
  logic [12:0] t;
  logic [9:0]  ch;
  logic [1:0]  ky;
  logic [3:0]  koc, clu;
  logic [1:0]  drain;

  logic [12:0] slot_len, acc_len, mac_len;
  logic        acc_now, mac_now, last_t, last_x, last_tile;
  pe_ctrl_t    c0;
  logic        ow_v1;
  logic [OW-1:0] ow_a1;
  logic [OW-1:0] out_entry;

  always_comb begin
    acc_len  = 13'(cfg.cin) * 13'd3;
    mac_len  = 13'(cfg.noc) << 4;
    slot_len = (acc_len > mac_len) ? acc_len : mac_len;
    last_t    = (t == slot_len - 13'd1);
    last_x    = (x == cfg.w_in);
    last_tile = (tile == cfg.n_tiles - 7'd1);
    acc_now  = (state == S_RUN) && (x < cfg.w_in) && (t < acc_len);
    mac_now  = (state == S_RUN) && (x >= 9'd3) && (t < mac_len);
  end

  // control word of the cycle (stage 0)
  always_comb begin
    logic [1:0] kx;
    logic [9:0] c;
    c0 = '0;
    c0.acc_en    = acc_now;
    c0.ky        = ky;
    c0.phase     = x[1:0];
    for (int r = 0; r < N_RF; r++) begin
      kx = x[1:0] - 2'(r);
      c  = {1'b0, x} - 10'(kx);
      c0.acc_mask[r] = (kx != 2'd3) && (x >= 9'(kx)) && (c + 10'd3 <= 10'(cfg.w_in));
    end
    c0.mac_en    = mac_now;
    c0.mac_idx   = clu;
    c0.mac_first = (clu == 4'd0);
    c0.mac_last  = (clu == 4'd15);
    c0.rf_clr    = (state == S_RUN) && last_t;
  end

  // memory addresses (stage 0)
  always_comb begin
    logic [8:0] row;
    for (int r = 0; r < PE_ROWS; r++) begin
      row = 9'(tile) * 9'd4 + 9'(r) + 9'(ky);
      act_rd_bank[r] = row[BW-1:0];
      act_rd_addr[r] = AW'(32'(row >> BW) * 32'(cfg.w_in) * 32'(cfg.cin)
                          + 32'(x) * 32'(cfg.cin) + 32'(ch));
    end
    act_rd_en    = acc_now;
    cidx_rd_en   = acc_now;
    cidx_rd_addr = CW'(ch);
    wgt_rd_en    = mac_now;
    wgt_rd_addr  = WW'({koc, clu});
    out_entry    = OW'(((32'(tile) * (32'(cfg.w_in) - 32'd2) + 32'(x) - 32'd3) * 32'(cfg.noc)) + 32'(koc));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      tile <= '0; x <= '0; t <= '0; ch <= '0; ky <= '0; koc <= '0; clu <= '0;
      drain <= '0;
      done  <= 1'b0;
      pe_ctrl <= '0;
      ow_v1 <= 1'b0; ow_a1 <= '0;
      out_wr_en <= 1'b0; out_wr_addr <= '0;
    end else begin
      done    <= 1'b0;
      pe_ctrl <= c0;
      ow_v1   <= mac_now && (clu == 4'd15);
      ow_a1   <= out_entry;
      out_wr_en   <= ow_v1;
      out_wr_addr <= ow_a1;
      case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          tile <= '0; x <= '0; t <= '0; ch <= '0; ky <= '0; koc <= '0; clu <= '0;
        end
        S_RUN: begin
          if (acc_now) begin
            if (ky == 2'd2) begin ky <= '0; ch <= ch + 10'd1; end
            else ky <= ky + 2'd1;
          end
          if (mac_now) begin
            clu <= clu + 4'd1;
            if (clu == 4'd15) koc <= koc + 4'd1;
          end
          t <= t + 13'd1;
          if (last_t) begin
            t <= '0; ch <= '0; ky <= '0; koc <= '0; clu <= '0;
            x <= x + 9'd1;
            if (last_x) begin
              x <= '0;
              tile <= tile + 7'd1;
              if (last_tile) begin
                state <= S_DRAIN;
                drain <= 2'd3;
              end
            end
          end
        end
        default: begin  // S_DRAIN: let the last results reach the buffer
          drain <= drain - 2'd1;
          if (drain == 2'd1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
