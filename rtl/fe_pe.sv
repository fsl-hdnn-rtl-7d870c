// fe_pe: one processing element of the weight-clustering feature extractor.
//
// A 3x3 filter whose weights are clustered to 16 values is computed as
//   out = sum_k w[k] * (sum of the input pixels whose cluster index is k).
// The PE holds four 16-entry BF16 register files (RF0..RF3). Output column c
// of the PE's output row is owned by RF (c mod 4). While the input pixels of
// input column x stream past on the row bus, the three RFs whose windows
// contain column x (output columns x, x-1, x-2, kernel column kx = 0, 1, 2)
// each add the pixel into the entry selected by that window position's
// cluster index: RF[idx] += act. At the same time the fourth RF (output
// column x-3, whose window is complete) is read entry by entry through a 4:1
// mux and multiplied by the cluster weights: OutReg += w * RF[k]. After the
// 16 clusters of one output channel, OutReg is presented on out_data with
// out_valid for one cycle; the next output channel sharing the same index
// pattern reuses the same RF. At the end of the multiply slot the RF is
// cleared and becomes the accumulator of output column x+1.
//
// From the paper (Fig. 4(b), 4(c) and Sec. II-A): four RFs, three
// accumulating and one multiplying, per-RF index selection from the column
// index/weight bus, 4:1 mux, multiplier, OutReg accumulation, the rotation
// of RF roles by one each input column. Own choices: RF r owns output
// columns c with c mod 4 = r; the 36-bit index bus carries the nine indices
// of one input channel, field ky*3+kx, kx counted in streaming order; the
// cluster index of the multiply RF comes from the controller (mac_idx); the
// RF is cleared in one cycle; BF16 arithmetic truncates.
//
// Timing: all RF writes and OutReg update on the rising clock edge in the
// cycle the control word is valid; out_valid/out_data appear one cycle
// after the control word that carried mac_last.
module fe_pe
  import fsl_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  pe_ctrl_t         ctrl,
  input  bf16_t            act,     // row-wise input pixel bus
  input  logic [CIDX_W-1:0] cidx,   // column-wise index bus (9 x 4 bit)
  input  bf16_t            wgt,     // column-wise weight bus
  output logic             out_valid,
  output bf16_t            out_data
);
  bf16_t rf [N_RF][N_CLUSTER];

  logic [1:0]  mul_rf;               // RF in the multiply role
  logic [1:0]  kx   [N_RF];          // window column of the pixel for each RF
  logic [3:0]  idx  [N_RF];          // cluster index for each RF
  logic        acc  [N_RF];
  bf16_t       rf_rd[N_RF];
  bf16_t       rf_sum[N_RF];
  bf16_t       mux_out, prod, out_sum, out_reg;

  assign mul_rf = ctrl.phase + 2'd1;  // owns output column x-3 == x+1 (mod 4)

  for (genvar r = 0; r < N_RF; r++) begin : g_rf
    always_comb begin
      kx[r]    = ctrl.phase - 2'(r);
      idx[r]   = cidx[4*(int'(ctrl.ky)*KSIZE + int'((kx[r] == 2'd3) ? 2'd0 : kx[r])) +: 4];
      acc[r]   = ctrl.acc_en && ctrl.acc_mask[r] && (kx[r] != 2'd3);
      rf_rd[r] = rf[r][idx[r]];
    end
    bf16_add u_add (.a(rf_rd[r]), .b(act), .y(rf_sum[r]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < N_CLUSTER; k++) rf[r][k] <= '0;
      end else if (ctrl.rf_clr && mul_rf == 2'(r)) begin
        for (int k = 0; k < N_CLUSTER; k++) rf[r][k] <= '0;
      end else if (acc[r]) begin
        rf[r][idx[r]] <= rf_sum[r];
      end
    end
  end

  // 4:1 mux, multiplier and OutReg accumulator
  assign mux_out = rf[mul_rf][ctrl.mac_idx];
  bf16_mul u_mul (.a(wgt), .b(mux_out), .y(prod));
  bf16_add u_oadd (.a(out_reg), .b(prod), .y(out_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_reg   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= ctrl.mac_en && ctrl.mac_last;
      if (ctrl.mac_en) out_reg <= ctrl.mac_first ? prod : out_sum;
    end
  end
  assign out_data = out_reg;

endmodule
