// crp_encoder: cyclic random projection (cRP) hypervector encoder.
//
// Encoding multiplies the F-dim feature vector x by an F x D matrix B of
// +1/-1 entries: h[d] = sum_f B[f][d] * x[f]. Instead of storing B, the
// encoder keeps one BLK-bit (256) base block and generates B on the fly:
//   * B is made of BLK x BLK cyclic blocks; block column j (d = j*BLK + c)
//     uses the block base P^j(base), P being a fixed bit permutation
//     (the Permute box with its feedback loop in Fig. 7);
//   * inside a block, column c is the block base rotated by c, so
//     B[f][d] = P^j(base)[(f mod BLK - c) mod BLK];
//   * the same block repeats down the F direction (Fig. 6(b)).
// The encoding register holds the 256 encoding bits of the current column;
// it is rotated by one after each output element and permuted at each
// block boundary. Each cycle the 256 bits select +x or -x for 256 features
// (bit 1 selects -x) and an adder tree sums them; a feature vector longer
// than 256 takes ceil(F/256) cycles per output element, the partial sums
// being accumulated. The element is then shifted right by enc_shift and
// saturated to INT16.
//
// From the paper: the 256 block size, generation of B by a cyclic module
// with permutation, the feature register, the +/-V mux per feature, the
// adder tree. Own choices: the rotation direction, the permutation
// P(v)[i] = v[(5*i + 3) mod 256], bit polarity, the INT16 scaling.
//
// Interface: base block written as four 64-bit words, features written 64
// at a time (chunk feat_wr_addr holds features 64*addr .. 64*addr+63).
// Timing: after start, one element (out_valid, out_idx, out_data) every
// ceil(F/256) cycles, D elements in all; done pulses with the last one.
module crp_encoder
  import fsl_pkg::*;
#(
  parameter int unsigned FMAX = F_MAX,
  parameter int unsigned BLK  = CRP_BLK,
  localparam int unsigned NCH  = FMAX / 64,
  localparam int unsigned NBLK = FMAX / BLK,
  localparam int unsigned JW   = (NBLK > 1) ? $clog2(NBLK) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [10:0] cfg_f,
  input  logic [13:0] cfg_d,
  input  logic [4:0]  cfg_enc_shift,
  // base memory
  input  logic        base_wr_en,
  input  logic [1:0]  base_wr_word,
  input  logic [63:0] base_wr_data,
  // feature register
  input  logic        feat_wr_en,
  input  logic [$clog2(NCH)-1:0] feat_wr_addr,
  input  hv_elem_t    feat_wr_data [64],
  // encoding
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        out_valid,
  output logic [13:0] out_idx,
  output hv_elem_t    out_data
);
  logic [BLK-1:0]  base_mem;
  logic [BLK-1:0]  enc;
  hv_elem_t        feat [NBLK][BLK];   // feature f at [f / BLK][f mod BLK]
  logic            run;
  logic [13:0]     d;
  logic [3:0]      j, nch;
  logic signed [31:0] acc, chunk_sum, acc_next;

  function automatic logic [BLK-1:0] permute(input logic [BLK-1:0] v);
    logic [BLK-1:0] p;
    for (int i = 0; i < BLK; i++) p[i] = v[(5 * i + 3) % BLK];
    return p;
  endfunction

  assign nch = 4'((32'(cfg_f) + BLK - 1) / BLK);

  // +/- selection and adder tree over one block of features
  always_comb begin
    int unsigned f;
    chunk_sum = '0;
    for (int i = 0; i < BLK; i++) begin
      f = 32'(j) * BLK + 32'(i);
      if (f < 32'(cfg_f) && f < FMAX) begin
        if (enc[i]) chunk_sum = chunk_sum - 32'(feat[j[JW-1:0]][i]);
        else        chunk_sum = chunk_sum + 32'(feat[j[JW-1:0]][i]);
      end
    end
    acc_next = ((j == 4'd0) ? 32'sd0 : acc) + chunk_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) base_mem <= '0;
    else if (base_wr_en) base_mem[64*base_wr_word +: 64] <= base_wr_data;
  end

  always_ff @(posedge clk) begin
    if (feat_wr_en)
      for (int i = 0; i < 64; i++)
        feat[(64*feat_wr_addr + i) / BLK][(64*feat_wr_addr + i) % BLK] <= feat_wr_data[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; d <= '0; j <= '0; acc <= '0; enc <= '0;
      out_valid <= 1'b0; out_idx <= '0; out_data <= '0; done <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1; d <= '0; j <= '0; enc <= base_mem;
        end
      end else begin
        acc <= acc_next;
        if (j == nch - 4'd1) begin
          j         <= '0;
          out_valid <= 1'b1;
          out_idx   <= d;
          out_data  <= sat16(acc_next >>> cfg_enc_shift);
          if (32'(d % 14'(BLK)) == BLK - 1) enc <= permute({enc[BLK-2:0], enc[BLK-1]});
          else                              enc <= {enc[BLK-2:0], enc[BLK-1]};
          d <= d + 14'd1;
          if (d == cfg_d - 14'd1) begin
            run  <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          j <= j + 4'd1;
        end
      end
    end
  end

  assign busy = run;
endmodule
