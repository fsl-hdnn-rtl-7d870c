// out_feat_buf: output feature buffer of the feature extractor.
//
// Stores DEPTH entries of LANES (64 = 4 x 16 PEs) BF16 output pixels. The PE
// array writes a whole entry in one cycle (all 64 PEs finish together);
// the host reads or writes single pixels (entry, lane); the HDC engine
// reads whole entries to collect its feature vector, feature f being lane
// f mod 64 of entry feat_base + f / 64. The paper only names this buffer
// (Fig. 2) and shows it feeding both the IO interface and the HDC encoder;
// its depth (256 entries, 32 KB, what remains of the 349 KB on-chip
// memory after the listed memories) and its ports are this design's choice.
//
// Timing: both read ports return data one cycle after the request. The
// array write has priority over a host write in the same cycle.
module out_feat_buf
  import fsl_pkg::*;
#(
  parameter int unsigned LANES = PE_ROWS * PE_COLS,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned LW   = $clog2(LANES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // PE array side: whole entry
  input  logic          arr_wr_en,
  input  logic [AW-1:0] arr_wr_addr,
  input  bf16_t         arr_wr_data [LANES],
  // host side: single pixel
  input  logic          host_wr_en,
  input  logic [AW-1:0] host_addr,
  input  logic [LW-1:0] host_lane,
  input  bf16_t         host_wr_data,
  input  logic          host_rd_en,
  output bf16_t         host_rd_data,
  // HDC side: whole entry
  input  logic          wide_rd_en,
  input  logic [AW-1:0] wide_rd_addr,
  output bf16_t         wide_rd_data [LANES]
);
  bf16_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (arr_wr_en) begin
      for (int l = 0; l < LANES; l++) mem[arr_wr_addr][l] <= arr_wr_data[l];
    end else if (host_wr_en) begin
      mem[host_addr][host_lane] <= host_wr_data;
    end
    if (wide_rd_en)
      for (int l = 0; l < LANES; l++) wide_rd_data[l] <= mem[wide_rd_addr][l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          host_rd_data <= '0;
    else if (host_rd_en) host_rd_data <= mem[host_addr][host_lane];
  end
endmodule
