// fe_pe_array: the ROWS x COLS (4 x 16) processing-element array of the
// feature extractor.
//
// PEs in one row share the row's input pixel bus (act[r]) and compute the
// same output pixel row; PEs in one column share the column's 36-bit index
// bus and 16-bit weight bus (cidx[c], wgt[c]) and compute the same set of
// output channels. This is the organisation the paper gives (Sec. II-A,
// Fig. 2, Fig. 4(a)). All PEs receive the same control word, so they work
// in lock step and all produce an output pixel in the same cycle; out_valid
// is therefore taken from PE (0,0). out_data[r][c] is the pixel of output
// row r and column set c, valid one cycle after a control word with
// mac_last.
module fe_pe_array
  import fsl_pkg::*;
#(
  parameter int unsigned ROWS = PE_ROWS,
  parameter int unsigned COLS = PE_COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pe_ctrl_t          ctrl,
  input  bf16_t             act  [ROWS],
  input  logic [CIDX_W-1:0] cidx [COLS],
  input  bf16_t             wgt  [COLS],
  output logic              out_valid,
  output bf16_t             out_data [ROWS][COLS]
);
  logic vld [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      fe_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .ctrl     (ctrl),
        .act      (act[r]),
        .cidx     (cidx[c]),
        .wgt      (wgt[c]),
        .out_valid(vld[r][c]),
        .out_data (out_data[r][c])
      );
    end
  end

  assign out_valid = vld[0][0];

  // every PE sees the same control word, so all valid flags agree
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        assert (vld[r][c] == vld[0][0] || !rst_n);
  end
endmodule
