// dist_min: distance table and minimum finder of the HDC classifier.
//
// Each class distance arriving from the distance calculator is written to
// the distance table (one 32-bit entry per class, NMAX = 128) and compared
// with the smallest distance seen since clear; the minimum finder keeps
// that distance and its class. On a tie the earlier (lower) class wins.
// The paper shows the table and the min finder (Fig. 2, Fig. 7) but not
// how they are built; comparing on the fly is this design's choice. The
// table stays readable by the host after the search.
//
// Timing: clear, then one dist_valid per class; min_dist/min_class are
// up to date the cycle after the last dist_valid. Host reads return one
// cycle after rd_en.
module dist_min
  import fsl_pkg::*;
#(
  parameter int unsigned NMAX = N_MAX,
  localparam int unsigned NW  = $clog2(NMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          dist_valid,
  input  logic [NW-1:0] dist_class,
  input  logic [31:0]   distance,
  output logic [31:0]   min_dist,
  output logic [NW-1:0] min_class,
  input  logic          rd_en,
  input  logic [NW-1:0] rd_class,
  output logic [31:0]   rd_data
);
  logic [31:0] table_q [NMAX];

  always_ff @(posedge clk) begin
    if (dist_valid) table_q[dist_class] <= distance;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      min_dist <= '1; min_class <= '0; rd_data <= '0;
    end else begin
      if (clear) begin
        min_dist <= '1; min_class <= '0;
      end else if (dist_valid && distance < min_dist) begin
        min_dist <= distance; min_class <= dist_class;
      end
      if (rd_en) rd_data <= table_q[rd_class];
    end
  end
endmodule
