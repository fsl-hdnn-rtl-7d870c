// dist_calc: distance calculator of the HDC classifier.
//
// For one class, sums |q_d - c_d| over all D elements of the query HV q and
// the class HV c, LANES (16) elements per cycle: the subtractors, ABS units
// and accumulating adder of Fig. 7. The paper calls the result a Hamming
// distance; with 1-bit elements it is exactly that. Inference precision
// (1..16 bits, Sec. II-B) is applied by keeping the top `bits` bits of each
// INT16 element (arithmetic shift right by 16-bits) on both operands; this
// way of reducing precision is this design's choice.
//
// Timing: one word pair per cycle with in_valid; in_first restarts the sum;
// the word with in_last yields dist_valid and distance one cycle later.
module dist_calc
  import fsl_pkg::*;
#(
  parameter int unsigned LANES = HV_LANES
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [4:0]     bits,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  hv_elem_t       q [LANES],
  input  hv_elem_t       c [LANES],
  output logic           dist_valid,
  output logic [31:0]    distance
);
  logic [31:0] acc, part;
  logic [4:0]  sh;

  always_comb begin
    logic signed [16:0] diff;
    sh   = (bits == 5'd0 || bits > 5'd16) ? 5'd0 : 5'(5'd16 - bits);
    part = '0;
    for (int l = 0; l < LANES; l++) begin
      diff = 17'(q[l] >>> sh) - 17'(c[l] >>> sh);
      if (diff < 0) diff = -diff;
      part = part + 32'(diff);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; dist_valid <= 1'b0;
    end else begin
      dist_valid <= in_valid && in_last;
      if (in_valid) acc <= (in_first ? 32'd0 : acc) + part;
    end
  end
  assign distance = acc;
endmodule
