// sram_1r1w: synchronous memory with one read port and one write port,
// used for the index (cidx) memories, the weight memory, the class
// hypervector memory and the query HV buffer.
//
// Each word holds LANES lanes of LANE_W bits; wr_be enables lanes
// individually so the host can write one element of a wide word. The read
// port returns the word addressed in the previous cycle (one cycle
// latency). A read and a write of the same address in the same cycle
// return the old contents. The paper gives only the capacities of these
// memories (Fig. 2); their organisation as 1R1W arrays is this design's
// choice and stands for the SRAM macros of the chip. Like an SRAM, the
// array is not reset: it must be written before it is read.
module sram_1r1w #(
  parameter int unsigned LANE_W = 16,
  parameter int unsigned LANES  = 1,
  parameter int unsigned DEPTH  = 512,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic [LANES*LANE_W-1:0] rd_data,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [LANES-1:0]        wr_be,
  input  logic [LANES*LANE_W-1:0] wr_data
);
  logic [LANES*LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < LANES; l++)
        if (wr_be[l]) mem[wr_addr][l*LANE_W +: LANE_W] <= wr_data[l*LANE_W +: LANE_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= mem[rd_addr];
  end

  always_comb begin
    assert (!(wr_en && 32'(wr_addr) >= DEPTH) || !rst_n);
    assert (!(rd_en && 32'(rd_addr) >= DEPTH) || !rst_n);
  end
endmodule
