// sync_fifo: single-clock first-in first-out buffer with first-word
// fall-through, used on both sides of the host IO interface.
//
// in_valid/in_ready and out_valid/out_ready form valid-ready handshakes:
// a word moves when both are high at a clock edge. out_data shows the
// oldest word whenever out_valid is high. DEPTH words are stored; a push
// and a pop may happen in the same cycle. The FIFO is named in Fig. 2; its
// depth and handshake are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      level
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = (level < (AW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // handshake rules
  a_level: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));
  a_ready: assert property (@(posedge clk) disable iff (!rst_n)
                            !(in_valid && !in_ready && level != (AW+1)'(DEPTH)));
endmodule
