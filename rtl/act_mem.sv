// act_mem: activation (input pixel) memory of the feature extractor.
//
// BANKS (8) banks of DEPTH (8192) BF16 words, 16 KB each, as printed in
// Fig. 2 ("Act. Mem. 16KB x8"), feeding PORTS (4) 16-bit row buses
// ("Act. 16b x4") through a bank-to-row crossbar. Input image row i is
// stored in bank i mod 8, so the four PE rows, which always read four
// consecutive image rows, never hit the same bank. Each read port names a
// bank and a word in it; the crossbar routes the bank's word to the port.
// The interleaving and the port addressing are this design's choice.
//
// Timing: rd_data appears one cycle after rd_en/rd_bank/rd_addr. One write
// port (host side). Two read ports must not address the same bank in the
// same cycle (checked by an assertion).
module act_mem
  import fsl_pkg::*;
#(
  parameter int unsigned BANKS = 8,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned PORTS = PE_ROWS,
  localparam int unsigned BW   = $clog2(BANKS),
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rd_en,
  input  logic [BW-1:0] rd_bank [PORTS],
  input  logic [AW-1:0] rd_addr [PORTS],
  output bf16_t         rd_data [PORTS],
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  bf16_t         wr_data
);
  bf16_t         mem [BANKS][DEPTH];
  logic          bank_en   [BANKS];
  logic [AW-1:0] bank_addr [BANKS];
  bf16_t         bank_q    [BANKS];
  logic [BW-1:0] sel_q     [PORTS];

  // address crossbar: each bank takes the address of the port that selects it
  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      bank_en[b]   = 1'b0;
      bank_addr[b] = '0;
      for (int p = 0; p < PORTS; p++) begin
        if (rd_en && int'(rd_bank[p]) == b) begin
          bank_en[b]   = 1'b1;
          bank_addr[b] = rd_addr[p];
        end
      end
    end
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_bank) == b) mem[b][wr_addr] <= wr_data;
      if (bank_en[b])                  bank_q[b] <= mem[b][bank_addr[b]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int p = 0; p < PORTS; p++) sel_q[p] <= '0;
    else if (rd_en) for (int p = 0; p < PORTS; p++) sel_q[p] <= rd_bank[p];
  end

  // data crossbar (the 8-to-4 selector of Fig. 2)
  always_comb begin
    for (int p = 0; p < PORTS; p++) rd_data[p] = bank_q[sel_q[p]];
  end

  // no two ports may read the same bank in one cycle
  always_comb begin
    if (rd_en && rst_n)
      for (int p = 0; p < PORTS; p++)
        for (int q = p + 1; q < PORTS; q++)
          assert (rd_bank[p] != rd_bank[q]);
  end
endmodule
