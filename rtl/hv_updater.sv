// hv_updater: HV updater and HV adder of the FSL learner.
//
// Single-pass few-shot training (Sec. II-B, Fig. 7): after the classifier
// has chosen a class for a support sample, the support HV s is added to
// the chosen class HV if the choice matches the label and subtracted from
// it otherwise: c' = c + s (correct) or c' = c - s (wrong). This rule is
// the paper's. LANES (16) INT16 elements are updated per cycle; results
// saturate to the INT16 range (own choice; the paper states INT16 class
// HVs for training).
//
// Timing: out_valid/out_word/out_addr one cycle after in_valid.
module hv_updater
  import fsl_pkg::*;
#(
  parameter int unsigned LANES = HV_LANES,
  parameter int unsigned AW    = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          correct,      // chosen class == label
  input  logic [AW-1:0] in_addr,      // class-memory word the result goes to
  input  hv_elem_t      cls [LANES],
  input  hv_elem_t      sup [LANES],
  output logic          out_valid,
  output logic [AW-1:0] out_addr,
  output hv_elem_t      out_word [LANES]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_addr <= '0;
      for (int l = 0; l < LANES; l++) out_word[l] <= '0;
    end else begin
      out_valid <= in_valid;
      out_addr  <= in_addr;
      if (in_valid)
        for (int l = 0; l < LANES; l++)
          out_word[l] <= correct ? sat16(32'(cls[l]) + 32'(sup[l]))
                                 : sat16(32'(cls[l]) - 32'(sup[l]));
    end
  end
endmodule
