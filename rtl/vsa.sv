// Behavioural model of one voltage-mode sense amplifier (VSA), a clocked
// latch comparator designed at transistor level in the real chip.
// At each rising clock edge it compares the bitline voltage vin with its
// reference vref and holds the result until the next edge:
//     q = 1  when vin + OFFSET_UV < vref  (bitline below the reference,
//            i.e. the bitcount is above the comparator's reference bitcount).
// OFFSET_UV models the comparator's input offset, which the paper calibrates
// out by tuning each reference voltage. Voltages in microvolts.
// The paper's calibration example gives the opposite polarity (Q = 0 for the
// bitcount just above the reference). This model follows the paper's
// reference-update rule and ADC waveform instead, under which the ADC code
// grows with the bitcount.
module vsa
  import xnor_rram_pkg::*;
#(
  parameter int OFFSET_UV = 0
) (
  input  logic  clk,
  input  volt_t vin,
  input  volt_t vref,
  output logic  q
);

  always_ff @(posedge clk)
    q <= (int'(vin) + OFFSET_UV) < int'(vref);

endmodule
