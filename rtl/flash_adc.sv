// Behavioural model of one 3-bit flash ADC: seven voltage-mode sense
// amplifiers sharing the bitline voltage vin, each with its own reference
// vref[k]. The output is the 7-bit thermometer code q, sampled at each rising
// clock edge; the number of ones is the 3-bit result (0..7). With the
// references set for the bitcounts -13, -9, -5, -1, 3, 7, 11, comparator k
// reports whether the bitcount exceeds -13 + 4k. Offsets per comparator can
// be given in OFFSET_UV.
module flash_adc
  import xnor_rram_pkg::*;
#(
  parameter int OFFSET_UV [N_VSA] = '{default: 0}
) (
  input  logic                 clk,
  input  volt_t                vin,
  input  volt_t [N_VSA-1:0]    vref,
  output logic  [N_VSA-1:0]    q
);

  for (genvar k = 0; k < N_VSA; k++) begin : g_vsa
    vsa #(.OFFSET_UV(OFFSET_UV[k])) u_vsa (
      .clk  (clk),
      .vin  (vin),
      .vref (vref[k]),
      .q    (q[k])
    );
  end

endmodule
