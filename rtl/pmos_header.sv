// Behavioural model of the configurable PMOS pull-up header at the input of
// each flash ADC (analog in the real chip). The header and the parallel RRAM
// cells of the selected column form a static resistive divider, so the read
// bitline (RBL) voltage is
//     V_RBL = VDD * G_pu / (G_pu + G_pd),
// with G_pd the column's pull-down conductance and
//     G_pu = G_PU_STEP_NS * (16 - pu)
// for the 4-bit strength code pu (0 strongest). More LRS cells (a higher
// bitcount) give a lower voltage, and a stronger header a higher one, as the
// paper's measured transfer curves show. The conductance law of the header
// and its step size are this model's own; the paper gives only the measured
// curves. Combinational; voltages in microvolts.
module pmos_header
  import xnor_rram_pkg::*;
#(
  parameter int unsigned G_STEP = G_PU_STEP_NS
) (
  input  logic [PU_W-1:0] pu,
  input  cond_t           g_pd,
  output volt_t           v_rbl
);

  logic [63:0] g_pu, num, den;

  always_comb begin
    g_pu  = 64'(G_STEP) * (64'd16 - 64'(pu));
    num   = 64'(VDD_UV) * g_pu;
    den   = g_pu + 64'(g_pd);
    v_rbl = volt_t'(num / den);
  end

endmodule
