// Behavioural model of one 8:1 analog column multiplexer (a transistor-level
// block in the real chip). It connects the bitlines of the columns whose
// select bit is high to the ADC input node; the pull-down conductances of the
// connected columns therefore add. With no select bit high the node is left
// to the pull-up header alone (conductance 0). Combinational.
module analog_mux8
  import xnor_rram_pkg::*;
(
  input  cond_t [7:0] g_in,
  input  logic  [7:0] sel,
  output cond_t       g_out
);

  always_comb begin
    g_out = '0;
    for (int i = 0; i < 8; i++)
      if (sel[i]) g_out += g_in[i];
  end

endmodule
