// 64-to-1 column decoder for cell-level programming. Two copies select the
// bitline (BL) and the source line (SL) that the off-chip SET/RESET pulse
// generator reaches through the BL/SL IO pins. One-hot output, all zero when
// en is low. Combinational.
module prog_col_decoder #(
  parameter int unsigned N = 64
) (
  input  logic                 en,
  input  logic [$clog2(N)-1:0] addr,
  output logic [N-1:0]         sel
);

  always_comb begin
    sel = '0;
    if (en) sel[addr] = 1'b1;
  end

endmodule
