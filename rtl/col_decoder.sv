// Column decoder of the read path: turns the 3-bit column index into the
// 8-bit one-hot select shared by the eight 8:1 analog column multiplexers
// (the paper's block diagram shows an 8-bit bus from this decoder through
// the level shifter to the multiplexers). With en low every multiplexer is
// off. Combinational.
module col_decoder (
  input  logic       en,
  input  logic [2:0] col,
  output logic [7:0] sel
);

  always_comb begin
    sel = '0;
    if (en) sel[col] = 1'b1;
  end

endmodule
