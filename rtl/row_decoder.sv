// Row (wordline) decoder. It turns the 64-bit input vector into the 128
// differential wordlines of the array, or selects a single wordline for
// programming one cell.
//
// MODE_XAC_SCAN / MODE_XAC_LFSR: all 64 wordline pairs are driven at once.
//   An input bit of 1 stands for activation +1 and raises the odd wordline
//   WL[2i+1]; a 0 stands for -1 and raises the even wordline WL[2i]
//   (the "+1 input" = WL[0]:0, WL[1]:1 and "-1 input" = WL[126]:1, WL[127]:0
//   labels of the paper's bitcell figure). The paper calls this adding 64
//   complementary bits.
// MODE_PROG: one-hot wordline prog_row, for cell-level programming.
// MODE_IDLE: all wordlines low.
// Purely combinational; the high-voltage level shifters that follow it on
// the chip are analog and not modelled.
module row_decoder
  import xnor_rram_pkg::*;
(
  input  mode_e              mode,
  input  logic [N_IN-1:0]    vec,
  input  logic [6:0]         prog_row,
  output logic [N_ROWS-1:0]  wl
);

  always_comb begin
    wl = '0;
    unique case (mode)
      MODE_XAC_SCAN, MODE_XAC_LFSR: begin
        for (int i = 0; i < N_IN; i++) begin
          wl[2*i]   = ~vec[i];
          wl[2*i+1] =  vec[i];
        end
      end
      MODE_PROG: wl[prog_row] = 1'b1;
      default:   wl = '0;
    endcase
  end

endmodule
