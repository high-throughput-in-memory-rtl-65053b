// Input generation: holds the 64-bit binary input vector that drives the
// wordlines, and the 3-bit column index shared by the eight ADC groups.
//
// The vector register is one segment of the scan chain: while scan_en is high
// it shifts one bit per clock from scan_si toward scan_so (MSB first out).
// In MODE_XAC_LFSR a free-running column counter steps through the eight
// columns of every ADC group, one per clock, and the vector register advances
// as a 64-bit linear-feedback shift register each time the counter wraps, so a
// new vector is presented every eight cycles (as the paper describes for its
// power-measurement mode). In every other mode the column index is the
// scan-configured col_sel and the vector holds.
//
// The LFSR polynomial (x^64 + x^63 + x^61 + x^60 + 1, Fibonacci form, XNOR
// feedback so that the all-zero reset value is a legal state) and the reset
// values are this design's choices; the paper does not give them.
//
// Timing: vec and col_idx are registered; vec_update pulses in the cycle
// after the vector has changed in LFSR mode.
module input_gen
  import xnor_rram_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              scan_en,
  input  logic              scan_si,
  output logic              scan_so,
  input  mode_e             mode,
  input  logic [2:0]        col_sel,
  output logic [N_IN-1:0]   vec,
  output logic [2:0]        col_idx,
  output logic              vec_update
);

  logic [2:0] col_cnt;

  function automatic logic [N_IN-1:0] lfsr_next(input logic [N_IN-1:0] v);
    logic fb;
    fb = ~(v[63] ^ v[62] ^ v[60] ^ v[59]);
    return {v[N_IN-2:0], fb};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec        <= '0;
      col_cnt    <= '0;
      vec_update <= 1'b0;
    end else begin
      vec_update <= 1'b0;
      if (scan_en) begin
        vec <= {vec[N_IN-2:0], scan_si};
      end else if (mode == MODE_XAC_LFSR) begin
        col_cnt <= col_cnt + 3'd1;
        if (col_cnt == 3'd7) begin
          vec        <= lfsr_next(vec);
          vec_update <= 1'b1;
        end
      end else begin
        col_cnt <= '0;
      end
    end
  end

  assign scan_so = vec[N_IN-1];
  assign col_idx = (mode == MODE_XAC_LFSR) ? col_cnt : col_sel;

endmodule
