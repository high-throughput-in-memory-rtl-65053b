// Scan / test controller: the configuration register and the ADC capture
// register of the chip's single scan chain.
//
// The chain runs scan_in -> configuration (28 bits, cfg_t) -> cfg_so ...
// input vector (64 bits, held in input_gen) ... vec_so -> capture (56 bits)
// -> scan_out. While scan_en is high every segment shifts one bit per clock,
// most significant bit first out. While scan_en is low the configuration holds
// and, in both XNOR-accumulate modes, the capture register loads the seven
// thermometer bits of each of the eight flash ADCs every clock, so the bits
// scanned out are those sensed just before scanning started.
// Capture bit k*7+j is comparator j of ADC k.
//
// The paper states that input vectors are scanned in and ADC outputs scanned
// out, and that the 56 ADC bits reach the scan block (Fig. 1d); the order of
// the chain, the configuration fields and the capture rule are this design's
// own.
module scan_ctrl
  import xnor_rram_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          scan_en,
  input  logic                          scan_in,
  output logic                          scan_out,
  output cfg_t                          cfg,
  output logic                          cfg_so,   // to the vector segment
  input  logic                          vec_so,   // from the vector segment
  input  logic [N_ADC-1:0][N_VSA-1:0]   adc_q
);

  logic [CAP_W-1:0] cap;

  logic [CFG_W-1:0] cfg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0;
      cap   <= '0;
    end else if (scan_en) begin
      cfg_q <= {cfg_q[CFG_W-2:0], scan_in};
      cap   <= {cap[CAP_W-2:0], vec_so};
    end else if (cfg_q[CFG_W-1] == 1'b1) begin
      // both XAC modes have the mode MSB set
      cap <= adc_q;
    end
  end

  assign cfg      = cfg_t'(cfg_q);
  assign cfg_so   = cfg_q[CFG_W-1];
  assign scan_out = cap[CAP_W-1];

endmodule
