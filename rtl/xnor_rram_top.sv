// XNOR-RRAM macro: binary-neural-network XNOR-and-accumulate in a 128x64
// RRAM array with eight 3-bit flash ADCs.
//
// Data path (one vector): the 64-bit input vector (scan-loaded, or from the
// LFSR) -> row_decoder drives all 128 differential wordlines -> every column
// of the rram_array presents a pull-down conductance set by how many of its
// 64 XNOR bitcells match the input -> the column decoder's one-hot select
// picks column 8*s+k for ADC k in each analog_mux8 -> the pmos_header turns
// the conductance into the read bitline voltage -> each flash_adc produces a
// 7-bit thermometer code -> scan_ctrl captures the 56 bits for scan-out.
// Each ADC senses one of its eight columns per clock, so a vector yields all
// 64 column results in eight clocks (1024 binary operations per clock).
// The interleaved column assignment (ADC k on columns k, k+8, ..., k+56) is
// this design's reading of the block diagram; the paper does not spell it out.
//
// Control comes from the scan-loaded configuration word (xnor_rram_pkg::cfg_t):
// mode, PMOS header strength, column select, and row / BL / SL addresses for
// programming. In MODE_PROG the row decoder drives one wordline and the two
// 64:1 decoders select one bitline and source line; prog_set / prog_reset
// stand for the SET / RESET pulses the external pulse generator applies
// through the BL/SL IO pins.
//
// Ports carry what crosses the chip boundary: clock and reset, the scan
// interface, the programming strobes and the 56 ADC reference voltages
// (microvolts, generated off chip). The wordlines and the multiplexer select
// are also brought out, because the high-voltage level shifters that sit on
// them in silicon are not modelled. The on-chip clock generator is not
// modelled either; clk is the clock it would supply.
//
// Timing: with scan_en low, the ADCs sample on the first rising edge after
// the wordlines and the column select change, and the capture register takes
// the result on the second.
module xnor_rram_top
  import xnor_rram_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               scan_en,
  input  logic                               scan_in,
  output logic                               scan_out,
  input  logic                               prog_set,
  input  logic                               prog_reset,
  input  volt_t [N_ADC-1:0][N_VSA-1:0]       vref,
  output logic  [N_ROWS-1:0]                 wl_o,
  output logic  [COL_SHARE-1:0]              mux_sel_o,
  output logic                               vec_update_o
);

  cfg_t                         cfg;
  logic                         cfg_so, vec_so;
  logic [N_IN-1:0]              vec;
  logic [2:0]                   col_idx;
  logic                         vec_update;
  logic [N_ROWS-1:0]            wl;
  logic [COL_SHARE-1:0]         mux_sel;
  logic [N_COLS-1:0]            bl_sel, sl_sel;
  cond_t [N_COLS-1:0]           g_col;
  cond_t [N_ADC-1:0]            g_adc;
  volt_t [N_ADC-1:0]            v_rbl;
  logic  [N_ADC-1:0][N_VSA-1:0] adc_q;
  logic                         xac_mode, prog_mode;

  assign xac_mode  = (cfg.mode == MODE_XAC_SCAN) || (cfg.mode == MODE_XAC_LFSR);
  assign prog_mode = (cfg.mode == MODE_PROG);

  scan_ctrl u_scan (
    .clk      (clk),
    .rst_n    (rst_n),
    .scan_en  (scan_en),
    .scan_in  (scan_in),
    .scan_out (scan_out),
    .cfg      (cfg),
    .cfg_so   (cfg_so),
    .vec_so   (vec_so),
    .adc_q    (adc_q)
  );

  input_gen u_input (
    .clk        (clk),
    .rst_n      (rst_n),
    .scan_en    (scan_en),
    .scan_si    (cfg_so),
    .scan_so    (vec_so),
    .mode       (cfg.mode),
    .col_sel    (cfg.col_sel),
    .vec        (vec),
    .col_idx    (col_idx),
    .vec_update (vec_update)
  );

  row_decoder u_row (
    .mode     (cfg.mode),
    .vec      (vec),
    .prog_row (cfg.prog_row),
    .wl       (wl)
  );

  col_decoder u_col (
    .en  (xac_mode),
    .col (col_idx),
    .sel (mux_sel)
  );

  prog_col_decoder #(.N(N_COLS)) u_bl_dec (
    .en   (prog_mode),
    .addr (cfg.prog_bl),
    .sel  (bl_sel)
  );

  prog_col_decoder #(.N(N_COLS)) u_sl_dec (
    .en   (prog_mode),
    .addr (cfg.prog_sl),
    .sel  (sl_sel)
  );

  rram_array u_array (
    .clk         (clk),
    .wl          (wl),
    .bl_sel      (bl_sel),
    .sl_sel      (sl_sel),
    .set_pulse   (prog_set   && prog_mode && !scan_en),
    .reset_pulse (prog_reset && prog_mode && !scan_en),
    .g_col       (g_col)
  );

  for (genvar k = 0; k < N_ADC; k++) begin : g_adc_slice
    cond_t [COL_SHARE-1:0] g_grp;
    for (genvar s = 0; s < COL_SHARE; s++) begin : g_grp_map
      assign g_grp[s] = g_col[COL_SHARE*s + k];   // ADC k senses columns k, k+8, ...
    end

    analog_mux8 u_mux (
      .g_in  (g_grp),
      .sel   (mux_sel),
      .g_out (g_adc[k])
    );

    pmos_header u_pu (
      .pu    (cfg.pu),
      .g_pd  (g_adc[k]),
      .v_rbl (v_rbl[k])
    );

    flash_adc u_adc (
      .clk  (clk),
      .vin  (v_rbl[k]),
      .vref (vref[k]),
      .q    (adc_q[k])
    );
  end

  // Each ADC senses at most one column at a time; programming reaches one
  // wordline only.
  a_mux_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(mux_sel))
    else $error("column multiplexer select is not one-hot");
  a_prog_one_row: assert property (@(posedge clk) disable iff (!rst_n)
                                   prog_mode |-> $onehot(wl))
    else $error("programming mode with other than one wordline");

  assign wl_o      = wl;
  assign mux_sel_o = mux_sel;
  assign vec_update_o = vec_update;

endmodule
