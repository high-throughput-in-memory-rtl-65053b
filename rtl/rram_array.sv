// Behavioural model of the 128x64 1T1R RRAM array (a process-specific analog
// macro, not synthesizable logic in the real chip).
//
// Each cell is either in the low-resistance state (LRS, 6 kOhm target) or the
// high-resistance state (HRS, 1 MOhm target). Two cells on wordlines 2i and
// 2i+1 of one column form an XNOR-RRAM bitcell holding one binary weight:
// weight +1 is HRS on the even row and LRS on the odd row, weight -1 the
// reverse. With the differential wordlines of an input vector applied, each
// bitcell conducts through exactly one cell, which is in LRS when input and
// weight agree (XNOR = +1).
//
// Read: for every column the model reports the pull-down conductance of all
// cells whose wordline is high (nanosiemens), computed combinationally; the
// paper's pull-up header and divider act on it in pmos_header.
// Programming: on a rising clock edge with set_pulse (reset_pulse) high, every
// cell whose wordline, bitline select and source line select are all high is
// set to LRS (reset to HRS). The pulse shapes, voltages and the write-verify
// loop of the paper are applied off chip and are abstracted to these two
// strobes; resistances are the paper's targets without spread. Like the real
// array, the cells hold no defined state until programmed.
module rram_array
  import xnor_rram_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS,
  parameter int unsigned COLS = N_COLS,
  parameter int unsigned G_LRS = G_LRS_NS,
  parameter int unsigned G_HRS = G_HRS_NS
) (
  input  logic                clk,
  input  logic [ROWS-1:0]     wl,
  input  logic [COLS-1:0]     bl_sel,
  input  logic [COLS-1:0]     sl_sel,
  input  logic                set_pulse,
  input  logic                reset_pulse,
  output cond_t [COLS-1:0]    g_col
);

  logic [ROWS-1:0] lrs_col [COLS];  // lrs_col[c][r] = 1: cell (r, c) in LRS
  logic [COLS-1:0] pick;            // columns whose BL and SL are both selected
  int unsigned     n_on;            // wordlines high

  function automatic int unsigned popcount(input logic [ROWS-1:0] v);
    int unsigned n;
    n = 0;
    for (int i = 0; i < ROWS; i++) n += v[i] ? 1 : 0;
    return n;
  endfunction

  assign pick = bl_sel & sl_sel;

  // A cell is either SET or RESET by one strobe, never both.
  a_one_strobe: assert property (@(posedge clk) !(set_pulse && reset_pulse))
    else $error("SET and RESET strobes asserted together");
  assign n_on = popcount(wl);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic [COLS-1:0] cells;
    always_ff @(posedge clk) begin
      if (wl[r]) begin
        if (set_pulse)        cells <= cells | pick;
        else if (reset_pulse) cells <= cells & ~pick;
      end
    end
    for (genvar c = 0; c < COLS; c++) begin : g_bit
      assign lrs_col[c][r] = cells[c];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_column
    int unsigned n_lrs;
    assign n_lrs    = popcount(wl & lrs_col[c]);
    assign g_col[c] = cond_t'(n_lrs * G_LRS + (n_on - n_lrs) * G_HRS);
  end

endmodule
