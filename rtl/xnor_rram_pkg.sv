// Shared types and constants of the XNOR-RRAM in-memory computing macro.
//
// The macro holds a 64x64 matrix of binary weights in a 128x64 array of
// one-transistor-one-resistor (1T1R) cells: each weight uses two cells on a
// pair of differential wordlines. A 64-bit binary input vector drives all 128
// wordlines at once, every column forms a resistive divider against a PMOS
// pull-up header, and eight 3-bit flash ADCs (seven comparators each, shared
// by eight columns through 8:1 analog multiplexers) digitise the bitline
// voltages. The array size, ADC count, comparator count, column sharing and
// the 6 kOhm / 1 MOhm cell resistance targets follow the paper; the way
// analog quantities are represented here (integer microvolts and nanosiemens)
// and the layout of the scan configuration word are this design's own.
package xnor_rram_pkg;

  // ---- array organisation (from the paper) --------------------------------
  localparam int unsigned N_IN      = 64;          // binary inputs per vector
  localparam int unsigned N_ROWS    = 2 * N_IN;    // 1T1R rows (differential WLs)
  localparam int unsigned N_COLS    = 64;          // bitlines
  localparam int unsigned N_ADC     = 8;           // flash ADCs
  localparam int unsigned COL_SHARE = N_COLS / N_ADC;  // columns per ADC (8)
  localparam int unsigned N_VSA     = 7;           // comparators per 3-bit flash ADC

  // ---- analog quantities as integers (this design's representation) -------
  // Voltages in microvolts, conductances in nanosiemens.
  localparam int unsigned VOLT_W = 21;             // covers 0 .. 2.097 V
  typedef logic [VOLT_W-1:0] volt_t;
  localparam int unsigned COND_W = 32;
  typedef logic [COND_W-1:0] cond_t;

  localparam int unsigned VDD_UV   = 1_200_000;    // 1.2 V core supply (paper)
  localparam int unsigned G_LRS_NS = 166_667;      // 1 / 6 kOhm   (LRS target, paper)
  localparam int unsigned G_HRS_NS = 1_000;        // 1 / 1 MOhm   (HRS target, paper)
  // Pull-up conductance of one header step; header conductance is
  // G_PU_STEP_NS * (16 - strength code), so code 0 is the strongest.
  localparam int unsigned G_PU_STEP_NS = 320_000;

  localparam int unsigned PU_W = 4;                // PMOS header code PU[0:3] (Fig. 2d)

  // ---- operating modes ------------------------------------------------------
  typedef enum logic [1:0] {
    MODE_IDLE     = 2'd0,  // all wordlines low, multiplexers off
    MODE_PROG     = 2'd1,  // one-hot wordline + BL/SL decoders: cell programming
    MODE_XAC_SCAN = 2'd2,  // XNOR-accumulate, input vector from the scan chain
    MODE_XAC_LFSR = 2'd3   // XNOR-accumulate, input vector from the on-chip LFSR
  } mode_e;

  // ---- configuration word held in the scan chain ---------------------------
  typedef struct packed {
    mode_e           mode;      // [27:26]
    logic [PU_W-1:0] pu;        // [25:22] PMOS header strength code
    logic [2:0]      col_sel;   // [21:19] column of each ADC group (scan mode)
    logic [6:0]      prog_row;  // [18:12] wordline selected for programming
    logic [5:0]      prog_bl;   // [11:6]  bitline selected for programming
    logic [5:0]      prog_sl;   // [5:0]   source line selected for programming
  } cfg_t;

  localparam int unsigned CFG_W  = $bits(cfg_t);         // 28
  localparam int unsigned CAP_W  = N_ADC * N_VSA;         // 56 thermometer bits
  localparam int unsigned CHAIN_W = CFG_W + N_IN + CAP_W; // 148

  // Reference bitcount of comparator k: -13 + 4k  (-13,-9,-5,-1,3,7,11; paper)
  function automatic int ref_bitcount(input int k);
    return -13 + 4 * k;
  endfunction

endpackage
