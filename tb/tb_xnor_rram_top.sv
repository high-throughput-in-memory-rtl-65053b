// End-to-end testbench of xnor_rram_top at its default (full) size.
//
// 1. Programs a random 64x64 binary weight matrix into the 128x64 array cell
//    by cell: for each cell the configuration word (programming mode, row,
//    BL, SL) is scanned in and one SET or RESET strobe is applied.
// 2. Functional test mode: scans in input vectors with a column select,
//    lets the ADCs sense, scans the 56 captured thermometer bits out and
//    compares them with the ideal code of every addressed column
//    (bitcount = 2*matches - 64, comparator k set when bitcount > -13+4k).
//    References are the divider voltages at the odd bitcounts between the
//    ADC decision levels, for header strengths 4 and 5.
// 3. Power-measurement mode: seeds the LFSR through the scan chain and checks
//    every ADC result each clock against a reference LFSR and column counter,
//    and that a new vector arrives every 8 clocks (64 columns per vector in
//    8 clocks).
// Each mechanism (SET, RESET, scan-mode vector, LFSR update, column counter
// wrap, header-strength change, idle mode) is counted; one that never
// happens counts as a failure.
module tb_xnor_rram_top;
  import xnor_rram_pkg::*;

  localparam int N_SCAN_VEC = 24;   // scan-mode vectors (each read at 8 column selects)
  localparam int N_LFSR_VEC = 64;   // LFSR vectors

  int checks = 0, failures = 0;
  int n_set = 0, n_reset = 0, n_scan_vec = 0, n_lfsr_upd = 0, n_col_wrap = 0, n_pu_change = 0, n_idle = 0;
  longint cycles = 0;

  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_out;
  logic prog_set = 0, prog_reset = 0;
  volt_t [N_ADC-1:0][N_VSA-1:0] vref;
  logic [N_ROWS-1:0] wl_o;
  logic [COL_SHARE-1:0] mux_sel_o;
  logic vec_update_o;

  logic [N_COLS-1:0] w [N_IN];   // testbench copy of the weights, 1 = +1

  xnor_rram_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ideal RBL voltage for twice the bitcount (odd bitcounts are midpoints)
  function automatic int unsigned v_of_bc2(input int b2, input int pu);
    longint gpu, gpd2;
    gpu  = 320000 * (16 - longint'(pu));
    gpd2 = (longint'(b2) + 128) * 166667 / 2 + (128 - longint'(b2)) * 1000 / 2;
    return int'((longint'(1_200_000) * gpu * 2) / (2 * gpu + gpd2));
  endfunction

  task automatic set_vrefs(input int pu);
    for (int k = 0; k < N_ADC; k++)
      for (int j = 0; j < N_VSA; j++)
        vref[k][j] = volt_t'(v_of_bc2(2 * (-13 + 4 * j), pu));
  endtask

  function automatic logic [N_VSA-1:0] ideal_code(input logic [N_IN-1:0] x, input int col);
    int m, b;
    logic [N_VSA-1:0] q;
    m = 0;
    for (int i = 0; i < N_IN; i++) m += (x[i] == w[i][col]) ? 1 : 0;
    b = 2 * m - 64;
    for (int j = 0; j < N_VSA; j++) q[j] = (b > -13 + 4 * j);
    return q;
  endfunction

  function automatic logic [CAP_W-1:0] ideal_capture(input logic [N_IN-1:0] x, input int s);
    logic [CAP_W-1:0] c;
    for (int k = 0; k < N_ADC; k++) c[k*N_VSA +: N_VSA] = ideal_code(x, COL_SHARE * s + k);
    return c;
  endfunction

  function automatic logic [63:0] ref_lfsr(input logic [63:0] v);
    return {v[62:0], ~(v[63] ^ v[62] ^ v[60] ^ v[59])};
  endfunction

  function automatic cfg_t make_cfg(input mode_e mode, input int pu, input int col, input int row, input int bl, input int sl);
    cfg_t c;
    c.mode = mode; c.pu = PU_W'(pu); c.col_sel = 3'(col);
    c.prog_row = 7'(row); c.prog_bl = 6'(bl); c.prog_sl = 6'(sl);
    return c;
  endfunction

  // shift only the configuration segment
  task automatic shift_cfg(input cfg_t c);
    logic [CFG_W-1:0] bits;
    bits = c;
    scan_en = 1;
    for (int i = CFG_W-1; i >= 0; i--) begin scan_in = bits[i]; @(posedge clk); #1; end
    scan_en = 0;
  endtask

  // shift the whole chain: load {vector, cfg}, return what the capture held
  task automatic shift_all(input cfg_t c, input logic [N_IN-1:0] x, output logic [CAP_W-1:0] got);
    logic [CHAIN_W-1:0] word;
    word = {{CAP_W{1'b0}}, x, c};
    scan_en = 1;
    for (int i = CHAIN_W-1; i >= 0; i--) begin
      if (i >= CHAIN_W - CAP_W) got[i - (CHAIN_W - CAP_W)] = scan_out;
      scan_in = word[i];
      @(posedge clk); #1;
    end
    scan_en = 0;
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [CAP_W-1:0] got, exp_cap;
    logic [N_IN-1:0] x, lv;
    int prev_s, prev_pu;
    longint t0;

    set_vrefs(4);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---- idle after reset -------------------------------------------------
    @(posedge clk); #1;
    chk(wl_o == '0 && mux_sel_o == '0, "idle: wordlines and column select off");
    n_idle++;

    // ---- 1. programming ---------------------------------------------------
    for (int i = 0; i < N_IN; i++) w[i] = {$urandom, $urandom};
    for (int r = 0; r < N_ROWS; r++)
      for (int c = 0; c < N_COLS; c++) begin
        bit lrs;
        lrs = r[0] ? w[r/2][c] : !w[r/2][c];
        shift_cfg(make_cfg(MODE_PROG, 4, 0, r, c, c));
        if (r == 5 && c == 9) begin
          logic [N_ROWS-1:0] e;
          e = '0; e[5] = 1'b1;
          chk(wl_o == e && mux_sel_o == '0, "programming: one-hot wordline, read muxes off");
        end
        prog_set = lrs; prog_reset = !lrs;
        @(posedge clk); #1;
        prog_set = 0; prog_reset = 0;
        if (lrs) n_set++; else n_reset++;
      end
    $display("programmed %0d cells (%0d SET, %0d RESET) by cycle %0d", n_set + n_reset, n_set, n_reset, cycles);

    // ---- 2. functional test mode (scan-in vectors, scan-out ADC codes) ----
    // The first shift's scan-out is the stale capture and is ignored.
    prev_s = -1; prev_pu = 4;
    x = '0;
    for (int v = 0; v < N_SCAN_VEC; v++) begin
      int pu;
      pu = (v < N_SCAN_VEC / 2) ? 4 : 5;
      if (pu != prev_pu) begin set_vrefs(pu); n_pu_change++; end
      x = {$urandom, $urandom};
      for (int s = 0; s < COL_SHARE; s++) begin
        shift_all(make_cfg(MODE_XAC_SCAN, pu, s, 0, 0, 0), x, got);
        if (prev_s >= 0) chk(got == exp_cap, $sformatf("scan vector %0d col group %0d: got %h exp %h", v, prev_s, got, exp_cap));
        if (s == 0) begin
          logic [N_ROWS-1:0] e;
          for (int i = 0; i < N_IN; i++) begin e[2*i] = !x[i]; e[2*i+1] = x[i]; end
          chk(wl_o == e, "XAC: differential wordlines");
        end
        chk(mux_sel_o == (8'd1 << s), "XAC: column select");
        // ADCs sense on the next edge, the capture register loads on the one after
        repeat (2) @(posedge clk);
        #1;
        exp_cap = ideal_capture(x, s);
        prev_s = s;
      end
      prev_pu = pu;
      n_scan_vec++;
    end
    // flush the last capture and switch to idle in the same shift
    shift_all(make_cfg(MODE_IDLE, 4, 0, 0, 0, 0), '0, got);
    chk(got == exp_cap, "last scan vector");
    chk(wl_o == '0 && mux_sel_o == '0, "idle after scan test");
    n_idle++;

    // ---- 3. power-measurement mode (LFSR) ---------------------------------
    set_vrefs(4);
    n_pu_change++;
    lv = {$urandom, $urandom};
    shift_all(make_cfg(MODE_XAC_LFSR, 4, 0, 0, 0, 0), lv, got);
    // Before edge n (n = 1, 2, ...) the selection is vector lv_(n-1)/8,
    // column (n-1)%8; the ADC output after that edge reflects it.
    t0 = cycles;
    for (int n = 1; n <= 8 * N_LFSR_VEC; n++) begin
      int col_grp;
      col_grp = (n - 1) % 8;
      @(posedge clk); #1;
      for (int k = 0; k < N_ADC; k++)
        chk(dut.adc_q[k] == ideal_code(lv, COL_SHARE * col_grp + k),
            $sformatf("LFSR cycle %0d ADC %0d", n, k));
      if (col_grp == 7) begin
        lv = ref_lfsr(lv);
        chk(vec_update_o == 1'b1, "vector update after 8 cycles");
        n_lfsr_upd++;
        n_col_wrap++;
      end else begin
        chk(vec_update_o == 1'b0, "no vector update mid-sweep");
      end
    end
    // rate: 64 vectors, each fully sensed (64 columns) in 8 cycles
    chk(cycles - t0 == 8 * N_LFSR_VEC, "8 cycles per vector");
    $display("LFSR mode: %0d vectors in %0d cycles, %0d ADC results",
             n_lfsr_upd, cycles - t0, 8 * N_ADC * (cycles - t0));

    // ---- mechanism coverage ----------------------------------------------
    $display("mechanisms: set=%0d reset=%0d scan_vectors=%0d lfsr_updates=%0d col_wraps=%0d pu_changes=%0d idle=%0d",
             n_set, n_reset, n_scan_vec, n_lfsr_upd, n_col_wrap, n_pu_change, n_idle);
    chk(n_set > 0, "SET exercised");
    chk(n_reset > 0, "RESET exercised");
    chk(n_scan_vec > 0, "scan-mode vectors exercised");
    chk(n_lfsr_upd > 0, "LFSR updates exercised");
    chk(n_col_wrap > 0, "column counter wrap exercised");
    chk(n_pu_change > 0, "header strength change exercised");
    chk(n_idle > 0, "idle mode exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
