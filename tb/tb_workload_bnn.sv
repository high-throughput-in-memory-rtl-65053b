// Workload testbench for xnor_rram_top at its default size.
//
// Part A, characterisation run: a random 64x64 binary weight submatrix is
// programmed and 2,000 random 64-bit input vectors are presented in the scan
// (functional test) mode; all 64 ADC outputs of every vector are scanned out,
// giving 128,000 (bitcount, ADC code) pairs collected into a 2-D histogram.
// Every code must equal the ideal flash-ADC code of its bitcount.
//
// Part B, tiled fully connected layer: a 128-input, 128-output binary layer
// is split into 2x2 tiles of 64x64 weights. The single macro is reprogrammed
// for each tile, each 128-bit input is applied as two 64-bit halves, and the
// testbench (standing in for the digital accumulation that follows the
// macros) converts each 3-bit code to the centre of its bin, -15 + 4*code,
// and adds the two partial sums of each output. The sums must equal those
// computed from the ideal codes, and the error against the exact dot product
// is reported.
module tb_workload_bnn;
  import xnor_rram_pkg::*;

  localparam int N_VEC_A  = 2000;
  localparam int N_VEC_B  = 16;
  localparam int FC_IN    = 128;
  localparam int FC_OUT   = 128;

  int checks = 0, failures = 0;
  longint cycles = 0;

  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_out;
  logic prog_set = 0, prog_reset = 0;
  volt_t [N_ADC-1:0][N_VSA-1:0] vref;
  logic [N_ROWS-1:0] wl_o;
  logic [COL_SHARE-1:0] mux_sel_o;
  logic vec_update_o;

  logic [N_COLS-1:0] w [N_IN];      // weights currently programmed, 1 = +1
  int hist [-64:64][0:7];

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

  function automatic int unsigned v_of_bc2(input int b2, input int pu);
    longint gpu, gpd2;
    gpu  = 320000 * (16 - longint'(pu));
    gpd2 = (longint'(b2) + 128) * 166667 / 2 + (128 - longint'(b2)) * 1000 / 2;
    return int'((longint'(1_200_000) * gpu * 2) / (2 * gpu + gpd2));
  endfunction

  function automatic int bitcount(input logic [N_IN-1:0] x, input int col);
    int m;
    m = 0;
    for (int i = 0; i < N_IN; i++) m += (x[i] == w[i][col]) ? 1 : 0;
    return 2 * m - 64;
  endfunction

  function automatic int ideal_level(input int b);
    int n;
    n = 0;
    for (int j = 0; j < N_VSA; j++) n += (b > -13 + 4 * j) ? 1 : 0;
    return n;
  endfunction

  // thermometer code -> number of ones, checking it is a valid thermometer code
  function automatic int therm_level(input logic [N_VSA-1:0] q, output bit valid);
    int n;
    n = 0;
    for (int j = 0; j < N_VSA; j++) n += q[j] ? 1 : 0;
    valid = (q == N_VSA'((1 << n) - 1));
    return n;
  endfunction

  function automatic cfg_t make_cfg(input mode_e mode, input int col, input int row, input int c);
    cfg_t k;
    k.mode = mode; k.pu = 4'd4; k.col_sel = 3'(col);
    k.prog_row = 7'(row); k.prog_bl = 6'(c); k.prog_sl = 6'(c);
    return k;
  endfunction

  task automatic shift_cfg(input cfg_t c);
    logic [CFG_W-1:0] bits;
    bits = c;
    scan_en = 1;
    for (int i = CFG_W-1; i >= 0; i--) begin scan_in = bits[i]; @(posedge clk); #1; end
    scan_en = 0;
  endtask

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

  task automatic program_matrix();
    for (int r = 0; r < N_ROWS; r++)
      for (int c = 0; c < N_COLS; c++) begin
        bit lrs;
        lrs = r[0] ? w[r/2][c] : !w[r/2][c];
        shift_cfg(make_cfg(MODE_PROG, 0, r, c));
        prog_set = lrs; prog_reset = !lrs;
        @(posedge clk); #1;
        prog_set = 0; prog_reset = 0;
      end
  endtask

  // present x, return the 64 ADC levels (0..7)
  task automatic run_vector(input logic [N_IN-1:0] x, output int level [N_COLS]);
    logic [CAP_W-1:0] got;
    for (int s = 0; s <= COL_SHARE; s++) begin
      // the shift for select s unloads the capture made for select s-1
      shift_all(make_cfg(s < COL_SHARE ? MODE_XAC_SCAN : MODE_IDLE, s % COL_SHARE, 0, 0), x, got);
      if (s > 0)
        for (int k = 0; k < N_ADC; k++) begin
          bit valid;
          level[COL_SHARE * (s - 1) + k] = therm_level(got[k*N_VSA +: N_VSA], valid);
          chk(valid, "thermometer code");
        end
      if (s < COL_SHARE) begin
        repeat (2) @(posedge clk);
        #1;
      end
    end
  endtask

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int level [N_COLS];
    int in_range;
    logic [FC_IN-1:0] wfc [FC_OUT];     // FC weights, wfc[o][i]
    logic [FC_IN-1:0] xin [N_VEC_B];
    int acc [N_VEC_B][FC_OUT];
    int acc_ideal [N_VEC_B][FC_OUT];
    int exact, err, max_err;
    longint sum_abs_err;

    for (int k = 0; k < N_ADC; k++)
      for (int j = 0; j < N_VSA; j++)
        vref[k][j] = volt_t'(v_of_bc2(2 * (-13 + 4 * j), 4));
    for (int b = -64; b <= 64; b++) for (int c = 0; c < 8; c++) hist[b][c] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // ---------------- Part A ----------------
    for (int i = 0; i < N_IN; i++) w[i] = {$urandom, $urandom};
    program_matrix();
    in_range = 0;
    for (int v = 0; v < N_VEC_A; v++) begin
      logic [N_IN-1:0] x;
      x = {$urandom, $urandom};
      run_vector(x, level);
      for (int c = 0; c < N_COLS; c++) begin
        int b;
        b = bitcount(x, c);
        hist[b][level[c]]++;
        if (b > -15 && b < 13) in_range++;
        chk(level[c] == ideal_level(b), $sformatf("vector %0d column %0d bitcount %0d level %0d", v, c, b, level[c]));
      end
    end
    $display("Part A: %0d (bitcount, code) pairs, %0d with bitcount inside -14..12, %0d cycles so far",
             N_VEC_A * N_COLS, in_range, cycles);
    for (int b = -20; b <= 20; b += 2) begin
      string line;
      line = $sformatf("  bitcount %3d:", b);
      for (int c = 0; c < 8; c++) line = {line, $sformatf(" %6d", hist[b][c])};
      $display("%s", line);
    end

    // ---------------- Part B ----------------
    for (int o = 0; o < FC_OUT; o++) wfc[o] = {$urandom, $urandom, $urandom, $urandom};
    for (int v = 0; v < N_VEC_B; v++) xin[v] = {$urandom, $urandom, $urandom, $urandom};
    for (int v = 0; v < N_VEC_B; v++)
      for (int o = 0; o < FC_OUT; o++) begin acc[v][o] = 0; acc_ideal[v][o] = 0; end
    for (int ti = 0; ti < FC_IN / N_IN; ti++)        // input tile  (rows)
      for (int to = 0; to < FC_OUT / N_COLS; to++) begin  // output tile (columns)
        for (int i = 0; i < N_IN; i++)
          for (int c = 0; c < N_COLS; c++) w[i][c] = wfc[to * N_COLS + c][ti * N_IN + i];
        program_matrix();
        for (int v = 0; v < N_VEC_B; v++) begin
          logic [N_IN-1:0] x;
          x = xin[v][ti * N_IN +: N_IN];
          run_vector(x, level);
          for (int c = 0; c < N_COLS; c++) begin
            acc[v][to * N_COLS + c]       += -15 + 4 * level[c];
            acc_ideal[v][to * N_COLS + c] += -15 + 4 * ideal_level(bitcount(x, c));
          end
        end
      end
    max_err = 0; sum_abs_err = 0;
    for (int v = 0; v < N_VEC_B; v++)
      for (int o = 0; o < FC_OUT; o++) begin
        chk(acc[v][o] == acc_ideal[v][o], $sformatf("FC output %0d of vector %0d", o, v));
        exact = 0;
        for (int i = 0; i < FC_IN; i++) exact += (xin[v][i] == wfc[o][i]) ? 1 : -1;
        err = acc[v][o] - exact;
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        sum_abs_err += longint'(err);
      end
    $display("Part B: %0dx%0d layer as 4 tiles, %0d outputs, mean |error| vs exact = %0.2f, max = %0d, %0d cycles total",
             FC_IN, FC_OUT, N_VEC_B * FC_OUT, real'(sum_abs_err) / (N_VEC_B * FC_OUT), max_err, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
