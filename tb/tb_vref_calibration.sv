// Reference-voltage calibration of the eight flash ADCs, run on the read
// path (rram_array -> analog_mux8 -> pmos_header -> flash_adc) with a fixed
// input offset on every comparator.
//
// The procedure is the exponentially decaying search the references are
// tuned with: each reference starts at 0.6 V; at iteration n a random column
// of the ADC and a random input vector whose bitcount on that column is the
// reference bitcount +1 or -1 are applied, and the reference moves by
// alpha*beta^n*(Qi - Qa) (alpha = 5 mV, beta = 0.995, 1,000 iterations), Qi
// being the ideal and Qa the sensed comparator output. The testbench then
// checks that every calibrated comparator separates the two neighbouring
// bitcounts on all its columns, and reports how many of those decisions a
// single uncalibrated set of ideal references gets wrong for comparison.
module tb_vref_calibration;
  import xnor_rram_pkg::*;

  localparam int    N_ITER = 1000;
  localparam real   ALPHA  = 5000.0;   // microvolts
  localparam real   BETA   = 0.995;

  // comparator offset of ADC k, VSA j: -30 mV .. +30 mV, fixed pattern
  function automatic int offset_uv(input int k, input int j);
    return (((k * 7 + j) * 37) % 61 - 30) * 1000;
  endfunction

  int checks = 0, failures = 0;
  logic clk = 0;
  logic [N_ROWS-1:0] wl = '0;
  logic [N_COLS-1:0] bl_sel = '0, sl_sel = '0;
  logic set_pulse = 0, reset_pulse = 0;
  cond_t [N_COLS-1:0] g_col;
  logic [7:0] sel;
  volt_t [N_ADC-1:0][N_VSA-1:0] vref;
  logic  [N_ADC-1:0][N_VSA-1:0] q;
  logic [N_COLS-1:0] w [N_IN];

  rram_array u_array (.clk(clk), .wl(wl), .bl_sel(bl_sel), .sl_sel(sl_sel),
                      .set_pulse(set_pulse), .reset_pulse(reset_pulse), .g_col(g_col));

  for (genvar k = 0; k < N_ADC; k++) begin : g_adc
    cond_t [7:0] g_grp;
    cond_t g_node;
    volt_t v_rbl;
    for (genvar s = 0; s < 8; s++) begin : g_map
      assign g_grp[s] = g_col[8 * s + k];
    end
    analog_mux8 u_mux (.g_in(g_grp), .sel(sel), .g_out(g_node));
    pmos_header u_pu (.pu(4'd4), .g_pd(g_node), .v_rbl(v_rbl));
    flash_adc #(.OFFSET_UV('{offset_uv(k, 0), offset_uv(k, 1), offset_uv(k, 2), offset_uv(k, 3),
                             offset_uv(k, 4), offset_uv(k, 5), offset_uv(k, 6)}))
      u_adc (.clk(clk), .vin(v_rbl), .vref(vref[k]), .q(q[k]));
  end

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // input vector whose bitcount on column col is exactly b (b even)
  function automatic logic [N_IN-1:0] vector_for(input int col, input int b);
    int idx [N_IN];
    int m;
    logic [N_IN-1:0] x;
    for (int i = 0; i < N_IN; i++) idx[i] = i;
    for (int i = N_IN - 1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(0, i);
      t = idx[i]; idx[i] = idx[j]; idx[j] = t;
    end
    m = (b + 64) / 2;
    for (int i = 0; i < N_IN; i++) x[idx[i]] = (i < m) ? w[idx[i]][col] : !w[idx[i]][col];
    return x;
  endfunction

  int errs_unified, errs_cal;
  real vr [N_ADC][N_VSA];
  logic exp_q;

  task automatic apply(input logic [N_IN-1:0] x, input int s);
    for (int i = 0; i < N_IN; i++) begin wl[2*i] = !x[i]; wl[2*i+1] = x[i]; end
    sel = 8'd1 << s;
    @(posedge clk); #1;
  endtask

  function automatic int unsigned v_of_bc2(input int b2);
    longint gpu, gpd2;
    gpu  = 320000 * 12;
    gpd2 = (longint'(b2) + 128) * 166667 / 2 + (128 - longint'(b2)) * 1000 / 2;
    return int'((longint'(1_200_000) * gpu * 2) / (2 * gpu + gpd2));
  endfunction


  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // program random weights cell by cell
    for (int i = 0; i < N_IN; i++) w[i] = {$urandom, $urandom};
    for (int r = 0; r < N_ROWS; r++) begin
      wl = '0; wl[r] = 1'b1;
      for (int c = 0; c < N_COLS; c++) begin
        bl_sel = '0; bl_sel[c] = 1'b1; sl_sel = bl_sel;
        set_pulse = r[0] ? w[r/2][c] : !w[r/2][c];
        reset_pulse = !set_pulse;
        @(posedge clk); #1;
      end
    end
    set_pulse = 0; reset_pulse = 0; bl_sel = '0; sl_sel = '0;

    // one unified set of ideal references (no offset compensation)
    for (int k = 0; k < N_ADC; k++)
      for (int j = 0; j < N_VSA; j++) vref[k][j] = volt_t'(v_of_bc2(2 * (-13 + 4 * j)));
    // decisions at each reference bitcount +-1, all comparators
    errs_unified = 0;
    for (int t = 0; t < 8 * N_VSA * 2 * N_ADC; t++) begin
      int s, j, d, k;
      k = t % N_ADC;
      d = ((t / N_ADC) % 2 == 1) ? 1 : -1;
      j = (t / (2 * N_ADC)) % N_VSA;
      s = t / (2 * N_ADC * N_VSA);
      apply(vector_for(8 * s + k, -13 + 4 * j + d), s);
      exp_q = (d > 0) ? 1'b1 : 1'b0;
      if (q[k][j] !== exp_q) errs_unified = errs_unified + 1;
    end
    $display("decisions at reference bitcount +-1 that are wrong with one unified reference set: %0d of %0d",
             errs_unified, 2 * 8 * N_VSA * N_ADC);
    chk(errs_unified > 0, "comparator offsets disturb an uncalibrated reference set");

    // calibration, all 56 comparators in parallel, as the iterations are independent
    for (int k = 0; k < N_ADC; k++)
      for (int j = 0; j < N_VSA; j++) vr[k][j] = 600_000.0;
    for (int j = 0; j < N_VSA; j++) begin
      for (int n = 0; n < N_ITER; n++) begin
        int s, d;
        logic qi;
        s = $urandom_range(0, 7);
        d = ($urandom_range(0, 1) == 1) ? 1 : -1;
        for (int k = 0; k < N_ADC; k++) vref[k][j] = volt_t'(int'(vr[k][j]));
        // one vector per ADC would need eight wordline patterns; use the
        // column of ADC 0's group and a fresh vector for each ADC in turn
        for (int k = 0; k < N_ADC; k++) begin
          apply(vector_for(8 * s + k, -13 + 4 * j + d), s);
          qi = (d > 0);
          vr[k][j] += ALPHA * (BETA ** n) * (real'(qi) - real'(q[k][j]));
          vref[k][j] = volt_t'(int'(vr[k][j]));
        end
      end
    end
    errs_cal = 0;
    for (int t = 0; t < 8 * N_VSA * 2 * N_ADC; t++) begin
      int s, j, d, k;
      k = t % N_ADC;
      d = ((t / N_ADC) % 2 == 1) ? 1 : -1;
      j = (t / (2 * N_ADC)) % N_VSA;
      s = t / (2 * N_ADC * N_VSA);
      apply(vector_for(8 * s + k, -13 + 4 * j + d), s);
      exp_q = (d > 0) ? 1'b1 : 1'b0;
      if (q[k][j] !== exp_q) errs_cal = errs_cal + 1;
    end

    for (int k = 0; k < N_ADC; k++) begin
      string line;
      line = $sformatf("  ADC[%0d] Vref (V):", k);
      for (int j = 0; j < N_VSA; j++) line = {line, $sformatf(" %0.4f", real'(vref[k][j]) / 1.0e6)};
      $display("%s", line);
    end
    $display("decisions at reference bitcount +-1 that are wrong after calibration: %0d of %0d",
             errs_cal, 2 * 8 * N_VSA * N_ADC);
    chk(errs_cal == 0, "calibrated references separate every pair of neighbouring bitcounts");
    // each calibrated reference lies between the two neighbouring bitline voltages, shifted by the offset
    for (int k = 0; k < N_ADC; k++)
      for (int j = 0; j < N_VSA; j++) begin
        int lo, hi;
        lo = int'(v_of_bc2(2 * (-13 + 4 * j + 1))) + offset_uv(k, j);
        hi = int'(v_of_bc2(2 * (-13 + 4 * j - 1))) + offset_uv(k, j);
        chk(int'(vref[k][j]) > lo && int'(vref[k][j]) <= hi,
            $sformatf("ADC %0d VSA %0d Vref %0d outside (%0d, %0d]", k, j, vref[k][j], lo, hi));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
