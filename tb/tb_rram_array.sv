// Self-checking testbench for rram_array. Programs a random 64x64 weight
// matrix cell by cell (one wordline, one BL and one SL selected per strobe),
// reads single cells back, then applies random input vectors on all 128
// differential wordlines and compares each column's conductance with
// matches*G_LRS + (64-matches)*G_HRS from the testbench's own copy of the
// weights. Also checks that a strobe with BL and SL on different columns
// programs nothing.
module tb_rram_array;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [N_ROWS-1:0] wl;
  logic [N_COLS-1:0] bl_sel, sl_sel;
  logic set_pulse, reset_pulse;
  cond_t [N_COLS-1:0] g_col;
  logic [N_COLS-1:0] w [N_IN];   // 1 = weight +1

  rram_array dut (.clk(clk), .wl(wl), .bl_sel(bl_sel), .sl_sel(sl_sel),
                  .set_pulse(set_pulse), .reset_pulse(reset_pulse), .g_col(g_col));

  always #5 clk = ~clk;

  task automatic pulse_cell(input int r, input int c, input bit set);
    wl = '0; wl[r] = 1'b1;
    bl_sel = '0; bl_sel[c] = 1'b1;
    sl_sel = '0; sl_sel[c] = 1'b1;
    set_pulse = set; reset_pulse = !set;
    @(posedge clk); #1;
    set_pulse = 0; reset_pulse = 0;
  endtask

  initial begin
    #2000000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    set_pulse = 0; reset_pulse = 0; wl = '0; bl_sel = '0; sl_sel = '0;
    for (int i = 0; i < N_IN; i++) w[i] = {$urandom, $urandom};
    // weight +1: even row HRS, odd row LRS ; weight -1: even LRS, odd HRS
    for (int i = 0; i < N_IN; i++)
      for (int c = 0; c < N_COLS; c++) begin
        pulse_cell(2*i,   c, !w[i][c]);
        pulse_cell(2*i+1, c,  w[i][c]);
      end
    // single-cell read-back
    for (int t = 0; t < 64; t++) begin
      int r, c;
      logic exp_lrs;
      r = $urandom_range(0, N_ROWS-1);
      c = $urandom_range(0, N_COLS-1);
      wl = '0; wl[r] = 1'b1; #1;
      exp_lrs = r[0] ? w[r/2][c] : !w[r/2][c];
      checks++;
      if (g_col[c] !== (exp_lrs ? cond_t'(G_LRS_NS) : cond_t'(G_HRS_NS))) begin
        failures++;
        $display("FAIL cell (%0d,%0d) g=%0d", r, c, g_col[c]);
      end
    end
    // a strobe with mismatched BL/SL must not program anything
    wl = '0; wl[0] = 1'b1; bl_sel = 64'd1; sl_sel = 64'd2;
    set_pulse = w[0][0]; reset_pulse = !w[0][0];   // would flip cell (0,0)
    @(posedge clk); #1;
    set_pulse = 0; reset_pulse = 0; bl_sel = '0; sl_sel = '0;
    #1;
    checks++;
    if (g_col[0] !== (!w[0][0] ? cond_t'(G_LRS_NS) : cond_t'(G_HRS_NS))) begin
      failures++; $display("FAIL mismatched BL/SL programmed a cell");
    end
    // XNOR-accumulate
    for (int t = 0; t < 100; t++) begin
      logic [N_IN-1:0] x;
      x = {$urandom, $urandom};
      for (int i = 0; i < N_IN; i++) begin
        wl[2*i] = !x[i]; wl[2*i+1] = x[i];
      end
      #1;
      for (int c = 0; c < N_COLS; c++) begin
        int m;
        m = 0;
        for (int i = 0; i < N_IN; i++) m += (x[i] == w[i][c]) ? 1 : 0;
        checks++;
        if (g_col[c] !== cond_t'(m * 166667 + (64 - m) * 1000)) begin
          failures++;
          if (failures < 10) $display("FAIL xac col %0d m=%0d g=%0d", c, m, g_col[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
