// Self-checking testbench for pmos_header: the divider voltage against a
// floating-point evaluation of VDD*Gpu/(Gpu+Gpd), and the two trends the
// measured transfer curves show (lower voltage for more LRS cells, higher
// voltage for a stronger header).
module tb_pmos_header;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  logic [PU_W-1:0] pu;
  cond_t g_pd;
  volt_t v_rbl, v_prev;

  pmos_header dut (.pu(pu), .g_pd(g_pd), .v_rbl(v_rbl));

  function automatic real ideal(input int code, input int m);
    real gpu, gpd;
    gpu = 320000.0 * (16 - code);
    gpd = m * 166667.0 + (64 - m) * 1000.0;
    return 1.2e6 * gpu / (gpu + gpd);
  endfunction

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int code = 0; code <= 10; code++) begin
      for (int m = 0; m <= 64; m++) begin
        pu = PU_W'(code);
        g_pd = cond_t'(m * 166667 + (64 - m) * 1000);
        #1;
        checks++;
        if ((real'(v_rbl) - ideal(code, m)) > 1.0 || (ideal(code, m) - real'(v_rbl)) > 1.0) begin
          failures++;
          $display("FAIL code=%0d m=%0d v=%0d exp=%f", code, m, v_rbl, ideal(code, m));
        end
        if (m > 0) begin
          checks++;
          if (!(v_rbl < v_prev)) begin
            failures++;
            $display("FAIL not decreasing with bitcount: code=%0d m=%0d", code, m);
          end
        end
        v_prev = v_rbl;
      end
    end
    // stronger header (smaller code) -> higher voltage at bitcount 0
    pu = 4'd4; g_pd = cond_t'(32 * 166667 + 32 * 1000); #1; v_prev = v_rbl;
    pu = 4'd5; #1;
    checks++;
    if (!(v_rbl < v_prev)) begin failures++; $display("FAIL header strength trend"); end
    // nothing connected: the header pulls the node to VDD
    g_pd = '0; #1;
    checks++;
    if (v_rbl !== volt_t'(VDD_UV)) begin failures++; $display("FAIL open node v=%0d", v_rbl); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
