// Self-checking testbench for analog_mux8: one-hot selection of each input,
// no selection, and two inputs connected in parallel.
module tb_analog_mux8;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  cond_t [7:0] g_in;
  logic  [7:0] sel;
  cond_t       g_out;

  analog_mux8 dut (.g_in(g_in), .sel(sel), .g_out(g_out));

  task automatic expect_g(input cond_t e);
    checks++;
    if (g_out !== e) begin
      failures++;
      $display("FAIL sel=%b g_out=%0d exp=%0d", sel, g_out, e);
    end
  endtask

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 8; i++) g_in[i] = cond_t'($urandom_range(0, 11_000_000));
      for (int i = 0; i < 8; i++) begin
        sel = 8'd1 << i; #1;
        expect_g(g_in[i]);
      end
      sel = 8'd0; #1;
      expect_g('0);
      sel = 8'b0001_0010; #1;
      expect_g(g_in[1] + g_in[4]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
