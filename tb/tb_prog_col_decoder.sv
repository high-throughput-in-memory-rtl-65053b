// Self-checking testbench for prog_col_decoder: all 64 addresses, enabled
// and disabled.
module tb_prog_col_decoder;
  int checks = 0, failures = 0;
  logic en;
  logic [5:0] addr;
  logic [63:0] sel;

  prog_col_decoder dut (.en(en), .addr(addr), .sel(sel));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 64; a++) begin
        en = e[0]; addr = 6'(a); #1;
        checks++;
        if (sel !== ((e != 0) ? (64'd1 << a) : 64'd0)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d sel=%h", e, a, sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
