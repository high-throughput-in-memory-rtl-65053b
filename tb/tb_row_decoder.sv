// Self-checking testbench for row_decoder: differential wordlines in the two
// XAC modes, one-hot wordline in programming mode, all low when idle.
module tb_row_decoder;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  mode_e mode;
  logic [N_IN-1:0] vec;
  logic [6:0] prog_row;
  logic [N_ROWS-1:0] wl, exp_wl;

  row_decoder dut (.mode(mode), .vec(vec), .prog_row(prog_row), .wl(wl));

  task automatic check(input string what);
    checks++;
    if (wl !== exp_wl) begin
      failures++;
      $display("FAIL %s: wl=%h exp=%h", what, wl, exp_wl);
    end
  endtask

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      vec = {$urandom, $urandom};
      prog_row = 7'($urandom);
      mode = (t % 2 != 0) ? MODE_XAC_SCAN : MODE_XAC_LFSR;
      #1;
      for (int i = 0; i < N_IN; i++) begin
        // input +1 (bit 1): WL[2i]=0, WL[2i+1]=1 ; input -1: WL[2i]=1, WL[2i+1]=0
        exp_wl[2*i]   = (vec[i] == 1'b0);
        exp_wl[2*i+1] = (vec[i] == 1'b1);
      end
      check("xac");
      mode = MODE_PROG; #1;
      exp_wl = '0; exp_wl[prog_row] = 1'b1;
      check("prog");
      mode = MODE_IDLE; #1;
      exp_wl = '0;
      check("idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
