// Self-checking testbench for vsa: the output changes only at the rising
// clock edge and is 1 exactly when vin is below vref.
module tb_vsa;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  volt_t vin, vref;
  logic q, exp_q;

  vsa dut (.clk(clk), .vin(vin), .vref(vref), .q(q));

  always #5 clk = ~clk;

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vin = 500_000; vref = 600_000;
    @(posedge clk); #1;
    for (int t = 0; t < 300; t++) begin
      vin  = volt_t'($urandom_range(200_000, 1_100_000));
      vref = (t % 3 == 0) ? vin + 1 : volt_t'($urandom_range(200_000, 1_100_000));
      exp_q = (vin < vref);
      // before the edge the output still holds the previous decision
      #1;
      @(posedge clk); #1;
      checks++;
      if (q !== exp_q) begin
        failures++;
        $display("FAIL vin=%0d vref=%0d q=%b", vin, vref, q);
      end
      // change inputs mid-cycle: output must not move until the next edge
      vin = ~vin; #2;
      checks++;
      if (q !== exp_q) begin failures++; $display("FAIL output moved between edges"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
