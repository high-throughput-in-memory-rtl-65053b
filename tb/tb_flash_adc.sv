// Self-checking testbench for flash_adc: references at the voltages of
// bitcounts -13..11 (from the divider formula), bitline voltages of every
// even bitcount, thermometer code compared with the bitcount thresholds.
// A second instance with comparator offsets checks that an offset moves the
// decision point.
module tb_flash_adc;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  volt_t vin;
  volt_t [N_VSA-1:0] vref;
  logic [N_VSA-1:0] q, q_off;

  flash_adc dut (.clk(clk), .vin(vin), .vref(vref), .q(q));
  flash_adc #(.OFFSET_UV('{20000, 0, 0, 0, 0, 0, -20000})) dut_off (.clk(clk), .vin(vin), .vref(vref), .q(q_off));

  always #5 clk = ~clk;

  // bitline voltage for a column whose bitcount is b (b may be odd: midpoint)
  function automatic int unsigned v_of_bc2(input int b2);  // b2 = 2*bitcount
    longint gpu, gpd2;
    gpu  = 320000 * 12;                            // strength code 4
    gpd2 = (longint'(b2) + 128) * 166667 / 2 + (128 - longint'(b2)) * 1000 / 2;  // = 2*Gpd
    return int'((longint'(1_200_000) * gpu * 2) / (2 * gpu + gpd2));
  endfunction

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < N_VSA; k++) vref[k] = volt_t'(v_of_bc2(2 * (-13 + 4 * k)));
    for (int b = -64; b <= 64; b += 2) begin
      logic [N_VSA-1:0] exp_q;
      vin = volt_t'(v_of_bc2(2 * b));
      for (int k = 0; k < N_VSA; k++) exp_q[k] = (b > -13 + 4 * k);
      @(posedge clk); #1;
      checks++;
      if (q !== exp_q) begin
        failures++;
        $display("FAIL b=%0d vin=%0d q=%b exp=%b", b, vin, q, exp_q);
      end
      // offsets: VSA0 sees vin 20 mV higher, VSA6 20 mV lower
      exp_q[0] = (int'(vin) + 20000) < int'(vref[0]);
      exp_q[6] = (int'(vin) - 20000) < int'(vref[6]);
      checks++;
      if (q_off !== exp_q) begin
        failures++;
        $display("FAIL offset b=%0d q=%b exp=%b", b, q_off, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
