// Self-checking testbench for col_decoder: every index, enabled and disabled.
module tb_col_decoder;
  int checks = 0, failures = 0;
  logic en;
  logic [2:0] col;
  logic [7:0] sel;

  col_decoder dut (.en(en), .col(col), .sel(sel));

  initial begin
    #100000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int c = 0; c < 8; c++) begin
        en = e[0]; col = 3'(c); #1;
        checks++;
        if (sel !== ((e != 0) ? (8'd1 << c) : 8'd0)) begin
          failures++;
          $display("FAIL en=%0d col=%0d sel=%b", e, c, sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
