// Self-checking testbench for input_gen: scan shifting (a vector in, the
// previous one out), the LFSR sequence and its eight-cycle update period in
// MODE_XAC_LFSR, the column counter, and the configured column in the other
// modes.
module tb_input_gen;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_si = 0, scan_so;
  mode_e mode = MODE_IDLE;
  logic [2:0] col_sel = 3'd5;
  logic [N_IN-1:0] vec, v_ref, shifted_out;
  logic [2:0] col_idx;
  logic vec_update;
  int updates = 0;

  input_gen dut (.clk(clk), .rst_n(rst_n), .scan_en(scan_en), .scan_si(scan_si), .scan_so(scan_so),
                 .mode(mode), .col_sel(col_sel), .vec(vec), .col_idx(col_idx), .vec_update(vec_update));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference LFSR: taps 64, 63, 61, 60, XNOR feedback, shift toward MSB
  function automatic logic [63:0] ref_next(input logic [63:0] v);
    return {v[62:0], ~(v[63] ^ v[62] ^ v[60] ^ v[59])};
  endfunction

  initial begin
    #200000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] a, b;
    a = {$urandom, $urandom};
    b = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(vec == '0, "reset value");
    // shift a in, MSB first
    scan_en = 1;
    for (int i = 63; i >= 0; i--) begin scan_si = a[i]; @(posedge clk); #1; end
    chk(vec == a, "scan load");
    // shift b in while a comes out MSB first
    for (int i = 63; i >= 0; i--) begin
      shifted_out[i] = scan_so; scan_si = b[i]; @(posedge clk); #1;
    end
    chk(shifted_out == a, "scan unload");
    chk(vec == b, "scan reload");
    scan_en = 0;
    // scan mode: column follows configuration, vector holds
    mode = MODE_XAC_SCAN;
    repeat (10) @(posedge clk); #1;
    chk(col_idx == 3'd5 && vec == b, "scan mode holds");
    // LFSR mode
    mode = MODE_XAC_LFSR; #1;
    v_ref = b;
    for (int cyc = 0; cyc < 8 * 40; cyc++) begin
      chk(col_idx == 3'(cyc % 8), $sformatf("column counter at %0d: %0d", cyc, col_idx));
      chk(vec == v_ref, $sformatf("vector at cycle %0d", cyc));
      @(posedge clk); #1;
      if (cyc % 8 == 7) begin
        v_ref = ref_next(v_ref);
        chk(vec_update == 1'b1, "update pulse");
        updates++;
      end else begin
        chk(vec_update == 1'b0, "no update pulse");
      end
    end
    chk(updates == 40, "40 updates in 320 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
