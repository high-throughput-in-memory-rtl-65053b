// Self-checking testbench for scan_ctrl: configuration shift-in, capture of
// the 56 ADC bits in the XAC modes only, and capture shift-out in the order
// the chain defines (vector segment looped back through a 64-bit shift
// register model in the testbench).
module tb_scan_ctrl;
  import xnor_rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_out;
  cfg_t cfg;
  logic cfg_so, vec_so;
  logic [N_ADC-1:0][N_VSA-1:0] adc_q;
  logic [CAP_W-1:0] cap;
  logic [N_IN-1:0] vseg;   // stand-in for the vector segment of the chain

  scan_ctrl dut (.clk(clk), .rst_n(rst_n), .scan_en(scan_en), .scan_in(scan_in), .scan_out(scan_out),
                 .cfg(cfg), .cfg_so(cfg_so), .vec_so(vec_so), .adc_q(adc_q));
  assign cap = dut.cap;

  always #5 clk = ~clk;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)       vseg <= '0;
    else if (scan_en) vseg <= {vseg[N_IN-2:0], cfg_so};
  assign vec_so = vseg[N_IN-1];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_cfg(input cfg_t c);
    logic [CFG_W-1:0] bits;
    bits = c;
    scan_en = 1;
    for (int i = CFG_W-1; i >= 0; i--) begin scan_in = bits[i]; @(posedge clk); #1; end
    scan_en = 0;
  endtask

  initial begin
    #500000 failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_t c;
    logic [CAP_W-1:0] got, data;
    adc_q = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    chk(cfg.mode == MODE_IDLE && cap == '0, "reset");
    for (int t = 0; t < 20; t++) begin
      c = cfg_t'({$urandom, $urandom});
      c.mode = mode_e'(t % 4);
      load_cfg(c);
      chk(cfg == c, "configuration loaded");
      data = CAP_W'({$urandom, $urandom});
      adc_q = data;
      @(posedge clk); #1;
      if (c.mode == MODE_XAC_SCAN || c.mode == MODE_XAC_LFSR)
        chk(cap == data, "capture in XAC mode");
      else
        chk(cap != data, "no capture outside XAC modes");
      // configuration holds while not scanning
      chk(cfg == c, "configuration holds");
      if (c.mode == MODE_XAC_SCAN || c.mode == MODE_XAC_LFSR) begin
        adc_q = ~data;   // must not disturb the shift
        scan_en = 1;
        for (int i = CAP_W-1; i >= 0; i--) begin got[i] = scan_out; @(posedge clk); #1; end
        scan_en = 0;
        chk(got == data, "capture shifted out MSB first");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
