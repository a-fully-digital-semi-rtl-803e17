// tb_vco_track: checks the VCO-track path at its default 100 us period
// (31250 clocks of 312.5 MHz) and threshold 256.
// An integral value above +256 must give one UP_F pulse per period, below
// -256 one DN_F pulse, in between none; pulses must be exactly 31250 clocks
// apart and never come while the path is disabled.
module tb_vco_track;
  localparam int TC = 31250, TH = 256;
  logic clk = 0, rst_n = 1, en = 0;
  logic signed [15:0] integ;
  srfd_pkg::updn_t updn;
  int checks = 0, failures = 0;

  vco_track dut (.clk, .rst_n, .en, .integ, .updn);

  always #5 clk = ~clk;

  int cyc = 0, last = -1, n_up = 0, n_dn = 0;
  logic signed [15:0] integ_q;   // value the decision was taken on
  always @(posedge clk) begin
    cyc++;
    if (updn.up || updn.dn) begin
      checks++;
      if (updn.up && updn.dn) begin failures++; $display("FAIL: both"); end
      checks++;
      if (updn.up != (integ_q > TH) || updn.dn != (integ_q < -TH)) begin
        failures++; $display("FAIL: wrong direction integ=%0d", integ_q);
      end
      if (last >= 0) begin
        checks++;
        if (cyc - last != TC) begin failures++; $display("FAIL: period %0d", cyc - last); end
      end
      last = cyc;
      n_up += updn.up; n_dn += updn.dn;
    end
    integ_q = integ;
  end

  initial begin
    #(10 * 64'd400000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    integ = 16'sd1000;
    #1 rst_n = 0;
    #20 rst_n = 1;
    repeat (2 * TC) @(negedge clk);
    checks++;
    if (n_up + n_dn != 0) begin failures++; $display("FAIL: pulse while disabled"); end
    en = 1;
    repeat (3 * TC) @(negedge clk);           // 3 UP_F
    integ = -16'sd300;
    repeat (2 * TC) @(negedge clk);           // 2 DN_F
    integ = 16'sd256;
    repeat (2 * TC) @(negedge clk);           // none
    checks++;
    if (n_up != 3 || n_dn != 2) begin failures++; $display("FAIL: counts up=%0d dn=%0d", n_up, n_dn); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
