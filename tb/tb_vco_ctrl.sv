// tb_vco_ctrl: checks the VCO code registers.
// After reset and after `init` the codes must be 6'b100000 and 8'b10000000.
// Random UP_F/DN_F pulses with random `tune`/`sel_fine` are compared with a
// saturating counter model; long runs drive both codes into both ends.
module tb_vco_ctrl;
  logic clk = 0, rst_n = 1, init = 0, tune = 0, sel_fine = 0;
  srfd_pkg::updn_t updn;
  logic [5:0] coarse;
  logic [7:0] fine;
  int checks = 0, failures = 0;

  vco_ctrl dut (.clk, .rst_n, .init, .tune, .sel_fine, .updn, .coarse, .fine);

  always #5 clk = ~clk;

  int mc = 32, mf = 128;
  task automatic step_model();
    if (init) begin mc = 32; mf = 128; end
    else if (tune && (updn.up ^ updn.dn)) begin
      if (!sel_fine) mc = updn.up ? ((mc < 63) ? mc + 1 : mc) : ((mc > 0) ? mc - 1 : mc);
      else           mf = updn.up ? ((mf < 255) ? mf + 1 : mf) : ((mf > 0) ? mf - 1 : mf);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit c0 = 0, c63 = 0, f0 = 0, f255 = 0;
    updn = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    checks++;
    if (coarse != 6'b100000 || fine != 8'b10000000) begin failures++; $display("FAIL: reset codes"); end
    for (int it = 0; it < 4000; it++) begin
      int phase;
      phase = it / 500;
      @(negedge clk);
      init     = ($urandom_range(300) == 0);
      tune     = ($urandom_range(9) != 0);
      sel_fine = phase[0];
      // bias the direction in alternate blocks so the ends are reached
      updn.up  = ($urandom_range(9) < (phase[1] ? 8 : 2));
      updn.dn  = ($urandom_range(9) < (phase[1] ? 2 : 8));
      @(posedge clk);
      step_model();
      #1;
      checks++;
      if (coarse != 6'(mc) || fine != 8'(mf)) begin
        failures++; $display("FAIL: it %0d coarse=%0d exp %0d fine=%0d exp %0d", it, coarse, mc, fine, mf);
      end
      c0 |= (coarse == 0); c63 |= (coarse == 63); f0 |= (fine == 0); f255 |= (fine == 255);
    end
    @(negedge clk) init = 1;
    @(negedge clk) init = 0;
    checks++;
    if (coarse != 6'b100000 || fine != 8'b10000000) begin failures++; $display("FAIL: init codes"); end
    checks++;
    if (!(c0 && c63 && f0 && f255)) begin failures++; $display("FAIL: ends not reached %0d%0d%0d%0d", c0, c63, f0, f255); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
