// tb_freq_acq_ctrl: checks the acquisition sequence at default sizes.
// The SRFD dumps are imitated by pulses every 128 clocks. Expected:
// step 1 for one clock with VCO init and the coarse clear; step 2
// (coarse/fine select 0) until the 128th coarse dump, ending with the fine
// clear; step 3 (select 1) until the 512th fine dump; step 4 with
// acquisition finish, and the CTLE enable CTLE_DELAY clocks later. The total
// acquisition time must be (128 + 512) x 128 clocks plus the hand-over
// clocks (262 us at 312.5 MHz). A restart must return to step 1.
module tb_freq_acq_ctrl;
  logic clk = 0, rst_n = 1, restart = 0, dump_c = 0, dump_f = 0;
  logic [2:0] step;
  logic vco_init, cf_sel, acq_finish, clear_c, clear_f, ctle_en;
  int checks = 0, failures = 0;

  freq_acq_ctrl dut (.clk, .rst_n, .restart, .dump_c, .dump_f, .step, .vco_init,
    .cf_sel, .acq_finish, .clear_c, .clear_f, .ctle_en);

  always #5 clk = ~clk;

  // dump generators restart their period on the matching clear, like the SRFD
  int pc = 0, pf = 0;
  always @(posedge clk) begin
    dump_c <= 0; dump_f <= 0;
    if (clear_c) pc <= 0;
    else if (pc == 127) begin pc <= 0; dump_c <= 1; end
    else pc <= pc + 1;
    if (clear_f) pf <= 0;
    else if (pf == 127) begin pf <= 0; dump_f <= 1; end
    else pf <= pf + 1;
  end

  int cyc = 0, t1 = -1, t2 = -1, t3 = -1, t4 = -1, tc = -1, n_cd = 0, n_fd = 0;
  int n_init = 0, n_clr_c = 0, n_clr_f = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (step == 1 && t1 < 0) t1 = cyc;
      if (step == 2 && t2 < 0) t2 = cyc;
      if (step == 3 && t3 < 0) t3 = cyc;
      if (step == 4 && t4 < 0) t4 = cyc;
      if (ctle_en && tc < 0) tc = cyc;
      if (step == 2 && dump_c) n_cd++;
      if (step == 3 && dump_f) n_fd++;
      n_init += vco_init; n_clr_c += clear_c; n_clr_f += clear_f;
      checks++;
      if (cf_sel != (step == 3) || acq_finish != (step == 4) || vco_init != (step == 1)) begin
        failures++; $display("FAIL: outputs in step %0d", step);
      end
    end
    cyc++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #(10 * 64'd400000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    #20 rst_n = 1;
    wait (ctle_en);
    @(posedge clk);
    @(negedge clk);
    $display("steps at %0d %0d %0d %0d, ctle at %0d", t1, t2, t3, t4, tc);
    chk(t2 - t1 == 1, "step 1 lasts one clock");
    chk(n_cd == 128, "128 coarse results used");
    chk(n_fd == 512, "512 fine results used");
    chk(t3 - t2 == 128 * 128 + 1, "step 2 time 2^7 periods");
    chk(t4 - t3 == 512 * 128 + 1, "step 3 time 2^9 periods");
    chk(tc - t4 == 31250 + 1, "CTLE enable after CTLE_DELAY");
    chk(n_init == 1 && n_clr_c == 1 && n_clr_f == 1, "one init and one clear per detector");
    // restart
    @(negedge clk) restart = 1;
    @(negedge clk) restart = 0;
    #1;
    chk(step == 1 && !ctle_en && !acq_finish, "restart returns to step 1");
    repeat (3) @(negedge clk);
    chk(step == 2, "restart proceeds to step 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
