// tb_integrate_dump: checks the integrate-and-dump filter.
// Default period (2**7 = 128 clocks, 410 ns at 312.5 MHz): random inputs
// biased up or down; every dump must come exactly 128 clocks after the
// previous one, carry the period's sum and the matching UP_F/DN_F sign.
// The long period is checked with LONG_LOG2 reduced to 10 to stay short.
module tb_integrate_dump;
  localparam int LL = 10;
  logic clk = 0, rst_n = 1, en = 1, clear = 0, long_period = 0;
  logic signed [5:0] in;
  logic dump;
  srfd_pkg::updn_t updn;
  logic signed [LL+6:0] result;
  int checks = 0, failures = 0;

  integrate_dump #(.IN_W(6), .LONG_LOG2(LL)) dut (.clk, .rst_n, .en, .clear, .long_period, .in,
    .dump, .updn, .result);

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint acc = 0, expect_sum[$];
  int cyc = 0, last_dump = -1, period = 128, n_up = 0, n_dn = 0, bias = 0, mcnt = 0;

  // stimulus: a fresh random input every clock, mean `bias`
  always @(negedge clk) in <= 6'($signed($urandom_range(32)) - 16 + bias);

  // reference model and checker
  always @(posedge clk) begin
    if (rst_n && !clear) begin
      if (dump) begin
        longint e;
        e = expect_sum.pop_front();
        checks++;
        if (result != e) begin failures++; $display("FAIL: result %0d exp %0d", result, e); end
        checks++;
        if (updn.up != (e < 0) || updn.dn != (e > 0)) begin failures++; $display("FAIL: sign"); end
        if (last_dump >= 0) begin
          checks++;
          if (cyc - last_dump != period) begin failures++; $display("FAIL: period %0d", cyc - last_dump); end
        end
        last_dump = cyc;
        n_up += updn.up; n_dn += updn.dn;
      end
      acc += in;
      mcnt++;
      if (mcnt == period) begin
        expect_sum.push_back(acc);
        acc = 0; mcnt = 0;
      end
    end else begin
      acc = 0; mcnt = 0; last_dump = -1;
    end
    cyc++;
  end

  initial begin
    bias = 3;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    repeat (6 * 128) @(negedge clk);
    bias = -3;
    repeat (6 * 128) @(negedge clk);
    @(negedge clk) begin clear = 1; long_period = 1; period = 1 << LL; end
    expect_sum.delete();
    @(negedge clk) clear = 0;
    bias = 1;
    repeat (3 << LL) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (n_up == 0 || n_dn == 0) begin failures++; $display("FAIL: no UP_F or no DN_F"); end
    checks++;
    if (last_dump < 0) begin failures++; $display("FAIL: no long-period dump"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
