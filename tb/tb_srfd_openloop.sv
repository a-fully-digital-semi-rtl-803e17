// tb_srfd_openloop: open-loop characteristic of the coarse and fine SRFD.
//
// The whole design runs at default parameters, but the behavioural VCO
// ignores the codes: the sampling clock is held at a fixed frequency error
// against a 10 Gb/s NRZ input with ISI (crossing DELTA UI late after two
// equal bits, early after two different ones) and the interpolator is not
// moved. For each error the coarse and fine integrate-and-dump totals are
// summed over NDUMP periods of 128 core clocks, as an open-loop measurement
// with a longer period would. The sign must follow the error (positive total
// for a VCO faster than the data): inside +/-COARSE_RANGE for the coarse
// mode and +/-FINE_RANGE for the fine mode, which sees edges half as often
// and so has about half the range. Errors outside those ranges are printed
// only.
`timescale 1ps/1ps
module tb_srfd_openloop;
  import srfd_pkg::*;

  localparam real DELTA = 0.12, JIT = 0.03;
  localparam int  NDUMP = 48;
  localparam real COARSE_RANGE = 16.0, FINE_RANGE = 11.0;  // percent
  localparam real ERRS [14] = '{-30.0, -20.0, -15.0, -10.0, -5.0, -2.0, -0.5,
                                0.5, 2.0, 5.0, 10.0, 15.0, 20.0, 30.0};

  logic        clk_s = 0, rst_n = 1, restart = 0, long_period = 0;
  samp_t       samp;
  logic        clk_core, ctle_en, acq_finish;
  logic [5:0]  coarse_code;
  logic [7:0]  fine_code;
  logic [6:0]  phase_code;
  logic [2:0]  step;
  logic signed [28:0] res_c, res_f;
  logic signed [15:0] integ;

  srfd_cdr_top dut (
    .clk_s, .rst_n, .samp, .restart, .long_period, .clk_core,
    .coarse_code, .fine_code, .phase_code, .ctle_en, .acq_finish, .step,
    .srfd_result_c(res_c), .srfd_result_f(res_f), .dlf_integ(integ));

  int checks = 0, failures = 0;

  bit     bits [4096];
  longint nbits = 0;
  function automatic bit b(longint n);
    return bits[n % 4096];
  endfunction
  task automatic gen_upto(longint n);
    while (nbits <= n) begin
      bits[nbits % 4096] = 1'($urandom);
      nbits++;
    end
  endtask
  function automatic real xing(longint m);
    return real'(m) + ((b(m-2) == b(m-1)) ? DELTA : -DELTA);
  endfunction
  function automatic bit sample_at(real x);
    longint m;
    m = longint'($floor(x));
    if (x < xing(m))     return b(m-1);
    if (x >= xing(m+1))  return b(m+1);
    return b(m);
  endfunction
  function automatic real jit();
    return JIT * (real'($urandom_range(2000)) / 1000.0 - 1.0);
  endfunction

  real err_pct = 0.0;
  real pos = 3.21;
  always #200 clk_s = ~clk_s;
  always @(negedge clk_s) begin
    real t;
    t = 4.0 / (1.0 + err_pct / 100.0);     // clock period in UI
    pos = pos + t;
    gen_upto(longint'($floor(pos + t)) + 4);
    samp.d0 = sample_at(pos + 0.0 * t / 8.0 + jit());
    samp.e1 = sample_at(pos + 1.0 * t / 8.0 + jit());
    samp.d2 = sample_at(pos + 2.0 * t / 8.0 + jit());
    samp.d4 = sample_at(pos + 4.0 * t / 8.0 + jit());
    samp.e5 = sample_at(pos + 5.0 * t / 8.0 + jit());
    samp.d6 = sample_at(pos + 6.0 * t / 8.0 + jit());
  end

  longint sum_c, sum_f;
  int     nd_c, nd_f;
  always @(posedge clk_core) begin
    if (dut.dump_c) begin sum_c += res_c; nd_c++; end
    if (dut.dump_f) begin sum_f += res_f; nd_f++; end
  end

  initial begin
    #(64'd400 * 64'd8_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    samp = '0;
    #1 rst_n = 0;
    repeat (40) @(posedge clk_s);
    rst_n = 1;
    foreach (ERRS[i]) begin
      err_pct = ERRS[i];
      repeat (300) @(posedge clk_core);        // let the new error settle in
      sum_c = 0; sum_f = 0; nd_c = 0; nd_f = 0;
      wait (nd_c == NDUMP && nd_f >= NDUMP);
      $display("error %6.1f %%: coarse %8d  fine %8d", err_pct, sum_c, sum_f);
      if (err_pct < COARSE_RANGE && err_pct > -COARSE_RANGE) begin
        checks++;
        if ((err_pct > 0) ? (sum_c <= 0) : (sum_c >= 0)) begin
          failures++; $display("FAIL: coarse sign at %0.1f %%", err_pct);
        end
      end
      if (err_pct < FINE_RANGE && err_pct > -FINE_RANGE) begin
        checks++;
        if ((err_pct > 0) ? (sum_f <= 0) : (sum_f >= 0)) begin
          failures++; $display("FAIL: fine sign at %0.1f %%", err_pct);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
