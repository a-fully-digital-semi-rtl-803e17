// tb_srfd_cdr_top: end-to-end test of the reference-less CDR digital core.
//
// A behavioural model stands in for everything analog: a 10 Gb/s random NRZ
// stream whose zero crossings move with inter-symbol interference (a
// low-pass channel: after two equal bits the signal starts from further away
// and crosses zero DELTA UI late, after two different bits DELTA UI early), six samplers at phases 0,1,2,4,5,6 of a
// 2.5 GHz clock, a VCO whose frequency is linear in its coarse and fine
// codes, and a phase interpolator that moves the sampling clock earlier by
// 1/128 of a clock period per phase-code step. Sampling positions are kept in
// UI as real numbers; the simulation clock itself is just a tick.
//
// The design runs with every parameter at its default. The test checks:
//   - step 2 (coarse) and step 3 (fine) both move their codes, and acquisition
//     ends after (128 + 512) periods of 128 core clocks;
//   - the VCO ends within FREQ_TOL_PPM of the data rate;
//   - after acquisition the phase loop centres the data samples in their bits;
//   - a VCO drift applied after lock (+800 ppm, then -800 ppm) makes the
//     VCO-track path fire DN_F, then UP_F, and pull the frequency back, while
//     the coarse code stays frozen; the CTLE enable rises;
//   - after a restart the design re-acquires 9.6 and 11.0 Gb/s input.
// Each mechanism is counted; one that never happens is a failure.
`timescale 1ps/1ps
module tb_srfd_cdr_top;
  import srfd_pkg::*;

  // ---------------- model constants ----------------
  localparam real F_MIN_GHZ    = 4.68;                 // coarse 0, fine 128
  localparam real F_COARSE_GHZ = (5.53 - 4.68) / 63.0; // per coarse step
  localparam real F_FINE_GHZ   = 5.0 * F_COARSE_GHZ / 256.0;  // fine range: 5 coarse steps
  localparam real DELTA        = 0.12;                 // ISI crossing shift, UI
  localparam real JIT          = 0.03;                 // peak random jitter, UI
  localparam real FREQ_TOL_PPM = 300.0;
  localparam real DRIFT_PPM    = 800.0;                // applied after lock
  localparam real RATES [2]    = '{9.6, 11.0};         // re-acquisition rates, Gb/s

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
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- NRZ source with ISI ----------------
  bit     bits [4096];
  longint nbits = 0;  // bits generated so far
  function automatic bit b(longint n);
    return bits[n % 4096];
  endfunction
  task automatic gen_upto(longint n);
    while (nbits <= n) begin
      bits[nbits % 4096] = 1'($urandom);
      nbits++;
    end
  endtask
  // Crossing into bit m (from bit m-1) happens at m + shift(m).
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

  // ---------------- VCO / interpolator model ----------------
  real    rate_gbps = 10.0;  // input data rate
  real    drift_ppm = 0.0;
  real    pos = 8.37;      // UI position of the phase-0 clock edge
  real    pi_off = 0.0;    // accumulated interpolator shift, UI
  logic [6:0] pc_prev = '0;
  real    center_err_sum = 0.0;
  int     center_n = 0;
  bit     measure = 0;

  function automatic real f_vco();
    return (F_MIN_GHZ + real'(coarse_code) * F_COARSE_GHZ
            + (real'(fine_code) - 128.0) * F_FINE_GHZ) * (1.0 + drift_ppm * 1e-6);
  endfunction
  function automatic real ppm_err();
    return (f_vco() * 2.0 / rate_gbps - 1.0) * 1e6;
  endfunction
  function automatic real jit();
    return JIT * (real'($urandom_range(2000)) / 1000.0 - 1.0);
  endfunction

  always #200 clk_s = ~clk_s;

  // New samples after every rising edge, ready for the next one.
  always @(negedge clk_s) begin
    real t, x;
    logic signed [6:0] d;
    t = 2.0 * rate_gbps / f_vco();         // clock period in UI
    d = 7'(phase_code - pc_prev);
    pc_prev = phase_code;
    pi_off = pi_off + real'(d) / 128.0 * t;
    pos = pos + t;
    x = pos - pi_off;
    gen_upto(longint'($floor(x + t)) + 4);
    samp.d0 = sample_at(x + 0.0 * t / 8.0 + jit());
    samp.e1 = sample_at(x + 1.0 * t / 8.0 + jit());
    samp.d2 = sample_at(x + 2.0 * t / 8.0 + jit());
    samp.d4 = sample_at(x + 4.0 * t / 8.0 + jit());
    samp.e5 = sample_at(x + 5.0 * t / 8.0 + jit());
    samp.d6 = sample_at(x + 6.0 * t / 8.0 + jit());
    if (measure) begin
      real fr;
      fr = x - $floor(x);                  // data sample phase inside its bit
      center_err_sum = center_err_sum + ((fr > 0.5) ? fr - 0.5 : 0.5 - fr);
      center_n++;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_coarse_moves = 0, n_fine_moves = 0, n_track_up = 0, n_track_dn = 0;
  int n_restart = 0, n_step4 = 0, n_ctle = 0, n_coarse_lock = 0;
  logic [5:0] coarse_q;
  logic [7:0] fine_q;
  longint core_cycles = 0, finish_cycle = -1;
  always @(posedge clk_core) begin
    core_cycles++;
    if (rst_n) begin
      if (coarse_code != coarse_q && step == 3'd2) n_coarse_moves++;
      if (fine_code != fine_q && step == 3'd3) n_fine_moves++;
      if (acq_finish && coarse_code != coarse_q) n_coarse_lock++;
      if (acq_finish && fine_code > fine_q) n_track_up++;
      if (acq_finish && fine_code < fine_q) n_track_dn++;
      if (acq_finish && finish_cycle < 0) begin
        finish_cycle = core_cycles;
        n_step4++;
      end
      if (!acq_finish) finish_cycle = -1;
      if (ctle_en) n_ctle = 1;
    end
    coarse_q <= coarse_code;
    fine_q   <= fine_code;
  end

  // ---------------- watchdog ----------------
  initial begin
    #(64'd400 * 64'd30_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus and checks ----------------
  initial begin
    longint start_cycle;
    real e;
    samp = '0;
    #1 rst_n = 0;
    repeat (40) @(posedge clk_s);
    rst_n = 1;
    start_cycle = core_cycles;
    $display("start: coarse=%0d fine=%0d err=%0.0f ppm", coarse_code, fine_code, ppm_err());
    wait (step == 3'd3);
    $display("after coarse: coarse=%0d err=%0.0f ppm (t=%0d core clk)", coarse_code, ppm_err(), core_cycles - start_cycle);
    wait (acq_finish);
    e = ppm_err();
    $display("after fine: coarse=%0d fine=%0d err=%0.1f ppm (t=%0d core clk)", coarse_code, fine_code, e, core_cycles - start_cycle);
    check((core_cycles - start_cycle) >= (128 + 512) * 128 && (core_cycles - start_cycle) <= (128 + 512) * 128 + 8,
          "acquisition time is (128+512) x 128 core clocks");
    check(e < FREQ_TOL_PPM && e > -FREQ_TOL_PPM, "frequency error after acquisition");
    // let the phase loop settle, then measure the data sampling phase
    repeat (2000) @(posedge clk_core);
    measure = 1;
    repeat (2000) @(posedge clk_core);
    measure = 0;
    $display("lock: mean |data phase - 0.5| = %0.3f UI, integ=%0d", center_err_sum / center_n, integ);
    check(center_err_sum / center_n < 0.15, "data samples centred after phase lock");
    // VCO drift: the track path must bring the frequency back
    drift_ppm = DRIFT_PPM;
    $display("drift applied: err=%0.0f ppm", ppm_err());
    repeat (16 * 31250) @(posedge clk_core);
    e = ppm_err();
    $display("after tracking: fine=%0d err=%0.0f ppm up=%0d dn=%0d integ=%0d ctle=%0d",
             fine_code, e, n_track_up, n_track_dn, integ, ctle_en);
    check(e < 400.0 && e > -400.0, "VCO-track path removed the drift");
    center_err_sum = 0; center_n = 0; measure = 1;
    repeat (2000) @(posedge clk_core);
    check(center_err_sum / center_n < 0.15, "still locked after tracking");
    // opposite drift: the track path must now raise the frequency
    drift_ppm = -DRIFT_PPM;
    $display("drift reversed: err=%0.0f ppm", ppm_err());
    repeat (40 * 31250) @(posedge clk_core);
    e = ppm_err();
    $display("after tracking: fine=%0d err=%0.0f ppm up=%0d dn=%0d", fine_code, e, n_track_up, n_track_dn);
    check(e < 400.0 && e > -400.0, "VCO-track path removed the reversed drift");
    check(n_track_up > 0, "VCO-track path issued UP_F");
    // re-acquire at other data rates inside the VCO range (4.7-5.6 GHz)
    drift_ppm = 0.0;
    foreach (RATES[i]) begin
      rate_gbps = RATES[i];
      @(negedge clk_core) restart = 1;
      @(negedge clk_core) restart = 0;
      n_restart++;
      start_cycle = core_cycles;
      $display("restart at %0.2f Gb/s: err=%0.0f ppm", rate_gbps, ppm_err());
      wait (acq_finish);
      e = ppm_err();
      $display("  acquired: coarse=%0d fine=%0d err=%0.1f ppm", coarse_code, fine_code, e);
      check(e < FREQ_TOL_PPM && e > -FREQ_TOL_PPM, "frequency error after re-acquisition");
      repeat (2000) @(posedge clk_core);
      center_err_sum = 0; center_n = 0; measure = 1;
      repeat (2000) @(posedge clk_core);
      measure = 0;
      check(center_err_sum / center_n < 0.15, "phase lock after re-acquisition");
    end
    // mechanisms
    check(n_coarse_moves > 0, "coarse tuning step moved the coarse code");
    check(n_fine_moves > 0, "fine tuning step moved the fine code");
    check(n_step4 == 1 + n_restart, "acquisition finished after reset and every restart");
    check(n_restart == $size(RATES), "restarts done");
    check(n_track_dn > 0, "VCO-track path issued DN_F");
    check(n_ctle == 1, "CTLE enable raised");
    check(n_coarse_lock == 0, "coarse code frozen after acquisition");
    $display("mechanisms: coarse_moves=%0d fine_moves=%0d track_up=%0d track_dn=%0d finish=%0d ctle=%0d",
             n_coarse_moves, n_fine_moves, n_track_up, n_track_dn, n_step4, n_ctle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
