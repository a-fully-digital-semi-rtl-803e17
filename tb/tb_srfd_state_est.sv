// tb_srfd_state_est: checks type 2 phase-state estimation.
// First the example sequence of the paper's type 2 illustration is played
// one slot per clock (N_SLOTS = 16, other slots empty is avoided by putting
// the sequence in slots 0..6 of one clock):
//   DN2, DN1, UP2, -, UP2, UP1, DN2  ->  -, S1, S0, S0, S0, S3, S2
// Then random slot streams are compared with a slot-by-slot model that
// carries the previous slot and the previous state across clocks.
module tb_srfd_state_est;
  import srfd_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 1, en = 1, clear = 0;
  pd_t g1 [N];
  pd_t g2 [N];
  pstate_t state [N];
  logic    valid [N];
  pstate_t prev_state;
  logic    prev_valid;
  int checks = 0, failures = 0;

  srfd_state_est dut (.clk, .rst_n, .en, .clear, .g1, .g2,
    .state, .valid, .prev_state, .prev_valid);

  always #5 clk = ~clk;

  // model state
  pd_t     m_pd;
  bit      m_g1;
  pstate_t m_st;
  bit      m_v;

  function automatic pstate_t ref_map(pd_t d1, pd_t d2);
    if (d1 == PD_DN && d2 == PD_DN) return ST_S1;
    if (d1 == PD_DN && d2 == PD_UP) return ST_S0;
    if (d1 == PD_UP && d2 == PD_UP) return ST_S3;
    return ST_S2;
  endfunction

  task automatic model_slot(pd_t a1, pd_t a2, output pstate_t s, output bit v);
    pd_t c; bit cg1;
    cg1 = (a1 != PD_NONE);
    c   = cg1 ? a1 : a2;
    if (m_pd != PD_NONE && c != PD_NONE && m_g1 != cg1) begin
      m_st = cg1 ? ref_map(c, m_pd) : ref_map(m_pd, c);
      m_v  = 1;
    end
    m_pd = c; m_g1 = cg1;
    s = m_st; v = m_v;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pstate_t exp_s [7] = '{ST_S1, ST_S1, ST_S0, ST_S0, ST_S0, ST_S3, ST_S2};
    bit      exp_v [7] = '{0, 1, 1, 1, 1, 1, 1};
    pd_t     s1 [7] = '{PD_NONE, PD_DN, PD_NONE, PD_NONE, PD_NONE, PD_UP, PD_NONE};
    pd_t     s2 [7] = '{PD_DN, PD_NONE, PD_UP, PD_NONE, PD_UP, PD_NONE, PD_DN};
    for (int k = 0; k < N; k++) begin g1[k] = PD_NONE; g2[k] = PD_NONE; end
    #1 rst_n = 0;
    #20 rst_n = 1;
    // directed example (slots 7..15 stay empty)
    @(negedge clk);
    for (int k = 0; k < 7; k++) begin g1[k] = s1[k]; g2[k] = s2[k]; end
    #1;
    for (int k = 0; k < 7; k++) begin
      checks++;
      if (valid[k] != exp_v[k] || (exp_v[k] && state[k] != exp_s[k])) begin
        failures++;
        $display("FAIL: example slot %0d state=%0d valid=%0d", k, state[k], valid[k]);
      end
    end
    // with type 2 copying, the empty slots keep S2
    checks++;
    if (!valid[N-1] || state[N-1] != ST_S2) begin failures++; $display("FAIL: copy to end"); end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    m_pd = PD_NONE; m_g1 = 0; m_st = ST_S1; m_v = 0;
    // random streams
    for (int it = 0; it < 400; it++) begin
      pstate_t es [N];
      bit      ev [N];
      for (int k = 0; k < N; k++) begin
        int r;
        r = $urandom_range(4);
        g1[k] = (r == 1) ? PD_UP : (r == 2) ? PD_DN : PD_NONE;
        g2[k] = (r == 3) ? PD_UP : (r == 4) ? PD_DN : PD_NONE;
        model_slot(g1[k], g2[k], es[k], ev[k]);
      end
      #1;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (valid[k] != ev[k] || (ev[k] && state[k] != es[k])) begin
          failures++;
          $display("FAIL: it %0d slot %0d", it, k);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
