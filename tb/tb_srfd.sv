// tb_srfd: checks the coarse- and fine-mode SRFD end to end.
// BBPD decisions come from a phasor model like the paper's Fig. 1: the edge
// phase theta (degrees) advances by STEP per edge slot; a group-1 decision is
// DN for theta in (-20, 160) and UP otherwise, a group-2 decision DN for
// theta in (20, 200); the group of an edge follows random data bits, and
// half the edges see no transition. A counter-clockwise rotation (STEP > 0)
// must give negative SRFD outputs (UP_F), clockwise positive (DN_F).
// Every dump of both modes is also compared with a slot-by-slot reference
// model of classification, type 2 state estimation, rotation detection and
// integration (coarse: all 16 edges, fine: the 8 phi1 edges).
module tb_srfd;
  import srfd_pkg::*;
  logic clk = 0, rst_n = 1, en = 1, clear_c = 0, clear_f = 0, long_period = 0;
  pd_t pd [N_EDGE];
  logic [N_DATA:0] dat;
  logic dump_c, dump_f;
  updn_t updn_c, updn_f;
  logic signed [28:0] result_c, result_f;
  int checks = 0, failures = 0;

  srfd dut (.clk, .rst_n, .en, .clear_c, .clear_f, .long_period, .pd, .dat,
    .dump_c, .updn_c, .result_c, .dump_f, .updn_f, .result_f);

  always #5 clk = ~clk;

  // ---- reference model, one instance per mode ----
  typedef struct {
    pd_t p; bit pg1; int st; bit v; longint acc; int cnt;
  } mdl_t;
  mdl_t mc, mf;
  longint exp_c[$], exp_f[$];

  function automatic int stpos(pd_t d1, pd_t d2);  // clockwise position S1,S0,S3,S2
    if (d1 == PD_DN) return (d2 == PD_DN) ? 0 : 1;
    return (d2 == PD_UP) ? 2 : 3;
  endfunction

  task automatic slot(inout mdl_t m, input pd_t d, input bit grp1, inout int score);
    int ns; bit nv;
    ns = m.st; nv = m.v;
    if (m.p != PD_NONE && d != PD_NONE && m.pg1 != grp1)
      begin ns = grp1 ? stpos(d, m.p) : stpos(m.p, d); nv = 1; end
    if (m.v && nv) begin
      int df;
      df = (ns - m.st + 4) % 4;
      score += (df == 1) ? 1 : (df == 3) ? -1 : 0;
    end
    m.st = ns; m.v = nv; m.p = d; m.pg1 = grp1;
  endtask

  task automatic clock_model(inout mdl_t m, input bit fine, ref longint q[$]);
    int score = 0;
    for (int j = 0; j < N_EDGE; j++) begin
      if (fine && (j % 2 == 1)) continue;
      slot(m, pd[j], dat[2*j] ^ dat[2*j+1], score);
    end
    m.acc += score;
    m.cnt++;
    if (m.cnt == 128) begin q.push_back(m.acc); m.acc = 0; m.cnt = 0; end
  endtask

  function automatic mdl_t fresh();
    mdl_t m;
    m.p = PD_NONE; m.pg1 = 0; m.st = 0; m.v = 0; m.acc = 0; m.cnt = 0;
    return m;
  endfunction

  // ---- stimulus ----
  real theta = 0.0, step = 3.0;
  task automatic new_inputs();
    dat = {$urandom, $urandom};
    for (int j = 0; j < N_EDGE; j++) begin
      real t1, t2;
      theta = theta + step;
      if (theta >= 360.0) theta = theta - 360.0;
      if (theta < 0.0) theta = theta + 360.0;
      if ($urandom_range(1)) pd[j] = PD_NONE;
      else if (dat[2*j] ^ dat[2*j+1]) begin
        t1 = theta + 20.0; if (t1 >= 360.0) t1 = t1 - 360.0;
        pd[j] = (t1 < 180.0) ? PD_DN : PD_UP;
      end else begin
        t2 = theta - 20.0; if (t2 < 0.0) t2 = t2 + 360.0;
        pd[j] = (t2 < 180.0) ? PD_DN : PD_UP;
      end
    end
  endtask

  int n_pos_c = 0, n_neg_c = 0, n_pos_f = 0, n_neg_f = 0;
  int want;   // +1 / -1 expected sign in this phase of the test, 0 none
  always @(posedge clk) begin
    if (rst_n && !clear_c) begin
      if (dump_c) begin
        longint e; e = exp_c.pop_front();
        checks++;
        if (result_c != e) begin failures++; $display("FAIL: coarse %0d exp %0d", result_c, e); end
        if (want != 0) begin
          checks++;
          if ((want > 0) ? !(updn_c.dn && result_c > 0) : !(updn_c.up && result_c < 0)) begin
            failures++; $display("FAIL: coarse sign %0d want %0d", result_c, want);
          end
        end
        if (result_c > 0) n_pos_c++; else if (result_c < 0) n_neg_c++;
      end
      if (dump_f) begin
        longint e; e = exp_f.pop_front();
        checks++;
        if (result_f != e) begin failures++; $display("FAIL: fine %0d exp %0d", result_f, e); end
        if (want != 0) begin
          checks++;
          if ((want > 0) ? !(updn_f.dn && result_f > 0) : !(updn_f.up && result_f < 0)) begin
            failures++; $display("FAIL: fine sign %0d want %0d", result_f, want);
          end
        end
        if (result_f > 0) n_pos_f++; else if (result_f < 0) n_neg_f++;
      end
      clock_model(mc, 0, exp_c);
      clock_model(mf, 1, exp_f);
    end
  end

  always @(negedge clk) if (rst_n) new_inputs();

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    want = 0;
    for (int j = 0; j < N_EDGE; j++) pd[j] = PD_NONE;
    dat = '0;
    mc = fresh(); mf = fresh();
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(negedge clk); clear_c = 1; clear_f = 1;
    @(negedge clk); clear_c = 0; clear_f = 0;
    mc = fresh(); mf = fresh();
    step = 3.0;                      // counter-clockwise
    repeat (128 * 2) @(negedge clk);
    want = -1;
    repeat (128 * 4) @(negedge clk);
    want = 0; step = -3.0;           // clockwise
    repeat (128 * 2) @(negedge clk);
    want = 1;
    repeat (128 * 4) @(negedge clk);
    want = 0; step = 0.0;            // no rotation: only exact-result checks
    repeat (128 * 3) @(negedge clk);
    checks++;
    if (n_pos_c == 0 || n_neg_c == 0 || n_pos_f == 0 || n_neg_f == 0) begin
      failures++; $display("FAIL: both signs not seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
