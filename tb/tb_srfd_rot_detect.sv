// tb_srfd_rot_detect: checks the rotation detector.
// Directed: the type 2 example states S1, S0, S0, S0, S3, S2 (three
// clockwise steps) give +1, 0, 0, +1, +1 (sum +3); the reverse order -3.
// Random: sums are compared with a model that scores a clockwise step
// (S1->S0->S3->S2->S1) +1, the opposite -1, everything else 0.
module tb_srfd_rot_detect;
  import srfd_pkg::*;
  localparam int N = 16;
  pstate_t state [N];
  logic    valid [N];
  pstate_t prev_state;
  logic    prev_valid;
  logic signed [5:0] sum;
  int checks = 0, failures = 0;

  srfd_rot_detect dut (.state, .valid, .prev_state, .prev_valid, .sum);

  function automatic int pos(pstate_t s);  // clockwise position
    case (s)
      ST_S1: return 0;
      ST_S0: return 1;
      ST_S3: return 2;
      default: return 3;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pstate_t ex [6] = '{ST_S1, ST_S0, ST_S0, ST_S0, ST_S3, ST_S2};
    prev_valid = 0; prev_state = ST_S1;
    for (int k = 0; k < N; k++) begin state[k] = ST_S2; valid[k] = 1; end
    for (int k = 0; k < 6; k++) state[k] = ex[k];
    valid[0] = 1;
    #1;
    checks++;
    if (sum != 6'sd3) begin failures++; $display("FAIL: example sum %0d", sum); end
    for (int k = 0; k < 6; k++) state[k] = ex[5-k];
    for (int k = 6; k < N; k++) state[k] = ST_S1;
    #1;
    checks++;
    if (sum != -6'sd3) begin failures++; $display("FAIL: reverse sum %0d", sum); end
    for (int it = 0; it < 2000; it++) begin
      int e, p, pv;
      prev_state = pstate_t'($urandom_range(3));
      prev_valid = 1'($urandom);
      for (int k = 0; k < N; k++) begin
        state[k] = pstate_t'($urandom_range(3));
        valid[k] = ($urandom_range(7) != 0);
      end
      e = 0; p = pos(prev_state); pv = prev_valid;
      for (int k = 0; k < N; k++) begin
        int d;
        d = (pos(state[k]) - p + 4) % 4;
        if (pv && valid[k]) e += (d == 1) ? 1 : (d == 3) ? -1 : 0;
        p = pos(state[k]); pv = valid[k];
      end
      #1;
      checks++;
      if (sum != 6'(e)) begin failures++; $display("FAIL: it %0d sum %0d exp %0d", it, sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
