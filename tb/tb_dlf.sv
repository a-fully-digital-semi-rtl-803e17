// tb_dlf: checks the second-order loop filter against an integer model.
// While `run` is low both registers must stay zero (reset & hold). With
// random votes the integral register must follow integ += vote * 2**KI_SH
// (saturating) and the phase register phase += vote * 2**KP_SH + integ,
// whose top PI_BITS bits are the rotator code. A long run of positive votes
// checks saturation.
module tb_dlf;
  localparam int KP = 5, KI = 0, FRAC = 10, PB = 7, IW = 16;
  logic clk = 0, rst_n = 1, run = 0;
  logic signed [5:0] vote;
  logic [PB-1:0] phase_code;
  logic signed [IW-1:0] integ;
  int checks = 0, failures = 0;

  dlf dut (.clk, .rst_n, .run, .vote, .phase_code, .integ);

  always #5 clk = ~clk;

  longint m_int = 0, m_ph = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (!run) begin m_int = 0; m_ph = 0; end
      else begin
        m_ph  = (m_ph + (longint'(vote) << KP) + m_int) & ((64'd1 << (PB + FRAC)) - 1);
        m_int = m_int + (longint'(vote) << KI);
        if (m_int > 32767) m_int = 32767;
        if (m_int < -32767) m_int = -32767;
      end
    end
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string tag);
    checks++;
    if (integ != IW'(m_int) || phase_code != PB'(m_ph >> FRAC)) begin
      failures++;
      $display("FAIL: %s integ=%0d exp %0d code=%0d exp %0d", tag, integ, m_int, phase_code, m_ph >> FRAC);
    end
  endtask

  initial begin
    bit sat_seen = 0;
    vote = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    repeat (20) begin
      @(negedge clk) vote = 6'($signed($urandom_range(32)) - 16);
      #1 cmp("hold");
    end
    run = 1;
    repeat (3000) begin
      @(negedge clk) vote = 6'($signed($urandom_range(32)) - 16);
      #1 cmp("random");
    end
    repeat (3000) begin
      @(negedge clk) vote = 6'sd16;
      #1 cmp("saturate");
      if (integ == 16'sd32767) sat_seen = 1;
    end
    checks++;
    if (!sat_seen) begin failures++; $display("FAIL: no saturation"); end
    run = 0;
    @(negedge clk); #1 cmp("hold again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
