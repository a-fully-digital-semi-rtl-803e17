// tb_bbpd: checks the bang-bang phase detector against an independent model.
// Random words; for each edge j the expected decision is NONE when data bits
// 2j and 2j+1 agree, UP when the edge sample equals bit 2j+1, else DN. The
// net vote and the passed-on data (with the previous word's last bit) are
// checked one clock later.
module tb_bbpd;
  import srfd_pkg::*;
  logic clk = 0, rst_n = 1;
  word_t word;
  pd_t   pd [N_EDGE];
  logic [N_DATA:0] dat;
  logic signed [5:0] vote;
  int checks = 0, failures = 0;

  bbpd dut (.clk, .rst_n, .word, .pd, .dat, .vote);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t w;
    logic prev_last;
    word = '0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    prev_last = 1'b0;
    for (int it = 0; it < 500; it++) begin
      int up, dn;
      w = {$urandom, $urandom};
      @(negedge clk) word = w;
      @(posedge clk); #1;
      up = 0; dn = 0;
      for (int j = 0; j < N_EDGE; j++) begin
        pd_t exp;
        bit a, c, e;
        a = w[2*j]; c = w[2*j+1]; e = w[N_DATA + j];
        exp = (a == c) ? PD_NONE : ((e == c) ? PD_UP : PD_DN);
        if (exp == PD_UP) up++;
        if (exp == PD_DN) dn++;
        checks++;
        if (pd[j] != exp) begin
          failures++;
          $display("FAIL: it %0d edge %0d pd=%0d exp=%0d", it, j, pd[j], exp);
        end
      end
      checks++;
      if (vote != 6'(up - dn)) begin failures++; $display("FAIL: vote %0d exp %0d", vote, up - dn); end
      checks++;
      if (dat != {w.data, prev_last}) begin failures++; $display("FAIL: dat"); end
      prev_last = w.data[N_DATA-1];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
