// tb_retimer_demux: checks the retimer and 6:48 demux.
// Random sampler outputs are driven every sampler clock and kept in a
// history. Each core word must equal eight consecutive sampler clocks packed
// in the documented order, with the same latency for every word and one word
// per eight sampler clocks.
`timescale 1ps/1ps
module tb_retimer_demux;
  import srfd_pkg::*;
  logic  clk_s = 0, rst_n = 1;
  samp_t samp;
  logic  clk_core;
  word_t word;
  int checks = 0, failures = 0;

  retimer_demux dut (.clk_s, .rst_n, .samp, .clk_core, .word);

  always #200 clk_s = ~clk_s;

  samp_t  hist [int];
  int     n_s = 0;
  always @(posedge clk_s) begin
    hist[n_s] = samp;
    n_s++;
    samp <= samp_t'($urandom);
  end

  function automatic word_t pack(int first);
    word_t w;
    for (int k = 0; k < 8; k++) begin
      samp_t s;
      s = hist[first + k];
      w.data[4*k+0] = s.d0; w.data[4*k+1] = s.d2;
      w.data[4*k+2] = s.d4; w.data[4*k+3] = s.d6;
      w.edge_s[2*k] = s.e1; w.edge_s[2*k+1] = s.e5;
    end
    return w;
  endfunction

  int lat = -1, last_edge = -1;
  always @(posedge clk_core) begin
    if (rst_n && n_s > 40) begin
      if (lat < 0) begin
        for (int l = 8; l <= 24; l++) if (pack(n_s - l) == word) lat = l;
        checks++;
        if (lat < 0) begin failures++; $display("FAIL: no alignment found"); end
        else $display("latency %0d sampler clocks", lat);
      end else begin
        checks++;
        if (pack(n_s - lat) != word) begin
          failures++;
          $display("FAIL: word mismatch at sample %0d", n_s);
        end
        checks++;
        if (n_s - last_edge != 8) begin
          failures++;
          $display("FAIL: core clock period %0d", n_s - last_edge);
        end
      end
      last_edge = n_s;
    end
  end

  initial begin
    #(400 * 5000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    samp = '0;
    #1 rst_n = 0;
    #1000 rst_n = 1;
    #(400 * 2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
