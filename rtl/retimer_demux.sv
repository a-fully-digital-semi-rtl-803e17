// retimer_demux: retimer and 6:48 demultiplexer between the samplers and the
// 312.5 MHz digital core.
//
// The six sampler outputs of one 2.5 GHz sampler clock are first captured
// together in one register (the retimer), which puts the samples of the
// different clock phases onto a single clock edge. Eight such captures are
// collected and handed over as one 48-bit word (srfd_pkg::word_t, index 0 the
// oldest). A 3-bit counter divides the sampler clock by eight and its MSB is
// the core clock, clk_core.
//
// Timing: a sample captured on clk_s appears in `word` at most 16 sampler
// clocks later. `word` changes right after the counter wraps (clk_core
// falling edge region, cnt 7->0) and is stable across the following clk_core
// rising edge (cnt 3->4), so the core samples it half a core period after it
// settles.
//
// From the paper: six samplers (phi0,1,2,4,5,6), a retimer, a 6:48 demux and a
// 312.5 MHz core. This design's own choices: the word's bit order, the single
// capture register as the retimer and the divide-by-8 counter as the core clock.
module retimer_demux
  import srfd_pkg::*;
(
  input  logic   clk_s,     // 2.5 GHz sampler clock
  input  logic   rst_n,     // asynchronous reset, active low
  input  samp_t  samp,      // six sampler outputs of this sampler clock
  output logic   clk_core,  // 312.5 MHz core clock (clk_s / 8)
  output word_t  word       // one core word, valid on clk_core rising edges
);

  samp_t       retimed;
  samp_t       buf_q [DEMUX_RATIO-1];
  logic  [2:0] cnt;

  // The divider runs through reset so that the core clock keeps ticking.
  always_ff @(posedge clk_s) begin
    cnt <= cnt + 3'd1;
  end

  always_ff @(posedge clk_s or negedge rst_n) begin
    if (!rst_n) retimed <= '0;
    else        retimed <= samp;
  end

  // Collect seven sampler clocks, then assemble the word with the eighth.
  always_ff @(posedge clk_s) begin
    if (cnt != 3'd7) buf_q[cnt] <= retimed;
  end

  word_t word_c;

  always_comb begin
    for (int k = 0; k < DEMUX_RATIO; k++) begin
      samp_t s;
      s = (k == DEMUX_RATIO - 1) ? retimed : buf_q[k];
      word_c.data[4*k + 0]   = s.d0;
      word_c.data[4*k + 1]   = s.d2;
      word_c.data[4*k + 2]   = s.d4;
      word_c.data[4*k + 3]   = s.d6;
      word_c.edge_s[2*k + 0] = s.e1;
      word_c.edge_s[2*k + 1] = s.e5;
    end
  end

  always_ff @(posedge clk_s or negedge rst_n) begin
    if (!rst_n)            word <= '0;
    else if (cnt == 3'd7)  word <= word_c;
  end

  assign clk_core = cnt[2];

endmodule
