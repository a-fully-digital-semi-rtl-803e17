// bbpd: digital bang-bang (Alexander) phase detector for the RX digital core.
//
// For each of the 16 edge samples of a core word it compares the edge sample
// with the data bits on either side of it. With no data transition there is
// no decision (PD_NONE); otherwise the edge sample equals the later bit when
// the clock samples after the zero crossing (PD_UP, clock late) and the
// earlier bit when it samples before it (PD_DN, clock early). The net vote,
// number of UP minus number of DN, feeds the digital loop filter.
//
// The data bits of the same word are passed on, together with the last data
// bit of the previous word (dat[0]), so that the SRFD classification sees the
// two bits before every edge in step with the decisions.
//
// Timing: one clk cycle from `word` to `pd`, `dat` and `vote`.
//
// From the paper: a BBPD in the digital core feeds both the DLF and the SRFD
// (UP/DN at phi1 and phi5). This design's own choices: the UP/DN polarity
// (UP = clock late) and the net-vote output.
module bbpd
  import srfd_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  word_t              word,
  output pd_t                pd   [N_EDGE],  // decision of edge j, time order
  output logic [N_DATA:0]    dat,            // dat[0]: previous word's last bit, dat[i+1] = data[i]
  output logic signed [5:0]  vote            // #UP - #DN over the word, -16..16
);

  pd_t              pd_c [N_EDGE];
  logic signed [5:0] vote_c;
  logic              last_bit;

  always_comb begin
    vote_c = '0;
    for (int j = 0; j < N_EDGE; j++) begin
      logic b_early, b_late, e;
      b_early = word.data[2*j];
      b_late  = word.data[2*j + 1];
      e       = word.edge_s[j];
      if (b_early == b_late) pd_c[j] = PD_NONE;
      else if (e == b_late)  pd_c[j] = PD_UP;
      else                   pd_c[j] = PD_DN;
      if (pd_c[j] == PD_UP) vote_c = vote_c + 6'sd1;
      if (pd_c[j] == PD_DN) vote_c = vote_c - 6'sd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N_EDGE; j++) pd[j] <= PD_NONE;
      dat      <= '0;
      vote     <= '0;
      last_bit <= 1'b0;
    end else begin
      pd       <= pd_c;
      dat      <= {word.data, last_bit};
      vote     <= vote_c;
      last_bit <= word.data[N_DATA-1];
    end
  end

endmodule
