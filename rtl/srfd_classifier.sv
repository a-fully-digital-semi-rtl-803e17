// srfd_classifier: dispersion-based classification of BBPD decisions.
//
// Inter-symbol interference moves the zero crossing before an edge depending
// on whether the two bits before it (D0, D1) are equal. Each decision is
// therefore sent to one of two groups by D0 xor D1: 1 (D0 != D1) selects
// group 1 (UP1/DN1), 0 (D0 == D1) selects group 2 (UP2/DN2). The other
// group's output for that edge is PD_NONE.
//
// For edge j, D1 is data bit 2j (the bit just before the edge) and D0 is data
// bit 2j-1; for the phi1 edge of a sampler clock this is D6 (previous clock)
// xor D0, for the phi5 edge D2 xor D4, as the paper's block diagram prints.
//
// Combinational; inputs come straight from bbpd (`dat` aligned with `pd`).
// From the paper: the XOR select and its 1 -> group 1 / 0 -> group 2 mapping.
module srfd_classifier
  import srfd_pkg::*;
(
  input  pd_t             pd  [N_EDGE],
  input  logic [N_DATA:0] dat,            // dat[0] previous word's last bit
  output pd_t             g1  [N_EDGE],   // UP1/DN1
  output pd_t             g2  [N_EDGE]    // UP2/DN2
);

  always_comb begin
    for (int j = 0; j < N_EDGE; j++) begin
      logic d0, d1;
      d0 = dat[2*j];       // data bit 2j-1
      d1 = dat[2*j + 1];   // data bit 2j
      g1[j] = (d0 ^ d1) ? pd[j] : PD_NONE;
      g2[j] = (d0 ^ d1) ? PD_NONE : pd[j];
    end
  end

endmodule
