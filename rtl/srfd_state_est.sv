// srfd_state_est: phase-state estimation of the type 2 SRFD algorithm.
//
// The two BBPD groups have different UP/DN boundaries, which cut the phase
// circle into four states. When two successive edge slots carry decisions of
// different groups, the pair fixes the state:
//   DN1 & DN2 -> S1,  DN1 & UP2 -> S0,  UP1 & UP2 -> S3,  UP1 & DN2 -> S2
// (read from the state labels printed in the paper's Fig. 1). Type 2 copies
// the previous state when a slot gives no estimate (no decision in this slot
// or in the one before, or both from the same group); the BBPD output itself
// is not copied. `valid` stays low after reset until the first estimate.
//
// N_SLOTS slots are processed per clock in time order; slot 0 pairs with the
// last slot of the previous clock, which is kept in a register together with
// the last state. `prev_state`/`prev_valid` give the state before slot 0, for
// the rotation detector.
//
// Timing: combinational from g1/g2 to state/valid; state carried across clocks
// in registers, updated when `en` is high. `clear` forgets history.
module srfd_state_est
  import srfd_pkg::*;
#(
  parameter int unsigned N_SLOTS = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    clear,
  input  pd_t     g1 [N_SLOTS],
  input  pd_t     g2 [N_SLOTS],
  output pstate_t state      [N_SLOTS],
  output logic    valid      [N_SLOTS],
  output pstate_t prev_state,
  output logic    prev_valid
);

  // Last slot of the previous clock: its decision and group.
  pd_t  last_pd;
  logic last_grp1;

  function automatic pstate_t map_state(pd_t d1, pd_t d2);
    if (d1 == PD_DN) return (d2 == PD_DN) ? ST_S1 : ST_S0;
    else             return (d2 == PD_UP) ? ST_S3 : ST_S2;
  endfunction

  always_comb begin
    pd_t     p_pd;
    logic    p_g1;
    pstate_t s;
    logic    v;
    p_pd = last_pd;
    p_g1 = last_grp1;
    s    = prev_state;
    v    = prev_valid;
    for (int k = 0; k < N_SLOTS; k++) begin
      pd_t  c_pd;
      logic c_g1;
      c_g1 = (g1[k] != PD_NONE);
      c_pd = c_g1 ? g1[k] : g2[k];
      if (p_pd != PD_NONE && c_pd != PD_NONE && p_g1 != c_g1) begin
        s = c_g1 ? map_state(c_pd, p_pd) : map_state(p_pd, c_pd);
        v = 1'b1;
      end
      state[k] = s;
      valid[k] = v;
      p_pd = c_pd;
      p_g1 = c_g1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_pd    <= PD_NONE;
      last_grp1  <= 1'b0;
      prev_state <= ST_S1;
      prev_valid <= 1'b0;
    end else if (clear) begin
      last_pd    <= PD_NONE;
      last_grp1  <= 1'b0;
      prev_state <= ST_S1;
      prev_valid <= 1'b0;
    end else if (en) begin
      last_grp1  <= (g1[N_SLOTS-1] != PD_NONE);
      last_pd    <= (g1[N_SLOTS-1] != PD_NONE) ? g1[N_SLOTS-1] : g2[N_SLOTS-1];
      prev_state <= state[N_SLOTS-1];
      prev_valid <= valid[N_SLOTS-1];
    end
  end

endmodule
