// srfd_rot_detect: rotation detector of the SRFD algorithm.
//
// Compares each estimated phase state with the one before it. A clockwise
// step (S1 -> S0 -> S3 -> S2 -> S1, with S1 at the top and S0 on the right of
// the phase circle) scores +1, a counter-clockwise step -1 and no change 0.
// This follows the paper's text ("+1, -1, or 0 depending on whether the
// estimated phase state rotates clockwise or counterclockwise"); the worked
// examples in its figures print the opposite sign, which would make the
// frequency loop run away for a channel whose zero crossing comes later after
// two equal bits. A jump to the opposite
// state has no defined direction and scores 0 (this design's choice); so does
// any pair with an invalid state. The N_SLOTS scores of one clock are summed.
//
// Timing: combinational; `sum` lies in -N_SLOTS..N_SLOTS.
module srfd_rot_detect
  import srfd_pkg::*;
#(
  parameter int unsigned N_SLOTS = 16,
  parameter int unsigned SUM_W   = $clog2(N_SLOTS + 1) + 1
) (
  input  pstate_t                  state [N_SLOTS],
  input  logic                     valid [N_SLOTS],
  input  pstate_t                  prev_state,
  input  logic                     prev_valid,
  output logic signed [SUM_W-1:0]  sum
);

  always_comb begin
    pstate_t p;
    logic    pv;
    p   = prev_state;
    pv  = prev_valid;
    sum = '0;
    for (int k = 0; k < N_SLOTS; k++) begin
      logic [1:0] step;
      step = 2'(state[k] - p);
      if (pv && valid[k]) begin
        if (step == 2'd1)      sum = sum + SUM_W'(1);
        else if (step == 2'd3) sum = sum - SUM_W'(1);
      end
      p  = state[k];
      pv = valid[k];
    end
  end

endmodule
