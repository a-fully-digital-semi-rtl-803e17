// dlf: second-order digital loop filter of the bang-bang CDR.
//
// The BBPD net vote drives two paths: a proportional path with gain
// alpha = 2**KP_SH and an integral path whose register `integ` adds
// beta = 2**KI_SH times the vote every clock. Their sum is accumulated in a
// phase register whose top PI_BITS bits are the phase-rotator position
// (it wraps, as a rotator does). `integ` holds the frequency offset between
// data and clock the loop is tracking; the VCO-track path watches it.
// Positive votes (clock late) move `phase_code` up, which the interpolator
// must turn into an earlier sampling clock.
//
// While `run` is low (acquisition steps 1-3) both registers are held at zero
// ("reset & hold"). Timing: registered, one clock from `vote` to `phase_code`.
// `integ` saturates at its range.
//
// From the paper: 2nd-order structure with alpha, beta and two z^-1
// registers, reset & hold until frequency acquisition ends. This design's own
// choices: gains, widths and the rotator resolution (PI_BITS).
module dlf #(
  parameter int unsigned KP_SH   = 5,
  parameter int unsigned KI_SH   = 0,
  parameter int unsigned FRAC    = 10,
  parameter int unsigned PI_BITS = 7,
  parameter int unsigned INT_W   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     run,
  input  logic signed [5:0]        vote,
  output logic [PI_BITS-1:0]       phase_code,
  output logic signed [INT_W-1:0]  integ
);

  localparam int unsigned PH_W = PI_BITS + FRAC;
  localparam logic signed [INT_W:0] IMAX = (INT_W+1)'(2**(INT_W-1) - 1);
  localparam logic signed [INT_W:0] IMIN = -IMAX;

  logic [PH_W-1:0]        phase_acc;
  logic signed [INT_W:0]  integ_next;
  logic signed [PH_W-1:0] prop;

  assign prop       = PH_W'(vote) <<< KP_SH;
  assign integ_next = (INT_W+1)'(integ) + ((INT_W+1)'(vote) <<< KI_SH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_acc <= '0;
      integ     <= '0;
    end else if (!run) begin
      phase_acc <= '0;
      integ     <= '0;
    end else begin
      if (integ_next > IMAX)      integ <= INT_W'(IMAX);
      else if (integ_next < IMIN) integ <= INT_W'(IMIN);
      else                        integ <= INT_W'(integ_next);
      phase_acc <= phase_acc + PH_W'(prop) + PH_W'(integ);
    end
  end

  assign phase_code = phase_acc[PH_W-1 -: PI_BITS];

endmodule
