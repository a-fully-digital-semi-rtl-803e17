// srfd: type 2 dispersion-based semi-rotational frequency detector.
//
// Every BBPD decision is classified by D0 xor D1 into group 1 or group 2
// (srfd_classifier). Two detectors then run side by side on the same
// decisions, each a state estimator, a rotation detector and an
// integrate-and-dump filter:
//   coarse mode: all 16 edges of a word, phi1 and phi5, one every 2 UI;
//                wide capture range;
//   fine mode:   only the 8 phi1 edges, one every 4 UI; free of the offset
//                that a phi1/phi5 phase mismatch puts on the coarse mode.
// Each integrate-and-dump produces one UP_F/DN_F decision per period
// (128 clocks = 410 ns at 312.5 MHz). Which one drives the VCO is chosen
// outside (frequency acquisition controller).
//
// Timing: purely a function of the BBPD outputs; the sums of one word enter
// the integrators in the clock that presents it, decisions follow one clock
// after a period ends. `clear_c` / `clear_f` restart a detector's history
// and period.
//
// From the paper: the classification, the two modes and their edges, type 2,
// the integrate-and-dump period. This design's own choices: none beyond the
// sub-blocks' own.
module srfd
  import srfd_pkg::*;
#(
  parameter int unsigned PERIOD_LOG2 = 7,
  parameter int unsigned LONG_LOG2   = 22,
  parameter int unsigned ACC_W       = LONG_LOG2 + 7
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear_c,
  input  logic                    clear_f,
  input  logic                    long_period,
  input  pd_t                     pd  [N_EDGE],
  input  logic [N_DATA:0]         dat,
  output logic                    dump_c,
  output updn_t                   updn_c,
  output logic signed [ACC_W-1:0] result_c,
  output logic                    dump_f,
  output updn_t                   updn_f,
  output logic signed [ACC_W-1:0] result_f
);

  localparam int unsigned NC = N_EDGE;      // coarse slots per clock
  localparam int unsigned NF = N_EDGE / 2;  // fine slots per clock (phi1 only)

  pd_t g1 [N_EDGE];
  pd_t g2 [N_EDGE];

  srfd_classifier u_cls (.pd(pd), .dat(dat), .g1(g1), .g2(g2));

  // ---------------- coarse mode: phi1 and phi5 edges ----------------
  pstate_t          st_c [NC];
  logic             v_c  [NC];
  pstate_t          ps_c;
  logic             pv_c;
  logic signed [5:0] sum_c;

  srfd_state_est #(.N_SLOTS(NC)) u_est_c (
    .clk, .rst_n, .en, .clear(clear_c), .g1(g1), .g2(g2),
    .state(st_c), .valid(v_c), .prev_state(ps_c), .prev_valid(pv_c));

  srfd_rot_detect #(.N_SLOTS(NC), .SUM_W(6)) u_rot_c (
    .state(st_c), .valid(v_c), .prev_state(ps_c), .prev_valid(pv_c), .sum(sum_c));

  integrate_dump #(.IN_W(6), .PERIOD_LOG2(PERIOD_LOG2), .LONG_LOG2(LONG_LOG2), .ACC_W(ACC_W)) u_id_c (
    .clk, .rst_n, .en, .clear(clear_c), .long_period, .in(sum_c),
    .dump(dump_c), .updn(updn_c), .result(result_c));

  // ---------------- fine mode: phi1 edges only ----------------
  pd_t              g1_f [NF];
  pd_t              g2_f [NF];
  pstate_t          st_f [NF];
  logic             v_f  [NF];
  pstate_t          ps_f;
  logic             pv_f;
  logic signed [5:0] sum_f;

  always_comb begin
    for (int i = 0; i < NF; i++) begin
      g1_f[i] = g1[2*i];
      g2_f[i] = g2[2*i];
    end
  end

  srfd_state_est #(.N_SLOTS(NF)) u_est_f (
    .clk, .rst_n, .en, .clear(clear_f), .g1(g1_f), .g2(g2_f),
    .state(st_f), .valid(v_f), .prev_state(ps_f), .prev_valid(pv_f));

  srfd_rot_detect #(.N_SLOTS(NF), .SUM_W(6)) u_rot_f (
    .state(st_f), .valid(v_f), .prev_state(ps_f), .prev_valid(pv_f), .sum(sum_f));

  integrate_dump #(.IN_W(6), .PERIOD_LOG2(PERIOD_LOG2), .LONG_LOG2(LONG_LOG2), .ACC_W(ACC_W)) u_id_f (
    .clk, .rst_n, .en, .clear(clear_f), .long_period, .in(sum_f),
    .dump(dump_f), .updn(updn_f), .result(result_f));

endmodule
