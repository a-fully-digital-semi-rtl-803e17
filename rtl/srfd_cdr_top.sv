// srfd_cdr_top: digital part of a reference-less 10 Gb/s bang-bang CDR with
// semi-rotational frequency detection (SRFD).
//
// Data path (RX digital core, 312.5 MHz): the six sampler outputs of every
// 2.5 GHz sampler clock are retimed and demultiplexed into 48-bit words
// (retimer_demux), a bang-bang phase detector compares edges with data
// (bbpd), its net vote drives a 2nd-order loop filter whose phase register
// is the phase-rotator position (dlf), and the same decisions feed the
// coarse- and fine-mode type 2 dispersion-based SRFD (srfd).
//
// Frequency control (CG digital core): the acquisition controller
// (freq_acq_ctrl) selects the source of UP_F/DN_F pulses for the VCO
// controller (vco_ctrl): coarse SRFD in step 2 (coarse code), fine SRFD in
// step 3 (fine code) and, after acquisition finish, the VCO-track path
// (vco_track) on the DLF integral register (fine code), as the two muxes of
// the paper's block diagram select them.
//
// Interface: clk_s is the 2.5 GHz sampler clock; clk_core (clk_s / 8) is
// brought out for the analog side. The VCO codes, phase-rotator code and CTLE
// enable go to analog blocks outside this module; srfd_result_* give the
// integrate-and-dump outputs for open-loop measurement, where long_period
// stretches the integration to 2**22 clocks (13.4 ms).
//
// Timing: acquisition takes about 262 us after reset or restart, then
// acq_finish rises and the phase loop runs.
module srfd_cdr_top
  import srfd_pkg::*;
#(
  parameter int unsigned PERIOD_LOG2  = 7,       // 410 ns integrate-and-dump
  parameter int unsigned N_COARSE     = 128,     // 2^7 coarse results
  parameter int unsigned N_FINE       = 512,     // 2^9 fine results
  parameter int unsigned TIMER_CYCLES = 31250,   // 100 us VCO-track period
  parameter int unsigned THRESH       = 256,
  parameter int unsigned CTLE_DELAY   = 31250,
  parameter int unsigned KP_SH        = 5,
  parameter int unsigned KI_SH        = 0,
  parameter int unsigned PI_BITS      = 7,
  parameter int unsigned LONG_LOG2    = 22
) (
  input  logic                      clk_s,
  input  logic                      rst_n,
  input  samp_t                     samp,
  input  logic                      restart,
  input  logic                      long_period,
  output logic                      clk_core,
  output logic [5:0]                coarse_code,
  output logic [7:0]                fine_code,
  output logic [PI_BITS-1:0]        phase_code,
  output logic                      ctle_en,
  output logic                      acq_finish,
  output logic [2:0]                step,
  output logic signed [LONG_LOG2+6:0] srfd_result_c,
  output logic signed [LONG_LOG2+6:0] srfd_result_f,
  output logic signed [15:0]        dlf_integ
);

  word_t             word;
  pd_t               pd [N_EDGE];
  logic [N_DATA:0]   dat;
  logic signed [5:0] vote;
  logic              dump_c, dump_f, clear_c, clear_f, vco_init, cf_sel;
  updn_t             updn_c, updn_f, updn_t_trk, updn_sel;

  retimer_demux u_demux (
    .clk_s, .rst_n, .samp, .clk_core, .word);

  bbpd u_bbpd (
    .clk(clk_core), .rst_n, .word, .pd, .dat, .vote);

  srfd #(.PERIOD_LOG2(PERIOD_LOG2), .LONG_LOG2(LONG_LOG2), .ACC_W(LONG_LOG2 + 7)) u_srfd (
    .clk(clk_core), .rst_n, .en(1'b1), .clear_c, .clear_f, .long_period,
    .pd, .dat,
    .dump_c, .updn_c, .result_c(srfd_result_c),
    .dump_f, .updn_f, .result_f(srfd_result_f));

  dlf #(.KP_SH(KP_SH), .KI_SH(KI_SH), .PI_BITS(PI_BITS), .INT_W(16)) u_dlf (
    .clk(clk_core), .rst_n, .run(acq_finish), .vote, .phase_code, .integ(dlf_integ));

  vco_track #(.INT_W(16), .TIMER_CYCLES(TIMER_CYCLES), .THRESH(THRESH)) u_track (
    .clk(clk_core), .rst_n, .en(acq_finish), .integ(dlf_integ), .updn(updn_t_trk));

  freq_acq_ctrl #(.N_COARSE(N_COARSE), .N_FINE(N_FINE), .CTLE_DELAY(CTLE_DELAY)) u_ctrl (
    .clk(clk_core), .rst_n, .restart, .dump_c, .dump_f,
    .step, .vco_init, .cf_sel, .acq_finish, .clear_c, .clear_f, .ctle_en);

  // UP_F/DN_F source select: coarse/fine select, then acquisition finish.
  always_comb begin
    if (acq_finish)  updn_sel = updn_t_trk;
    else if (cf_sel) updn_sel = updn_f;
    else             updn_sel = updn_c;
  end

  vco_ctrl #(.CW(6), .FW(8)) u_vco (
    .clk(clk_core), .rst_n, .init(vco_init), .tune(!vco_init),
    .sel_fine(cf_sel | acq_finish), .updn(updn_sel),
    .coarse(coarse_code), .fine(fine_code));

endmodule
