// srfd_pkg: types and constants shared by the reference-less CDR digital core.
//
// The receiver samples the 10 Gb/s NRZ input with six samplers clocked by a
// 2.5 GHz eight-phase clock (phases 0..7, 0.5 UI apart at lock). Phases 0, 2,
// 4 and 6 take data, phases 1 and 5 take edges; phases 3 and 7 are not
// sampled, so an edge sample is taken every 2 UI. Eight sampler clocks are
// packed into one 48-bit word for the 312.5 MHz core: 32 data bits and
// 16 edge bits, both in time order (index 0 is the oldest).
//
// Edge j of a word lies between data bits 2j and 2j+1; even j are phase-1
// edges, odd j are phase-5 edges. The paper fixes the phases, the 6:48 ratio
// and the 312.5 MHz core clock; the bit order inside the word is this design's.
package srfd_pkg;

  localparam int unsigned DEMUX_RATIO  = 8;   // 6:48 demux
  localparam int unsigned N_DATA       = 32;  // data bits per core word
  localparam int unsigned N_EDGE       = 16;  // edge samples per core word

  // One sampler clock: six samples, named by the clock phase that took them.
  typedef struct packed {
    logic d6;  // phi6 data
    logic e5;  // phi5 edge
    logic d4;  // phi4 data
    logic d2;  // phi2 data
    logic e1;  // phi1 edge
    logic d0;  // phi0 data
  } samp_t;

  // One core word (48 bits).
  typedef struct packed {
    logic [N_EDGE-1:0] edge_s;  // edge_s[j] between data[2j] and data[2j+1]
    logic [N_DATA-1:0] data;    // data[0] oldest
  } word_t;

  // Output of one bang-bang phase detector comparison.
  typedef enum logic [1:0] {
    PD_NONE = 2'b00,  // no data transition around this edge
    PD_UP   = 2'b01,  // edge sample equals the later bit: clock is late
    PD_DN   = 2'b10   // edge sample equals the earlier bit: clock is early
  } pd_t;

  // Estimated phase state. The encoding is the clockwise order of Fig. 1
  // (S1 top, S0 right, S3 bottom, S2 left), so one step forward in the
  // encoding is a clockwise step, which the algorithm scores +1.
  typedef enum logic [1:0] {
    ST_S1 = 2'd0,
    ST_S0 = 2'd1,
    ST_S3 = 2'd2,
    ST_S2 = 2'd3
  } pstate_t;

  // Frequency-detector pulse pair.
  typedef struct packed {
    logic up;  // raise the VCO frequency
    logic dn;  // lower the VCO frequency
  } updn_t;

endpackage
