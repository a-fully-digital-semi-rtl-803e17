// vco_track: VCO-track path of the digital loop filter.
//
// After phase lock the DLF integral register holds the frequency offset the
// CDR is tracking. Once every TIMER_CYCLES clocks (100 us at 312.5 MHz) this
// block compares it with +/-THRESH: above +THRESH the clock is too slow and
// one UP_F pulse is issued, below -THRESH one DN_F pulse; in between nothing.
// Each pulse moves the VCO fine code by one step, so slow drifts of the VCO
// (temperature, supply) are removed without disturbing the phase lock.
//
// Timing: `updn` is a registered one-clock pulse at the end of each timer
// period; the timer runs only while `en` (acquisition finished) is high.
//
// From the paper: the timer, the 100 us period and the threshold comparator.
// This design's own choices: the threshold value, comparing the integral
// register itself, and its sign convention (positive = clock slower than data,
// matching dlf).
module vco_track #(
  parameter int unsigned INT_W        = 16,
  parameter int unsigned TIMER_CYCLES = 31250,
  parameter int unsigned THRESH       = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic signed [INT_W-1:0] integ,
  output srfd_pkg::updn_t         updn
);

  localparam int unsigned TW = $clog2(TIMER_CYCLES);

  logic [TW-1:0] timer;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer <= '0;
      updn  <= '0;
    end else begin
      updn <= '0;
      if (!en) begin
        timer <= '0;
      end else if (timer == TW'(TIMER_CYCLES - 1)) begin
        timer   <= '0;
        updn.up <= (integ >  $signed(INT_W'(THRESH)));
        updn.dn <= (integ < -$signed(INT_W'(THRESH)));
      end else begin
        timer <= timer + 1'b1;
      end
    end
  end

endmodule
