// integrate_dump: integrate-and-dump filter and sign decision of the SRFD.
//
// Adds the per-clock sum of algorithm outputs over one period of
// 2**PERIOD_LOG2 clocks, then dumps: `result` takes the total (the SRFD
// output), `dump` pulses for one clock and `updn` gives its sign as a
// frequency-detector pulse pair: a negative total is UP_F (VCO slower than
// the data), a positive one DN_F, zero neither. The accumulator then restarts
// from zero. With `long_period` the period is 2**LONG_LOG2 clocks instead,
// for open-loop measurements.
//
// Timing: the period counts clocks with `en` high; `dump`, `updn` and
// `result` are registered and appear one clock after the period's last input.
// `clear` restarts the period without a dump.
//
// From the paper: 410 ns period (128 clocks of 312.5 MHz, the value used
// here), 13.4 ms extended period (2**22 clocks = 13.42 ms), sign of the total
// as UP_F/DN_F with positive output meaning VCO faster than the data (Fig. 5).
// This design's own choices: the accumulator widths and the no-pulse-on-zero rule.
module integrate_dump #(
  parameter int unsigned IN_W        = 6,
  parameter int unsigned PERIOD_LOG2 = 7,
  parameter int unsigned LONG_LOG2   = 22,
  parameter int unsigned ACC_W       = IN_W + LONG_LOG2 + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clear,
  input  logic                    long_period,
  input  logic signed [IN_W-1:0]  in,
  output logic                    dump,
  output srfd_pkg::updn_t         updn,
  output logic signed [ACC_W-1:0] result
);

  logic signed [ACC_W-1:0] acc, total;
  logic        [LONG_LOG2-1:0] cnt;
  logic                    last;

  assign total = acc + ACC_W'(in);
  assign last  = long_period ? (cnt == {LONG_LOG2{1'b1}})
                             : (cnt[PERIOD_LOG2-1:0] == {PERIOD_LOG2{1'b1}});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      cnt    <= '0;
      dump   <= 1'b0;
      updn   <= '0;
      result <= '0;
    end else begin
      dump <= 1'b0;
      updn <= '0;
      if (clear) begin
        acc <= '0;
        cnt <= '0;
      end else if (en) begin
        if (last) begin
          acc     <= '0;
          cnt     <= '0;
          dump    <= 1'b1;
          result  <= total;
          updn.up <= (total < 0);
          updn.dn <= (total > 0);
        end else begin
          acc <= total;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
