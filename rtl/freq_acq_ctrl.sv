// freq_acq_ctrl: frequency acquisition controller (clock-generator digital core).
//
// Sequences the reference-less frequency acquisition:
//   Step 1 (INIT):   DLF reset & hold, VCO codes to 6'b100000 / 8'b10000000,
//                    acquisition finish = 0.
//   Step 2 (COARSE): coarse/fine select = 0; the coarse-mode SRFD steers the
//                    coarse code for N_COARSE = 2**7 integrate-and-dump results
//                    (2**7 x 410 ns = 52.5 us).
//   Step 3 (FINE):   coarse/fine select = 1; the fine-mode SRFD steers the fine
//                    code for N_FINE = 2**9 results (210 us).
//   Step 4 (LOCK):   acquisition finish = 1: the DLF starts, and the VCO-track
//                    path replaces the SRFD as the source of UP_F/DN_F.
// After CTLE_DELAY clocks in step 4 `ctle_en` turns the equaliser on, the
// final step the paper describes. `restart` returns to step 1.
//
// A detector's history and period are restarted (clear_c / clear_f) as its
// step begins, so every counted result covers a whole period.
//
// Timing: step 1 lasts one clock; steps 2 and 3 end on the clock after their
// last counted dump. With 128-clock periods acquisition takes
// (128 + 512) x 128 + 3 clocks, 262.2 us at 312.5 MHz (the paper: 262.5 us
// with 410 ns periods).
//
// From the paper: the four steps, the code start values, the result counts
// and the two select signals (Fig. 7) and the final CTLE enable. This
// design's own choices: the clears, step 1's length and CTLE_DELAY.
module freq_acq_ctrl #(
  parameter int unsigned N_COARSE   = 128,
  parameter int unsigned N_FINE     = 512,
  parameter int unsigned CTLE_DELAY = 31250
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       restart,
  input  logic       dump_c,       // coarse SRFD produced a result
  input  logic       dump_f,       // fine SRFD produced a result
  output logic [2:0] step,         // 1..4
  output logic       vco_init,     // load VCO start codes
  output logic       cf_sel,       // coarse/fine select: 0 coarse, 1 fine
  output logic       acq_finish,   // 1: DLF runs, VCO-track path drives the VCO
  output logic       clear_c,
  output logic       clear_f,
  output logic       ctle_en
);

  typedef enum logic [1:0] {INIT, COARSE, FINE, LOCK} st_t;

  localparam int unsigned CNT_W = $clog2(N_FINE + 1) > $clog2(CTLE_DELAY + 1)
                                ? $clog2(N_FINE + 1) : $clog2(CTLE_DELAY + 1);

  st_t             st;
  logic [CNT_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= INIT;
      cnt     <= '0;
      ctle_en <= 1'b0;
    end else if (restart) begin
      st      <= INIT;
      cnt     <= '0;
      ctle_en <= 1'b0;
    end else begin
      unique case (st)
        INIT: begin
          st  <= COARSE;
          cnt <= '0;
        end
        COARSE: if (dump_c) begin
          if (cnt == CNT_W'(N_COARSE - 1)) begin
            st  <= FINE;
            cnt <= '0;
          end else cnt <= cnt + 1'b1;
        end
        FINE: if (dump_f) begin
          if (cnt == CNT_W'(N_FINE - 1)) begin
            st  <= LOCK;
            cnt <= '0;
          end else cnt <= cnt + 1'b1;
        end
        LOCK: begin
          if (cnt == CNT_W'(CTLE_DELAY)) ctle_en <= 1'b1;
          else                           cnt <= cnt + 1'b1;
        end
      endcase
    end
  end

  always_comb begin
    step       = 3'd1 + 3'(st);
    vco_init   = (st == INIT);
    cf_sel     = (st == FINE);
    acq_finish = (st == LOCK);
    clear_c    = (st == INIT);
    clear_f    = (st == COARSE) && dump_c && (cnt == CNT_W'(N_COARSE - 1));
  end

endmodule
