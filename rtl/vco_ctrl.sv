// vco_ctrl: VCO controller of the clock-generator digital core.
//
// Holds the VCO's 6-bit coarse code (MIM capacitor bank) and 8-bit fine code
// (MOS capacitor bank). `init` loads the start codes 6'b100000 and
// 8'b10000000, the middle of each range. While `tune` is high each UP_F pulse
// raises and each DN_F pulse lowers one code by one step: the coarse code
// when `sel_fine` is low, the fine code when it is high. Codes saturate at
// their ends. A higher code is taken to mean a higher frequency, as in the
// coarse-code labels of the VCO tuning curve (code 63 at the top, 0 at the
// bottom).
//
// Timing: registered; a pulse changes the code on the next clock edge.
//
// From the paper: code widths and start codes (Fig. 7). This design's own
// choices: unit steps (a linear search) and that the fine code is the one
// moved in fine mode and by the VCO-track path.
module vco_ctrl #(
  parameter int unsigned CW = 6,
  parameter int unsigned FW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic            tune,
  input  logic            sel_fine,
  input  srfd_pkg::updn_t updn,
  output logic [CW-1:0]   coarse,
  output logic [FW-1:0]   fine
);

  localparam logic [CW-1:0] C_INIT = CW'(1) << (CW - 1);  // 6'b100000
  localparam logic [FW-1:0] F_INIT = FW'(1) << (FW - 1);  // 8'b10000000

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coarse <= C_INIT;
      fine   <= F_INIT;
    end else if (init) begin
      coarse <= C_INIT;
      fine   <= F_INIT;
    end else if (tune && (updn.up ^ updn.dn)) begin
      if (!sel_fine) begin
        if (updn.up && coarse != '1) coarse <= coarse + 1'b1;
        if (updn.dn && coarse != '0) coarse <= coarse - 1'b1;
      end else begin
        if (updn.up && fine != '1)   fine <= fine + 1'b1;
        if (updn.dn && fine != '0)   fine <= fine - 1'b1;
      end
    end
  end

endmodule
