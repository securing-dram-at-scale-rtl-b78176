// trc_checker: measures tRC, the time between two consecutive ACT commands
// to one bank, and encodes it into a 3-bit label.
//
// A saturating cycle counter restarts at every ACT. When the next ACT
// arrives, the elapsed time (cycles x T_CK_PS) is sorted into the paper's
// bins: short-A [60,70) ns, short-B [70,80), short-C [80,90), short-D
// [90,100] and long (> 100 ns). Times below tRCmin, which a legal command
// stream never shows, are reported as short-A. The first ACT after reset
// has no predecessor and produces no label. The bins and the 100 ns limit
// are the paper's; the clock period (1 ns by default) is this design's choice.
//
// Interface: act is a one-cycle pulse per ACT command to this bank.
// Timing: label_valid/label are registered and appear the cycle after the
// ACT that closes the interval; label_short is set for short-A..D.
module trc_checker
  import marc_pkg::*;
#(
  parameter int unsigned T_CK_PS = 1000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       act,
  output logic       label_valid,
  output trc_label_e label,
  output logic       label_short
);
  // Largest count of interest: just above 100 ns.
  localparam int unsigned SAT = (SHORT_TRC_MAX_NS * 1000) / T_CK_PS + 2;
  localparam int unsigned CW  = $clog2(SAT + 1);

  logic [CW-1:0] elapsed;   // cycles since the last ACT, counting this one
  logic          seen_act;  // an earlier ACT exists

  // Elapsed time at the ACT that closes the interval, in picoseconds.
  logic [31:0] trc_ps;
  trc_label_e  enc;

  always_comb begin
    trc_ps = 32'(elapsed) * 32'(T_CK_PS);
    if      (trc_ps < 32'd70000)  enc = LBL_A;
    else if (trc_ps < 32'd80000)  enc = LBL_B;
    else if (trc_ps < 32'd90000)  enc = LBL_C;
    else if (trc_ps <= 32'd100000) enc = LBL_D;
    else                          enc = LBL_L;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      elapsed     <= '0;
      seen_act    <= 1'b0;
      label_valid <= 1'b0;
      label       <= LBL_NONE;
      label_short <= 1'b0;
    end else begin
      label_valid <= act && seen_act;
      if (act) begin
        label       <= enc;
        label_short <= seen_act && is_short(enc);
        seen_act    <= 1'b1;
        elapsed     <= CW'(1);
      end else begin
        label_short <= 1'b0;
        if (elapsed != CW'(SAT)) elapsed <= elapsed + 1'b1;
      end
    end
  end
endmodule
