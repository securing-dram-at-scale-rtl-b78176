// inspection_control: the duplicate control, loop control and inspection
// timer of MARC. At every window boundary it judges the window whose labels
// the capture stage has just replayed, drives RH_DETECT and sets the ARFM
// level requested from the memory controller.
//
// A window is an attack window when both of the paper's conditions hold:
// its short tRC count exceeds S_tRC_TH, and the capture stage found a
// duplication or a looping pattern in it (RH_DETECT is the OR of the two
// pattern verdicts, gated by the count). The inspection timer counts
// consecutive attack windows. ARFM starts at level A with the first attack
// window and moves one level up every LVL_STEP further attack windows
// (A, B, C); one normal window returns it to the default level. The paper
// says the level rises with the duration of the repetition until level C
// and that two tREFi periods are its minimum threshold, but gives no
// numbers; the first-window start, LVL_STEP = 2 and the immediate return to
// default are this design's choices.
//
// Interface: swap is the window boundary (REF). over_th comes from the
// short tRC counter; res_valid/res_dup/res_loop from the capture engine.
// Timing: decisions are registered at swap, so the labels stored in window
// n are judged at the start of window n+2, as in the paper's pipeline.
module inspection_control
  import marc_pkg::*;
#(
  parameter int unsigned LVL_STEP = 2,
  parameter int unsigned TMR_W    = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        swap,
  input  logic        over_th,
  input  logic        res_valid,
  input  logic        res_dup,
  input  logic        res_loop,
  output logic        dup_detect,
  output logic        loop_detect,
  output logic        rh_detect,
  output arfm_level_e arfm_level,
  output logic [TMR_W-1:0] timer
);
  logic res_fresh;      // a capture verdict arrived in this window
  logic attack;
  logic [TMR_W-1:0] timer_next;

  always_comb begin
    attack     = over_th && res_fresh && (res_dup || res_loop);
    timer_next = attack ? ((timer == '1) ? timer : timer + 1'b1) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_fresh   <= 1'b0;
      dup_detect  <= 1'b0;
      loop_detect <= 1'b0;
      rh_detect   <= 1'b0;
      arfm_level  <= LVL_DEFAULT;
      timer       <= '0;
    end else begin
      if (res_valid) res_fresh <= 1'b1;
      if (swap) begin
        res_fresh   <= 1'b0;
        dup_detect  <= over_th && res_fresh && res_dup;
        loop_detect <= over_th && res_fresh && res_loop;
        rh_detect   <= attack;
        timer       <= timer_next;
        if (timer_next == '0)                                arfm_level <= LVL_DEFAULT;
        else if (32'(timer_next) >= 1 + 2 * LVL_STEP)        arfm_level <= LVL_C;
        else if (32'(timer_next) >= 1 + LVL_STEP)            arfm_level <= LVL_B;
        else                                                 arfm_level <= LVL_A;
      end
    end
  end
endmodule
