// short_trc_counter: counts the short tRCs of each tREFi window and tells
// whether the count exceeds the short tRC threshold S_tRC_TH.
//
// The count of the window that closes at a REF is held for the whole next
// window, while the capture stage replays that window's labels, so that the
// inspection stage sees count and capture verdict of the same window at the
// following REF. The paper defines S_tRC_TH as the number of short tRCs per
// tREFi above which a window looks like an attack, but prints no value; the
// default 130 (half of the 260 possible ACTs) is this design's choice.
//
// Interface: inc is a one-cycle pulse per short label; swap is the window
// boundary (REF). Timing: from the swap that closes window n until the next
// swap, cnt_hold is window n's count and over_th = (cnt_hold > S_TRC_TH).
module short_trc_counter
  import marc_pkg::*;
#(
  parameter int unsigned DEPTH    = BUF_DEPTH,
  parameter int unsigned S_TRC_TH = 130
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       swap,
  input  logic                       inc,
  output logic [$clog2(DEPTH+1)-1:0] cnt_hold,
  output logic                       over_th
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [CW-1:0] cnt;
  logic [CW-1:0] cnt_next;

  always_comb cnt_next = (inc && cnt != CW'(DEPTH)) ? cnt + 1'b1 : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      cnt_hold <= '0;
    end else if (swap) begin
      cnt      <= '0;
      cnt_hold <= cnt_next;
    end else begin
      cnt      <= cnt_next;
    end
  end

  assign over_th = 32'(cnt_hold) > S_TRC_TH;
endmodule
