// marc_bank: the MARC detector of one bank (the paper draws one per bank).
//
// ACT pulses of the bank go to the tRC checker, which labels every tRC.
// Short labels are stored in the short tRC buffer and counted by the short
// tRC counter. At each REF (the tREFi window boundary) the buffer swaps
// halves and replays the window just closed into the capture engine, which
// looks for duplication and looping patterns; at the following REF the
// inspection control combines that verdict with the window's short count
// and updates RH_DETECT and the ARFM level. The three stages overlap, one
// window each, as in the paper's pipelined operation. The address bus is
// not used: detection relies on ACT timing only.
//
// Interface: act and ref_cmd are one-cycle pulses. Timing: a pattern stored
// in window n shows on rh_detect/arfm_level from the REF that ends window
// n+1. REF commands must be at least DEPTH+4 cycles apart.
module marc_bank
  import marc_pkg::*;
#(
  parameter int unsigned T_CK_PS  = 1000,
  parameter int unsigned DEPTH    = BUF_DEPTH,
  parameter int unsigned S_TRC_TH = 130,
  parameter int unsigned K        = 3,
  parameter int unsigned EVICT_TH = 2,
  parameter int unsigned LVL_STEP = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        act,
  input  logic        ref_cmd,
  output logic        rh_detect,
  output logic        dup_detect,
  output logic        loop_detect,
  output arfm_level_e arfm_level,
  output logic [$clog2(DEPTH+1)-1:0] short_cnt
);
  logic       lbl_valid, lbl_short;
  trc_label_e lbl;
  logic       rd_valid, rd_done, busy;
  trc_label_e rd_label;
  logic       over_th;

  // capture engine observation outputs (not used at this level)
  logic       c_out_valid, c_point, c_capture, c_evict, c_dup, c_loop;
  trc_label_e c_point_latch;
  trc_label_e c_capture_latch [K];
  trc_label_e c_evict_latch [(K > 2) ? K-2 : 1];
  logic [$clog2(EVICT_TH+2)-1:0] c_evict_cnt;
  logic       res_valid, res_dup, res_loop;
  logic [3:0] timer;

  trc_checker #(.T_CK_PS(T_CK_PS)) u_chk (
    .clk, .rst_n, .act,
    .label_valid(lbl_valid), .label(lbl), .label_short(lbl_short)
  );

  short_trc_buffer #(.DEPTH(DEPTH)) u_buf (
    .clk, .rst_n, .swap(ref_cmd),
    .wr_en(lbl_short), .wr_label(lbl),
    .rd_valid, .rd_label, .rd_done, .busy
  );

  short_trc_counter #(.DEPTH(DEPTH), .S_TRC_TH(S_TRC_TH)) u_cnt (
    .clk, .rst_n, .swap(ref_cmd), .inc(lbl_short),
    .cnt_hold(short_cnt), .over_th
  );

  capture_engine #(.K(K), .EVICT_TH(EVICT_TH)) u_cap (
    .clk, .rst_n, .start(ref_cmd),
    .in_valid(rd_valid), .in_label(rd_label), .in_done(rd_done),
    .out_valid(c_out_valid), .point_flag(c_point), .capture_flag(c_capture),
    .evict_flag(c_evict), .dup_ctrl(c_dup), .loop_ctrl(c_loop),
    .point_latch(c_point_latch), .capture_latch(c_capture_latch),
    .evict_latch(c_evict_latch), .evict_cnt(c_evict_cnt),
    .res_valid, .res_dup, .res_loop
  );

  inspection_control #(.LVL_STEP(LVL_STEP), .TMR_W(4)) u_insp (
    .clk, .rst_n, .swap(ref_cmd), .over_th,
    .res_valid, .res_dup, .res_loop,
    .dup_detect, .loop_detect, .rh_detect, .arfm_level, .timer
  );

  // Observation outputs of the sub-blocks, not used at this level.
  logic unused;
  always_comb begin
    unused = lbl_valid ^ busy ^ c_out_valid ^ c_point ^ c_capture ^ c_evict
           ^ c_dup ^ c_loop ^ (^c_point_latch) ^ (^c_evict_cnt) ^ (^timer);
    for (int i = 0; i < K; i++) unused ^= ^c_capture_latch[i];
    for (int i = 0; i < ((K > 2) ? K-2 : 1); i++) unused ^= ^c_evict_latch[i];
  end
endmodule
