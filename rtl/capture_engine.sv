// capture_engine: point latch, capture latch, eviction latch, their three
// comparators, the eviction counter and the loop control of MARC. It reads
// the short tRC labels of one window, one per cycle, and reports whether
// the window was a duplication pattern (one label repeated) or a looping
// pattern (a short sequence of labels repeated).
//
// How it works (the sequence of the paper's capture & duplication figure,
// K = 3):
//  * Point process. The first label fills the point latch. Each following
//    label equal to it raises the point compare flag. The first different
//    label goes to capture slot 0 and starts the capture process.
//  * Capture process. A label equal to the last filled slot raises the
//    capture compare flag; a different one fills the next slot. The last
//    slot is filled by the next label whatever its value. Then the capture
//    is done and loop control goes high.
//  * Loop/eviction process. Labels are compared with the captured sequence.
//    Right after the capture the comparison waits for slot 0; once in step
//    it accepts the next slot (preferred) or a repeat of the current slot.
//    A match raises the capture compare flag; a match that advances to the
//    next slot also clears the eviction latch and count. A mismatch that equals an eviction latch entry raises the
//    eviction compare flag; any other mismatch is pushed into the eviction
//    latch (K-2 entries) and counts one eviction. When the count exceeds
//    EVICT_TH the engine returns to the point process, and the label that
//    caused it fills the point latch.
//  * Duplication control is high for a label equal to the label before it.
//    Loop control is high for a label that meets a completed capture.
// State is kept across windows: a pattern is followed over many tREFi.
//
// Following the paper: the three latches, K, the last-slot rule, the
// eviction latch of K-2 entries and the reset on too many evictions. This
// design's own choices, where the paper is silent: the in-step rule of the
// loop comparison (reconstructed so that it reproduces the paper's example
// waveform), clearing evictions only on an advancing match (of the readings
// that fit the example, the one whose recognition rates come closest to
// the paper's detection-efficacy table), EVICT_TH = 2, reloading the point
// latch on reset, and the window verdicts: win_loop = loop control high
// at the window end with no reset inside the window; win_dup = every label of the window raised a
// compare flag, except one that only filled the point latch.
//
// Interface: start pulses at the window boundary (REF); in_valid/in_label
// carry the replayed labels; in_done ends the window. Timing: the per-label
// flags are registered (one cycle after in_valid); res_valid pulses one
// cycle after in_done with res_dup/res_loop, which hold until the next one.
module capture_engine
  import marc_pkg::*;
#(
  parameter int unsigned K        = 3,
  parameter int unsigned EVICT_TH = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       in_valid,
  input  trc_label_e in_label,
  input  logic       in_done,
  // per-label flags
  output logic       out_valid,
  output logic       point_flag,
  output logic       capture_flag,
  output logic       evict_flag,
  output logic       dup_ctrl,
  output logic       loop_ctrl,
  // latch contents, for observation
  output trc_label_e point_latch,
  output trc_label_e capture_latch [K],
  output trc_label_e evict_latch [(K > 2) ? K-2 : 1],
  output logic [$clog2(EVICT_TH+2)-1:0] evict_cnt,
  // per-window verdict
  output logic       res_valid,
  output logic       res_dup,
  output logic       res_loop
);
  localparam int unsigned EL = (K > 2) ? K - 2 : 1;
  localparam int unsigned PW = (K > 1) ? $clog2(K) : 1;

  typedef enum logic [1:0] {S_EMPTY, S_POINT, S_CAPTURE, S_LOOP} cstate_e;

  cstate_e    state;
  logic [PW-1:0] fill;      // capture: number of slots filled
  logic [PW-1:0] ptr;       // loop: slot matched last
  logic          synced;    // loop: in step with the captured sequence
  trc_label_e    prev;      // previous label, for duplication control
  logic          win_reset;
  logic          win_unflagged;
  logic          win_any;

  // Index helpers.
  function automatic logic [PW-1:0] nxt(logic [PW-1:0] p);
    return (32'(p) == K - 1) ? '0 : p + 1'b1;
  endfunction

  // Combinational view of the comparators for the incoming label.
  logic hit_point, hit_cap_last, hit_loop_adv, hit_loop_stay, hit_evict;
  always_comb begin
    hit_point     = (in_label == point_latch);
    hit_cap_last  = (fill != '0) && (in_label == capture_latch[fill - 1'b1]);
    hit_loop_adv  = synced ? (in_label == capture_latch[nxt(ptr)])
                           : (in_label == capture_latch[0]);
    hit_loop_stay = synced && (in_label == capture_latch[ptr]);
    hit_evict     = 1'b0;
    for (int i = 0; i < EL; i++)
      if (evict_latch[i] != LBL_NONE && evict_latch[i] == in_label) hit_evict = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_EMPTY;
      fill          <= '0;
      ptr           <= '0;
      synced        <= 1'b0;
      prev          <= LBL_NONE;
      point_latch   <= LBL_NONE;
      for (int i = 0; i < K; i++)  capture_latch[i] <= LBL_NONE;
      for (int i = 0; i < EL; i++) evict_latch[i]   <= LBL_NONE;
      evict_cnt     <= '0;
      out_valid     <= 1'b0;
      point_flag    <= 1'b0;
      capture_flag  <= 1'b0;
      evict_flag    <= 1'b0;
      dup_ctrl      <= 1'b0;
      loop_ctrl     <= 1'b0;
      win_reset     <= 1'b0;
      win_unflagged <= 1'b0;
      win_any       <= 1'b0;
      res_valid     <= 1'b0;
      res_dup       <= 1'b0;
      res_loop      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      res_valid <= 1'b0;

      if (start) begin
        win_reset     <= 1'b0;
        win_unflagged <= 1'b0;
        win_any       <= 1'b0;
      end

      if (in_valid) begin
        point_flag   <= 1'b0;
        capture_flag <= 1'b0;
        evict_flag   <= 1'b0;
        dup_ctrl     <= (prev != LBL_NONE) && (in_label == prev);
        prev         <= in_label;
        win_any      <= 1'b1;
        loop_ctrl    <= (state == S_LOOP);

        unique case (state)
          S_EMPTY: begin
            point_latch <= in_label;
            state       <= S_POINT;
          end
          S_POINT: begin
            if (hit_point) begin
              point_flag <= 1'b1;
            end else begin
              capture_latch[0] <= in_label;
              fill             <= PW'(1);
              state            <= S_CAPTURE;
              win_unflagged    <= 1'b1;
            end
          end
          S_CAPTURE: begin
            if (32'(fill) == K - 1) begin
              // last slot: taken by the next label whatever its value
              capture_latch[fill] <= in_label;
              state  <= S_LOOP;
              synced <= 1'b0;
              ptr    <= '0;
              win_unflagged <= 1'b1;
            end else if (hit_cap_last) begin
              capture_flag <= 1'b1;
            end else begin
              capture_latch[fill] <= in_label;
              fill <= fill + 1'b1;
              win_unflagged <= 1'b1;
            end
          end
          S_LOOP: begin
            if (hit_loop_adv || hit_loop_stay) begin
              capture_flag <= 1'b1;
              synced       <= 1'b1;
              if (hit_loop_adv) begin
                // progress through the sequence: strangers so far forgiven
                ptr <= synced ? nxt(ptr) : '0;
                for (int i = 0; i < EL; i++) evict_latch[i] <= LBL_NONE;
                evict_cnt <= '0;
              end
            end else if (hit_evict) begin
              evict_flag <= 1'b1;
            end else if (32'(evict_cnt) + 1 > EVICT_TH) begin
              // too many evictions: wrong pattern, back to the point process
              state       <= S_POINT;
              point_latch <= in_label;
              fill        <= '0;
              ptr         <= '0;
              synced      <= 1'b0;
              for (int i = 0; i < K; i++)  capture_latch[i] <= LBL_NONE;
              for (int i = 0; i < EL; i++) evict_latch[i]   <= LBL_NONE;
              evict_cnt     <= '0;
              win_reset     <= 1'b1;
              win_unflagged <= 1'b1;
            end else begin
              evict_latch[0] <= in_label;
              for (int i = 1; i < EL; i++) evict_latch[i] <= evict_latch[i-1];
              evict_cnt     <= evict_cnt + 1'b1;
              win_unflagged <= 1'b1;
            end
          end
          default: state <= S_EMPTY;
        endcase
      end

      if (in_done) begin
        res_valid <= 1'b1;
        res_loop  <= (state == S_LOOP) && !win_reset;
        res_dup   <= win_any && !win_unflagged;
      end
    end
  end

  // A window ends only between labels.
  a_done_alone: assert property (@(posedge clk) disable iff (!rst_n)
    !(in_done && in_valid));
endmodule
