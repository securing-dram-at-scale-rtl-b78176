// short_trc_buffer: holds the short tRC labels of one tREFi window and
// replays them, in arrival order, during the next window.
//
// The paper sizes the buffer at tREFi / tRCmin = 260 entries of 3 bits, the
// most ACTs one bank can see in a tREFi window. MARC works as a pipeline
// (store in window n, capture in window n+1, inspect in window n+2), so the
// buffer here has two halves used in turn: while one half fills with the
// labels of the current window, the other is read out to the capture stage.
// The two-half organisation and the one-label-per-cycle replay are this
// design's choices; the paper only draws a stacked buffer.
//
// Interface: wr_en/wr_label store one short label (ignored once the half is
// full). swap, a one-cycle pulse at each REF command (the window boundary),
// freezes the filled half and starts replaying it: rd_valid/rd_label deliver
// one label per cycle from entry 0, and rd_done pulses one cycle after the
// last one (or one cycle after swap when the window held no short label).
// Timing: a full half replays in DEPTH+1 cycles, which must fit in a window.
module short_trc_buffer
  import marc_pkg::*;
#(
  parameter int unsigned DEPTH = BUF_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       swap,
  input  logic       wr_en,
  input  trc_label_e wr_label,
  output logic       rd_valid,
  output trc_label_e rd_label,
  output logic       rd_done,
  output logic       busy
);
  localparam int unsigned AW = $clog2(DEPTH + 1);

  logic [2:0]    mem [2][DEPTH];
  logic          wsel;            // half being written
  logic [AW-1:0] wcnt;            // entries written in the current window
  logic [AW-1:0] rcnt;            // entries frozen in the half being read
  logic [AW-1:0] raddr;
  logic          reading;

  always_ff @(posedge clk) begin
    if (wr_en && wcnt < AW'(DEPTH))
      mem[wsel][wcnt[$clog2(DEPTH)-1:0]] <= wr_label;
    rd_label <= trc_label_e'(mem[~wsel][raddr[$clog2(DEPTH)-1:0]]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel     <= 1'b0;
      wcnt     <= '0;
      rcnt     <= '0;
      raddr    <= '0;
      reading  <= 1'b0;
      rd_valid <= 1'b0;
      rd_done  <= 1'b0;
    end else begin
      rd_valid <= 1'b0;
      rd_done  <= 1'b0;
      if (swap) begin
        wsel    <= ~wsel;
        rcnt    <= (wr_en && wcnt < AW'(DEPTH)) ? wcnt + 1'b1 : wcnt;
        wcnt    <= '0;
        raddr   <= '0;
        reading <= 1'b1;
      end else begin
        if (wr_en && wcnt < AW'(DEPTH)) wcnt <= wcnt + 1'b1;
        if (reading) begin
          if (raddr == rcnt) begin
            reading <= 1'b0;
            rd_done <= 1'b1;
          end else begin
            rd_valid <= 1'b1;
            raddr    <= raddr + 1'b1;
          end
        end
      end
    end
  end

  assign busy = reading;

  // The replay of one window must end before the next window boundary.
  a_replay_fits: assert property (@(posedge clk) disable iff (!rst_n)
    swap |-> !reading);
endmodule
