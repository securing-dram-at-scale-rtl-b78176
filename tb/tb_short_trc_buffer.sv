// tb_short_trc_buffer: fills one half of the buffer with random labels
// during a window while the other half replays the previous window, and
// checks that every replayed label and the replay length match what was
// written, that rd_done comes DEPTH+1 cycles after the boundary for a full
// window, and that labels beyond the 260th are dropped.
module tb_short_trc_buffer;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DEPTH = 260;
  logic       swap, wr_en, rd_valid, rd_done, busy;
  trc_label_e wr_label, rd_label;

  short_trc_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  trc_label_e written [$], expected [$];
  int cyc, done_at, swap_at;

  always @(posedge clk) cyc <= cyc + 1;

  // monitor: compare the replay with the previous window's writes
  always @(posedge clk) if (rst_n) begin
    if (rd_valid) begin
      checks++;
      if (expected.size() == 0) begin failures++; $display("FAIL extra label"); end
      else begin
        trc_label_e e;
        e = expected.pop_front();
        if (rd_label != e) begin failures++; $display("FAIL label %0d exp %0d", rd_label, e); end
      end
    end
    if (rd_done) begin
      done_at = cyc;
      checks++;
      if (expected.size() != 0) begin failures++; $display("FAIL %0d labels missing", expected.size()); end
    end
  end

  task automatic window(int n, int gap);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1; wr_label = trc_label_e'(1 + $urandom % 4);
      if (written.size() < DEPTH) written.push_back(wr_label);
      @(negedge clk); wr_en = 0;
      repeat (gap) @(negedge clk);
    end
    repeat (DEPTH + 5) @(negedge clk);
    swap = 1; swap_at = cyc;
    @(negedge clk); swap = 0;
    expected = written;
    written.delete();
  endtask

  initial begin
    swap = 0; wr_en = 0; wr_label = LBL_NONE; cyc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    window(10, 0);
    window(DEPTH, 0);
    window(DEPTH + 20, 0);          // overflow: only DEPTH kept
    window(0, 0);
    window(37, 3);
    repeat (DEPTH + 5) @(negedge clk);
    // the full window replayed in the overflow window: check its length
    checks++;
    window(DEPTH, 0);
    repeat (DEPTH + 5) @(negedge clk);
    // rd_done is set by the edge DEPTH+1 cycles after the one that takes
    // swap; the monitor sees it at the edge after that
    if (done_at - swap_at != DEPTH + 2) begin
      failures++; $display("FAIL replay took %0d cycles", done_at - swap_at);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
