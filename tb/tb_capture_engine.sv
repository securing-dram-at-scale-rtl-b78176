// tb_capture_engine: checks the capture engine against the worked example
// of the capture & duplication sequence (26 labels C C D D C C A A A C D D
// C C ... with K = 3): every per-label flag, loop control and the latch
// contents at the marked instants. Then checks the window verdicts: a
// steady loop window, a window broken by evictions (reset), and a pure
// duplication window after reset.
module tb_capture_engine;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, in_valid, in_done;
  trc_label_e in_label;
  logic       out_valid, point_flag, capture_flag, evict_flag, dup_ctrl, loop_ctrl;
  trc_label_e point_latch;
  trc_label_e capture_latch [3];
  trc_label_e evict_latch [1];
  logic [1:0] evict_cnt;
  logic       res_valid, res_dup, res_loop;

  capture_engine #(.K(3), .EVICT_TH(2)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Example sequence and expected waveforms (1-based T index).
  trc_label_e seq [26];
  string      seq_s = "CCDDCCAAACDDCCDDCCDDCCDDCC";
  bit exp_dup   [26] = '{0,1,0,1,0,1,0,1,1,0,0,1,0,1,0,1,0,1,0,1,0,1,0,1,0,1};
  bit exp_loop  [26] = '{0,0,0,0,0,0,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1};
  bit exp_point [26] = '{0,1,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0};
  bit exp_cap   [26] = '{0,0,0,1,0,0,0,0,0,0,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1,1};
  bit exp_evict [26] = '{0,0,0,0,0,0,0,1,1,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0,0};

  function automatic trc_label_e chr2lbl(byte c);
    case (c)
      "A": return LBL_A;
      "B": return LBL_B;
      "C": return LBL_C;
      "D": return LBL_D;
      default: return LBL_NONE;
    endcase
  endfunction

  task automatic push(trc_label_e l);
    @(negedge clk);
    in_valid = 1; in_label = l;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic window_start();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
  endtask

  task automatic window_end(int exp_dup_v, int exp_loop_v, string tag);
    @(negedge clk); in_done = 1;
    @(negedge clk); in_done = 0;
    check({tag, " res_valid"}, res_valid, 1);
    check({tag, " res_dup"},   res_dup,   exp_dup_v);
    check({tag, " res_loop"},  res_loop,  exp_loop_v);
  endtask

  initial begin
    start = 0; in_valid = 0; in_done = 0; in_label = LBL_NONE;
    for (int i = 0; i < 26; i++) seq[i] = chr2lbl(seq_s[i]);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- worked example ----
    window_start();
    for (int t = 0; t < 26; t++) begin
      push(seq[t]);
      check($sformatf("T%0d out_valid", t+1), out_valid, 1);
      check($sformatf("T%0d dup_ctrl", t+1), dup_ctrl, exp_dup[t]);
      check($sformatf("T%0d loop_ctrl", t+1), loop_ctrl, exp_loop[t]);
      check($sformatf("T%0d point_flag", t+1), point_flag, exp_point[t]);
      check($sformatf("T%0d capture_flag", t+1), capture_flag, exp_cap[t]);
      check($sformatf("T%0d evict_flag", t+1), evict_flag, exp_evict[t]);
      case (t + 1)
        1:  begin check("T1 point", point_latch, LBL_C);
                  check("T1 cap0", capture_latch[0], LBL_NONE); end
        3:  begin check("T3 cap0", capture_latch[0], LBL_D);
                  check("T3 cap1", capture_latch[1], LBL_NONE); end
        5:  begin check("T5 cap1", capture_latch[1], LBL_C);
                  check("T5 cap2", capture_latch[2], LBL_NONE); end
        6:  begin check("T6 cap2", capture_latch[2], LBL_C);
                  check("T6 evcnt", evict_cnt, 0); end
        7:  begin check("T7 evl", evict_latch[0], LBL_A);
                  check("T7 evcnt", evict_cnt, 1); end
        10: begin check("T10 evl", evict_latch[0], LBL_C);
                  check("T10 evcnt", evict_cnt, 2);
                  check("T10 point", point_latch, LBL_C); end
        11: begin check("T11 evl", evict_latch[0], LBL_NONE);
                  check("T11 evcnt", evict_cnt, 0);
                  check("T11 cap0", capture_latch[0], LBL_D); end
        default: ;
      endcase
    end
    // latch fills inside the window: not a duplication window; loop held
    window_end(0, 1, "example");

    // ---- steady loop window: every label matches ----
    window_start();
    for (int r = 0; r < 10; r++) begin
      push(LBL_D); push(LBL_D); push(LBL_C); push(LBL_C);
    end
    window_end(1, 1, "steady");

    // ---- broken pattern: three different strangers reset the engine ----
    window_start();
    push(LBL_D); push(LBL_C);
    push(LBL_A); push(LBL_B);
    check("before reset loop", dut.state == 2'd3, 1);
    push(LBL_A);
    check("reset point", point_latch, LBL_A);
    check("reset cap0", capture_latch[0], LBL_NONE);
    check("reset evcnt", evict_cnt, 0);
    push(LBL_A);
    check("after reset point flag", point_flag, 1);
    window_end(0, 0, "broken");

    // ---- pure duplication after a hardware reset ----
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
    window_start();
    for (int i = 0; i < 20; i++) begin
      push(LBL_B);
      check($sformatf("dup %0d point_flag", i), point_flag, i > 0);
      check($sformatf("dup %0d loop_ctrl", i), loop_ctrl, 0);
    end
    window_end(1, 0, "duplication");

    // ---- empty window ----
    window_start();
    window_end(0, 0, "empty");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
