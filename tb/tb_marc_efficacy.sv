// tb_marc_efficacy: detection-efficacy workload on one bank at default
// sizes. For each pattern size N a random combination of N tRC values is
// drawn and repeated back to back for several tREFi windows (e.g. N = 3:
// [65 93 100 65 93 100 ...]); the share of judged windows flagged by
// RH_DETECT is the recognition rate. Short combinations draw tRC from
// 60..100 ns, long ones from 101..300 ns. Shorter runs than a full 512 ms
// refresh window keep the simulation brief.
// Checked: long-tRC patterns are never flagged; single-value (duplication)
// and 2- and 3-value loops are flagged in every judged window; the rates of
// the remaining sizes are printed.
module tb_marc_efficacy;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int TREFI   = 15600;
  localparam int TRFC    = 280;
  localparam int NPAT    = 40;   // random combinations per size
  localparam int NWIN    = 5;    // windows per combination

  logic act, ref_cmd, rh_detect, dup_detect, loop_detect;
  arfm_level_e arfm_level;
  logic [8:0] short_cnt;

  marc_bank dut (.*);

  int checks = 0, failures = 0;
  int combo [$];

  task automatic run_pattern(output int judged, output int flagged);
    int t, nxt, idx;
    idx = 0; judged = 0; flagged = 0;
    // restart the detector so every combination starts from scratch
    @(negedge clk); rst_n = 0;
    @(negedge clk); rst_n = 1;
    for (int w = 0; w < NWIN; w++) begin
      t = 0; nxt = TRFC;
      while (t < TREFI - 1) begin
        @(negedge clk);
        act = (t == nxt);
        if (act) begin nxt = t + combo[idx % combo.size()]; idx++; end
        t++;
      end
      @(negedge clk); act = 0; ref_cmd = 1;
      @(negedge clk); ref_cmd = 0;
      // windows 0 and 1 are still filling the pipeline
      if (w >= 2) begin judged++; flagged += rh_detect; end
    end
  endtask

  int sizes [] = '{1, 2, 3, 5, 7, 10, 15, 20, 50, 90};

  initial begin
    int j, f, tj, tf;
    act = 0; ref_cmd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sizes[s]) begin
      for (int longp = 0; longp < 2; longp++) begin
        tj = 0; tf = 0;
        for (int p = 0; p < NPAT; p++) begin
          combo.delete();
          for (int i = 0; i < sizes[s]; i++)
            combo.push_back(longp ? 101 + $urandom % 200 : 60 + $urandom % 41);
          run_pattern(j, f);
          tj += j; tf += f;
        end
        $display("N=%0d %s tRC: recognised %0d of %0d windows (%0d%%)",
                 sizes[s], longp ? "long " : "short", tf, tj, 100 * tf / tj);
        checks++;
        if (longp && tf != 0) begin failures++; $display("FAIL long pattern flagged"); end
        if (!longp && sizes[s] <= 3 && tf != tj) begin failures++; $display("FAIL simple pattern missed"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * 10 * NPAT * (NWIN + 1) * (TREFI + 10)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
