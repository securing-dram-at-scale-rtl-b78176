// tb_inspection_control: feeds window verdicts (short count over the
// threshold, duplication, loop) and checks RH_DETECT and the ARFM level
// after each boundary against a model kept here: an attack window needs
// the count condition and either pattern; the level is A from the first
// attack window, B from the third, C from the fifth consecutive one, and
// falls to default on a normal window or on a window with no verdict.
module tb_inspection_control;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, over_th, res_valid, res_dup, res_loop;
  logic dup_detect, loop_detect, rh_detect;
  arfm_level_e arfm_level;
  logic [3:0] timer;

  inspection_control #(.LVL_STEP(2), .TMR_W(4)) dut (.*);

  int checks = 0, failures = 0;
  int run = 0;
  int n_lvl [4];

  task automatic window(bit ov, bit d, bit l, bit give_verdict);
    bit att;
    arfm_level_e lv;
    @(negedge clk);
    res_valid = give_verdict; res_dup = d; res_loop = l;
    @(negedge clk); res_valid = 0;
    repeat (5) @(negedge clk);
    over_th = ov;
    swap = 1;
    @(negedge clk); swap = 0;
    att = ov && give_verdict && (d || l);
    run = att ? run + 1 : 0;
    if (run == 0) lv = LVL_DEFAULT;
    else if (run >= 5) lv = LVL_C;
    else if (run >= 3) lv = LVL_B;
    else lv = LVL_A;
    n_lvl[lv]++;
    checks += 4;
    if (rh_detect != att) begin failures++; $display("FAIL rh %0d exp %0d", rh_detect, att); end
    if (arfm_level != lv) begin failures++; $display("FAIL level %0d exp %0d (run %0d)", arfm_level, lv, run); end
    if (dup_detect != (ov && give_verdict && d)) begin failures++; $display("FAIL dup_detect"); end
    if (loop_detect != (ov && give_verdict && l)) begin failures++; $display("FAIL loop_detect"); end
  endtask

  initial begin
    swap = 0; over_th = 0; res_valid = 0; res_dup = 0; res_loop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    window(1, 1, 0, 1);   // A
    window(1, 0, 1, 1);   // A
    window(1, 1, 1, 1);   // B
    window(1, 1, 0, 1);   // B
    window(1, 0, 1, 1);   // C
    for (int i = 0; i < 20; i++) window(1, 1, 0, 1);  // C, timer saturates
    window(0, 1, 1, 1);   // count too low: default
    window(1, 0, 0, 1);   // no pattern
    window(1, 1, 1, 0);   // no verdict in the window
    for (int i = 0; i < 200; i++)
      window(1'($urandom % 4 != 0), 1'($urandom % 2), 1'($urandom % 2), 1'($urandom % 8 != 0));
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (n_lvl[i] == 0) begin failures++; $display("FAIL level %0d never reached", i); end
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
