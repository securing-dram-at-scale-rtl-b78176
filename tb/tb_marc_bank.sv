// tb_marc_bank: one bank's detector at its default sizes (1 ns clock, REF
// every 15.6 us, 260-entry buffer). Each window is driven with one kind of
// ACT stream and the RH_DETECT / ARFM level seen two windows later is
// checked against the kind of that window:
//   loop   : tRC 65, 85, 95 ns repeated      -> attack (looping pattern)
//   dup    : tRC 75 ns repeated              -> attack (duplication)
//   long   : tRC 150 ns repeated             -> normal (too few short tRCs)
//   normal : random tRC 150..600 ns          -> normal
//   rshort : random tRC 61..99 ns            -> normal (no repeating pattern)
// The level must follow A, B, C over consecutive attack windows and drop to
// default after a normal one. An attack window that directly follows
// random-short traffic may be missed: the engine may first have to drop the
// sequence it captured from the random labels and capture the new one. Its
// verdict is free, and the level model follows the verdict actually given.
module tb_marc_bank;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int TREFI = 15600;   // cycles of 1 ns
  localparam int TRFC  = 280;     // no ACT for this long after REF

  logic act, ref_cmd, rh_detect, dup_detect, loop_detect;
  arfm_level_e arfm_level;
  logic [8:0] short_cnt;

  marc_bank dut (.*);

  int checks = 0, failures = 0;
  typedef enum int {K_LOOP, K_DUP, K_LONG, K_NORMAL, K_RSHORT} kind_e;
  int n_dup = 0, n_loop = 0, n_lvl [4];

  function automatic int next_trc(kind_e k, int idx);
    int loopv [3] = '{65, 85, 95};
    case (k)
      K_LOOP:   return loopv[idx % 3];
      K_DUP:    return 75;
      K_LONG:   return 150;
      K_NORMAL: return 150 + $urandom % 451;
      default:  return 61 + $urandom % 39;
    endcase
  endfunction

  // drive one tREFi window of the given kind, ending with a REF
  task automatic window(kind_e k);
    int t = 0, nxt = TRFC, idx = 0;
    while (t < TREFI - 1) begin
      @(negedge clk);
      act = (t == nxt);
      if (act) begin nxt = t + next_trc(k, idx); idx++; end
      t++;
    end
    @(negedge clk); act = 0; ref_cmd = 1;
    @(negedge clk); ref_cmd = 0;
  endtask

  kind_e sched [] = '{K_LOOP, K_LOOP, K_LOOP, K_LOOP, K_LOOP, K_LOOP, K_NORMAL,
                      K_DUP, K_DUP, K_DUP, K_LONG, K_RSHORT, K_RSHORT, K_LOOP,
                      K_NORMAL, K_NORMAL, K_NORMAL};

  initial begin
    int run = 0;
    act = 0; ref_cmd = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (sched[w]) begin
      window(sched[w]);
      // the REF that ends window w judges window w-1
      if (w >= 1) begin
        bit att;
        arfm_level_e lv;
        att = sched[w-1] inside {K_LOOP, K_DUP};
        if (att && w >= 2 && sched[w-2] == K_RSHORT) att = rh_detect;
        run = att ? run + 1 : 0;
        lv = (run == 0) ? LVL_DEFAULT : (run >= 5) ? LVL_C : (run >= 3) ? LVL_B : LVL_A;
        checks += 2;
        if (rh_detect != att) begin
          failures++; $display("FAIL window %0d (kind %0d): rh_detect %0d", w-1, sched[w-1], rh_detect);
        end
        if (arfm_level != lv) begin
          failures++; $display("FAIL window %0d: level %0d exp %0d", w-1, arfm_level, lv);
        end
        n_dup += dup_detect; n_loop += loop_detect; n_lvl[arfm_level]++;
      end
    end
    checks += 6;
    if (n_dup == 0)  begin failures++; $display("FAIL duplication never detected"); end
    if (n_loop == 0) begin failures++; $display("FAIL loop never detected"); end
    foreach (n_lvl[i]) if (n_lvl[i] == 0) begin failures++; $display("FAIL level %0d never reached", i); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * TREFI) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
