// tb_marc_top: end-to-end run of the whole design at its default sizes
// (16 banks, 1 ns clock, REF every 15.6 us, 260-entry buffers). A small
// memory-controller model shares one ACT per cycle among the banks, issues
// an all-bank REF every tREFi, blocks ACTs for tRFC after it, and answers
// RFM requests (bank 3 as soon as requested, bank 7 only when urgent).
// Bank roles per window:
//   bank 3  : looping attack tRC 65/85/95 ns in windows 0..6, then normal
//   bank 7  : duplication attack tRC 75 ns in windows 2..8, else normal
//   bank 11 : random short tRC 61..99 ns (many short tRCs, no pattern)
//   bank 5  : constant long tRC 150 ns
//   others  : random tRC 150..600 ns
// Checked: RH_DETECT and ARFM level of every bank at every REF (judging the
// window before the last), no RFM for any bank whose level is default, and
// a steady RFM rate for the attacked bank at level C. Every mechanism
// (duplication, loop, eviction reset, levels A/B/C, return to default, RFM
// request, urgent RFM) is counted and must occur.
module tb_marc_top;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NB    = 16;
  localparam int TREFI = 15600;
  localparam int TRFC  = 280;
  localparam int TRFM  = 120;
  localparam int NWIN  = 13;

  logic          act_valid, ref_valid, rfm_valid;
  logic [3:0]    act_bank, rfm_bank;
  logic [NB-1:0] rh_detect, rfm_req, rfm_urgent;
  arfm_level_e   arfm_level [NB];
  logic [11:0]   raacnt [NB];

  marc_top dut (.*);

  int checks = 0, failures = 0;
  typedef enum int {K_LOOP, K_DUP, K_LONG, K_NORMAL, K_RSHORT} kind_e;

  function automatic kind_e kind_of(int b, int w);
    if (b == 3)  return (w <= 6) ? K_LOOP : K_NORMAL;
    if (b == 7)  return (w >= 2 && w <= 8) ? K_DUP : K_NORMAL;
    if (b == 11) return K_RSHORT;
    if (b == 5)  return K_LONG;
    return K_NORMAL;
  endfunction

  function automatic int next_trc(kind_e k, int idx);
    case (k)
      K_LOOP:   return (idx % 3 == 0) ? 65 : (idx % 3 == 1) ? 85 : 95;
      K_DUP:    return 75;
      K_LONG:   return 150;
      K_NORMAL: return 150 + $urandom % 451;
      default:  return 61 + $urandom % 39;
    endcase
  endfunction

  // mechanism counters
  int n_dup = 0, n_loop = 0, n_reset = 0, n_lvl [4], n_back = 0;
  int n_rfm = 0, n_urgent_rfm = 0, n_rfm_default = 0, n_rfm_c3 = 0, n_win_c3 = 0, n_act_c3 = 0;

  // probes into each bank's detector
  logic [NB-1:0] p_reset, p_dup, p_loop;
  for (genvar g = 0; g < NB; g++) begin : g_probe
    assign p_dup[g]  = dut.g_bank[g].u_marc.dup_detect;
    assign p_loop[g] = dut.g_bank[g].u_marc.loop_detect;
    // a label in the loop state that matches nothing with two evictions
    // already counted: the engine falls back to the point process
    assign p_reset[g] = dut.g_bank[g].u_marc.u_cap.in_valid &&
                        dut.g_bank[g].u_marc.u_cap.state == 2'd3 &&
                        !dut.g_bank[g].u_marc.u_cap.hit_loop_adv &&
                        !dut.g_bank[g].u_marc.u_cap.hit_loop_stay &&
                        !dut.g_bank[g].u_marc.u_cap.hit_evict &&
                        dut.g_bank[g].u_marc.u_cap.evict_cnt == 2'd2;
  end

  always @(posedge clk) if (rst_n) n_reset += $countones(p_reset);

  int w = 0;
  int t_in_win = 0;
  int next_act [NB], idx [NB], busy_until [NB];
  int rr = 0;
  int exp_run [NB];
  kind_e hist [NB][NWIN];

  initial begin
    act_valid = 0; ref_valid = 0; rfm_valid = 0; act_bank = 0; rfm_bank = 0;
    for (int b = 0; b < NB; b++) begin next_act[b] = TRFC + 7 * b; idx[b] = 0; busy_until[b] = 0; exp_run[b] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (w = 0; w < NWIN; w++) begin
      for (int b = 0; b < NB; b++) hist[b][w] = kind_of(b, w);
      for (t_in_win = 0; t_in_win < TREFI - 1; t_in_win++) begin
        @(negedge clk);
        act_valid = 0; rfm_valid = 0; ref_valid = 0;
        // RFM: bank 3 on request, bank 7 only when urgent, others on request
        for (int i = 0; i < NB; i++) begin
          int b;
          b = (rr + i) % NB;
          if (!rfm_valid && t_in_win >= busy_until[b] &&
              ((b == 7) ? rfm_urgent[b] : rfm_req[b])) begin
            rfm_valid = 1; rfm_bank = 4'(b);
            busy_until[b] = t_in_win + TRFM;
            if (next_act[b] < busy_until[b]) next_act[b] = busy_until[b];
            n_rfm++;
            if (rfm_urgent[b]) n_urgent_rfm++;
            if (arfm_level[b] == LVL_DEFAULT) n_rfm_default++;
            if (b == 3 && arfm_level[b] == LVL_C) n_rfm_c3++;
          end
        end
        // ACT: one bank per cycle, round robin among those due
        for (int i = 0; i < NB; i++) begin
          int b;
          b = (rr + i) % NB;
          if (!act_valid && t_in_win >= next_act[b] && t_in_win >= busy_until[b] &&
              !rfm_urgent[b] && !(rfm_valid && rfm_bank == 4'(b))) begin
            act_valid = 1; act_bank = 4'(b);
            next_act[b] = t_in_win + next_trc(hist[b][w], idx[b]);
            if (b == 3 && arfm_level[b] == LVL_C) n_act_c3++;
            idx[b]++;
          end
        end
        rr = (rr + 1) % NB;
      end
      // all-bank REF closes the window
      @(negedge clk);
      act_valid = 0; rfm_valid = 0; ref_valid = 1;
      @(negedge clk);
      ref_valid = 0;
      for (int b = 0; b < NB; b++) begin
        next_act[b] = (next_act[b] - TREFI > TRFC) ? next_act[b] - TREFI : TRFC;
        busy_until[b] = 0;
      end
      // check the verdicts on window w-1
      if (w >= 1) begin
        for (int b = 0; b < NB; b++) begin
          bit att;
          arfm_level_e lv;
          att = hist[b][w-1] inside {K_LOOP, K_DUP};
          if (!att && exp_run[b] > 0) n_back++;
          exp_run[b] = att ? exp_run[b] + 1 : 0;
          lv = (exp_run[b] == 0) ? LVL_DEFAULT : (exp_run[b] >= 5) ? LVL_C :
               (exp_run[b] >= 3) ? LVL_B : LVL_A;
          checks += 2;
          if (rh_detect[b] != att) begin
            failures++; $display("FAIL bank %0d window %0d: rh_detect %0d", b, w-1, rh_detect[b]);
          end
          if (arfm_level[b] != lv) begin
            failures++; $display("FAIL bank %0d window %0d: level %0d exp %0d", b, w-1, arfm_level[b], lv);
          end
          n_lvl[arfm_level[b]]++;
          n_dup  += p_dup[b];
          n_loop += p_loop[b];
          if (b == 3 && arfm_level[b] == LVL_C) n_win_c3++;
        end
      end
    end
    $display("mechanisms: dup=%0d loop=%0d evict_reset=%0d lvl=%0d/%0d/%0d/%0d back_to_default=%0d rfm=%0d urgent_rfm=%0d rfm_at_C(bank3)=%0d over %0d windows, %0d ACTs",
             n_dup, n_loop, n_reset, n_lvl[0], n_lvl[1], n_lvl[2], n_lvl[3], n_back,
             n_rfm, n_urgent_rfm, n_rfm_c3, n_win_c3, n_act_c3);
    checks += 11;
    if (n_dup == 0)        begin failures++; $display("FAIL no duplication detected"); end
    if (n_loop == 0)       begin failures++; $display("FAIL no loop detected"); end
    if (n_reset == 0)      begin failures++; $display("FAIL no eviction reset"); end
    if (n_lvl[1] == 0)     begin failures++; $display("FAIL level A never reached"); end
    if (n_lvl[2] == 0)     begin failures++; $display("FAIL level B never reached"); end
    if (n_lvl[3] == 0)     begin failures++; $display("FAIL level C never reached"); end
    if (n_back == 0)       begin failures++; $display("FAIL never back to default"); end
    if (n_rfm == 0)        begin failures++; $display("FAIL no RFM"); end
    if (n_urgent_rfm == 0) begin failures++; $display("FAIL no urgent RFM"); end
    if (n_rfm_default != 0) begin failures++; $display("FAIL %0d RFMs at default level", n_rfm_default); end
    // level C: an RFM is due once RAACNT exceeds 32 and brings it back to
    // zero, so at most 33 ACTs pass between RFMs; each REF (and the entry
    // into level C) can absorb at most 32 more
    if (n_win_c3 == 0 || n_rfm_c3 < (n_act_c3 - 32 * (n_win_c3 + 1)) / 33) begin
      failures++; $display("FAIL too few RFMs at level C: %0d for %0d ACTs", n_rfm_c3, n_act_c3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NWIN + 2) * TREFI) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
