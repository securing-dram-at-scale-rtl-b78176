// tb_raa_counter: random ACT/REF/RFM traffic at every ARFM level, checked
// cycle by cycle against a reference RAACNT using the level table
// (RAAIMT 248/128/64/32, RAAMMT = 8 x RAAIMT, RAADEC per REF = RAAIMT,
// per RFM = 4 x RAAIMT): RAACNT never below zero, RFM requested while
// RAACNT > RAAIMT, urgent at RAACNT >= RAAMMT.
module tb_raa_counter;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic act, ref_cmd, rfm_cmd, rfm_req, rfm_urgent;
  arfm_level_e level;
  logic [11:0] raacnt;

  raa_counter #(.CW(12)) dut (.*);

  int checks = 0, failures = 0;
  int model = 0;
  int n_req = 0, n_urg = 0;

  function automatic int imt_of(arfm_level_e l);
    case (l) LVL_A: return 128; LVL_B: return 64; LVL_C: return 32; default: return 248; endcase
  endfunction

  task automatic step(bit a, bit r, bit f, arfm_level_e l);
    int imt;
    @(negedge clk);
    act = a; ref_cmd = r; rfm_cmd = f; level = l;
    imt = imt_of(l);
    model = model + a;
    if (model > 4095) model = 4095;
    model = model - (r ? imt : 0) - (f ? 4 * imt : 0);
    if (model < 0) model = 0;
    @(negedge clk);
    act = 0; ref_cmd = 0; rfm_cmd = 0;
    checks += 3;
    if (raacnt != model) begin failures++; $display("FAIL raacnt %0d exp %0d", raacnt, model); end
    if (rfm_req != (model > imt)) begin failures++; $display("FAIL rfm_req at %0d lvl %0d", model, l); end
    if (rfm_urgent != (model >= 8 * imt)) begin failures++; $display("FAIL urgent at %0d lvl %0d", model, l); end
    n_req += rfm_req; n_urg += rfm_urgent;
  endtask

  initial begin
    act = 0; ref_cmd = 0; rfm_cmd = 0; level = LVL_DEFAULT;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // default level: 249 ACTs raise the request, a REF removes 248
    for (int i = 0; i < 249; i++) step(1, 0, 0, LVL_DEFAULT);
    step(0, 1, 0, LVL_DEFAULT);
    // level C: fill to RAAMMT = 256, then RFM removes 128
    for (int i = 0; i < 260; i++) step(1, 0, 0, LVL_C);
    step(0, 0, 1, LVL_C);
    step(1, 1, 1, LVL_C);
    for (int i = 0; i < 4000; i++)
      step(1'($urandom % 4 != 0), 1'($urandom % 150 == 0), 1'($urandom % 100 == 0),
           arfm_level_e'($urandom % 4));
    checks += 2;
    if (n_req == 0) begin failures++; $display("FAIL no request seen"); end
    if (n_urg == 0) begin failures++; $display("FAIL no urgent seen"); end
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
