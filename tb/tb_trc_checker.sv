// tb_trc_checker: drives ACT pulses with chosen and random gaps (1 ns
// clock) and checks every label against the 10 ns bins worked out here:
// < 70 ns short-A, < 80 short-B, < 90 short-C, <= 100 short-D, else long.
// The first ACT after reset must produce no label.
module tb_trc_checker;
  import marc_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       act, label_valid, label_short;
  trc_label_e label;

  trc_checker #(.T_CK_PS(1000)) dut (.*);

  int checks = 0, failures = 0;

  function automatic trc_label_e ref_label(int ns);
    if (ns < 70)       return LBL_A;
    else if (ns < 80)  return LBL_B;
    else if (ns < 90)  return LBL_C;
    else if (ns <= 100) return LBL_D;
    else               return LBL_L;
  endfunction

  // issue an ACT 'gap' cycles after the previous one and check the label
  task automatic act_after(int gap, bit expect_label);
    repeat (gap - 2) begin
      @(negedge clk);
      act = 0;
      checks++;
      if (label_valid) begin failures++; $display("FAIL spurious label"); end
    end
    @(negedge clk); act = 1;
    @(negedge clk); act = 0;
    checks++;
    if (label_valid !== expect_label) begin
      failures++; $display("FAIL gap %0d label_valid %0d", gap, label_valid);
    end
    if (expect_label) begin
      checks += 2;
      if (label !== ref_label(gap)) begin
        failures++; $display("FAIL gap %0d label %0d exp %0d", gap, label, ref_label(gap));
      end
      if (label_short !== (ref_label(gap) != LBL_L)) begin
        failures++; $display("FAIL gap %0d short %0d", gap, label_short);
      end
    end
  endtask

  int fixed [] = '{60, 69, 70, 79, 80, 89, 90, 99, 100, 101, 150, 400, 65, 93, 100};

  initial begin
    act = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    act = 1; @(negedge clk); act = 0;          // first ACT: no predecessor
    checks++;
    if (label_valid) begin failures++; $display("FAIL first ACT labelled"); end
    foreach (fixed[i]) act_after(fixed[i], 1);
    for (int i = 0; i < 300; i++) act_after(55 + ($urandom % 80), 1);
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
