// tb_short_trc_counter: counts random numbers of short-tRC pulses per
// window and checks the held count and the S_tRC_TH comparison after every
// window boundary, including an increment in the boundary cycle itself and
// saturation at the buffer depth.
module tb_short_trc_counter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DEPTH = 260, TH = 130;
  logic swap, inc, over_th;
  logic [8:0] cnt_hold;

  short_trc_counter #(.DEPTH(DEPTH), .S_TRC_TH(TH)) dut (.*);

  int checks = 0, failures = 0;

  task automatic window(int n, bit inc_at_swap);
    int exp;
    for (int i = 0; i < n; i++) begin
      @(negedge clk); inc = 1;
      @(negedge clk); inc = 0;
    end
    @(negedge clk); swap = 1; inc = inc_at_swap;
    @(negedge clk); swap = 0; inc = 0;
    exp = n + inc_at_swap;
    if (exp > DEPTH) exp = DEPTH;
    checks += 2;
    if (cnt_hold != exp) begin failures++; $display("FAIL cnt %0d exp %0d", cnt_hold, exp); end
    if (over_th != (exp > TH)) begin failures++; $display("FAIL over_th for %0d", exp); end
  endtask

  initial begin
    swap = 0; inc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    window(0, 0);
    window(130, 0);
    window(130, 1);
    window(131, 0);
    window(259, 1);
    window(300, 0);
    for (int i = 0; i < 20; i++) window($urandom % 270, 1'($urandom % 2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
