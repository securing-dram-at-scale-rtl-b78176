// marc_top: MARC for a whole LPDDR5 channel. One detector per bank watches
// the ACT timing of its bank and, on a detected row hammer pattern, raises
// the bank's RH_DETECT and an ARFM level; one RAA counter per bank turns the
// level into RFM requests for the memory controller (RAAIMT lowered from 248
// to 128/64/32 as the level rises from A to C).
//
// The top sits on the command bus between memory controller and DRAM, as
// the paper's ARFM model does, and takes no address. Commands are decoded
// by the controller into pulses: act_valid with act_bank, an all-bank
// ref_valid (the tREFi window boundary of every bank), and rfm_valid with
// rfm_bank when the controller issues an RFM. NUM_BANKS = 16 (the LPDDR5
// bank count) and the all-bank REF are this design's choices; the paper
// only says "x num_Bank".
//
// Timing: outputs are registered. rfm_req/rfm_urgent follow RAACNT of the
// previous cycle; rh_detect/arfm_level change only at REF. An assertion
// checks that no ACT reaches a bank while its rfm_urgent is high.
module marc_top
  import marc_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 16,
  parameter int unsigned T_CK_PS   = 1000,
  parameter int unsigned DEPTH     = BUF_DEPTH,
  parameter int unsigned S_TRC_TH  = 130,
  parameter int unsigned K         = 3,
  parameter int unsigned EVICT_TH  = 2,
  parameter int unsigned LVL_STEP  = 2,
  parameter int unsigned RAA_W     = 12
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         act_valid,
  input  logic [$clog2(NUM_BANKS)-1:0] act_bank,
  input  logic                         ref_valid,
  input  logic                         rfm_valid,
  input  logic [$clog2(NUM_BANKS)-1:0] rfm_bank,
  output logic [NUM_BANKS-1:0]         rh_detect,
  output arfm_level_e                  arfm_level [NUM_BANKS],
  output logic [NUM_BANKS-1:0]         rfm_req,
  output logic [NUM_BANKS-1:0]         rfm_urgent,
  output logic [RAA_W-1:0]             raacnt [NUM_BANKS]
);
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic act_b, rfm_b;
    logic dup_b, loop_b;
    logic [$clog2(DEPTH+1)-1:0] cnt_b;

    assign act_b = act_valid && (act_bank == b[$clog2(NUM_BANKS)-1:0]);
    assign rfm_b = rfm_valid && (rfm_bank == b[$clog2(NUM_BANKS)-1:0]);

    marc_bank #(
      .T_CK_PS(T_CK_PS), .DEPTH(DEPTH), .S_TRC_TH(S_TRC_TH),
      .K(K), .EVICT_TH(EVICT_TH), .LVL_STEP(LVL_STEP)
    ) u_marc (
      .clk, .rst_n, .act(act_b), .ref_cmd(ref_valid),
      .rh_detect(rh_detect[b]), .dup_detect(dup_b), .loop_detect(loop_b),
      .arfm_level(arfm_level[b]), .short_cnt(cnt_b)
    );

    raa_counter #(.CW(RAA_W)) u_raa (
      .clk, .rst_n, .act(act_b), .ref_cmd(ref_valid), .rfm_cmd(rfm_b),
      .level(arfm_level[b]), .raacnt(raacnt[b]),
      .rfm_req(rfm_req[b]), .rfm_urgent(rfm_urgent[b])
    );

    logic unused_b;
    assign unused_b = dup_b ^ loop_b ^ (^cnt_b);

    // Command rule for the controller: once RAACNT has reached RAAMMT the
    // bank takes no further ACT until an RFM has brought the count down.
    a_no_act_at_mmt: assert property (@(posedge clk) disable iff (!rst_n)
      rfm_urgent[b] |-> !act_b);
  end
endmodule
