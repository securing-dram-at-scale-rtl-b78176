// raa_counter: the per-bank rolling accumulated ACT counter (RAACNT) that
// decides when an RFM command is due, with thresholds switched by the ARFM
// level that MARC requests.
//
// RFM is enabled when tREFi >= RFMTH, with RFMTH = RAAIMT x tRCmin (checked
// once, on the parameters). Each ACT adds one to RAACNT; each REF subtracts
// RAADEC-per-REF and each RFM subtracts RAADEC-per-RFM, not going below
// zero. An RFM is requested while RAACNT > RAAIMT, and becomes mandatory
// (no further ACT allowed) once RAACNT reaches RAAMMT. The flow and the
// level table (RAAIMT 248/128/64/32 for default/A/B/C, RAAMMT = 8 x RAAIMT,
// RAADEC per REF = RAAIMT, per RFM = 4 x RAAIMT) are the paper's; the
// counter width and the handling of ACT and REF/RFM in one cycle are this
// design's choices. The paper's text states the enable condition the other
// way round (tREFi smaller than RFMTH); its flow chart's tREFi >= RFMTH is
// followed, since only that enables RFM with the paper's own numbers.
//
// Interface: act, ref_cmd, rfm_cmd are one-cycle pulses for this bank;
// level is MARC's requested ARFM level. Timing: raacnt and the request
// outputs are registered and reflect the commands of the previous cycle.
module raa_counter
  import marc_pkg::*;
#(
  parameter int unsigned CW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          act,
  input  logic          ref_cmd,
  input  logic          rfm_cmd,
  input  arfm_level_e   level,
  output logic [CW-1:0] raacnt,
  output logic          rfm_req,
  output logic          rfm_urgent
);
  localparam bit RFM_EN = (T_REFI_NS >= raaimt(LVL_DEFAULT) * T_RCMIN_NS);

  logic [CW:0] imt, mmt, dec_ref, dec_rfm;
  logic [CW:0] sum, dec;
  logic [CW-1:0] cnt_next;

  always_comb begin
    imt     = (CW+1)'(raaimt(level));
    mmt     = imt << 3;
    dec_ref = imt;
    dec_rfm = imt << 2;
    dec     = (ref_cmd ? dec_ref : '0) + (rfm_cmd ? dec_rfm : '0);
    sum     = {1'b0, raacnt} + (act ? (CW+1)'(1) : '0);
    if (sum > (CW+1)'({CW{1'b1}})) sum = (CW+1)'({CW{1'b1}});
    cnt_next = (sum > dec) ? CW'(sum - dec) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      raacnt <= '0;
    else if (RFM_EN) raacnt <= cnt_next;
  end

  assign rfm_req    = RFM_EN && ({1'b0, raacnt} > imt);
  assign rfm_urgent = RFM_EN && ({1'b0, raacnt} >= mmt);
endmodule
