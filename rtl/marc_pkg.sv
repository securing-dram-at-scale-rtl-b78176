// marc_pkg: types and constants shared by the MARC row hammer detector.
//
// A tRC (ACT-to-ACT time of one bank) is never kept as a number inside MARC.
// It is reduced to a 3-bit label: four "short" bins of 10 ns between tRCmin
// (60 ns) and 100 ns, called short-A..short-D, and one "long" label for
// anything above 100 ns. The bin edges and the LPDDR5 timing numbers below
// (tREFi 15.6 us, tRCmin 60 ns) follow the paper. The numeric code of each
// label, and which bin is called A, are this design's choice: A is the
// shortest bin.
//
// The ARFM level table (RAAIMT per level, RAAMMT = 8 x RAAIMT, RAADEC per REF
// = RAAIMT, RAADEC per RFM = 4 x RAAIMT) is the paper's configuration table.
package marc_pkg;

  // Encoded tRC label. LBL_NONE marks an empty latch slot.
  typedef enum logic [2:0] {
    LBL_NONE = 3'd0,
    LBL_A    = 3'd1,   // 60 ns <= tRC < 70 ns (and anything below tRCmin)
    LBL_B    = 3'd2,   // 70 ns <= tRC < 80 ns
    LBL_C    = 3'd3,   // 80 ns <= tRC < 90 ns
    LBL_D    = 3'd4,   // 90 ns <= tRC <= 100 ns
    LBL_L    = 3'd5    // tRC > 100 ns (long tRC)
  } trc_label_e;

  // ARFM level requested from the memory controller.
  typedef enum logic [1:0] {
    LVL_DEFAULT = 2'd0,
    LVL_A       = 2'd1,
    LVL_B       = 2'd2,
    LVL_C       = 2'd3
  } arfm_level_e;

  // LPDDR5 timing of the paper's configuration, in nanoseconds.
  localparam int unsigned T_REFI_NS  = 15600;
  localparam int unsigned T_RCMIN_NS = 60;
  localparam int unsigned SHORT_TRC_MAX_NS = 100;

  // Short tRC buffer depth: tREFi / tRCmin = 15600 / 60 = 260 entries.
  localparam int unsigned BUF_DEPTH = T_REFI_NS / T_RCMIN_NS;

  // RAAIMT per ARFM level (default, A, B, C).
  function automatic int unsigned raaimt(arfm_level_e lvl);
    case (lvl)
      LVL_A:   return 128;
      LVL_B:   return 64;
      LVL_C:   return 32;
      default: return 248;
    endcase
  endfunction

  function automatic bit is_short(trc_label_e l);
    return (l inside {LBL_A, LBL_B, LBL_C, LBL_D});
  endfunction

endpackage
