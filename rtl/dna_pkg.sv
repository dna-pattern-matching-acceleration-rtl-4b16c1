// dna_pkg: types and constants shared by the aCAM DNA repeat-matching accelerator.
//
// Nucleotides are stored in the analog CAM as voltage intervals. Each interval is set by
// the resistances of two memristors in an 8T2M cell: R_LB fixes the lower bound and R_UB
// the upper bound. The resistances, the interval bounds and the search voltages below are
// the published values (character encoding table and search-data table); voltages are kept
// in millivolts. The "MM" code is the always-mismatching interval stored in the padding
// cells of the last row: its R_LB is the R_UB of T and its R_UB is the R_LB of A.
// The lower bound produced by R_LB = 5.06 kOhm and the upper bound produced by
// R_UB = 2500 kOhm are not published; this package takes 790 mV and 190 mV (the bounds
// the MM rule refers to), which makes MM mismatch every unmasked search voltage.
package dna_pkg;

  // Supply voltage in mV (V_DD = 0.8 V).
  localparam int unsigned VDD_MV = 800;

  typedef logic [9:0] mv_t;   // a voltage in millivolts, 0..1023

  // Stored / searched character.
  typedef enum logic [2:0] {
    NUC_A  = 3'd0,
    NUC_C  = 3'd1,
    NUC_G  = 3'd2,
    NUC_T  = 3'd3,
    NUC_MM = 3'd4
  } nuc_t;

  // The eight distinct memristor resistance levels used by the encoding, in programming
  // order (one row-programming step per level, 8 steps per row).
  typedef enum logic [2:0] {
    R_2500K  = 3'd0,   // A lower bound, MM upper bound
    R_186K32 = 3'd1,   // A upper bound
    R_163K3  = 3'd2,   // C lower bound
    R_27K6   = 3'd3,   // C upper bound
    R_24K9   = 3'd4,   // G lower bound
    R_9K69   = 3'd5,   // G upper bound
    R_8K9    = 3'd6,   // T lower bound
    R_5K06   = 3'd7    // T upper bound, MM lower bound
  } rlevel_t;


  // Resistance programmed into the lower-bound memristor for a character.
  function automatic rlevel_t rlb_of(nuc_t n);
    case (n)
      NUC_A:   return R_2500K;
      NUC_C:   return R_163K3;
      NUC_G:   return R_24K9;
      NUC_T:   return R_8K9;
      default: return R_5K06;     // MM
    endcase
  endfunction

  // Resistance programmed into the upper-bound memristor for a character.
  function automatic rlevel_t rub_of(nuc_t n);
    case (n)
      NUC_A:   return R_186K32;
      NUC_C:   return R_27K6;
      NUC_G:   return R_9K69;
      NUC_T:   return R_5K06;
      default: return R_2500K;    // MM
    endcase
  endfunction

  // Lower-bound threshold (mV) set by the lower-bound memristor resistance.
  // Levels never used in the lower-bound subcircuit map to VDD (never match).
  function automatic mv_t lb_mv(rlevel_t r);
    case (r)
      R_2500K: return mv_t'(190);
      R_163K3: return mv_t'(320);
      R_24K9:  return mv_t'(460);
      R_8K9:   return mv_t'(630);
      R_5K06:  return mv_t'(790);
      default: return mv_t'(VDD_MV);
    endcase
  endfunction

  // Upper-bound threshold (mV) set by the upper-bound memristor resistance.
  // Levels never used in the upper-bound subcircuit map to 0 V (never match).
  function automatic mv_t ub_mv(rlevel_t r);
    case (r)
      R_186K32: return mv_t'(310);
      R_27K6:   return mv_t'(440);
      R_9K69:   return mv_t'(590);
      R_5K06:   return mv_t'(790);
      R_2500K:  return mv_t'(190);
      default:  return mv_t'(0);
    endcase
  endfunction

  // Search voltage applied to both data lines to look for a character: the midpoint of
  // its interval (0.25, 0.38, 0.53, 0.71 V).
  function automatic mv_t search_mv(nuc_t n);
    case (n)
      NUC_A:   return mv_t'(250);
      NUC_C:   return mv_t'(380);
      NUC_G:   return mv_t'(530);
      default: return mv_t'(710);
    endcase
  endfunction

  // Behaviour of one 8T2M cell: the match line stays charged only if V_LDL >= LB and
  // V_UDL <= UB, or if the cell's NS line is held high (deactivated block).
  function automatic logic cell_keeps_ml(rlevel_t r_lb, rlevel_t r_ub, mv_t v_ldl, mv_t v_udl,
                                         logic ns);
    return ns || ((v_ldl >= lb_mv(r_lb)) && (v_udl <= ub_mv(r_ub)));
  endfunction

  // Voltages that deactivate (mask) a column: V_LDL = VDD, V_UDL = 0.
  localparam mv_t MASK_LDL_MV = mv_t'(VDD_MV);
  localparam mv_t MASK_UDL_MV = mv_t'(0);

endpackage
