// pezo_pkg -- types, number formats and LFSR helpers shared by the PeZO
// perturbation engine.
//
// Number formats (all two's complement, chosen by this design; the source
// work gives only the 12-bit width of the pre-generated numbers):
//   perturbation value  PERT_W=16 bits, PERT_FRAC=12 fraction bits (Q4.12)
//   weight              16 bits, 14 fraction bits (Q2.14), see zo_weight_update
//   coefficient         24 bits, 20 fraction bits, see zo_step_ctrl
// The uniform RNGs are maximal-length Galois LFSRs (right shift, xor the tap
// mask when the bit shifted out is 1); lfsr_mask() holds one known-good mask
// per width from 3 to 16 bits.
package pezo_pkg;

  localparam int PERT_W    = 16;
  localparam int PERT_FRAC = 12;

  // Which of the two reuse strategies feeds the weight lanes.
  typedef enum logic {
    MODE_PREGEN = 1'b0,   // pre-generated pool, circular read
    MODE_OTF    = 1'b1    // on-the-fly RNG array with modulus scaling LUT
  } gen_mode_e;

  // Target of a host configuration write.
  typedef enum logic {
    CFG_POOL = 1'b0,      // pre-generation pool entry
    CFG_LUT  = 1'b1       // scale-factor exponent entry
  } cfg_sel_e;

  // Phase of one zeroth-order step (one query, q = 1).
  typedef enum logic [1:0] {
    PH_NONE = 2'd0,
    PH_POS  = 2'd1,       // theta + eps*u
    PH_NEG  = 2'd2,       // theta - eps*u   (applied as -2*eps*u)
    PH_UPD  = 2'd3        // restore (+eps*u) and ZO-SGD update (-eta*g*u)
  } zo_phase_e;

  typedef logic signed [PERT_W-1:0] pert_t;

  // Tap mask of a maximal-length Galois LFSR of the given width.
  function automatic logic [15:0] lfsr_mask(input int w);
    case (w)
      3:  return 16'h0006;
      4:  return 16'h000C;
      5:  return 16'h0014;
      6:  return 16'h0030;
      7:  return 16'h0060;
      8:  return 16'h00B8;
      9:  return 16'h0110;
      10: return 16'h0240;
      11: return 16'h0500;
      12: return 16'h0E08;
      13: return 16'h1C80;
      14: return 16'h3802;
      15: return 16'h6000;
      default: return 16'hD008;   // 16
    endcase
  endfunction

endpackage
