// kmm_pkg: types and helper functions shared by the Karatsuba matrix
// multiplication (KMM) datapath.
//
// The precision-scalable MXU runs one of three algorithms, chosen from the
// input bitwidth w and the multiplier bitwidth m:
//   w <= m            MM1   : one pass, operands are bits m-1:0
//   m < w <= 2m-2     KMM2  : three passes (A1B1, AsBs, A0B0), split at m-1
//   2m-2 < w <= 2m    MM2   : four passes (A1B1, A1B0, A0B1, A0B0), split at m
// The thresholds and pass orders follow the paper's description of the
// precision-scalable architecture; the 2-bit encodings are this design's.
package kmm_pkg;

  typedef enum logic [1:0] {
    MODE_MM1  = 2'd0,
    MODE_KMM2 = 2'd1,
    MODE_MM2  = 2'd2
  } ps_mode_e;

  // Iteration state of one pass over a set of input tiles: state(w,m,t).
  typedef struct packed {
    ps_mode_e   mode;
    logic [1:0] t;
  } ps_state_t;

  // Which slice of an operand feeds the multipliers in a pass.
  typedef enum logic [1:0] {
    OP_LO  = 2'd0,   // A0 / B0
    OP_HI  = 2'd1,   // A1 / B1
    OP_SUM = 2'd2    // As / Bs = A1 + A0
  } op_sel_e;

  function automatic int clog2_min1(input int v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

  // Mode picked for input width w on m-bit multipliers.
  function automatic ps_mode_e mode_for_width(input int w, input int m);
    if (w <= m)            return MODE_MM1;
    else if (w <= 2*m - 2) return MODE_KMM2;
    else                   return MODE_MM2;
  endfunction

  // Number of times each set of input tiles is read.
  function automatic logic [2:0] num_reads(input ps_mode_e mode);
    case (mode)
      MODE_KMM2: return 3'd3;
      MODE_MM2:  return 3'd4;
      default:   return 3'd1;
    endcase
  endfunction

  function automatic op_sel_e a_sel(input ps_state_t s);
    case (s.mode)
      MODE_KMM2: return (s.t == 2'd0) ? OP_HI : (s.t == 2'd1) ? OP_SUM : OP_LO;
      MODE_MM2:  return (s.t <= 2'd1) ? OP_HI : OP_LO;
      default:   return OP_LO;
    endcase
  endfunction

  function automatic op_sel_e b_sel(input ps_state_t s);
    case (s.mode)
      MODE_KMM2: return (s.t == 2'd0) ? OP_HI : (s.t == 2'd1) ? OP_SUM : OP_LO;
      MODE_MM2:  return (s.t == 2'd0 || s.t == 2'd2) ? OP_HI : OP_LO;
      default:   return OP_LO;
    endcase
  endfunction

  // Output shift applied to the MXU result of a pass (first shifter of the
  // output stage), for m-bit multipliers.
  function automatic int out_shift(input ps_state_t s, input int m);
    case (s.mode)
      MODE_KMM2: return (s.t == 2'd0) ? 2*(m-1) : (s.t == 2'd1) ? (m-1) : 0;
      MODE_MM2:  return (s.t == 2'd0) ? 2*m : (s.t == 2'd3) ? 0 : m;
      default:   return 0;
    endcase
  endfunction

  // Whether the pass subtracts (C << (m-1)): the C1 and C0 passes of KMM2.
  function automatic logic out_sub(input ps_state_t s);
    return (s.mode == MODE_KMM2) && (s.t != 2'd1);
  endfunction

endpackage
