// kmm_ps_mxu: precision-scalable Karatsuba MXU KMM_2^[w,m].
//
// One MM1 array of m-bit multipliers executes inputs of any width w <= 2m by
// reading each set of input tiles once, three or four times, one pass per
// read, selected by the iteration state state(w,m,t) (see kmm_pkg):
//   MM1  (w <= m)        : operands A0/B0 = bits m-1:0, result passed as is.
//   KMM2 (m < w <= 2m-2) : digits split at h = m-1: A1 = bits 2m-3:m-1,
//                          A0 = bits m-2:0, As = A1+A0 (fits m bits).
//                          Passes t = 0,1,2 feed (A1,B1), (As,Bs), (A0,B0)
//                          and emit (C1<<2h) - (C1<<h), Cs<<h, C0 - (C0<<h).
//   MM2  (2m-2 < w <= 2m): digits split at m. Passes t = 0..3 feed
//                          (A1,B1), (A1,B0), (A0,B1), (A0,B0) and emit
//                          C1<<2m, C10<<m, C01<<m, C0.
// The sum of a tile set's passes is the full-width tile product; that sum,
// and the sum over K tiles, is formed outside this unit (tile_accumulator).
//
// Datapath (Fig. 11 of the paper): X scalar adders on each of the A row and
// B column vectors form As and Bs, an input multiplexer picks the operands of
// the pass, and at the output a multiplexed shifter (0, m-1, m, 2(m-1), 2m),
// a fixed (m-1) shifter and a subtractor form the pass result Cx.
//
// Interface: as mm1_mxu, with 2m-bit operand vectors, plus a_state (state of
// the A rows being streamed) and b_state (state of the B tile being shifted
// in). The two are separate because, with double-buffered B registers, the
// B tile of the next pass is loaded while the current pass's A rows stream;
// the paper draws a single state signal. The A state travels with the data
// through the array, so every output row is shifted by the state of the
// pass it belongs to. cx_vec is signed (a KMM2 C0 pass is negative).
// Timing: input adders, multiplexers and the output stage are combinational
// (this design's choice), so the latency is that of mm1_mxu, X/P + 3 + r.
module kmm_ps_mxu
  import kmm_pkg::*;
#(
  parameter int M     = 8,                 // multiplier bitwidth m
  parameter int X     = 64,
  parameter int Y     = 64,
  parameter int P     = 4,
  parameter int TAG_W = 1,
  parameter int WA    = (X <= 1) ? 1 : $clog2(X),
  parameter int CXW   = 4*M + WA + 1       // signed pass-result width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic                           in_load,
  input  logic [TAG_W-1:0]               in_tag,
  input  ps_state_t                      a_state,
  input  logic [X-1:0][2*M-1:0]          a_vec,
  input  logic                           b_shift,
  input  ps_state_t                      b_state,
  input  logic [X-1:0][2*M-1:0]          b_vec,
  output logic [Y-1:0]                   out_valid,
  output logic [Y-1:0][TAG_W-1:0]        out_tag,
  output ps_state_t [Y-1:0]              out_state,
  output logic [Y-1:0][CXW-1:0]          cx_vec      // two's complement
);
  localparam int MCW = 2*M + WA;           // MM1^[m] result width
  localparam int SW  = $bits(ps_state_t);

  // ---- operand slicing, input adders and input multiplexer ---------------
  function automatic logic [M-1:0] pick(input logic [2*M-1:0] v, input ps_mode_e mode,
                                        input op_sel_e sel);
    logic [M-1:0] hi, lo;
    if (mode == MODE_KMM2) begin
      hi = M'(v[2*M-3:M-1]);
      lo = M'(v[M-2:0]);
    end else begin
      hi = v[2*M-1:M];
      lo = v[M-1:0];
    end
    case (sel)
      OP_HI:   return hi;
      OP_SUM:  return hi + lo;
      default: return lo;
    endcase
  endfunction

  logic [X-1:0][M-1:0] a_op, b_op;
  always_comb begin
    for (int k = 0; k < X; k++) begin
      a_op[k] = pick(a_vec[k], a_state.mode, a_sel(a_state));
      b_op[k] = pick(b_vec[k], b_state.mode, b_sel(b_state));
    end
  end

  // ---- MM1^[m] core --------------------------------------------------------
  logic [Y-1:0]                  core_valid;
  logic [Y-1:0][TAG_W+SW-1:0]    core_tag;
  logic [Y-1:0][MCW-1:0]         core_c;

  mm1_mxu #(.W(M), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W + SW), .CW(MCW)) u_core (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_load(in_load), .in_tag({in_tag, a_state}), .a_vec(a_op),
    .b_shift(b_shift), .b_vec(b_op),
    .out_valid(core_valid), .out_tag(core_tag), .c_vec(core_c)
  );

  // ---- output shifters and subtractor ------------------------------------
  always_comb begin
    for (int r = 0; r < Y; r++) begin
      ps_state_t     s;
      logic [CXW-1:0] c_ext, sh1, sh2;
      s      = ps_state_t'(core_tag[r][SW-1:0]);
      c_ext  = CXW'(core_c[r]);
      sh1    = c_ext << out_shift(s, M);
      sh2    = c_ext << (M - 1);
      cx_vec[r]    = out_sub(s) ? (sh1 - sh2) : sh1;
      out_state[r] = s;
      out_tag[r]   = core_tag[r][TAG_W+SW-1:SW];
    end
  end
  assign out_valid = core_valid;
endmodule
