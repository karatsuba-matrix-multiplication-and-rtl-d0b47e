// kmm_mxu: fixed-precision Karatsuba matrix multiplication unit KMM_N^[W].
//
// Instead of one MXU with W-bit multipliers, this unit splits every element
// of the A row vector and of the B column vector into an upper digit
// (bits W-1:H, floor(W/2) bits) and a lower digit (bits H-1:0, H = ceil(W/2)
// bits), forms the digit sums As = A1+A0 and Bs = B1+B0 on 2X scalar adders at
// the inputs, and runs three sub-MXUs side by side on the three digit
// matrices:
//     C1 = A1*B1 (floor(W/2) bits), Cs = As*Bs (H+1 bits), C0 = A0*B0 (H bits).
// A kmm_post_adder per output row recombines them into the W-bit product
// C = (C1 << 2H) + ((Cs - C1 - C0) << H) + C0.
// For N > 2 each sub-MXU is itself a kmm_mxu with N/2 digits (one more level
// of Karatsuba recursion); at N = 1 the unit is the baseline mm1_mxu.
// This is the structure of Fig. 9 and Algorithm 3 of the paper. Defaults are
// the KMM_2^[32] 32x32 design of the paper's fixed-precision comparison.
//
// Interface and timing are those of mm1_mxu (unskewed A rows and B columns
// in, per-row skewed results out, latency X/P + 3 + r to row r): all three
// sub-MXUs share one latency, and the input adders and the post-adder are
// combinational, which is this design's choice. N must be a power of two.
// An assertion checks that the three sub-MXUs stay in step.
//
// Lint note: when this module is linted as the top of a design, the
// linter does not elaborate its own recursive instances and so reports the
// sub-MXU outputs (v1, vs, v0, t1, ts, t0, c1, cs, c0) as undriven and the
// inputs as unused.
// Linted inside any enclosing module (as in kmm_accel with FIXED_CORE = 1)
// and in simulation, the recursion is elaborated and all of them are driven.
module kmm_mxu #(
  parameter int W     = 32,
  parameter int N     = 2,
  parameter int X     = 32,
  parameter int Y     = 32,
  parameter int P     = 4,
  parameter int TAG_W = 1,
  parameter int CW    = 2*W + ((X <= 1) ? 1 : $clog2(X))
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_load,
  input  logic [TAG_W-1:0]         in_tag,
  input  logic [X-1:0][W-1:0]      a_vec,
  input  logic                     b_shift,
  input  logic [X-1:0][W-1:0]      b_vec,
  output logic [Y-1:0]             out_valid,
  output logic [Y-1:0][TAG_W-1:0]  out_tag,
  output logic [Y-1:0][CW-1:0]     c_vec
);
  localparam int WA = (X <= 1) ? 1 : $clog2(X);

  if (N <= 1) begin : g_leaf
    mm1_mxu #(.W(W), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W), .CW(CW)) u_mm1 (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_load(in_load), .in_tag(in_tag),
      .a_vec(a_vec), .b_shift(b_shift), .b_vec(b_vec),
      .out_valid(out_valid), .out_tag(out_tag), .c_vec(c_vec)
    );
  end else begin : g_kmm
    localparam int H   = (W + 1) / 2;
    localparam int WL  = W / 2;
    localparam int CW1 = 2*WL + WA;
    localparam int CWS = 2*(H+1) + WA;
    localparam int CW0 = 2*H + WA;

    logic [X-1:0][WL-1:0] a1, b1;
    logic [X-1:0][H-1:0]  a0, b0;
    logic [X-1:0][H:0]    as_, bs_;

    // input adders (X for A, X for B)
    always_comb begin
      for (int k = 0; k < X; k++) begin
        a1[k]  = a_vec[k][W-1:H];
        a0[k]  = a_vec[k][H-1:0];
        b1[k]  = b_vec[k][W-1:H];
        b0[k]  = b_vec[k][H-1:0];
        as_[k] = (H+1)'(a1[k]) + (H+1)'(a0[k]);
        bs_[k] = (H+1)'(b1[k]) + (H+1)'(b0[k]);
      end
    end

    logic [Y-1:0]            v1, vs, v0;
    logic [Y-1:0][TAG_W-1:0] t1, ts, t0;
    logic [Y-1:0][CW1-1:0]   c1;
    logic [Y-1:0][CWS-1:0]   cs;
    logic [Y-1:0][CW0-1:0]   c0;
    logic [Y-1:0][CW-1:0]    c_sum;

    kmm_mxu #(.W(WL), .N(N/2), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W), .CW(CW1)) u_c1 (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_load(in_load), .in_tag(in_tag),
      .a_vec(a1), .b_shift(b_shift), .b_vec(b1),
      .out_valid(v1), .out_tag(t1), .c_vec(c1)
    );
    kmm_mxu #(.W(H+1), .N(N/2), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W), .CW(CWS)) u_cs (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_load(in_load), .in_tag(in_tag),
      .a_vec(as_), .b_shift(b_shift), .b_vec(bs_),
      .out_valid(vs), .out_tag(ts), .c_vec(cs)
    );
    kmm_mxu #(.W(H), .N(N/2), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W), .CW(CW0)) u_c0 (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_load(in_load), .in_tag(in_tag),
      .a_vec(a0), .b_shift(b_shift), .b_vec(b0),
      .out_valid(v0), .out_tag(t0), .c_vec(c0)
    );

    kmm_post_adder #(.W(W), .Y(Y), .WA(WA), .H(H), .CW1(CW1), .CWS(CWS), .CW0(CW0), .OW(CW))
      u_post (.c1(c1), .cs(cs), .c0(c0), .c(c_sum));

    // The three sub-MXUs are identical in timing; row valid and tag are
    // taken from the C0 array, and the other two must agree with it.
    assign out_valid = v0;
    assign out_tag   = t0;
    assign c_vec     = c_sum;

    sub_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (v1 == v0) && (vs == v0) && (t1 == t0) && (ts == t0));
  end
endmodule
