// kmm_post_adder: KMM post-adder unit of the fixed-precision KMM MXU.
//
// For each of the Y elements of an output row it forms
//     C = (C1 << 2H) + ((Cs - C1 - C0) << H) + C0,   H = ceil(W/2),
// the last three lines of the Karatsuba matrix multiplication algorithm.
// The middle term is computed on 2H+4+WA bits as the paper sizes it (the
// two extra bits cover sign extension and the two subtractions); its true
// value is never negative. The shifts are constant and cost no logic.
//
// The paper prints the top shift as "<< w" (Fig. 10 and Algorithm 3). That is
// exact only for even w; for odd w the upper digit sits at bit 2*ceil(w/2),
// so this unit shifts by 2H, which equals w for every even width the paper
// evaluates and keeps odd widths (met inside deeper recursion, e.g. 33 bits)
// correct.
//
// Purely combinational; the surrounding MXU supplies aligned inputs.
module kmm_post_adder #(
  parameter int W   = 32,                 // input bitwidth of this KMM level
  parameter int Y   = 32,                 // elements per output row
  parameter int WA  = 5,                  // accumulation growth bits, ceil(log2 X)
  parameter int H   = (W + 1) / 2,
  parameter int CW1 = 2*(W/2) + WA,       // width of C1 elements
  parameter int CWS = 2*(H+1) + WA,       // width of Cs elements
  parameter int CW0 = 2*H + WA,           // width of C0 elements
  parameter int OW  = 2*W + WA            // width of C elements
) (
  input  logic [Y-1:0][CW1-1:0] c1,
  input  logic [Y-1:0][CWS-1:0] cs,
  input  logic [Y-1:0][CW0-1:0] c0,
  output logic [Y-1:0][OW-1:0]  c
);
  localparam int MW = 2*H + 4 + WA;       // middle-term width

  always_comb begin
    for (int y = 0; y < Y; y++) begin
      logic [MW-1:0] mid;
      mid  = MW'(cs[y]) - MW'(c1[y]) - MW'(c0[y]);
      c[y] = (OW'(c1[y]) << (2*H)) + (OW'(mid) << H) + OW'(c0[y]);
    end
  end
endmodule
