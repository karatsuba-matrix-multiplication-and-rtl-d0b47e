// mm1_pe: one processing-element group of the baseline MM1 systolic array.
//
// The group holds P multipliers (PE_k .. PE_k+P-1) that share one
// accumulation stage, the reduced-accumulator structure of the paper: the P
// products are first summed combinationally on 2W+WP bits (WP = ceil(log2 P)),
// and only that pre-sum is added to the incoming partial sum on CW bits and
// registered. This cuts the number of wide accumulation adders and their
// registers by a factor of P.
//
// Each multiplier has an `a` register and a double-buffered `b`: a shadow
// register that is part of a vertical shift chain (used to load the next B
// tile while the current one is in use) and an active register that copies
// the shadow when `load_in` is high. `load_in` travels with the `a` data, so
// the first A row of a new tile is multiplied by the new B tile.
//
// Interface and timing (all registered on the rising clock edge):
//   a_in/load_in -> a_out/load_out : 1 cycle (to the group below)
//   b_in (shift) -> b_out          : 1 cycle when b_shift is high
//   c_out = c_in + sum_q(a_reg[q] * b_act[q]) registered: the products use
//   the a registers, so c_out holds the result for the A row that was on
//   a_in two edges earlier.
// The structure follows Fig. 7 of the paper; reset values and the
// active-low asynchronous reset are this design's choice.
module mm1_pe #(
  parameter int W  = 8,                      // operand bitwidth
  parameter int P  = 4,                      // products pre-accumulated per group
  parameter int CW = 2*W + 6                 // accumulation bitwidth 2W+WA
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [P-1:0][W-1:0] a_in,
  input  logic                load_in,
  output logic [P-1:0][W-1:0] a_out,
  output logic                load_out,
  input  logic                b_shift,
  input  logic [P-1:0][W-1:0] b_in,
  output logic [P-1:0][W-1:0] b_out,
  input  logic [CW-1:0]       c_in,
  output logic [CW-1:0]       c_out
);
  localparam int WP = (P <= 1) ? 0 : $clog2(P);
  localparam int SW = 2*W + WP;              // pre-sum width

  logic [P-1:0][W-1:0] a_reg, b_sh, b_act;
  logic                ld_reg;
  logic [SW-1:0]       presum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_reg  <= '0;
      ld_reg <= 1'b0;
      b_sh   <= '0;
      b_act  <= '0;
      c_out  <= '0;
    end else begin
      a_reg  <= a_in;
      ld_reg <= load_in;
      if (b_shift) b_sh  <= b_in;
      if (load_in) b_act <= b_sh;
      c_out  <= c_in + CW'(presum);
    end
  end

  always_comb begin
    presum = '0;
    for (int q = 0; q < P; q++)
      presum += SW'(a_reg[q]) * SW'(b_act[q]);
  end

  assign a_out    = a_reg;
  assign load_out = ld_reg;
  assign b_out    = b_sh;
endmodule
