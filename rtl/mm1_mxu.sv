// mm1_mxu: baseline MM1 matrix multiplication unit (weight-stationary
// systolic array), the core of every KMM architecture.
//
// The array is X multipliers wide and Y tall, built from X/P columns of
// mm1_pe groups. Column group g multiplies elements k = gP .. gP+P-1 of the
// A row vector; row r holds column j = r of the current B tile. Partial sums
// flow to the right along a row, A data and the tile-swap flag flow down a
// column, and B tiles are shifted in from the top into the shadow registers
// while the previous tile is in use. Each array row r therefore produces
// c[i][r] = sum_k a[i][k] * b[k][r] for the A rows i streamed in.
//
// Interface (vectors are given unskewed; the skew of Fig. 8, one cycle per
// column group, is applied inside):
//   in_valid/in_tag/a_vec : one A row per cycle; in_load marks the first row
//                           of a tile (swap to the B tile loaded last).
//   b_shift/b_vec         : one B column per cycle, the column for the
//                           bottom row first (j = Y-1 down to 0); Y shifts
//                           fill the shadow registers.
//   out_valid/out_tag/c_vec[r] : result for array row r.
// Timing: the result of the A row entering in cycle T appears on row r in
// cycle T + X/P + 3 + r, which is the output indexing printed in Fig. 8
// (row 0 emits c[i-X/p-3], row Y-1 emits c[i-X/p-Y-2]). Fig. 7 accounts for
// X/P+1 of these cycles; the other two are output registers at the array
// edge, whose placement is this design's choice. in_tag travels with the data
// and is returned with each row's result.
// Rules for the user: a swap (in_load) may only follow a complete B load,
// and the next B load may start no earlier than Y cycles after the swap.
module mm1_mxu #(
  parameter int W     = 8,
  parameter int X     = 64,
  parameter int Y     = 64,
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
  localparam int G = X / P;               // column groups
  localparam int D = G + 2 + Y;           // valid/tag delay line depth

  typedef logic [P-1:0][W-1:0] grp_t;

  grp_t             a_n  [Y+1][G];
  logic             ld_n [Y+1][G];
  grp_t             b_n  [Y+1][G];
  logic             bs_g [G];
  logic [CW-1:0]    c_n  [Y][G+1];

  // ---- input skew: column group g sees its inputs g cycles late ----------
  for (genvar g = 0; g < G; g++) begin : g_skew
    grp_t a_grp, b_grp;
    assign a_grp = a_vec[g*P +: P];
    assign b_grp = b_vec[g*P +: P];
    if (g == 0) begin : g_direct
      assign a_n[0][g]  = a_grp;
      assign ld_n[0][g] = in_load;
      assign b_n[0][g]  = b_grp;
      assign bs_g[g]    = b_shift;
    end else begin : g_delay
      grp_t a_sr [g];
      grp_t b_sr [g];
      logic ld_sr [g];
      logic bs_sr [g];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < g; s++) begin
            a_sr[s] <= '0; b_sr[s] <= '0; ld_sr[s] <= 1'b0; bs_sr[s] <= 1'b0;
          end
        end else begin
          a_sr[0] <= a_grp; b_sr[0] <= b_grp; ld_sr[0] <= in_load; bs_sr[0] <= b_shift;
          for (int s = 1; s < g; s++) begin
            a_sr[s] <= a_sr[s-1]; b_sr[s] <= b_sr[s-1];
            ld_sr[s] <= ld_sr[s-1]; bs_sr[s] <= bs_sr[s-1];
          end
        end
      end
      assign a_n[0][g]  = a_sr[g-1];
      assign ld_n[0][g] = ld_sr[g-1];
      assign b_n[0][g]  = b_sr[g-1];
      assign bs_g[g]    = bs_sr[g-1];
    end
  end

  // ---- PE array ------------------------------------------------------------
  for (genvar r = 0; r < Y; r++) begin : g_row
    assign c_n[r][0] = '0;
    for (genvar g = 0; g < G; g++) begin : g_col
      mm1_pe #(.W(W), .P(P), .CW(CW)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_in     (a_n[r][g]),
        .load_in  (ld_n[r][g]),
        .a_out    (a_n[r+1][g]),
        .load_out (ld_n[r+1][g]),
        .b_shift  (bs_g[g]),
        .b_in     (b_n[r][g]),
        .b_out    (b_n[r+1][g]),
        .c_in     (c_n[r][g]),
        .c_out    (c_n[r][g+1])
      );
    end

    // two output registers at the array edge
    logic [CW-1:0] c_q1, c_q2;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        c_q1 <= '0; c_q2 <= '0;
      end else begin
        c_q1 <= c_n[r][G]; c_q2 <= c_q1;
      end
    end
    assign c_vec[r] = c_q2;
  end

  // ---- valid / tag delay line ----------------------------------------------
  logic             v_pipe [D];
  logic [TAG_W-1:0] t_pipe [D];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < D; s++) begin v_pipe[s] <= 1'b0; t_pipe[s] <= '0; end
    end else begin
      v_pipe[0] <= in_valid; t_pipe[0] <= in_tag;
      for (int s = 1; s < D; s++) begin v_pipe[s] <= v_pipe[s-1]; t_pipe[s] <= t_pipe[s-1]; end
    end
  end
  for (genvar r = 0; r < Y; r++) begin : g_out
    assign out_valid[r] = v_pipe[G + 2 + r];
    assign out_tag[r]   = t_pipe[G + 2 + r];
  end

  // A complete B load needs Y shifts; a column-group count must be whole.
  initial assert (X % P == 0) else $error("mm1_mxu: X must be a multiple of P");
endmodule
