// kmm_mxu_harness: drives one kmm_mxu instance and checks its results.
//
// Used by tb_kmm_mxu and tb_kmm_mxu_table3 for several widths, recursion
// depths and array sizes (X wide, Y tall). Streams NT = 4 tiles back to back: each tile's B is shifted in while the
// previous tile's A rows are still flowing (double buffering), then 2Y A rows
// are sent with the swap flag on the first. Every result row is compared with
// a product computed here from the same random data, and the arrival cycle of
// each result is checked against the latency X/P + 3 + r.
module kmm_mxu_harness #(
  parameter int W = 16,
  parameter int N = 2,
  parameter int X = 8,
  parameter int Y = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int P = 4, NT = 4, M = 2*Y;
  localparam int TAG_W = 16;             // tag = tile * M + row
  localparam int CW = 2*W + $clog2(X);
  localparam int LAT = X/P + 3;


  logic in_valid, in_load, b_shift;
  logic [TAG_W-1:0] in_tag;
  logic [X-1:0][W-1:0] a_vec, b_vec;
  logic [Y-1:0] out_valid;
  logic [Y-1:0][TAG_W-1:0] out_tag;
  logic [Y-1:0][CW-1:0] c_vec;

  kmm_mxu #(.W(W), .N(N), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W)) dut (.*);

  logic [W-1:0] A [NT][M][X];
  logic [W-1:0] B [NT][X][Y];
  int cyc = 0, got = 0;
  initial begin checks = 0; failures = 0; done = 0; end

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int s = 0; s < W; s += 32) v = (v << 32) | W'($urandom);
    return v;
  endfunction

  initial begin
    for (int n = 0; n < NT; n++) begin
      for (int i = 0; i < M; i++) for (int k = 0; k < X; k++) A[n][i][k] = rnd();
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++) B[n][k][j] = rnd();
    end
    // make the first tile's corner elements maximal to exercise full widths
    for (int i = 0; i < M; i++) for (int k = 0; k < X; k++) A[0][i][k] = '1;
    for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++) B[0][k][j] = '1;
  end

  // cycle-by-cycle schedule: B of tile n shifted at S_n..S_n+Y-1, A rows of
  // tile n at T_n..T_n+M-1, with T_n = Y + n*M and S_n = T_{n-1} + Y.
  function automatic int t_start(int n); return Y + n*M; endfunction
  function automatic int s_start(int n); return (n == 0) ? 0 : t_start(n-1) + Y; endfunction

  always_comb begin
    in_valid = 0; in_load = 0; in_tag = '0; a_vec = '0; b_shift = 0; b_vec = '0;
    for (int n = 0; n < NT; n++) begin
      if (cyc >= s_start(n) && cyc < s_start(n) + Y) begin
        b_shift = 1;
        for (int k = 0; k < X; k++) b_vec[k] = B[n][k][Y-1-(cyc - s_start(n))];
      end
      if (cyc >= t_start(n) && cyc < t_start(n) + M) begin
        in_valid = 1;
        in_load  = (cyc == t_start(n));
        in_tag   = TAG_W'(n * M + (cyc - t_start(n)));
        for (int k = 0; k < X; k++) a_vec[k] = A[n][cyc - t_start(n)][k];
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < Y; r++) if (out_valid[r]) begin
      int n, i;
      logic [CW-1:0] exp_c;
      n = int'(out_tag[r]) / M;
      i = int'(out_tag[r]) % M;
      exp_c = '0;
      for (int k = 0; k < X; k++) exp_c += CW'(A[n][i][k]) * CW'(B[n][k][r]);
      checks++; got++;
      if (c_vec[r] !== exp_c) begin
        failures++;
        $display("MISMATCH tile %0d row %0d col %0d: got %0d exp %0d", n, i, r, c_vec[r], exp_c);
      end
      checks++;
      if (cyc - (t_start(n) + i) != LAT + r) begin
        failures++;
        $display("LATENCY tile %0d row %0d col %0d: %0d cycles, expected %0d",
                 n, i, r, cyc - (t_start(n) + i), LAT + r);
      end
    end
  end

  initial begin
    wait (got == NT*M*Y);
    checks++;
    repeat (2) @(posedge clk);
    done = 1;
  end
endmodule
