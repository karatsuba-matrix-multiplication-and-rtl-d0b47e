// tb_kmm_ps_mxu: self-checking testbench of the precision-scalable KMM MXU.
//
// Runs tile sets of several input widths (5, 8, 9, 12, 14, 15, 16 bits on
// m = 8) back to back. Each tile set is passed 1, 3 or 4 times as its mode
// requires; every pass shifts in its B operand while the previous pass's A
// rows stream. The signed pass results of each output element are summed
// here and compared with the exact product of the unsplit operands. Also
// checked: pass count per mode, the state returned with each row, and the
// latency X/P + 3 + r.
module tb_kmm_ps_mxu;
  import kmm_pkg::*;
  localparam int MB = 8, X = 8, Y = 4, P = 4, R = 2*Y;
  localparam int NC = 7;
  localparam int TAG_W = 8;
  localparam int WA = $clog2(X);
  localparam int CXW = 4*MB + WA + 1;
  localparam int LAT = X/P + 3;
  localparam int MAXP = 4*NC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_load, b_shift;
  logic [TAG_W-1:0] in_tag;
  ps_state_t a_state, b_state;
  logic [X-1:0][2*MB-1:0] a_vec, b_vec;
  logic [Y-1:0] out_valid;
  logic [Y-1:0][TAG_W-1:0] out_tag;
  ps_state_t [Y-1:0] out_state;
  logic [Y-1:0][CXW-1:0] cx_vec;

  kmm_ps_mxu #(.M(MB), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W)) dut (.*);

  int widths [NC] = '{5, 8, 9, 12, 14, 15, 16};
  logic [2*MB-1:0] A [NC][R][X];
  logic [2*MB-1:0] B [NC][X][Y];
  longint acc [NC][R][Y];
  int nseen [NC][R][Y];
  int pass_case [MAXP];
  ps_state_t pass_state [MAXP];
  int npass = 0;
  int cyc = 0, checks = 0, failures = 0, done_elems = 0;
  int passes_per_mode [3] = '{0, 0, 0};

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < R; i++) for (int k = 0; k < X; k++)
        A[c][i][k] = (2*MB)'($urandom) & ((1 << widths[c]) - 1);
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++)
        B[c][k][j] = (2*MB)'($urandom) & ((1 << widths[c]) - 1);
      // all-ones row and column: largest operands of that width
      for (int k = 0; k < X; k++) begin
        A[c][0][k] = (1 << widths[c]) - 1;
        B[c][k][0] = (1 << widths[c]) - 1;
      end
      for (int t = 0; t < num_reads(mode_for_width(widths[c], MB)); t++) begin
        pass_case[npass] = c;
        pass_state[npass].mode = mode_for_width(widths[c], MB);
        pass_state[npass].t = 2'(t);
        npass++;
      end
      for (int i = 0; i < R; i++) for (int j = 0; j < Y; j++) begin
        acc[c][i][j] = 0; nseen[c][i][j] = 0;
      end
    end
  end

  function automatic int t_start(int n); return Y + n*R; endfunction
  function automatic int s_start(int n); return (n == 0) ? 0 : t_start(n-1) + Y; endfunction

  always_comb begin
    in_valid = 0; in_load = 0; in_tag = '0; a_vec = '0; b_shift = 0; b_vec = '0;
    a_state = '0; b_state = '0;
    for (int n = 0; n < npass; n++) begin
      if (cyc >= s_start(n) && cyc < s_start(n) + Y) begin
        b_shift = 1;
        b_state = pass_state[n];
        for (int k = 0; k < X; k++) b_vec[k] = B[pass_case[n]][k][Y-1-(cyc - s_start(n))];
      end
      if (cyc >= t_start(n) && cyc < t_start(n) + R) begin
        in_valid = 1;
        in_load  = (cyc == t_start(n));
        a_state  = pass_state[n];
        in_tag   = TAG_W'(n * R + (cyc - t_start(n)));
        for (int k = 0; k < X; k++) a_vec[k] = A[pass_case[n]][cyc - t_start(n)][k];
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < Y; r++) if (out_valid[r]) begin
      int n, i, c;
      longint exp_c;
      n = int'(out_tag[r]) / R;
      i = int'(out_tag[r]) % R;
      c = pass_case[n];
      checks++;
      if (out_state[r] != pass_state[n]) begin
        failures++;
        $display("STATE pass %0d col %0d wrong", n, r);
      end
      checks++;
      if (cyc - (t_start(n) + i) != LAT + r) begin
        failures++;
        $display("LATENCY pass %0d row %0d col %0d: %0d", n, i, r, cyc - (t_start(n) + i));
      end
      acc[c][i][r] += longint'($signed(cx_vec[r]));
      nseen[c][i][r]++;
      if (nseen[c][i][r] == int'(num_reads(pass_state[n].mode))) begin
        exp_c = 0;
        for (int k = 0; k < X; k++) exp_c += longint'(A[c][i][k]) * longint'(B[c][k][r]);
        checks++;
        done_elems++;
        if (acc[c][i][r] != exp_c) begin
          failures++;
          $display("MISMATCH w=%0d row %0d col %0d: got %0d exp %0d",
                   widths[c], i, r, acc[c][i][r], exp_c);
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (done_elems == NC*R*Y);
    for (int n = 0; n < npass; n++) passes_per_mode[int'(pass_state[n].mode)]++;
    // single-pass MM1 (5, 8), 3-pass KMM2 (9, 12, 14),
    // 4-pass MM2 (15, 16)
    checks++;
    if (passes_per_mode[0] != 2 || passes_per_mode[1] != 9 || passes_per_mode[2] != 8) begin
      failures++;
      $display("pass counts %0d %0d %0d", passes_per_mode[0], passes_per_mode[1], passes_per_mode[2]);
    end
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d elements complete", done_elems, NC*R*Y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
