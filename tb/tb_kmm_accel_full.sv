// tb_kmm_accel_full: the GEMM engine at its default size, one complete job.
//
// The engine is instantiated with every parameter at its default: the
// precision-scalable KMM_2^[w,8] core with a 64x64 array, P = 4, room for 128
// A rows and 128 K tiles. One KMM2 job (12-bit operands, three reads per tile
// set) multiplies a 128 x 128 A block by a 128 x 64 B block held as two K
// tiles in a behavioural tile memory with one-cycle read latency. Every
// element of C is compared with a product computed here, and the job must
// take 6 passes of 128 back-to-back A rows: the A stream, from its first
// to its last request, must be exactly 6 * 128 cycles long.
module tb_kmm_accel_full;
  localparam int X = 64, Y = 64, MB = 8, ROWS = 128, KTS = 2, W = 12;
  localparam int ROW_W = 7, KT_W = 7, COL_W = 6;
  localparam int ACC_W = 4*MB + 6 + 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    start, busy, done;
  logic [4:0]              in_width;
  logic [ROW_W:0]          num_rows;
  logic [KT_W:0]           num_ktiles;
  logic                    a_rd_en, b_rd_en;
  logic [KT_W-1:0]         a_rd_ktile, b_rd_ktile;
  logic [ROW_W-1:0]        a_rd_row;
  logic [COL_W-1:0]        b_rd_col;
  logic [X-1:0][2*MB-1:0]  a_rd_data, b_rd_data;
  logic [Y-1:0]            res_valid;
  logic [Y-1:0][ROW_W-1:0] res_row;
  logic [Y-1:0][ACC_W-1:0] res_data;
  logic [31:0]             stall_cycles, passes_done;

  kmm_accel dut (.*);

  logic [2*MB-1:0] A [KTS][ROWS][X];
  logic [2*MB-1:0] B [KTS][X][Y];
  longint          C [ROWS][Y];
  int              seen [ROWS][Y];
  int checks = 0, failures = 0, cyc = 0;
  int a_first = -1, a_last = -1, a_count = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) begin
    for (int k = 0; k < X; k++) begin
      a_rd_data[k] <= a_rd_en ? A[a_rd_ktile][a_rd_row][k] : '0;
      b_rd_data[k] <= b_rd_en ? B[b_rd_ktile][k][b_rd_col] : '0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (a_rd_en) begin
      if (a_first < 0) a_first = cyc;
      a_last = cyc;
      a_count++;
    end
    for (int j = 0; j < Y; j++) if (res_valid[j]) begin
      checks++;
      seen[res_row[j]][j]++;
      if (longint'(res_data[j]) != C[res_row[j]][j]) begin
        failures++;
        if (failures < 10)
          $display("C[%0d][%0d] = %0d, expected %0d", res_row[j], j, res_data[j], C[res_row[j]][j]);
      end
    end
  end

  initial begin
    int t0;
    for (int kt = 0; kt < KTS; kt++) begin
      for (int i = 0; i < ROWS; i++) for (int k = 0; k < X; k++)
        A[kt][i][k] = (2*MB)'($urandom) & ((1 << W) - 1);
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++)
        B[kt][k][j] = (2*MB)'($urandom) & ((1 << W) - 1);
    end
    for (int k = 0; k < X; k++) begin A[0][0][k] = (1 << W) - 1; B[0][k][0] = (1 << W) - 1; end
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < Y; j++) begin
      C[i][j] = 0; seen[i][j] = 0;
      for (int kt = 0; kt < KTS; kt++) for (int k = 0; k < X; k++)
        C[i][j] += longint'(A[kt][i][k]) * longint'(B[kt][k][j]);
    end
    start = 0; in_width = 5'(W); num_rows = (ROW_W+1)'(ROWS); num_ktiles = (KT_W+1)'(KTS);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    wait (done);
    @(negedge clk);
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < Y; j++) begin
      checks++;
      if (seen[i][j] != 1) begin
        failures++;
        if (failures < 10) $display("C[%0d][%0d] emitted %0d times", i, j, seen[i][j]);
      end
    end
    checks++;
    if (passes_done != 3 * KTS) begin failures++; $display("%0d passes", passes_done); end
    checks++;
    if (a_count != 3 * KTS * ROWS || a_last - a_first + 1 != 3 * KTS * ROWS) begin
      failures++;
      $display("A stream: %0d rows in %0d cycles", a_count, a_last - a_first + 1);
    end
    checks++;
    if (stall_cycles != Y + 1) begin failures++; $display("%0d stall cycles", stall_cycles); end
    $display("job: %0d cycles, %0d passes, %0d stall cycles", cyc - t0, passes_done, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
