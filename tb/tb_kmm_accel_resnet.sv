// tb_kmm_accel_resnet: the engine at its default size on a ResNet layer.
//
// ResNet-50/101/152 contain 3x3 convolutions over 512 channels; lowered to a
// GEMM such a layer has K = 3*3*512 = 4608, i.e. 72 K tiles of 64. This
// testbench runs one 128-row, 64-column block of that GEMM with the whole
// K depth, once for each mode of the precision-scalable core: 8-bit inputs
// (MM1, one read per tile set), 12-bit (KMM2, three reads) and 16-bit (MM2,
// four reads). Operands are random, with an all-ones first row and column so
// that the largest 16-bit sum (4608 * (2^16-1)^2) reaches the accumulator's
// upper bits. Checked: every element of C, and that the A stream runs
// without a gap, 72 * reads * 128 cycles, after one initial B load.
module tb_kmm_accel_resnet;
  localparam int X = 64, Y = 64, MB = 8, ROWS = 128, KTS = 72;
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
  int a_first, a_last, a_count;

  always @(posedge clk) cyc <= cyc + 1;

  always_ff @(posedge clk) begin
    for (int k = 0; k < X; k++) begin
      a_rd_data[k] <= a_rd_en ? A[a_rd_ktile][a_rd_row][k] : '0;
      b_rd_data[k] <= b_rd_en ? B[b_rd_ktile][k][b_rd_col] : '0;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (a_rd_en) begin
      if (a_count == 0) a_first = cyc;
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

  task automatic run_layer(input int w, input int reads);
    int t0;
    for (int kt = 0; kt < KTS; kt++) begin
      for (int i = 0; i < ROWS; i++) for (int k = 0; k < X; k++)
        A[kt][i][k] = (2*MB)'($urandom) & ((1 << w) - 1);
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++)
        B[kt][k][j] = (2*MB)'($urandom) & ((1 << w) - 1);
      for (int k = 0; k < X; k++) begin A[kt][0][k] = (1 << w) - 1; B[kt][k][0] = (1 << w) - 1; end
    end
    for (int i = 0; i < ROWS; i++) for (int j = 0; j < Y; j++) begin
      C[i][j] = 0; seen[i][j] = 0;
      for (int kt = 0; kt < KTS; kt++) for (int k = 0; k < X; k++)
        C[i][j] += longint'(A[kt][i][k]) * longint'(B[kt][k][j]);
    end
    a_count = 0;
    @(negedge clk);
    in_width = 5'(w); num_rows = (ROW_W+1)'(ROWS); num_ktiles = (KT_W+1)'(KTS);
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
    if (passes_done != reads * KTS) begin failures++; $display("%0d passes", passes_done); end
    checks++;
    if (a_count != reads * KTS * ROWS || a_last - a_first + 1 != reads * KTS * ROWS) begin
      failures++;
      $display("A stream: %0d rows in %0d cycles", a_count, a_last - a_first + 1);
    end
    checks++;
    if (stall_cycles != Y + 1) begin failures++; $display("%0d stall cycles", stall_cycles); end
    $display("w=%0d: %0d passes, %0d cycles for a 128x4608x64 block", w, passes_done, cyc - t0);
  endtask

  initial begin
    start = 0; in_width = 8; num_rows = 1; num_ktiles = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(8, 1);
    run_layer(12, 3);
    run_layer(16, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
