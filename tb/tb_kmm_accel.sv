// tb_kmm_accel: end-to-end testbench of the KMM GEMM engine.
//
// Two engines at reduced size (X = 8, Y = 4, P = 4, M = 8): one with the
// precision-scalable core, one with the fixed-precision KMM_2^[16] core.
// A behavioural tile memory answers the read requests one cycle later.
// Jobs cover every mode of the precision-scalable core (MM1 with the input
// adders bypassed, KMM2 with three reads per tile set, MM2 with four), mode
// switches between jobs, several K tiles summed in the accumulator, a short
// A block that makes the A stream stall for its B tile, and a long one whose
// B loads are hidden behind the A stream (checked: the A stream runs without
// a gap, one row per cycle). Every element of C is checked against a product
// computed here, and each mechanism is counted; one that never happens is a
// failure.
module tb_kmm_accel;
  import kmm_pkg::*;
  localparam int MB = 8, X = 8, Y = 4, P = 4, MAX_ROWS = 16, MAX_KT = 4;
  localparam int ROW_W = $clog2(MAX_ROWS), KT_W = $clog2(MAX_KT), COL_W = $clog2(Y);
  localparam int WA = $clog2(X);
  localparam int ACC_W = 4*MB + WA + KT_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- operand store shared by both engines --------------------------------
  logic [2*MB-1:0] A [MAX_KT][MAX_ROWS][X];
  logic [2*MB-1:0] B [MAX_KT][X][Y];
  longint          C [MAX_ROWS][Y];
  int              seen [2][MAX_ROWS][Y];

  // ---- engines ---------------------------------------------------------------
  logic                     start [2];
  logic [4:0]               in_width;
  logic [ROW_W:0]           num_rows;
  logic [KT_W:0]            num_ktiles;
  logic                     busy [2], done [2];
  logic                     a_rd_en [2], b_rd_en [2];
  logic [KT_W-1:0]          a_rd_ktile [2], b_rd_ktile [2];
  logic [ROW_W-1:0]         a_rd_row [2];
  logic [COL_W-1:0]         b_rd_col [2];
  logic [X-1:0][2*MB-1:0]   a_rd_data [2], b_rd_data [2];
  logic [Y-1:0]             res_valid [2];
  logic [Y-1:0][ROW_W-1:0]  res_row [2];
  logic [Y-1:0][ACC_W-1:0]  res_data [2];
  logic [31:0]              stall_cycles [2], passes_done [2];

  for (genvar e = 0; e < 2; e++) begin : g_eng
    kmm_accel #(.M(MB), .X(X), .Y(Y), .P(P), .MAX_ROWS(MAX_ROWS), .MAX_KT(MAX_KT),
                .FIXED_CORE(e == 1)) dut (
      .clk(clk), .rst_n(rst_n), .start(start[e]), .in_width(in_width),
      .num_rows(num_rows), .num_ktiles(num_ktiles), .busy(busy[e]), .done(done[e]),
      .a_rd_en(a_rd_en[e]), .a_rd_ktile(a_rd_ktile[e]), .a_rd_row(a_rd_row[e]),
      .a_rd_data(a_rd_data[e]),
      .b_rd_en(b_rd_en[e]), .b_rd_ktile(b_rd_ktile[e]), .b_rd_col(b_rd_col[e]),
      .b_rd_data(b_rd_data[e]),
      .res_valid(res_valid[e]), .res_row(res_row[e]), .res_data(res_data[e]),
      .stall_cycles(stall_cycles[e]), .passes_done(passes_done[e])
    );

    // behavioural tile memory: one-cycle read latency
    always_ff @(posedge clk) begin
      for (int k = 0; k < X; k++) begin
        a_rd_data[e][k] <= a_rd_en[e] ? A[a_rd_ktile[e]][a_rd_row[e]][k] : '0;
        b_rd_data[e][k] <= b_rd_en[e] ? B[b_rd_ktile[e]][k][b_rd_col[e]] : '0;
      end
    end

    // result checker
    always @(posedge clk) if (rst_n) begin
      for (int j = 0; j < Y; j++) if (res_valid[e][j]) begin
        checks++;
        seen[e][res_row[e][j]][j]++;
        if (longint'(res_data[e][j]) != C[res_row[e][j]][j]) begin
          failures++;
          $display("engine %0d C[%0d][%0d] = %0d, expected %0d", e, res_row[e][j], j,
                   res_data[e][j], C[res_row[e][j]][j]);
        end
      end
    end
  end

  // ---- A-stream gap monitor ----------------------------------------------------
  int a_first, a_last, a_count;
  always @(posedge clk) if (a_rd_en[0]) begin
    if (a_count == 0) a_first = cyc;
    a_last = cyc;
    a_count++;
  end

  // ---- mechanism counters ------------------------------------------------------
  int n_mm1 = 0, n_kmm2 = 0, n_mm2 = 0, n_switch = 0, n_multi_kt = 0;
  int n_stall = 0, n_hidden = 0, n_fixed = 0, n_reread = 0;
  ps_mode_e last_mode = MODE_MM1;
  bit       have_last = 0;

  task automatic run_job(input int e, input int w, input int rows, input int kts);
    ps_mode_e md;
    int exp_passes, t0;
    // operands
    for (int kt = 0; kt < kts; kt++) begin
      for (int i = 0; i < rows; i++) for (int k = 0; k < X; k++)
        A[kt][i][k] = (2*MB)'($urandom) & ((1 << w) - 1);
      for (int k = 0; k < X; k++) for (int j = 0; j < Y; j++)
        B[kt][k][j] = (2*MB)'($urandom) & ((1 << w) - 1);
    end
    for (int k = 0; k < X; k++) begin    // largest values in row 0 / column 0
      A[0][0][k] = (1 << w) - 1;
      B[0][k][0] = (1 << w) - 1;
    end
    for (int i = 0; i < rows; i++) for (int j = 0; j < Y; j++) begin
      C[i][j] = 0;
      seen[e][i][j] = 0;
      for (int kt = 0; kt < kts; kt++) for (int k = 0; k < X; k++)
        C[i][j] += longint'(A[kt][i][k]) * longint'(B[kt][k][j]);
    end
    md = (e == 1) ? MODE_MM1 : mode_for_width(w, MB);
    exp_passes = kts * int'(num_reads(md));
    a_count = 0;

    @(negedge clk);
    in_width = 5'(w); num_rows = (ROW_W+1)'(rows); num_ktiles = (KT_W+1)'(kts);
    start[e] = 1;
    @(negedge clk);
    start[e] = 0;
    t0 = cyc;
    wait (done[e]);
    @(negedge clk);

    // every element exactly once
    for (int i = 0; i < rows; i++) for (int j = 0; j < Y; j++) begin
      checks++;
      if (seen[e][i][j] != 1) begin
        failures++;
        $display("engine %0d C[%0d][%0d] emitted %0d times", e, i, j, seen[e][i][j]);
      end
    end
    // one pass per read of each tile set
    checks++;
    if (int'(passes_done[e]) != exp_passes) begin
      failures++;
      $display("engine %0d: %0d passes, expected %0d", e, passes_done[e], exp_passes);
    end
    if (e == 0) begin
      // A rows are read once per pass
      checks++;
      if (a_count != exp_passes * rows) begin
        failures++;
        $display("A rows read %0d, expected %0d", a_count, exp_passes * rows);
      end
      if (rows >= 2*Y) begin
        // B loads hidden: the A stream has no gap
        checks++;
        if (a_last - a_first + 1 != exp_passes * rows) begin
          failures++;
          $display("A stream took %0d cycles for %0d rows", a_last - a_first + 1, exp_passes * rows);
        end else if (exp_passes > 1) n_hidden++;
        // the only stall is the first B load
        checks++;
        if (int'(stall_cycles[e]) > Y + 2) begin
          failures++;
          $display("stalls %0d with a long A block", stall_cycles[e]);
        end
      end else if (exp_passes > 1 && int'(stall_cycles[e]) > Y + 2) n_stall++;
      case (md)
        MODE_MM1:  n_mm1++;
        MODE_KMM2: n_kmm2++;
        default:   n_mm2++;
      endcase
      if (have_last && md != last_mode) n_switch++;
      last_mode = md; have_last = 1;
      if (exp_passes > kts) n_reread++;
    end else n_fixed++;
    if (kts > 1) n_multi_kt++;
    $display("job engine %0d w=%0d rows=%0d ktiles=%0d: %0d cycles, %0d passes, %0d stall cycles",
             e, w, rows, kts, cyc - t0, passes_done[e], stall_cycles[e]);
  endtask

  initial begin
    start[0] = 0; start[1] = 0;
    in_width = 8; num_rows = 1; num_ktiles = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(0, 8, 8, 1);     // MM1
    run_job(0, 12, 8, 2);    // KMM2, two K tiles
    run_job(0, 16, 8, 1);    // MM2
    run_job(0, 9, 3, 1);     // KMM2, short A block: stalls
    run_job(0, 14, 16, 3);   // KMM2, long block: hidden B loads
    run_job(0, 5, 16, 4);    // MM1, four K tiles
    run_job(0, 15, 12, 2);   // MM2
    run_job(1, 16, 8, 2);    // fixed-precision core
    run_job(1, 11, 5, 1);

    // every mechanism must have happened
    checks++; if (n_mm1 == 0)      begin failures++; $display("MM1 mode never ran");  end
    checks++; if (n_kmm2 == 0)     begin failures++; $display("KMM2 mode never ran"); end
    checks++; if (n_mm2 == 0)      begin failures++; $display("MM2 mode never ran");  end
    checks++; if (n_switch == 0)   begin failures++; $display("no mode switch");      end
    checks++; if (n_reread == 0)   begin failures++; $display("no tile re-read");     end
    checks++; if (n_multi_kt == 0) begin failures++; $display("no K-tile accumulation"); end
    checks++; if (n_stall == 0)    begin failures++; $display("no B-load stall");     end
    checks++; if (n_hidden == 0)   begin failures++; $display("no hidden B load");    end
    checks++; if (n_fixed == 0)    begin failures++; $display("fixed core never ran"); end
    $display("mechanisms: mm1=%0d kmm2=%0d mm2=%0d switch=%0d reread=%0d multi_kt=%0d stall=%0d hidden=%0d fixed=%0d",
             n_mm1, n_kmm2, n_mm2, n_switch, n_reread, n_multi_kt, n_stall, n_hidden, n_fixed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
