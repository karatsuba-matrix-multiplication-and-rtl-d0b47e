// tb_tile_reread_seq: self-checking testbench of the tile sequencer.
//
// Runs jobs in all three modes (1, 3 and 4 reads per tile set) with short
// and long A blocks and several K tiles, and records every read request and
// every MXU control. Checked against the schedule worked out here:
//   - B reads: for each K tile and each re-read t, columns Y-1 .. 0;
//   - A reads: for each pass, rows 0 .. num_rows-1 of the same K tile;
//   - MXU controls one cycle after the requests: valid, the swap flag on row
//     0, state t of the pass, first on the first pass of K tile 0, last on
//     the final pass of the last K tile;
//   - order: a pass streams only after its B load is complete, and the next
//     B load starts no earlier than Y cycles after the pass started;
//   - long blocks (num_rows >= 2Y): no gap in the A stream, and exactly
//     Y+1 stall cycles (the first B load);
//   - stall_cycles equals the job cycles without an A request, passes_done
//     the number of passes.
module tb_tile_reread_seq;
  import kmm_pkg::*;
  localparam int Y = 4, MAX_ROWS = 16, MAX_KT = 4;
  localparam int ROW_W = $clog2(MAX_ROWS), KT_W = $clog2(MAX_KT), COL_W = $clog2(Y);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  ps_mode_e mode;
  logic [ROW_W:0] num_rows;
  logic [KT_W:0]  num_ktiles;
  logic issuing, a_rd_en, b_rd_en;
  logic [KT_W-1:0] a_rd_ktile, b_rd_ktile;
  logic [ROW_W-1:0] a_rd_row;
  logic [COL_W-1:0] b_rd_col;
  logic mxu_valid, mxu_load, mxu_first, mxu_last, mxu_b_shift;
  ps_state_t mxu_a_state, mxu_b_state;
  logic [ROW_W-1:0] mxu_row;
  logic [31:0] stall_cycles, passes_done;

  tile_reread_seq #(.Y(Y), .MAX_ROWS(MAX_ROWS), .MAX_KT(MAX_KT)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("cycle %0d: %s", cyc, msg); end
  endtask

  // recorded per cycle while a job runs
  int  n_a, n_b, idle;
  int  a_kt_q [$], a_row_q [$], a_cyc_q [$];
  int  b_kt_q [$], b_col_q [$], b_cyc_q [$];
  int  m_row_q [$], m_t_q [$], m_ld_q [$], m_first_q [$], m_last_q [$];
  int  bs_t_q [$];
  bit  rec = 0;

  always @(posedge clk) if (rec) begin
    if (issuing && !a_rd_en) idle++;
    if (a_rd_en) begin a_kt_q.push_back(a_rd_ktile); a_row_q.push_back(a_rd_row); a_cyc_q.push_back(cyc); end
    if (b_rd_en) begin b_kt_q.push_back(b_rd_ktile); b_col_q.push_back(b_rd_col); b_cyc_q.push_back(cyc); end
    if (mxu_valid) begin
      m_row_q.push_back(mxu_row); m_t_q.push_back(mxu_a_state.t); m_ld_q.push_back(mxu_load);
      m_first_q.push_back(mxu_first); m_last_q.push_back(mxu_last);
      check(mxu_a_state.mode == mode, "A state mode");
    end
    if (mxu_b_shift) begin
      bs_t_q.push_back(mxu_b_state.t);
      check(mxu_b_state.mode == mode, "B state mode");
    end
  end

  task automatic run_job(input ps_mode_e md, input int rows, input int kts);
    int reads, np, t0;
    reads = int'(num_reads(md));
    np = reads * kts;
    a_kt_q.delete(); a_row_q.delete(); a_cyc_q.delete();
    b_kt_q.delete(); b_col_q.delete(); b_cyc_q.delete();
    m_row_q.delete(); m_t_q.delete(); m_ld_q.delete(); m_first_q.delete(); m_last_q.delete();
    bs_t_q.delete();
    idle = 0;
    @(negedge clk);
    mode = md; num_rows = (ROW_W+1)'(rows); num_ktiles = (KT_W+1)'(kts); start = 1;
    @(negedge clk);
    start = 0; rec = 1; t0 = cyc;
    wait (!issuing);
    repeat (3) @(negedge clk);
    rec = 0;

    check(a_kt_q.size() == np * rows, $sformatf("A reads %0d", a_kt_q.size()));
    check(b_kt_q.size() == np * Y, $sformatf("B reads %0d", b_kt_q.size()));
    check(m_row_q.size() == np * rows, "MXU rows");
    check(bs_t_q.size() == np * Y, "MXU B shifts");
    if (a_kt_q.size() == np * rows && b_kt_q.size() == np * Y &&
        m_row_q.size() == np * rows && bs_t_q.size() == np * Y) begin
      for (int q = 0; q < np; q++) begin
        int kt = q / reads, t = q % reads;
        for (int j = 0; j < Y; j++) begin
          int n = q*Y + j;
          check(b_kt_q[n] == kt && b_col_q[n] == Y-1-j, $sformatf("pass %0d B read %0d", q, j));
          check(bs_t_q[n] == t, $sformatf("pass %0d B state t", q));
          if (j > 0) check(b_cyc_q[n] == b_cyc_q[n-1] + 1, "B load has a gap");
        end
        for (int i = 0; i < rows; i++) begin
          int n = q*rows + i;
          check(a_kt_q[n] == kt && a_row_q[n] == i, $sformatf("pass %0d A read %0d", q, i));
          if (i > 0) check(a_cyc_q[n] == a_cyc_q[n-1] + 1, "A stream has a gap inside a pass");
          check(m_row_q[n] == i && m_t_q[n] == t && m_ld_q[n] == (i == 0),
                $sformatf("pass %0d row %0d MXU controls", q, i));
          check(m_first_q[n] == (q == 0), "first flag");
          check(m_last_q[n] == (q == np-1), "last flag");
        end
        // a pass starts after its own B load
        check(a_cyc_q[q*rows] > b_cyc_q[q*Y + Y-1], $sformatf("pass %0d streams before its B load", q));
        // the next B load waits Y cycles after this pass started
        if (q + 1 < np)
          check(b_cyc_q[(q+1)*Y] >= a_cyc_q[q*rows] + Y, $sformatf("pass %0d B load too early", q+1));
      end
      if (rows >= 2*Y) begin
        check(a_cyc_q[np*rows-1] - a_cyc_q[0] + 1 == np*rows, "long block: A stream has gaps");
        check(stall_cycles == Y + 1, $sformatf("long block: %0d stall cycles", stall_cycles));
      end
    end
    check(int'(stall_cycles) == idle, $sformatf("stall_cycles %0d, idle cycles %0d", stall_cycles, idle));
    check(int'(passes_done) == np, $sformatf("passes_done %0d", passes_done));
    $display("mode %0d rows %0d ktiles %0d: %0d passes, %0d cycles, %0d stalls",
             md, rows, kts, np, cyc - t0, stall_cycles);
  endtask

  initial begin
    start = 0; mode = MODE_MM1; num_rows = 1; num_ktiles = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_job(MODE_MM1, 8, 1);
    run_job(MODE_KMM2, 8, 2);
    run_job(MODE_MM2, 16, 3);
    run_job(MODE_KMM2, 1, 1);
    run_job(MODE_MM2, 5, 2);
    run_job(MODE_MM1, 3, 4);
    run_job(MODE_KMM2, 12, 4);
    for (int n = 0; n < 6; n++)
      run_job(ps_mode_e'($urandom % 3), 1 + $urandom % MAX_ROWS, 1 + $urandom % MAX_KT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
