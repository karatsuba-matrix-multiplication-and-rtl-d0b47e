// tb_tile_accumulator: self-checking testbench of the tile accumulator.
//
// Each column receives, on its own random schedule, signed pass results for
// several rows, interleaved across rows as the MXU produces them: for every
// row a random number of contributions, the first flagged `first`, the last
// flagged `last`. Some contributions are negative (as a KMM2 C0 pass is).
// The sums are kept here and every emitted element is compared with them;
// each element must be emitted exactly once per round, one cycle after its
// last contribution. Three rounds reuse every accumulator, so a sum that does
// not restart from zero at `first` is caught.
module tb_tile_accumulator;
  localparam int Y = 4, MAX_ROWS = 16, CXW = 20, ACC_W = 26;
  localparam int ROW_W = $clog2(MAX_ROWS);
  localparam int ROUNDS = 3;    // each row is summed again from zero

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [Y-1:0]            in_valid, in_first, in_last, res_valid;
  logic [Y-1:0][ROW_W-1:0] in_row, res_row;
  logic [Y-1:0][CXW-1:0]   in_data;
  logic [Y-1:0][ACC_W-1:0] res_data;

  tile_accumulator #(.Y(Y), .MAX_ROWS(MAX_ROWS), .CXW(CXW), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, emitted = 0, expected_total = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint sum_ref [Y][MAX_ROWS];
  int     left [Y][MAX_ROWS];       // contributions still to send
  int     started [Y][MAX_ROWS];
  int     last_cyc [Y][MAX_ROWS];
  int     n_emit [Y][MAX_ROWS];

  // drivers: one per column, each picks a random pending row every cycle
  for (genvar j = 0; j < Y; j++) begin : g_drv
    initial begin
      in_valid[j] = 0; in_first[j] = 0; in_last[j] = 0; in_row[j] = '0; in_data[j] = '0;
      for (int r = 0; r < MAX_ROWS; r++) begin
        left[j][r] = 0; sum_ref[j][r] = 0; n_emit[j][r] = 0;
      end
      wait (rst_n);
      for (int round = 0; round < ROUNDS; round++) begin
       for (int r = 0; r < MAX_ROWS; r++) begin
         left[j][r] = 1 + $urandom % 8; started[j][r] = 0;
       end
       forever begin
        int r, pending;
        longint v;
        @(negedge clk);
        pending = 0;
        for (int k = 0; k < MAX_ROWS; k++) if (left[j][k] > 0) pending++;
        in_valid[j] = 0; in_first[j] = 0; in_last[j] = 0;
        if (pending == 0) break;
        if ($urandom % 4 == 0) continue;              // idle cycle
        do r = $urandom % MAX_ROWS; while (left[j][r] == 0);
        // the last contribution is the positive one, so the sum ends >= 0
        if (left[j][r] == 1) v = longint'($urandom % (1 << (CXW-2)));
        else v = longint'($urandom % (1 << (CXW-2))) - (longint'(1) << (CXW-3));
        in_valid[j] = 1;
        in_first[j] = (started[j][r] == 0);
        in_last[j]  = (left[j][r] == 1);
        in_row[j]   = ROW_W'(r);
        in_data[j]  = CXW'(v);
        if (started[j][r] == 0) sum_ref[j][r] = 0;
        sum_ref[j][r] += v;
        started[j][r]++;
        left[j][r]--;
        if (left[j][r] == 0) last_cyc[j][r] = cyc;
       end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < Y; j++) if (res_valid[j]) begin
      int r;
      r = int'(res_row[j]);
      emitted++;
      n_emit[j][r]++;
      checks++;
      if ($signed(res_data[j]) != sum_ref[j][r]) begin
        failures++;
        $display("col %0d row %0d: got %0d expected %0d", j, r, $signed(res_data[j]), sum_ref[j][r]);
      end
      checks++;
      if (cyc != last_cyc[j][r] + 1) begin
        failures++;
        $display("col %0d row %0d: emitted %0d cycles after its last input", j, r, cyc - last_cyc[j][r]);
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (emitted == ROUNDS * Y * MAX_ROWS);
    repeat (3) @(negedge clk);
    for (int j = 0; j < Y; j++) for (int r = 0; r < MAX_ROWS; r++) begin
      checks++;
      if (n_emit[j][r] != ROUNDS) begin failures++; $display("col %0d row %0d emitted %0d times", j, r, n_emit[j][r]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog: %0d elements emitted", emitted);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
