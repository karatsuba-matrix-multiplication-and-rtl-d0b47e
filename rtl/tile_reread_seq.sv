// tile_reread_seq: tile sequencer with the re-read support needed by the
// precision-scalable KMM MXU.
//
// A job multiplies an A block of `num_rows` rows by a B block of
// `num_ktiles` K tiles (each X deep and Y wide) and sums over the K tiles.
// For every K tile the same pair of input tiles is read `num_reads(mode)`
// times (1 for MM1, 3 for KMM2, 4 for MM2); each read is one pass with
// iteration state t = 0 .. reads-1, reset to 0 when a new tile set starts.
// A pass is:
//   1. B load: Y read requests for the columns j = Y-1 .. 0 of the B tile,
//      each shifted into the MXU shadow registers;
//   2. A stream: num_rows read requests for the rows of the A tile, each sent
//      into the MXU, the first with the swap flag.
// B loads overlap the previous pass's A stream (double buffering). The B
// load of pass q starts Y cycles after pass q-1 started streaming (the
// shadow chain must not change before the swap has reached the bottom array
// row) and a pass streams from the cycle after its last B column was read,
// so with num_rows >= 2Y the array is fed an A row on every cycle, passes
// back to back. A cycle of a job in which no A row is requested (the A
// stream waits for its B tile) is a stall; stall cycles and finished passes
// are counted per job. With num_rows >= 2Y the only stall is the first B
// load, Y+1 cycles.
//
// The external tile memory answers a read request in the next cycle, so all
// MXU-side controls are registered once to line up with the returned data.
// Each A row carries a tag {first, last, row}: first marks the first pass of
// the first K tile (the accumulator starts from zero), last the final pass
// of the last K tile (the accumulator emits the result).
// Scheduling rules, reset and the one-cycle read latency are this design's;
// the paper states only that tile sets are re-read three or four times and
// that t is reset for a new tile set and incremented on each re-read.
module tile_reread_seq
  import kmm_pkg::*;
#(
  parameter int Y        = 64,
  parameter int MAX_ROWS = 128,
  parameter int MAX_KT   = 128,
  parameter int ROW_W    = clog2_min1(MAX_ROWS),
  parameter int KT_W     = clog2_min1(MAX_KT),
  parameter int COL_W    = clog2_min1(Y)
) (
  input  logic              clk,
  input  logic              rst_n,
  // job control
  input  logic              start,
  input  ps_mode_e          mode,
  input  logic [ROW_W:0]    num_rows,     // 1 .. MAX_ROWS
  input  logic [KT_W:0]     num_ktiles,   // 1 .. MAX_KT
  output logic              issuing,      // read requests still to be issued
  // tile memory read requests (data returns one cycle later)
  output logic              a_rd_en,
  output logic [KT_W-1:0]   a_rd_ktile,
  output logic [ROW_W-1:0]  a_rd_row,
  output logic              b_rd_en,
  output logic [KT_W-1:0]   b_rd_ktile,
  output logic [COL_W-1:0]  b_rd_col,
  // MXU controls, aligned with the returned read data
  output logic              mxu_valid,
  output logic              mxu_load,
  output ps_state_t         mxu_a_state,
  output logic              mxu_first,
  output logic              mxu_last,
  output logic [ROW_W-1:0]  mxu_row,
  output logic              mxu_b_shift,
  output ps_state_t         mxu_b_state,
  // statistics
  output logic [31:0]       stall_cycles,
  output logic [31:0]       passes_done
);
  logic [2:0]      reads;
  ps_mode_e        mode_q;
  logic [ROW_W:0]  rows_q;
  logic [KT_W:0]   kts_q;

  // B loader
  logic            b_busy;
  logic            b_all;           // every pass's B load has been issued
  logic [KT_W-1:0] b_kt;
  logic [1:0]      b_t;
  logic [COL_W-1:0] b_col;
  logic [31:0]     b_loaded;        // passes whose B load is complete
  // A streamer
  logic            a_busy;
  logic            a_all;
  logic [KT_W-1:0] a_kt;
  logic [1:0]      a_t;
  logic [ROW_W-1:0] a_row;
  logic [31:0]     a_started;       // passes whose A stream has started
  logic [COL_W:0]  since;           // cycles since the last A stream started
  logic            active;

  assign reads   = num_reads(mode_q);
  assign issuing = active;

  // a B load finishing in this cycle counts as loaded for the A side: the
  // swap then reaches the array one cycle after the last shift
  wire        b_finish = b_busy && (b_col == '0);
  wire [31:0] b_ready  = b_loaded + (b_finish ? 32'd1 : 32'd0);
  wire        a_end    = a_busy && ({1'b0, a_row} == rows_q - 1'b1);
  wire        a_t_last = (a_t == reads[1:0] - 2'd1) || (reads == 3'd1);
  wire        a_all_next = a_t_last && (KT_W'(a_kt) == KT_W'(kts_q - 1'b1));

  wire b_can_start = active && !b_busy && !b_all &&
                     (a_started == b_loaded) &&
                     (a_started == 0 || since >= (COL_W+1)'(Y - 1));
  wire a_can_start = active && !a_all && (b_ready > a_started) && (!a_busy || a_end);

  // read requests (combinational from the counters)
  always_comb begin
    a_rd_en    = a_busy;
    a_rd_ktile = a_kt;
    a_rd_row   = a_row;
    b_rd_en    = b_busy;
    b_rd_ktile = b_kt;
    b_rd_col   = b_col;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      mode_q <= MODE_MM1; rows_q <= '0; kts_q <= '0;
      b_busy <= 1'b0; b_all <= 1'b0; b_kt <= '0; b_t <= '0; b_col <= '0; b_loaded <= '0;
      a_busy <= 1'b0; a_all <= 1'b0; a_kt <= '0; a_t <= '0; a_row <= '0; a_started <= '0;
      since  <= '0;
      stall_cycles <= '0;
      passes_done  <= '0;
    end else begin
      if (start && !active) begin
        active <= 1'b1;
        mode_q <= mode; rows_q <= num_rows; kts_q <= num_ktiles;
        b_busy <= 1'b0; b_all <= 1'b0; b_kt <= '0; b_t <= '0; b_col <= '0; b_loaded <= '0;
        a_busy <= 1'b0; a_all <= 1'b0; a_kt <= '0; a_t <= '0; a_row <= '0; a_started <= '0;
        since  <= '0;
        stall_cycles <= '0;
        passes_done  <= '0;
      end else if (active) begin
        if (since != (COL_W+1)'(Y - 1)) since <= since + 1'b1;

        // ---- B loader ----
        if (b_can_start) begin
          b_busy <= 1'b1;
          b_col  <= COL_W'(Y - 1);
        end else if (b_busy) begin
          if (b_col == '0) begin
            b_busy   <= 1'b0;
            b_loaded <= b_loaded + 1;
            if (b_t == reads[1:0] - 2'd1 || reads == 3'd1) begin
              b_t <= '0;
              if (KT_W'(b_kt) == KT_W'(kts_q - 1'b1)) b_all <= 1'b1;
              else b_kt <= b_kt + 1'b1;
            end else begin
              b_t <= b_t + 1'b1;
            end
          end else begin
            b_col <= b_col - 1'b1;
          end
        end

        // ---- A streamer ----
        if (a_end) begin
          a_busy      <= 1'b0;
          passes_done <= passes_done + 1;
          if (a_t_last) begin
            a_t <= '0;
            if (a_all_next) begin
              a_all  <= 1'b1;
              active <= 1'b0;
            end else a_kt <= a_kt + 1'b1;
          end else begin
            a_t <= a_t + 1'b1;
          end
        end else if (a_busy) begin
          a_row <= a_row + 1'b1;
        end
        if (a_can_start) begin
          a_busy    <= 1'b1;
          a_row     <= '0;
          a_started <= a_started + 1;
          since     <= '0;
        end
        // a cycle of an active job without an A read request is a stall
        if (!a_busy) stall_cycles <= stall_cycles + 1;
      end
    end
  end

  // MXU-side controls, one cycle behind the read requests
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mxu_valid <= 1'b0; mxu_load <= 1'b0; mxu_a_state <= '0;
      mxu_first <= 1'b0; mxu_last <= 1'b0; mxu_row <= '0;
      mxu_b_shift <= 1'b0; mxu_b_state <= '0;
    end else begin
      mxu_valid        <= a_busy;
      mxu_load         <= a_busy && (a_row == '0);
      mxu_a_state.mode <= mode_q;
      mxu_a_state.t    <= a_t;
      mxu_first        <= (a_kt == '0) && (a_t == '0);
      mxu_last         <= a_all_next;
      mxu_row          <= a_row;
      mxu_b_shift      <= b_busy;
      mxu_b_state.mode <= mode_q;
      mxu_b_state.t    <= b_t;
    end
  end

  // At most one B tile waits in the shadow registers ahead of the A stream.
  b_lead: assert property (@(posedge clk) disable iff (!rst_n)
    (b_loaded == a_started) || (b_loaded == a_started + 1));
endmodule
