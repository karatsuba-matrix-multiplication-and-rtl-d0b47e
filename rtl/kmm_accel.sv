// kmm_accel: GEMM engine built around the Karatsuba MXU.
//
// Computes C = A * B for an A block of num_rows rows and K = num_ktiles * X
// columns and a B block of K rows and Y columns, with unsigned elements of
// in_width bits (1 .. 2M). The engine reads the operand tiles from an
// external tile memory (the accelerator's memory system, outside this
// design), multiplies them on the MXU and sums the partial tile products in
// tile_accumulator, emitting each finished element of C.
//
// Core (parameter FIXED_CORE):
//   0 (default) precision-scalable KMM_2^[w,M] MXU (kmm_ps_mxu): each set of
//     input tiles is read 1, 3 or 4 times according to in_width
//     (MM1 for w <= M, KMM2 for M < w <= 2M-2, MM2 above). This is the
//     configuration the paper integrates in its accelerator (M = 8,
//     64x64, p = 4).
//   1 fixed-precision KMM_2^[2M] MXU (kmm_mxu): every tile set is read once,
//     whatever in_width is.
//
// Interface:
//   start/in_width/num_rows/num_ktiles : job request, sampled when idle.
//   busy/done : busy from start until the last element of C is out; done
//     pulses with it.
//   a_rd_* : read row a_rd_row of A tile a_rd_ktile (X elements); the memory
//     returns a_rd_data on the next cycle. b_rd_*: read column b_rd_col of B
//     tile b_rd_ktile (X elements), same latency.
//   res_valid[j]/res_row[j]/res_data[j]: element C[res_row][j]; columns come
//     out on different cycles (column j lags column 0 by j cycles).
//   stall_cycles/passes_done: sequencer statistics of the last job.
// The check that every output row carries the job's mode and the
// sequencer's ordering assertion use rst_n as a synchronous disable, the
// rest of the design as an asynchronous reset; lint reports that mix.
// Latency: about Y + X/P + Y + 5 cycles from start to the first result with
// num_rows >= 2Y; then one A row per cycle for the whole job.
module kmm_accel
  import kmm_pkg::*;
#(
  parameter int M          = 8,
  parameter int X          = 64,
  parameter int Y          = 64,
  parameter int P          = 4,
  parameter int MAX_ROWS   = 128,
  parameter int MAX_KT     = 128,
  parameter bit FIXED_CORE = 1'b0,
  parameter int WA         = clog2_min1(X),
  parameter int CXW        = 4*M + WA + 1,
  parameter int ACC_W      = 4*M + WA + clog2_min1(MAX_KT),
  parameter int ROW_W      = clog2_min1(MAX_ROWS),
  parameter int KT_W       = clog2_min1(MAX_KT),
  parameter int COL_W      = clog2_min1(Y)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [4:0]                 in_width,
  input  logic [ROW_W:0]             num_rows,
  input  logic [KT_W:0]              num_ktiles,
  output logic                       busy,
  output logic                       done,
  output logic                       a_rd_en,
  output logic [KT_W-1:0]            a_rd_ktile,
  output logic [ROW_W-1:0]           a_rd_row,
  input  logic [X-1:0][2*M-1:0]      a_rd_data,
  output logic                       b_rd_en,
  output logic [KT_W-1:0]            b_rd_ktile,
  output logic [COL_W-1:0]           b_rd_col,
  input  logic [X-1:0][2*M-1:0]      b_rd_data,
  output logic [Y-1:0]               res_valid,
  output logic [Y-1:0][ROW_W-1:0]    res_row,
  output logic [Y-1:0][ACC_W-1:0]    res_data,
  output logic [31:0]                stall_cycles,
  output logic [31:0]                passes_done
);
  localparam int TAG_W = ROW_W + 2;         // {first, last, row}

  ps_mode_e        mode;
  logic            issuing;
  logic            mxu_valid, mxu_load, mxu_first, mxu_last, mxu_b_shift;
  ps_state_t       mxu_a_state, mxu_b_state;
  logic [ROW_W-1:0] mxu_row;
  logic [ROW_W:0]  rows_q;

  always_comb begin
    if (FIXED_CORE) mode = MODE_MM1;
    else            mode = mode_for_width(int'(in_width), M);
  end

  tile_reread_seq #(.Y(Y), .MAX_ROWS(MAX_ROWS), .MAX_KT(MAX_KT)) u_seq (
    .clk(clk), .rst_n(rst_n),
    .start(start && !busy), .mode(mode), .num_rows(num_rows), .num_ktiles(num_ktiles),
    .issuing(issuing),
    .a_rd_en(a_rd_en), .a_rd_ktile(a_rd_ktile), .a_rd_row(a_rd_row),
    .b_rd_en(b_rd_en), .b_rd_ktile(b_rd_ktile), .b_rd_col(b_rd_col),
    .mxu_valid(mxu_valid), .mxu_load(mxu_load), .mxu_a_state(mxu_a_state),
    .mxu_first(mxu_first), .mxu_last(mxu_last), .mxu_row(mxu_row),
    .mxu_b_shift(mxu_b_shift), .mxu_b_state(mxu_b_state),
    .stall_cycles(stall_cycles), .passes_done(passes_done)
  );

  logic [Y-1:0]             o_valid;
  logic [Y-1:0][TAG_W-1:0]  o_tag;
  logic [Y-1:0][CXW-1:0]    o_cx;

  if (FIXED_CORE) begin : g_fixed
    localparam int FCW = 4*M + WA;
    logic [Y-1:0][FCW-1:0] c_u;
    kmm_mxu #(.W(2*M), .N(2), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W), .CW(FCW)) u_mxu (
      .clk(clk), .rst_n(rst_n),
      .in_valid(mxu_valid), .in_load(mxu_load), .in_tag({mxu_first, mxu_last, mxu_row}),
      .a_vec(a_rd_data), .b_shift(mxu_b_shift), .b_vec(b_rd_data),
      .out_valid(o_valid), .out_tag(o_tag), .c_vec(c_u)
    );
    for (genvar r = 0; r < Y; r++) begin : g_ext
      assign o_cx[r] = CXW'(c_u[r]);
    end
  end else begin : g_ps
    ps_state_t [Y-1:0] o_state;
    ps_mode_e          job_mode;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)              job_mode <= MODE_MM1;
      else if (start && !busy) job_mode <= mode;
    end
    kmm_ps_mxu #(.M(M), .X(X), .Y(Y), .P(P), .TAG_W(TAG_W), .WA(WA), .CXW(CXW)) u_mxu (
      .clk(clk), .rst_n(rst_n),
      .in_valid(mxu_valid), .in_load(mxu_load), .in_tag({mxu_first, mxu_last, mxu_row}),
      .a_state(mxu_a_state), .a_vec(a_rd_data),
      .b_shift(mxu_b_shift), .b_state(mxu_b_state), .b_vec(b_rd_data),
      .out_valid(o_valid), .out_tag(o_tag), .out_state(o_state), .cx_vec(o_cx)
    );
    // every row leaving the array was computed in the mode of the running job
    for (genvar r = 0; r < Y; r++) begin : g_chk
      state_mode: assert property (@(posedge clk) disable iff (!rst_n)
        o_valid[r] |-> o_state[r].mode == job_mode);
    end
  end

  logic [Y-1:0]            acc_first, acc_last;
  logic [Y-1:0][ROW_W-1:0] acc_row;
  always_comb begin
    for (int r = 0; r < Y; r++) begin
      acc_first[r] = o_tag[r][TAG_W-1];
      acc_last[r]  = o_tag[r][TAG_W-2];
      acc_row[r]   = o_tag[r][ROW_W-1:0];
    end
  end

  tile_accumulator #(.Y(Y), .MAX_ROWS(MAX_ROWS), .CXW(CXW), .ACC_W(ACC_W)) u_acc (
    .clk(clk), .rst_n(rst_n),
    .in_valid(o_valid), .in_first(acc_first), .in_last(acc_last), .in_row(acc_row),
    .in_data(o_cx),
    .res_valid(res_valid), .res_row(res_row), .res_data(res_data)
  );

  // job status: done with the final element of the last column
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      rows_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        rows_q <= num_rows;
      end else if (busy && res_valid[Y-1] &&
                   ({1'b0, res_row[Y-1]} == rows_q - 1'b1) && !issuing) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
