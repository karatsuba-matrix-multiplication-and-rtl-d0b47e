// tile_accumulator: accumulates the partial tile products that leave the
// MXU, across the re-read passes of a tile set and across the K tiles.
//
// Every array row r (output column j = r of the C tile) has its own memory of
// MAX_ROWS accumulators, one per A row. A result element arrives with its A
// row index and two flags: `first` starts the sum from zero, `last` marks the
// final contribution, after which the complete element is emitted. The
// inputs of different columns arrive on different cycles (the array skew);
// each column works on its own, so no deskew is needed here.
// Pass results are signed (a KMM2 C0 pass is negative); the sum is kept in
// two's complement on ACC_W bits and its final value is the non-negative
// matrix product.
//
// Timing: read-modify-write in one cycle (asynchronous read, registered
// write); results appear one cycle after their last contribution. The paper
// only says the partial products are summed outside the MXU, as in a GEMM
// accelerator; memory organisation, widths and timing are this design's.
module tile_accumulator #(
  parameter int Y        = 64,
  parameter int MAX_ROWS = 128,
  parameter int CXW      = 39,
  parameter int ACC_W    = 44,
  parameter int ROW_W    = (MAX_ROWS <= 1) ? 1 : $clog2(MAX_ROWS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [Y-1:0]                in_valid,
  input  logic [Y-1:0]                in_first,
  input  logic [Y-1:0]                in_last,
  input  logic [Y-1:0][ROW_W-1:0]     in_row,
  input  logic [Y-1:0][CXW-1:0]       in_data,     // two's complement
  output logic [Y-1:0]                res_valid,
  output logic [Y-1:0][ROW_W-1:0]     res_row,
  output logic [Y-1:0][ACC_W-1:0]     res_data
);
  for (genvar r = 0; r < Y; r++) begin : g_col
    logic [ACC_W-1:0] mem [MAX_ROWS];
    logic [ACC_W-1:0] sum;

    assign sum = (in_first[r] ? '0 : mem[in_row[r]]) +
                 ACC_W'($signed(in_data[r]));

    always_ff @(posedge clk) begin
      if (in_valid[r]) mem[in_row[r]] <= sum;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        res_valid[r] <= 1'b0;
        res_row[r]   <= '0;
        res_data[r]  <= '0;
      end else begin
        res_valid[r] <= in_valid[r] && in_last[r];
        if (in_valid[r] && in_last[r]) begin
          res_row[r]  <= in_row[r];
          res_data[r] <= sum;
        end
      end
    end
  end
endmodule
