// dct2d_top -- 2-D 8x8 approximate DCT, Y = T* A T*^T, built from two
// identical 1-D 14-addition transforms and a transposition buffer.
//
// Image rows enter eight samples wide, one row per cycle. The first
// approx_dct8_1d transforms each row; the transposition_buffer turns the
// stream of transformed rows into a column of the row-transformed block;
// the second approx_dct8_1d transforms that column, giving column k of the
// 2-D result. Each 8-row block yields one output column, k = 0, 1, ..., 7
// for successive blocks (k = floor(i/8) mod 8 for input row i counted from
// reset), so the full 64-coefficient transform of a block is produced by
// streaming the block eight times.
//
// Interface: in_valid qualifies x; out_valid qualifies y and out_k. Rows
// are counted from the last reset, so the first row after reset is row 0
// of a block and selects column 0. The output column for a block appears 6
// cycles after its row 7 was presented (3 cycles per 1-D transform, none
// in the buffer). Output samples are L+6 bits, full precision; the
// diagonal scaling of the approximation is left to the quantizer.
//
// The three-block chain and the use of the same transform for rows and
// columns follow the paper; the valid/index handshake and full-precision
// word growth are this design's choices. An assertion checks that output
// columns are at least eight cycles apart.
module dct2d_top
  import dct_pkg::*;
#(
  parameter int unsigned L = L_DEFAULT      // input word length
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  logic signed [L-1:0]              x [N],
  output logic                             out_valid,
  output idx_t                             out_k,
  output logic signed [L+2*DCT_GROWTH-1:0] y [N]
);

  localparam int unsigned WR = L + DCT_GROWTH;   // row-transform width

  logic                 row_valid, col_valid;
  logic signed [WR-1:0] row_y [N];
  logic signed [WR-1:0] col   [N];
  idx_t                 col_k;
  idx_t                 k_q [3];

  approx_dct8_1d #(.W(L)) u_row_dct (
    .clk, .rst_n,
    .in_valid (in_valid),
    .x        (x),
    .out_valid(row_valid),
    .y        (row_y)
  );

  transposition_buffer #(.W(WR)) u_transpose (
    .clk, .rst_n,
    .in_valid (row_valid),
    .row      (row_y),
    .col_valid(col_valid),
    .col_k    (col_k),
    .col      (col)
  );

  approx_dct8_1d #(.W(WR)) u_col_dct (
    .clk, .rst_n,
    .in_valid (col_valid),
    .x        (col),
    .out_valid(out_valid),
    .y        (y)
  );

  // Column index travels alongside the column transform's 3-stage pipeline.
  always_ff @(posedge clk) begin
    k_q[0] <= col_k;
    k_q[1] <= k_q[0];
    k_q[2] <= k_q[1];
  end

  assign out_k = k_q[2];

  // One column per eight accepted rows: two output columns are always at
  // least eight cycles apart.
  a_column_spacing: assert property (
    @(posedge clk) disable iff (!rst_n) out_valid |=> !out_valid [*7]
  ) else $error("output columns closer than eight cycles");

endmodule
