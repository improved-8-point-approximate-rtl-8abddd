// transposition_buffer -- row-parallel transposition buffer between the
// row-wise and the column-wise 1-D transforms.
//
// Rows X_{j,0..7} of a row-transformed 8x8 block arrive one per cycle,
// j = 0..7. A delay line of seven row registers gives eight taps: tap 0 is
// the row at the input, tap m the row that arrived m cycles earlier. One
// 8-to-1 multiplexer per tap picks a single element of the row at that tap.
// A row counter i (6 bits) supplies the selects: its upper three bits
// k = floor(i/8) mod 8 are the column number and its lower three bits
// j = i mod 8 the row number. The select reaches multiplexer m through a
// chain of m registers, so every multiplexer sees the select that belonged
// to the row it is looking at.
//
// In the cycle in which row 7 of a block is at the input, tap m holds row
// 7-m of that block and every select equals k, so the eight multiplexer
// outputs form column k of the block: col[i] = X_{i,k}. col_valid marks
// that cycle and col_k gives k. One column leaves per 8-row block; the
// column number advances from block to block, so columns 0..7 of one block
// are obtained by presenting that block eight times in a row.
//
// The delay line, the eight multiplexers, the counter and its select delay
// chain follow the paper's drawing of this block; the index rule for j and
// k follows its caption of the 2-D architecture. The order in which the
// multiplexers drive the output lanes, the in_valid clock enable, the
// col_valid / col_k outputs and the synchronous reset of the counter and
// the select chain are this design's choices. col is combinational from
// row (tap 0), so the buffer adds no latency.
module transposition_buffer
  import dct_pkg::*;
#(
  parameter int unsigned W = L_DEFAULT + DCT_GROWTH   // sample width
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   row [N],
  output logic                  col_valid,
  output idx_t                  col_k,
  output logic signed [W-1:0]   col [N]
);

  logic signed [W-1:0] dly_q [N-1][N];   // row delay line, stage 1..7
  logic signed [W-1:0] tap   [N][N];     // tap m, element e
  logic signed [W-1:0] mux   [N];        // output of multiplexer m
  logic [2*ROW_BITS-1:0] cnt_q;          // row counter i mod 64
  idx_t                  sel_q [N-1];    // select delay chain, stage 1..7
  idx_t                  sel   [N];      // select of multiplexer m

  always_ff @(posedge clk) begin
    if (in_valid) begin
      dly_q[0] <= row;
      for (int m = 1; m < N-1; m++) dly_q[m] <= dly_q[m-1];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_q <= '0;
      for (int m = 0; m < N-1; m++) sel_q[m] <= '0;
    end else if (in_valid) begin
      cnt_q    <= cnt_q + 1'b1;
      sel_q[0] <= cnt_q[2*ROW_BITS-1:ROW_BITS];
      for (int m = 1; m < N-1; m++) sel_q[m] <= sel_q[m-1];
    end
  end

  always_comb begin
    tap[0] = row;
    sel[0] = cnt_q[2*ROW_BITS-1:ROW_BITS];
    for (int m = 1; m < N; m++) begin
      tap[m] = dly_q[m-1];
      sel[m] = sel_q[m-1];
    end
    for (int m = 0; m < N; m++) mux[m] = tap[m][sel[m]];
    // tap N-1-i holds row i when row N-1 is at the input
    for (int i = 0; i < N; i++) col[i] = mux[N-1-i];
  end

  assign col_valid = in_valid && (cnt_q[ROW_BITS-1:0] == idx_t'(N-1));
  assign col_k     = cnt_q[2*ROW_BITS-1:ROW_BITS];

endmodule
