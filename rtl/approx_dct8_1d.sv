// approx_dct8_1d -- 8-point 1-D approximate DCT with 14 additions.
//
// Computes y = T* x for the low-complexity matrix
//
//        [ 1  1  1  1  1  1  1  1 ]
//        [ 0  1  0  0  0  0 -1  0 ]
//        [ 1  0  0 -1 -1  0  0  1 ]
//   T* = [ 1  0  0  0  0  0  0 -1 ]
//        [ 1 -1 -1  1  1 -1 -1  1 ]
//        [ 0  0  0  1 -1  0  0  0 ]
//        [ 0 -1  1  0  0  1 -1  0 ]
//        [ 0  0  1  0  0 -1  0  0 ]
//
// through the sparse factorization T* = P4 * A12 * A11 * A1:
//   A1  : butterfly  a_i = x_i + x_{7-i} (i = 0..3),
//         a4 = x3-x4, a5 = x2-x5, a6 = x1-x6, a7 = x0-x7         8 additions
//   A11 : b0 = a0+a3, b1 = a1+a2, b2 = a1-a2, b3 = a0-a3        4 additions
//   A12 : c0 = b0+b1, c1 = b0-b1, c2 = -b2                      2 additions
//   P4  : permutation (1)(2 5 6 8 4 3 7), pure wiring:
//         y = (c0, c6, c3, c7, c1, c4, c2, c5)
// The output scaling D* = diag(1/sqrt8, 1/sqrt2, 1/2, 1/sqrt2, ...) that
// turns T* into a DCT approximation is left to the quantizer that follows.
//
// The factorization and permutation are the paper's. A register bank
// follows each factor stage, as in the paper's signal-flow drawings of the
// other approximate DCTs, so the latency is 3 cycles and a new vector can
// enter every cycle. Samples are two's complement; each stage keeps full
// precision (one bit of growth), so y is W+3 bits wide. The in_valid /
// out_valid pipeline and the synchronous active-low reset of the valid bits
// are this design's additions; the data registers are not reset.
module approx_dct8_1d
  import dct_pkg::*;
#(
  parameter int unsigned W = L_DEFAULT      // input word length
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [W-1:0]            x [N],
  output logic                           out_valid,
  output logic signed [W+DCT_GROWTH-1:0] y [N]
);

  localparam int unsigned W1 = W + 1;   // after A1
  localparam int unsigned W2 = W + 2;   // after A11
  localparam int unsigned W3 = W + 3;   // after A12

  logic signed [W1-1:0] a_q [N];
  logic signed [W2-1:0] b_q [N];
  logic signed [W3-1:0] c_q [N];
  logic [2:0]           vld_q;

  // Stage A1: decimation-in-frequency butterfly.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N/2; i++) begin
      a_q[i]       <= W1'(x[i]) + W1'(x[N-1-i]);
      a_q[N/2 + i] <= W1'(x[N/2-1-i]) - W1'(x[N/2+i]);
    end
  end

  // Stage A11: butterfly on the even half, odd half passes through.
  always_ff @(posedge clk) begin
    b_q[0] <= W2'(a_q[0]) + W2'(a_q[3]);
    b_q[1] <= W2'(a_q[1]) + W2'(a_q[2]);
    b_q[2] <= W2'(a_q[1]) - W2'(a_q[2]);
    b_q[3] <= W2'(a_q[0]) - W2'(a_q[3]);
    for (int i = 4; i < N; i++) b_q[i] <= W2'(a_q[i]);
  end

  // Stage A12: 2-point butterfly, sign inversion, pass-through.
  always_ff @(posedge clk) begin
    c_q[0] <= W3'(b_q[0]) + W3'(b_q[1]);
    c_q[1] <= W3'(b_q[0]) - W3'(b_q[1]);
    c_q[2] <= -W3'(b_q[2]);
    for (int i = 3; i < N; i++) c_q[i] <= W3'(b_q[i]);
  end

  // Valid pipeline, one bit per register bank.
  always_ff @(posedge clk) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[1:0], in_valid};
  end

  // P4: output permutation (wiring only).
  assign y[0] = c_q[0];
  assign y[1] = c_q[6];
  assign y[2] = c_q[3];
  assign y[3] = c_q[7];
  assign y[4] = c_q[1];
  assign y[5] = c_q[4];
  assign y[6] = c_q[2];
  assign y[7] = c_q[5];

  assign out_valid = vld_q[2];

endmodule
