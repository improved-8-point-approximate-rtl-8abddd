// dct2d_stream_test -- drives one dct2d_top of word length L with NROWS
// random input rows (8 samples of L bits each, about one idle cycle in
// six), a new random block every eight rows. For every output column it
// checks the column index, the 6-cycle latency after row 7 of the block,
// and all eight samples against column k of T* A T*^T. done rises when all
// rows are sent and every expected column has been checked.
module dct2d_stream_test
  import dct_ref_pkg::*;
#(
  parameter int unsigned L     = 8,
  parameter int          NROWS = 800
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int LAT = 6;
  localparam int NQ  = 64;

  logic                in_valid;
  logic signed [L-1:0] x [8];
  logic                out_valid;
  logic [2:0]          out_k;
  logic signed [L+5:0] y [8];

  dct2d_top #(.L(L)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .out_k, .y);

  longint cyc;
  int     sent, drain, wr, rd;
  longint cur  [8][8];
  longint expc [NQ][8];
  int     expk [NQ];
  longint expt [NQ];

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; sent <= 0; drain <= 0; wr <= 0; rd <= 0;
      done <= 0; checks <= 0; failures <= 0; in_valid <= 0;
      for (int e = 0; e < 8; e++) x[e] <= '0;
    end else begin
      int c, f, j, k;
      c = 0;
      f = 0;
      cyc <= cyc + 1;
      // rows accepted at this edge
      if (in_valid) begin
        j = (sent - 1) % 8;
        k = ((sent - 1) / 8) % 8;
        for (int e = 0; e < 8; e++) cur[j][e] = longint'(x[e]);
        if (j == 7) begin
          blk8_t r;
          r = ref_2d(cur);
          for (int i = 0; i < 8; i++) expc[wr % NQ][i] = r[i][k];
          expk[wr % NQ] = k;
          expt[wr % NQ] = cyc + LAT;
          wr <= wr + 1;
        end
      end
      // output column present at this edge
      if (out_valid) begin
        if (rd >= wr) begin
          f++;
          $display("L=%0d: unexpected out_valid", L);
        end else begin
          c += 10;
          if (cyc != expt[rd % NQ]) f++;
          if (out_k != 3'(expk[rd % NQ])) f++;
          for (int i = 0; i < 8; i++)
            if (longint'(y[i]) != expc[rd % NQ][i]) begin
              f++;
              if (failures < 10)
                $display("L=%0d: y[%0d]=%0d expected %0d", L, i, y[i], expc[rd % NQ][i]);
            end
          rd <= rd + 1;
        end
      end
      checks   <= checks + c;
      failures <= failures + f;
      // next row
      if (sent < NROWS && $urandom_range(0, 5) != 0) begin
        for (int e = 0; e < 8; e++) x[e] <= L'(rand_signed(L));
        in_valid <= 1;
        sent <= sent + 1;
      end else begin
        in_valid <= 0;
      end
      if (sent == NROWS && !in_valid) begin
        drain <= drain + 1;
        if (drain == LAT + 2) begin
          checks <= checks + c + 1;
          if (rd != wr || wr != NROWS / 8) begin
            failures <= failures + f + 1;
            $display("L=%0d: %0d of %0d columns checked", L, rd, NROWS / 8);
          end
          done <= 1;
        end
      end
    end
  end

endmodule
