// dct1d_vector_test -- drives one approx_dct8_1d of word length W with
// NVEC random 8-point vectors (plus the all-minimum and all-maximum
// vectors first), compares every output with T* x computed by matrix
// product, and checks that each result appears exactly 3 cycles after its
// input. About one cycle in eight carries no vector (in_valid low).
// Everything runs off the rising clock edge; done rises once all vectors
// have been sent and all results checked.
module dct1d_vector_test
  import dct_ref_pkg::*;
#(
  parameter int unsigned W    = 8,
  parameter int          NVEC = 1000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int LAT = 3;

  logic                  in_valid;
  logic signed [W-1:0]   x [8];
  logic                  out_valid;
  logic signed [W+2:0]   y [8];

  approx_dct8_1d #(.W(W)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  vec8_t  exp_q [$];
  longint t_in_q [$];
  longint cyc;
  int     sent;
  int     drain;

  always @(posedge clk) begin
    vec8_t  v, e;
    longint t0;
    if (!rst_n) begin
      cyc      <= 0;
      sent     <= 0;
      drain    <= 0;
      done     <= 0;
      checks   <= 0;
      failures <= 0;
      in_valid <= 0;
      for (int i = 0; i < 8; i++) x[i] <= '0;
    end else begin
      cyc <= cyc + 1;
      // checker: outputs as they stand before this edge
      if (out_valid) begin
        if (exp_q.size() == 0) begin
          failures <= failures + 1;
          $display("W=%0d: unexpected out_valid", W);
        end else begin
          int f;
          e  = exp_q[0];
          exp_q.delete(0);
          t0 = t_in_q.pop_front();
          f  = 0;
          if (cyc - t0 != longint'(LAT)) begin
            f++;
            $display("W=%0d: latency %0d, expected %0d", W, cyc - t0, LAT);
          end
          for (int i = 0; i < 8; i++)
            if (longint'(y[i]) != e[i]) begin
              f++;
              if (failures < 10)
                $display("W=%0d: y[%0d]=%0d expected %0d", W, i, y[i], e[i]);
            end
          checks   <= checks + 9;
          failures <= failures + f;
        end
      end
      // driver: the vector set up here is captured at the next edge
      if (sent < NVEC + 2 && $urandom_range(0, 7) != 0) begin
        for (int i = 0; i < 8; i++) begin
          if (sent == 0)      v[i] = -(64'sd1 <<< (W-1));
          else if (sent == 1) v[i] = (64'sd1 <<< (W-1)) - 1;
          else                v[i] = rand_signed(W);
          x[i] <= W'(v[i]);
        end
        in_valid <= 1;
        exp_q.push_back(ref_1d(v));
        t_in_q.push_back(cyc + 1);
        sent <= sent + 1;
      end else begin
        in_valid <= 0;
      end
      if (sent == NVEC + 2) begin
        drain <= drain + 1;
        if (drain == LAT + 3) begin
          if (exp_q.size() != 0) begin
            failures <= failures + 1;
            $display("W=%0d: %0d results never came out", W, exp_q.size());
          end
          done <= 1;
        end
      end
    end
  end

endmodule
