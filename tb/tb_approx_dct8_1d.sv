// tb_approx_dct8_1d -- self-checking testbench of the 1-D approximate DCT.
// Applies 10,000 random 8-point vectors at each system word length
// L = 4, 8, 12 and 16 (four instances run side by side), checks every
// output sample against a direct matrix product with T*, and checks the
// 3-cycle latency of every vector.
module tb_approx_dct8_1d;

  localparam int NVEC = 10000;
  localparam int NW   = 4;
  localparam int WL [NW] = '{4, 8, 12, 16};

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic done [NW];
  int   chk  [NW];
  int   fail [NW];

  for (genvar g = 0; g < NW; g++) begin : g_w
    dct1d_vector_test #(.W(WL[g]), .NVEC(NVEC)) u_test (
      .clk, .rst_n, .done(done[g]), .checks(chk[g]), .failures(fail[g])
    );
  end

  int checks, failures;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    checks = 0;
    failures = 0;
    for (int g = 0; g < NW; g++) begin
      checks   += chk[g];
      failures += fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    checks = 0;
    failures = 1;
    for (int g = 0; g < NW; g++) begin
      checks   += chk[g];
      failures += fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
