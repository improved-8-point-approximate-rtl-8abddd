// tb_wordlength_sweep -- the random-vector test at every system word
// length L = 4, 8, 12 and 16: four 2-D transforms side by side, each fed
// 10,000 random 8-sample input rows (1,250 blocks, one checked output
// column per block).
module tb_wordlength_sweep;

  localparam int NROWS = 10000;
  localparam int NW    = 4;
  localparam int WL [NW] = '{4, 8, 12, 16};

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic done [NW];
  int   chk  [NW];
  int   fail [NW];

  for (genvar g = 0; g < NW; g++) begin : g_w
    dct2d_stream_test #(.L(WL[g]), .NROWS(NROWS)) u_test (
      .clk, .rst_n, .done(done[g]), .checks(chk[g]), .failures(fail[g])
    );
  end

  task automatic report(int extra_fail);
    int checks, failures;
    checks = 0;
    failures = extra_fail;
    for (int g = 0; g < NW; g++) begin
      checks   += chk[g];
      failures += fail[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3]);
    report(0);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    report(1);
    $finish;
  end

endmodule
