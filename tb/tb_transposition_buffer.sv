// tb_transposition_buffer -- self-checking testbench of the transposition
// buffer. Streams random rows (with random idle cycles) and keeps its own
// copy of the rows of the current block. In every cycle it checks col_valid
// against the row count (high exactly when row 7 of a block is presented),
// and when it is high, checks col_k = floor(i/8) mod 8 and all eight
// samples of column k. A reset in the middle of a block checks that the
// row count restarts at row 0, column 0.
module tb_transposition_buffer
  import dct_pkg::*;
  import dct_ref_pkg::*;
;

  localparam int W     = L_DEFAULT + DCT_GROWTH;
  localparam int NROWS = 64 * 12;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic                in_valid;
  logic signed [W-1:0] row [8];
  logic                col_valid;
  logic [2:0]          col_k;
  logic signed [W-1:0] col [8];

  transposition_buffer dut (.clk, .rst_n, .in_valid, .row, .col_valid, .col_k, .col);

  int     checks = 0, failures = 0;
  int     cyc = 0;
  int     rows_in;            // rows since last reset
  int     total_rows = 0;
  int     cols_seen [8];
  longint blk [8][8];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      int j, k;
      j = rows_in % 8;
      k = (rows_in / 8) % 8;
      checks++;
      if (col_valid !== (in_valid && j == 7)) begin
        failures++;
        $display("cycle %0d: col_valid=%b, in_valid=%b row %0d", cyc, col_valid, in_valid, j);
      end
      if (in_valid) begin
        for (int e = 0; e < 8; e++) blk[j][e] = longint'(row[e]);
        if (col_valid) begin
          cols_seen[k]++;
          checks++;
          if (col_k != 3'(k)) begin
            failures++;
            $display("cycle %0d: col_k=%0d expected %0d", cyc, col_k, k);
          end
          for (int r = 0; r < 8; r++) begin
            checks++;
            if (longint'(col[r]) != blk[r][k]) begin
              failures++;
              if (failures < 20)
                $display("cycle %0d: col[%0d]=%0d expected %0d (k=%0d)", cyc, r, col[r], blk[r][k], k);
            end
          end
        end
        rows_in++;
        total_rows++;
      end
    end else begin
      rows_in = 0;
    end
  end

  // driver
  initial begin
    in_valid = 0;
    foreach (row[e]) row[e] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    while (total_rows < NROWS) begin
      @(posedge clk);
      if (total_rows == 101 && rst_n) begin
        rst_n    <= 0;          // reset in the middle of a block
        in_valid <= 0;
      end else begin
        rst_n    <= 1;
        in_valid <= ($urandom_range(0, 5) != 0);
        foreach (row[e]) row[e] <= W'(rand_signed(W));
      end
    end
    @(posedge clk);
    in_valid <= 0;
    @(posedge clk);
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (cols_seen[k] == 0) begin
        failures++;
        $display("column %0d never produced", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
