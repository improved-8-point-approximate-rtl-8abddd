// tb_dct2d_top -- end-to-end testbench of the 2-D approximate DCT at its
// default word length.
//
// Phase 1 streams NREP blocks, each presented eight times in a row, so that
// the design emits all eight columns k = 0..7 of each block; the columns are
// assembled and the whole 8x8 result is compared with T* A T*^T computed by
// matrix products. The blocks include the all-minimum, all-maximum and a
// checkerboard of extremes, which drive every output to its largest
// magnitude. Phase 2 streams a new random block every eight rows; each
// output column k must equal column k of that block's transform. Random
// idle cycles (in_valid low) are inserted throughout. Every column must
// appear exactly 6 cycles after row 7 of its block was accepted.
// Counted mechanisms: each column index k, wrap of the column counter from
// 7 to 0, idle input cycles, and fully assembled 8x8 transforms.
module tb_dct2d_top
  import dct_pkg::*;
  import dct_ref_pkg::*;
;

  localparam int L    = L_DEFAULT;
  localparam int LAT  = 6;
  localparam int NREP = 6;      // phase 1 blocks (each sent 8 times)
  localparam int NNEW = 64;     // phase 2 blocks (each sent once)
  localparam int NQ   = 1024;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic                    in_valid;
  logic signed [L-1:0]     x [8];
  logic                    out_valid;
  logic [2:0]              out_k;
  logic signed [L+5:0]     y [8];

  dct2d_top dut (.clk, .rst_n, .in_valid, .x, .out_valid, .out_k, .y);

  int     checks = 0, failures = 0;
  longint cyc = 0;
  int     rows_in = 0;
  longint cur [8][8];            // rows of the current 8-row group
  // expected columns, written when row 7 is accepted
  longint expc [NQ][8];
  int     expk [NQ];
  longint expt [NQ];
  int     wr = 0, rd = 0;
  // assembly of whole blocks in phase 1
  longint asm_y [8][8];
  blk8_t  asm_ref;
  int     asm_cols = 0;
  logic   phase1 = 1;
  // mechanism counters
  int     n_col [8];
  int     n_wrap = 0, n_idle = 0, n_full = 0;
  int     last_k = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // input side
      if (in_valid) begin
        int j, k;
        j = rows_in % 8;
        k = (rows_in / 8) % 8;
        for (int e = 0; e < 8; e++) cur[j][e] = longint'(x[e]);
        if (j == 7) begin
          blk8_t r;
          r = ref_2d(cur);
          for (int i = 0; i < 8; i++) expc[wr % NQ][i] = r[i][k];
          expk[wr % NQ] = k;
          expt[wr % NQ] = cyc + LAT;
          wr++;
          if (phase1) asm_ref = r;
        end
        rows_in++;
      end else begin
        n_idle++;
      end
      // output side
      if (out_valid) begin
        if (rd == wr) begin
          failures++;
          $display("cycle %0d: unexpected out_valid", cyc);
        end else begin
          checks += 2;
          if (cyc != expt[rd % NQ]) begin
            failures++;
            $display("cycle %0d: column due at cycle %0d", cyc, expt[rd % NQ]);
          end
          if (out_k != 3'(expk[rd % NQ])) begin
            failures++;
            $display("cycle %0d: out_k=%0d expected %0d", cyc, out_k, expk[rd % NQ]);
          end
          for (int i = 0; i < 8; i++) begin
            checks++;
            if (longint'(y[i]) != expc[rd % NQ][i]) begin
              failures++;
              if (failures < 20)
                $display("cycle %0d: y[%0d]=%0d expected %0d (k=%0d)", cyc, i, y[i], expc[rd % NQ][i], out_k);
            end
          end
          n_col[out_k]++;
          if (last_k == 7 && out_k == 0) n_wrap++;
          last_k = int'(out_k);
          rd++;
          if (phase1) begin
            for (int i = 0; i < 8; i++) asm_y[i][out_k] = longint'(y[i]);
            asm_cols++;
            if (out_k == 7) begin
              int bad;
              bad = (asm_cols != 8);
              for (int i = 0; i < 8; i++)
                for (int c = 0; c < 8; c++)
                  if (asm_y[i][c] != asm_ref[i][c]) bad = 1;
              checks++;
              if (bad) begin
                failures++;
                $display("cycle %0d: assembled 8x8 transform differs", cyc);
              end else n_full++;
              asm_cols = 0;
            end
          end
        end
      end
    end
  end

  task automatic send_row(longint r [8]);
    while ($urandom_range(0, 4) == 0) begin
      in_valid <= 0;
      @(posedge clk);
    end
    for (int e = 0; e < 8; e++) x[e] <= L'(r[e]);
    in_valid <= 1;
    @(posedge clk);
  endtask

  initial begin
    blk8_t a;
    in_valid = 0;
    foreach (x[e]) x[e] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // phase 1: each block eight times, columns 0..7
    for (int b = 0; b < NREP; b++) begin
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++)
          case (b)
            0: a[r][c] = -(64'sd1 <<< (L-1));
            1: a[r][c] = (64'sd1 <<< (L-1)) - 1;
            2: a[r][c] = ((r + c) % 2 == 0) ? (64'sd1 <<< (L-1)) - 1 : -(64'sd1 <<< (L-1));
            default: a[r][c] = rand_signed(L);
          endcase
      for (int rep = 0; rep < 8; rep++)
        for (int r = 0; r < 8; r++) send_row(a[r]);
    end
    // drain, then phase 2: a new block every 8 rows
    in_valid <= 0;
    repeat (LAT + 2) @(posedge clk);
    phase1 = 0;
    for (int b = 0; b < NNEW; b++) begin
      for (int r = 0; r < 8; r++)
        for (int c = 0; c < 8; c++) a[r][c] = rand_signed(L);
      for (int r = 0; r < 8; r++) send_row(a[r]);
    end
    in_valid <= 0;
    repeat (LAT + 2) @(posedge clk);
    // every column produced, and nothing left behind
    checks++;
    if (rd != wr) begin
      failures++;
      $display("%0d columns never came out", wr - rd);
    end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (n_col[k] == 0) begin
        failures++;
        $display("column index %0d never produced", k);
      end
    end
    checks += 3;
    if (n_wrap == 0) begin failures++; $display("column counter never wrapped"); end
    if (n_idle == 0) begin failures++; $display("no idle input cycle"); end
    if (n_full != NREP) begin failures++; $display("%0d of %0d full transforms assembled", n_full, NREP); end
    $display("mechanisms: columns k0..k7 = %0d %0d %0d %0d %0d %0d %0d %0d, wraps=%0d, idle cycles=%0d, full 8x8 transforms=%0d",
             n_col[0], n_col[1], n_col[2], n_col[3], n_col[4], n_col[5], n_col[6], n_col[7], n_wrap, n_idle, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
