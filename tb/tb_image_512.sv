// tb_image_512 -- image-size workload: the full 2-D transform of every
// 8x8 block of a 512x512 8-bit greyscale picture, at the default word
// length L = 8.
//
// The picture is generated here (no image file): a smooth diagonal ramp
// plus a low-frequency ripple and a pseudo-random texture,
//   p(r,c) = (r + 2c)/6 + 40*[(r/32 + c/32) odd] + (hash(r,c) mod 32),
// clipped to 0..255. Pixels are level-shifted by -128 to fit the signed
// 8-bit input, as in JPEG. Each block is streamed eight times so that all
// eight output columns appear; the assembled 8x8 result is compared with
// T* A T*^T, and so is the DC coefficient sum over the whole picture.
// NBLK_ROWS x NBLK_COLS blocks are processed (64 x 64 for the full picture).
module tb_image_512
  import dct_pkg::*;
  import dct_ref_pkg::*;
;

  localparam int IMG       = 512;
  localparam int NBLK_ROWS = IMG / 8;
  localparam int NBLK_COLS = IMG / 8;
  localparam int LAT       = 6;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic                  in_valid;
  logic signed [7:0]     x [8];
  logic                  out_valid;
  logic [2:0]            out_k;
  logic signed [13:0]    y [8];

  dct2d_top dut (.clk, .rst_n, .in_valid, .x, .out_valid, .out_k, .y);

  int     checks = 0, failures = 0;
  blk8_t  a, r;
  longint got [8][8];
  int     ncols = 0;
  int     nblocks = 0;
  longint dc_sum_ref = 0, dc_sum_got = 0;

  function automatic longint pixel(int row, int col);
    int v, h;
    h = (row * 1103 + col * 2957) ^ ((row * col) >> 3);
    h = (h * 73) & 31;
    v = (row + 2 * col) / 6 + ((((row / 32) + (col / 32)) % 2) * 40) + h;
    if (v > 255) v = 255;
    return longint'(v) - 128;
  endfunction

  // collect output columns of the current block
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int i = 0; i < 8; i++) got[i][out_k] = longint'(y[i]);
      checks++;
      if (int'(out_k) != ncols % 8) begin
        failures++;
        $display("block %0d: column %0d arrived as column %0d", nblocks, ncols % 8, out_k);
      end
      ncols++;
    end
  end

  initial begin
    in_valid = 0;
    foreach (x[e]) x[e] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int br = 0; br < NBLK_ROWS; br++)
      for (int bc = 0; bc < NBLK_COLS; bc++) begin
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) a[i][j] = pixel(8 * br + i, 8 * bc + j);
        r = ref_2d(a);
        for (int rep = 0; rep < 8; rep++)
          for (int i = 0; i < 8; i++) begin
            for (int e = 0; e < 8; e++) x[e] <= 8'(a[i][e]);
            in_valid <= 1;
            @(posedge clk);
          end
        in_valid <= 0;
        repeat (LAT + 1) @(posedge clk);
        checks++;
        if (ncols != 8 * (nblocks + 1)) begin
          failures++;
          $display("block %0d: %0d columns", nblocks, ncols - 8 * nblocks);
        end
        for (int i = 0; i < 8; i++)
          for (int k = 0; k < 8; k++) begin
            checks++;
            if (got[i][k] != r[i][k]) begin
              failures++;
              if (failures < 20)
                $display("block (%0d,%0d): Y[%0d][%0d]=%0d expected %0d", br, bc, i, k, got[i][k], r[i][k]);
            end
          end
        dc_sum_ref += r[0][0];
        dc_sum_got += got[0][0];
        nblocks++;
      end
    checks++;
    if (dc_sum_got != dc_sum_ref) failures++;
    $display("%0d blocks of a %0dx%0d picture transformed, DC sum %0d", nblocks, IMG, IMG, dc_sum_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBLK_ROWS * NBLK_COLS * (64 + LAT + 1) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
