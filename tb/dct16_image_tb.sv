// dct16_image_tb: whole-picture workloads for the 2-D approximate DCT.
//
// Two pictures are cut into 16x16 blocks and streamed through dct16_2d
// block after block, in raster order, one row per clock and without idle
// clocks, as a codec front end would:
//   1. a 512x512 picture of unsigned 8-bit samples (1024 blocks), the size
//      of the still-image compression experiments;
//   2. a 416x240 frame of signed 9-bit prediction residuals (26 x 15 = 390
//      blocks), the frame size of the video coding experiments.
// The pictures are synthesised here (smooth gradients, a diagonal texture
// and noise), so no image file is needed. Every coefficient is compared
// with T * A * T^T computed in integer arithmetic, and the run checks that
// the whole picture passes in 16 clocks per block plus the 12-clock
// pipeline latency.
module dct16_image_tb;
  import dct16_ref_pkg::*;

  localparam int IN_W  = 9;
  localparam int OUT_W = 17;
  localparam int MAXW  = 512;
  localparam int MAXH  = 512;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    rst_n;
  logic                    in_valid;
  logic signed [IN_W-1:0]  in_row  [16];
  logic                    out_valid;
  logic signed [OUT_W-1:0] out_col [16];
  logic [3:0]              out_idx;

  int checks = 0, failures = 0;
  int pic [MAXH][MAXW];
  int cur [16][16];     // block being sent
  int got [16][16];     // block being checked
  int bref [16][16];
  int tmp [16][16];
  int width, height, nblk, blk_out, col_out, cycles, first_in, last_out;

  dct16_2d dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_row(in_row),
    .out_valid(out_valid), .out_col(out_col), .out_idx(out_idx));

  initial begin : watchdog
    repeat (3 * (1024 + 390) * 16 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void load_block(int bi, ref int blk [16][16]);
    int bx = bi % (width / 16);
    int by = bi / (width / 16);
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) blk[r][c] = pic[by*16 + r][bx*16 + c];
  endfunction

  function automatic void ref_block();
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        tmp[r][c] = 0;
        for (int m = 0; m < 16; m++) tmp[r][c] += got[r][m] * T[c][m];
      end
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        bref[r][c] = 0;
        for (int m = 0; m < 16; m++) bref[r][c] += T[r][m] * tmp[m][c];
      end
  endfunction

  // Output side: follows the blocks in order and checks each column.
  always @(negedge clk) begin
    if (rst_n && out_valid && blk_out < nblk) begin
      if (col_out == 0) begin
        load_block(blk_out, got);
        ref_block();
      end
      checks++;
      if (int'(out_idx) != col_out) begin
        failures++;
        if (failures < 10) $display("block %0d: out_idx=%0d expected %0d", blk_out, out_idx, col_out);
      end
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(out_col[i]) != bref[i][col_out]) begin
          failures++;
          if (failures < 10)
            $display("block %0d B[%0d][%0d]=%0d expected %0d", blk_out, i, col_out,
                     out_col[i], bref[i][col_out]);
        end
      end
      if (col_out == 15) begin
        col_out = 0;
        blk_out++;
        if (blk_out == nblk) last_out = cycles;
      end else begin
        col_out++;
      end
    end
  end

  always @(posedge clk) cycles++;

  task automatic run_picture(string name, int w, int h, bit residual);
    width = w; height = h; nblk = (w / 16) * (h / 16);
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int s = (x * 3 + y * 2) / 4 + ((((x + y) / 8) % 2) != 0 ? 40 : 0)
                + int'($urandom_range(24));
        if (residual) s = ((x * 7 + y * 13) % 97) - 48 + int'($urandom_range(400)) - 200;
        if (!residual) s = s % 256;
        if (residual && s > 255)  s = 255;
        if (residual && s < -256) s = -256;
        pic[y][x] = s;
      end
    blk_out = 0; col_out = 0; last_out = -1;
    @(negedge clk);
    first_in = cycles;
    for (int bi = 0; bi < nblk; bi++) begin
      load_block(bi, cur);
      for (int r = 0; r < 16; r++) begin
        for (int c = 0; c < 16; c++) in_row[c] = IN_W'(cur[r][c]);
        in_valid = 1'b1;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (40) @(negedge clk);
    // The last row goes in nblk*16 - 1 clocks after the first; column 0 of the
    // last block follows 12 clocks later and its column 15 another 15 later.
    checks++;
    if (blk_out != nblk || last_out - first_in != (nblk * 16 - 1) + 12 + 15) begin
      failures++;
      $display("%s: blocks out %0d of %0d, clocks %0d", name, blk_out, nblk, last_out - first_in);
    end
    $display("%s %0dx%0d: %0d blocks transformed in %0d clocks", name, w, h, blk_out,
             last_out - first_in);
  endtask

  initial begin : stimulus
    cycles   = 0;
    nblk     = 0;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (in_row[i]) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_picture("still image", 512, 512, 1'b0);
    run_picture("video residual frame", 416, 240, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
