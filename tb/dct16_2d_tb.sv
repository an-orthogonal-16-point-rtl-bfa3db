// dct16_2d_tb: end-to-end testbench for the 2-D 16x16 approximate DCT, at
// the top's default parameters.
//
// Sends NBLK 16x16 blocks, one row per clock, and checks every transformed
// column against B = T * A * T^T computed with integer arithmetic from the
// matrix T in dct16_ref_pkg. The expected output timeline is derived from
// the input timing: column k of a block must be on the outputs exactly
// 12 + k clocks after the last row of the block was presented (5 clocks for
// the row transform, 2 for the transposition buffer, 5 for the column
// transform), with out_idx = k; out_valid must be low on every other clock.
// The run counts how often each mechanism of the design was exercised and
// fails if one never was:
//   - back-to-back blocks: a bank of the buffer refilled while the other is
//     read, with no idle clock between blocks;
//   - idle input clocks in the middle of a block;
//   - full-scale blocks whose coefficients reach the edge of the 17-bit
//     output range (A = all minimum, and sign patterns of rows of T).
module dct16_2d_tb;
  import dct16_ref_pkg::*;

  localparam int IN_W  = 9;
  localparam int OUT_W = 17;
  localparam int NBLK  = 200;
  localparam int MAXC  = NBLK * 16 * 3 + 100;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    rst_n;
  logic                    in_valid;
  logic signed [IN_W-1:0]  in_row  [16];
  logic                    out_valid;
  logic signed [OUT_W-1:0] out_col [16];
  logic [3:0]              out_idx;

  int checks = 0, failures = 0;
  int back_to_back = 0, idle_clocks = 0, full_scale = 0, columns_seen = 0;
  int max_abs = 0;
  int a    [NBLK][16][16];
  int bref [NBLK][16][16];
  bit exp_v [MAXC];
  int exp_b [MAXC];
  int exp_k [MAXC];
  int t, b, j, last_done;

  dct16_2d dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_row(in_row),
    .out_valid(out_valid), .out_col(out_col), .out_idx(out_idx));

  initial begin : watchdog
    repeat (MAXC + 10) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // B = T * A * T^T
  task automatic reference(int n);
    int tmp [16][16];
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        tmp[r][c] = 0;
        for (int m = 0; m < 16; m++) tmp[r][c] += a[n][r][m] * T[c][m];   // A * T^T
      end
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        bref[n][r][c] = 0;
        for (int m = 0; m < 16; m++) bref[n][r][c] += T[r][m] * tmp[m][c];
      end
  endtask

  task automatic make_block(int n);
    int lo = -(1 << (IN_W-1));
    int hi = (1 << (IN_W-1)) - 1;
    int r0, c0;
    if (n == 3) begin
      full_scale++;
      foreach (a[n][r, c]) a[n][r][c] = lo;                // B[0][0] = -65536
    end else if (n % 17 == 5) begin
      // A[r][c] = sign(T[r0][r]) * sign(T[c0][c]) at full scale drives
      // B[r0][c0] to its largest magnitude.
      full_scale++;
      r0 = $urandom_range(15);
      c0 = $urandom_range(15);
      foreach (a[n][r, c]) a[n][r][c] = T[r0][r] * T[c0][c] > 0 ? hi :
                                        (T[r0][r] * T[c0][c] < 0 ? lo : 0);
    end else begin
      foreach (a[n][r, c]) a[n][r][c] = rnd_signed(IN_W);
    end
    reference(n);
  endtask

  task automatic check_clock(int c);
    checks++;
    if (out_valid !== exp_v[c]) begin
      failures++;
      if (failures < 10) $display("c=%0d out_valid=%0b expected %0b", c, out_valid, exp_v[c]);
    end else if (exp_v[c]) begin
      columns_seen++;
      checks++;
      if (int'(out_idx) != exp_k[c]) begin
        failures++;
        if (failures < 10) $display("c=%0d out_idx=%0d expected %0d", c, out_idx, exp_k[c]);
      end
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(out_col[i]) > max_abs)  max_abs = int'(out_col[i]);
        if (-int'(out_col[i]) > max_abs) max_abs = -int'(out_col[i]);
        if (int'(out_col[i]) != bref[exp_b[c]][i][exp_k[c]]) begin
          failures++;
          if (failures < 10)
            $display("c=%0d blk %0d B[%0d][%0d]=%0d expected %0d", c, exp_b[c], i, exp_k[c],
                     out_col[i], bref[exp_b[c]][i][exp_k[c]]);
        end
      end
    end
  endtask

  initial begin : stimulus
    foreach (exp_v[c]) exp_v[c] = 1'b0;
    for (int n = 0; n < NBLK; n++) make_block(n);
    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (in_row[i]) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    t = 0; b = 0; j = 0; last_done = -100;
    while (t < MAXC - 40) begin
      @(negedge clk);
      check_clock(t);
      // The first half of the blocks stream without gaps, the rest with
      // random idle clocks.
      if (b < NBLK && !(b >= NBLK/2 && $urandom_range(4) == 0)) begin
        for (int i = 0; i < 16; i++) in_row[i] = IN_W'(a[b][j][i]);
        in_valid = 1'b1;
        if (j == 15) begin
          if (t == last_done + 16) back_to_back++;
          last_done = t;
          for (int k = 0; k < 16; k++) begin
            exp_v[t + 12 + k] = 1'b1;
            exp_b[t + 12 + k] = b;
            exp_k[t + 12 + k] = k;
          end
          j = 0;
          b++;
        end else begin
          j++;
        end
      end else begin
        in_valid = 1'b0;
        foreach (in_row[i]) in_row[i] = IN_W'($urandom);
        if (b < NBLK && j != 0) idle_clocks++;
      end
      t++;
      if (b == NBLK && t > last_done + 12 + 16 + 3) break;
    end
    checks++;
    if (columns_seen != NBLK * 16 || back_to_back == 0 || idle_clocks == 0 || full_scale == 0
        || max_abs != 65536) begin
      failures++;
      $display("coverage hole: columns=%0d back_to_back=%0d idle=%0d full_scale=%0d max_abs=%0d",
               columns_seen, back_to_back, idle_clocks, full_scale, max_abs);
    end
    $display("blocks=%0d columns=%0d back_to_back_blocks=%0d idle_clocks_in_block=%0d full_scale_blocks=%0d max_abs_coeff=%0d",
             b, columns_seen, back_to_back, idle_clocks, full_scale, max_abs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
