// transpose_buffer_tb: self-checking testbench for the transposition buffer.
//
// Writes NBLK random 16x16 blocks row by row. Most blocks follow each other
// back to back, so a bank is refilled while the other is being read; some
// rows are separated by idle clocks. For every clock the testbench knows
// from the row timing what must come out: column k of block b exactly k + 2
// clocks after the last row of b was presented (one clock to write it, one to
// read the column), with out_idx = k, and out_valid
// low otherwise. Each column is compared element by element with the block
// the testbench kept.
module transpose_buffer_tb;
  localparam int W    = 13;
  localparam int N    = 16;
  localparam int NBLK = 64;
  localparam int MAXC = NBLK * N * 3 + 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                rst_n;
  logic                in_valid;
  logic signed [W-1:0] in_row  [N];
  logic                out_valid;
  logic signed [W-1:0] out_col [N];
  logic [3:0]          out_idx;

  int checks = 0, failures = 0;
  int back_to_back = 0, gap_rows = 0, columns_seen = 0;
  int blk  [NBLK][N][N];
  // Expected output per clock: valid, block, column.
  bit exp_v [MAXC];
  int exp_b [MAXC];
  int exp_k [MAXC];
  int t, b, j, last_done;

  transpose_buffer #(.W(W)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_row(in_row),
    .out_valid(out_valid), .out_col(out_col), .out_idx(out_idx));

  initial begin : watchdog
    repeat (MAXC + 10) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(out_col[i]) != blk[exp_b[c]][i][exp_k[c]]) begin
          failures++;
          if (failures < 10)
            $display("c=%0d blk %0d col %0d [%0d]=%0d expected %0d", c, exp_b[c], exp_k[c], i,
                     out_col[i], blk[exp_b[c]][i][exp_k[c]]);
        end
      end
    end
  endtask

  initial begin : stimulus
    foreach (exp_v[c]) exp_v[c] = 1'b0;
    foreach (blk[bb, r, c]) blk[bb][r][c] = -(1 << (W-1)) + int'($urandom_range((1 << W) - 1));
    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (in_row[i]) in_row[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    t = 0; b = 0; j = 0; last_done = -100;
    while (t < MAXC - 1) begin
      @(negedge clk);
      check_clock(t);
      // Blocks 0..NBLK/2-1 stream without gaps; later blocks get idle clocks.
      if (b < NBLK && !(b >= NBLK/2 && $urandom_range(3) == 0)) begin
        for (int i = 0; i < N; i++) in_row[i] = W'(blk[b][j][i]);
        in_valid = 1'b1;
        if (j == N-1) begin
          if (t == last_done + N) back_to_back++;
          last_done = t;
          for (int k = 0; k < N; k++) begin
            exp_v[t + 2 + k] = 1'b1;
            exp_b[t + 2 + k] = b;
            exp_k[t + 2 + k] = k;
          end
          j = 0;
          b++;
        end else begin
          j++;
        end
      end else begin
        in_valid = 1'b0;
        foreach (in_row[i]) in_row[i] = W'($urandom);
        if (b < NBLK) gap_rows++;
      end
      t++;
      if (b == NBLK && t > last_done + N + 3) break;
    end
    checks++;
    if (columns_seen != NBLK * N || back_to_back == 0 || gap_rows == 0) begin
      failures++;
      $display("columns=%0d back_to_back=%0d gaps=%0d", columns_seen, back_to_back, gap_rows);
    end
    $display("blocks=%0d columns=%0d back_to_back_blocks=%0d idle_input_clocks=%0d",
             b, columns_seen, back_to_back, gap_rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
