// transpose_buffer: real-time row-in, column-out transposition buffer for
// 16x16 blocks.
//
// The row transform delivers one 16-element row per clock; the column
// transform needs one 16-element column per clock. The buffer holds two
// 16x16 banks used in ping-pong fashion. Rows are written into the write bank
// in arrival order (row j into bank row j). When the 16th row of a block has
// been written, the banks swap: the full bank is read out one column per
// clock over the next 16 clocks while the following block fills the other
// bank. Because filling a bank takes at least 16 clocks and reading it takes
// exactly 16, a new row can be accepted on every clock and nothing stalls.
//
// Interface: in_row is taken when in_valid is high; the rows of a block must
// arrive in order 0..15 and blocks are delimited only by counting rows from
// reset. out_col[i] is element (i, k) of the block, out_idx = k, and
// out_valid marks it. Timing: two register stages, the bank write and the
// output register: column 0 of a block is on the outputs two clocks after
// its last row was presented, and the 16 columns follow on consecutive
// clocks.
// The source names this buffer and states its function; the ping-pong
// organisation and the handshake are this design's choices.
module transpose_buffer
  import dct16_pkg::*;
#(
  parameter int W = 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_row  [N],
  output logic                 out_valid,
  output logic signed [W-1:0]  out_col [N],
  output logic [IDX_W-1:0]     out_idx
);
  logic signed [W-1:0] bank [2][N][N];   // [bank][row][column]

  logic             wbank;               // bank being written
  logic [IDX_W-1:0] wrow;                // next row to write
  logic             rbank;               // bank being read
  logic [IDX_W-1:0] rcol;                // next column to read
  logic             rd_active;
  logic             wr_done;             // last row of a block written now

  assign wr_done = in_valid && (wrow == IDX_W'(N-1));

  // Write side.
  always_ff @(posedge clk) begin
    if (in_valid) bank[wbank][wrow] <= in_row;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wbank <= 1'b0;
      wrow  <= '0;
    end else if (in_valid) begin
      wrow <= wrow + 1'b1;               // wraps from N-1 to 0
      if (wr_done) wbank <= ~wbank;
    end
  end

  // Read side.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_active <= 1'b0;
      rbank     <= 1'b0;
      rcol      <= '0;
    end else if (wr_done) begin
      rd_active <= 1'b1;
      rbank     <= wbank;
      rcol      <= '0;
    end else if (rd_active) begin
      rcol <= rcol + 1'b1;
      if (rcol == IDX_W'(N-1)) rd_active <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= rd_active;
      out_idx   <= rcol;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) out_col[i] <= bank[rbank][i][rcol];
  end

  // A block may only complete while the previous one is on its last column
  // or already read out; otherwise the read bank would be overwritten.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    wr_done |-> (!rd_active || rcol == IDX_W'(N-1)));
endmodule
