// dct16_1d_tb: self-checking testbench for the 1-D approximate DCT core.
//
// Sends 10,000 random 16-point vectors (the size of the hardware test set
// used for the FPGA prototype), with in_valid dropped on about one clock in
// five, and checks for every clock that out_valid equals in_valid of exactly
// LAT_1D = 5 clocks earlier and that X equals T * x computed from the matrix
// T in dct16_ref_pkg. About one sample in eight is an extreme value, and a
// few vectors are filled with the extremes that drive an output to the edge
// of its range.
module dct16_1d_tb;
  import dct16_ref_pkg::*;

  localparam int IN_W  = 9;
  localparam int OUT_W = IN_W + 4;
  localparam int LAT   = 5;
  localparam int NVEC  = 10000;
  localparam int MAXC  = NVEC * 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    rst_n;
  logic                    in_valid;
  logic signed [IN_W-1:0]  x [16];
  logic                    out_valid;
  logic signed [OUT_W-1:0] X [16];

  int   checks = 0, failures = 0;
  int   sent = 0, received = 0, gaps = 0, extremes = 0;
  vec_t hist  [MAXC];
  bit   hvld  [MAXC];
  vec_t v, v_in, exp_v;
  int   t;

  dct16_1d #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .X(X));

  initial begin : watchdog
    repeat (MAXC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_outputs(int t);
    bit exp_valid = (t >= LAT) ? hvld[t - LAT] : 1'b0;
    checks++;
    if (out_valid !== exp_valid) begin
      failures++;
      if (failures < 10) $display("t=%0d out_valid=%0b expected %0b", t, out_valid, exp_valid);
    end
    if (exp_valid) begin
      received++;
      v_in  = hist[t - LAT];
      exp_v = mul(T, v_in);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(X[i]) != exp_v[i]) begin
          failures++;
          if (failures < 10) $display("t=%0d X[%0d]=%0d expected %0d", t, i, X[i], exp_v[i]);
        end
      end
    end
  endtask

  initial begin : stimulus
    t = 0;
    rst_n    = 1'b0;
    in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (sent < NVEC || t < 1 || hvld[t-1] || (t >= LAT && received < NVEC)) begin
      @(negedge clk);
      check_outputs(t);
      if (sent < NVEC && $urandom_range(4) != 0) begin
        // Vectors 0..15: input patterns that push row k of T to its extreme.
        if (sent < 16) begin
          extremes++;
          for (int i = 0; i < 16; i++)
            v[i] = (T[sent][i] < 0) ? -(1 << (IN_W-1)) : (T[sent][i] > 0 ? (1 << (IN_W-1)) - 1 : 0);
          if (sent[0]) foreach (v[i]) v[i] = (v[i] > 0) ? -(1 << (IN_W-1)) : (v[i] < 0 ? (1 << (IN_W-1)) - 1 : 0);
        end else begin
          foreach (v[i]) v[i] = rnd_signed(IN_W);
        end
        foreach (x[i]) x[i] = IN_W'(v[i]);
        in_valid = 1'b1;
        hvld[t]  = 1'b1;
        hist[t]  = v;
        sent++;
      end else begin
        in_valid = 1'b0;
        hvld[t]  = 1'b0;
        foreach (x[i]) x[i] = IN_W'($urandom);
        if (sent < NVEC) gaps++;
      end
      t++;
      if (t >= MAXC - 1) break;
    end
    checks++;
    if (received != NVEC || gaps == 0 || extremes == 0) begin
      failures++;
      $display("sent=%0d received=%0d gaps=%0d extremes=%0d", sent, received, gaps, extremes);
    end
    $display("vectors=%0d gaps=%0d extreme_vectors=%0d", received, gaps, extremes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
