// m3_stage_tb: self-checking testbench for m3_stage (adder stage M3).
//
// Drives a new random 16-sample vector on every clock (about one in eight
// samples is the most negative or most positive value of the input width)
// and compares every output, 2 clock(s) later, with the integer product of
// the stage matrix from dct16_ref_pkg and the input. A result that arrives
// one clock early or late fails, so the latency is checked as well.
module m3_stage_tb;
  import dct16_ref_pkg::*;

  localparam int IN_W  = 11;
  localparam int OUT_W = 13;
  localparam int LAT   = 2;
  localparam int NVEC  = 3000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0]  x [16];
  logic signed [OUT_W-1:0] y [16];
  int checks = 0, failures = 0;
  vec_t hist [NVEC + 8];
  mat_t m;
  vec_t v, v_in, exp_v;

  m3_stage #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.clk(clk), .x(x), .y(y));

  initial begin : watchdog
    repeat (NVEC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    m = m3();
    for (int t = 0; t < NVEC + LAT; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        v_in  = hist[t - LAT];
        exp_v = mul(m, v_in);
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (int'(y[i]) != exp_v[i]) begin
            failures++;
            if (failures < 10)
              $display("t=%0d y[%0d]=%0d expected %0d", t, i, y[i], exp_v[i]);
          end
        end
      end
      for (int i = 0; i < 16; i++) begin
        v[i] = rnd_signed(IN_W);
        x[i] = IN_W'(v[i]);
      end
      hist[t] = v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
