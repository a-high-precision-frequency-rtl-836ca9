// apfft_channel_tb: end-to-end test of one APFFT phase-estimation channel.
// A quantised 16-bit cosine whose frequency falls between bins (beta = N f / Fs = k + 0.4,
// the worst offset of the paper's simulations) is streamed in.  For every segment m the
// phase must equal the tone's phase at the segment centre c_m = N-1 + m N to within
// 1e-3 turn (a plain FFT would be off by about 0.2 turn here), the peak bin must be the
// nearest bin, one estimate must come every N clocks and the first one
// 2N + 3 + (2N + log2 N) + (N/2 + 3) + 37 clocks after the first sample.
// Run twice: with a tone near the bottom and one in the upper part of the band.
module apfft_channel_tb;
  localparam int N = 64, LOG2N = $clog2(N);
  localparam real PI = 3.14159265358979323846;
  localparam int LAT = 2 * N + 3 + 2 * N + LOG2N + N / 2 + 3 + 37;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [15:0] in_data = '0;
  logic out_valid;
  logic [31:0] out_phase;
  logic [LOG2N-1:0] out_k;
  int checks = 0, failures = 0;

  apfft_channel #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real beta, phi0;
  int  m = 0, first_in = 0, last_out = 0;
  real worst = 0.0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e, got, d;
      e = beta / N * (N - 1 + m * N) + phi0 / (2.0 * PI);   // turns
      e = e - $floor(e);
      got = real'(out_phase) / (2.0 ** 32);
      d = got - e;
      d = d - $floor(d + 0.5);
      if (d < 0) d = -d;
      if (d > worst) worst = d;
      check(d < 1.0e-3, $sformatf("segment %0d phase %.6f exp %.6f", m, got, e));
      check(out_k == LOG2N'(int'($floor(beta + 0.5))), $sformatf("peak bin %0d", out_k));
      if (m == 0) check(cyc - first_in == LAT, $sformatf("first-result latency %0d exp %0d", cyc - first_in, LAT));
      else        check(cyc - last_out == N, $sformatf("result spacing %0d", cyc - last_out));
      last_out = cyc;
      m++;
    end
  end

  task automatic run_tone(real b, real p, int segs);
    beta = b; phi0 = p; m = 0; worst = 0.0;
    rst_n <= 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    first_in = cyc + 1;
    for (int s = 0; s < LAT + (segs + 1) * N; s++) begin
      in_valid <= 1;
      in_data  <= 16'($rtoi($floor(32000.0 * $cos(2.0 * PI * b * s / N + p) + 0.5)));
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (50) @(posedge clk);   // let the CORDIC pipeline drain
    check(m >= segs, $sformatf("segments seen %0d", m));
    $display("beta %.2f: %0d segments, worst phase error %.2e turn", b, m, worst);
  endtask

  initial begin
    run_tone(6.4, 1.0, 12);
    run_tone(21.4, -2.5, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8 * LAT + 60 * N) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
