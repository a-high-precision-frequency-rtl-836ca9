// fft_r2sdf_tb: self-checking test of the streaming FFT.
// Sends back-to-back frames (a full-scale tone, an impulse, random data), computes each DFT
// in real arithmetic and compares every output bin within a rounding tolerance of 8 LSB plus 4e-5 of the frame's L2 norm (twiddles are
// 18-bit).  Also
// checks natural output order, the frame marker and the first-bin latency
// (N-1) + log2(N) + N + 1 clocks.
module fft_r2sdf_tb;
  localparam int N = 64, IN_W = 18, LOG2N = $clog2(N);
  localparam int W = IN_W + LOG2N + 1;
  localparam int FRAMES = 6;
  localparam real PI = 3.14159265358979323846;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic signed [IN_W-1:0] in_data = '0;
  logic out_valid, out_last;
  logic [LOG2N-1:0] out_k;
  logic signed [W-1:0] out_re, out_im;
  int checks = 0, failures = 0;

  fft_r2sdf #(.N(N), .IN_W(IN_W)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int x [FRAMES][N];
  int nbin = 0, first_in = -1, first_out = -1;
  real max_err = 0.0;
  real nrm [FRAMES];   // L2 norm of each input frame, sets the rounding tolerance

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && nbin < FRAMES * N) begin
      int f, k;
      real er, ei, a, e, tol;
      f = nbin / N; k = nbin % N;
      if (first_out < 0) first_out = cyc;
      er = 0.0; ei = 0.0;
      for (int n = 0; n < N; n++) begin
        a = 2.0 * PI * real'((k * n) % N) / N;
        er += x[f][n] * $cos(a);
        ei -= x[f][n] * $sin(a);
      end
      e = ((real'(out_re) - er) ** 2 + (real'(out_im) - ei) ** 2) ** 0.5;
      tol = 8.0 + 4.0e-5 * nrm[f];
      if (e > max_err) max_err = e;
      check(out_k == k, $sformatf("bin order got %0d exp %0d", out_k, k));
      check(out_last == (k == N - 1), "last flag");
      check(e < tol, $sformatf("frame %0d bin %0d got (%0d,%0d) exp (%.1f,%.1f)", f, k, out_re, out_im, er, ei));
      nbin++;
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++)
        case (f)
          0: x[f][n] = int'($floor(131071.0 * $cos(2.0 * PI * 5.3 * n / N) + 0.5));
          1: x[f][n] = (n == 3) ? 131071 : 0;
          2: x[f][n] = -131072;
          default: x[f][n] = int'($signed(IN_W'($urandom)));
        endcase
    for (int f = 0; f < FRAMES; f++) begin
      nrm[f] = 0.0;
      for (int n = 0; n < N; n++) nrm[f] += real'(x[f][n]) ** 2;
      nrm[f] = nrm[f] ** 0.5;
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    first_in = cyc + 1;
    for (int f = 0; f < FRAMES + 3; f++)
      for (int n = 0; n < N; n++) begin
        in_valid <= 1; in_first <= (n == 0);
        in_data  <= (f < FRAMES) ? IN_W'(x[f][n]) : '0;
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    check(nbin == FRAMES * N, $sformatf("bins seen %0d", nbin));
    check(first_out - first_in == 2 * N + LOG2N, $sformatf("latency %0d exp %0d", first_out - first_in, 2*N+LOG2N));
    $display("max error %.2f LSB, latency %0d", max_err, first_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
