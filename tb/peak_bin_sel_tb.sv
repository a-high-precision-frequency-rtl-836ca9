// peak_bin_sel_tb: self-checking test of the peak-bin selection.
// Frames of random spectra with a planted peak, a larger DC bin and larger mirror bins (both
// must be ignored), and a tie (lower bin wins).  The winner is computed in the testbench from
// re^2 + im^2; the result must come N/2 + 3 clocks after bin 0 and once per frame.
module peak_bin_sel_tb;
  localparam int N = 64, W = 30, LOG2N = $clog2(N);
  localparam int FRAMES = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [LOG2N-1:0] in_k = '0;
  logic signed [W-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic [LOG2N-1:0] out_k;
  logic signed [W-1:0] out_re, out_im;
  int checks = 0, failures = 0;

  peak_bin_sel #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  longint re [FRAMES][N], im [FRAMES][N];
  int exp_k [FRAMES];
  int bin0_cyc [FRAMES];
  int nres = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int k;
      k = exp_k[nres];
      check(out_k == k, $sformatf("frame %0d peak %0d exp %0d", nres, out_k, k));
      check(out_re == re[nres][k] && out_im == im[nres][k], "peak value");
      check(cyc - bin0_cyc[nres] == N / 2 + 3, $sformatf("latency %0d", cyc - bin0_cyc[nres]));
      nres++;
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      longint best;
      for (int k = 0; k < N; k++) begin
        re[f][k] = longint'($signed(20'($urandom)));
        im[f][k] = longint'($signed(20'($urandom)));
      end
      re[f][1 + ($urandom % (N/2 - 1))] = (f % 2) ? 400000000 : -400000000;
      re[f][0] = 500000000;                    // DC: must be skipped
      im[f][N/2 + 3] = -530000000;             // mirror half: must be ignored
      if (f == 3) begin                        // tie: lower bin wins
        re[f][7] = 0; im[f][7] = 450000000;
        re[f][9] = 450000000; im[f][9] = 0;
      end
      if (f == 5) begin                        // extremes of the word
        re[f][N/2 - 1] = -(longint'(1) << (W - 1)); im[f][N/2 - 1] = -(longint'(1) << (W - 1));
      end
      best = -1; exp_k[f] = 0;
      for (int k = 1; k < N / 2; k++)
        if (re[f][k] * re[f][k] + im[f][k] * im[f][k] > best) begin
          best = re[f][k] * re[f][k] + im[f][k] * im[f][k];
          exp_k[f] = k;
        end
    end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int f = 0; f < FRAMES; f++)
      for (int k = 0; k < N; k++) begin
        in_valid <= 1; in_k <= LOG2N'(k); in_re <= W'(re[f][k]); in_im <= W'(im[f][k]);
        if (k == 0) bin0_cyc[f] = cyc + 1;
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (8) @(posedge clk);
    check(nres == FRAMES, $sformatf("results %0d", nres));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * N + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
