// seg_buffer_tb: self-checking test of the segment buffer.
// Feeds a known ramp-like sequence x[s] (with a few input gaps) and checks, for every output,
// the index n and the pair (u[n], u[n-N]) = (x[c+n], x[c+n-N]) with c = N-1 + m*N the centre of
// segment m, plus the 2N-cycle priming delay of the first output.
module seg_buffer_tb;
  localparam int N = 16;
  localparam int W = 16;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [W-1:0] in_data = '0;
  logic out_valid, out_first;
  logic [$clog2(N)-1:0] out_n;
  logic signed [W-1:0] out_pos, out_neg;
  int checks = 0, failures = 0;

  seg_buffer #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic signed [W-1:0] x(int s);
    return W'(s * 37 - 500);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int cyc = 0, first_in = -1, first_out = -1, nout = 0, s = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int m, n, c;
      m = nout / N; n = nout % N; c = N - 1 + m * N;
      if (first_out < 0) first_out = cyc;
      check(out_n == n, $sformatf("n %0d exp %0d", out_n, n));
      check(out_first == (n == 0), "first flag");
      check(out_pos == x(c + n), $sformatf("pos out %0d got %0d exp %0d", nout, out_pos, x(c+n)));
      if (n != 0) check(out_neg == x(c + n - N), $sformatf("neg out %0d got %0d exp %0d", nout, out_neg, x(c+n-N)));
      nout++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // continuous samples first, then some gaps
    while (s < 8 * N) begin
      if (s > 5 * N && ($urandom % 4) == 0) begin
        in_valid <= 0;
      end else begin
        if (first_in < 0) first_in = cyc + 1;  // sample is presented in the next cycle
        in_valid <= 1; in_data <= x(s); s++;
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    check(first_out - first_in == 2 * N, $sformatf("priming delay %0d exp %0d", first_out - first_in, 2*N));
    check(nout == 8 * N - (2 * N - 1), $sformatf("output count %0d", nout));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
