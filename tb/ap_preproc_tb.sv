// ap_preproc_tb: self-checking test of the all-phase preprocessing.
// Random sample pairs (including full-scale extremes) are driven with the index n cycling
// 0..N-1; each output is compared with round(4 * ((N-n) u[n] + n u[n-N]) / N) worked out in
// real arithmetic, and the latency must be 3 clocks.
module ap_preproc_tb;
  localparam int N = 16, W = 16, FRAC = 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic [$clog2(N)-1:0] in_n = '0;
  logic signed [W-1:0] in_pos = '0, in_neg = '0;
  logic out_valid, out_first;
  logic signed [W+FRAC-1:0] out_y;
  int checks = 0, failures = 0;

  ap_preproc #(.N(N), .W(W), .FRAC(FRAC)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int exp_q[$], cyc_q[$], first_q[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int e, c, f;
      e = exp_q.pop_front(); c = cyc_q.pop_front(); f = first_q.pop_front();
      check(int'(out_y) == e, $sformatf("y got %0d exp %0d", out_y, e));
      check(cyc - c == 3, $sformatf("latency %0d", cyc - c));
      check(out_first == f[0], "first flag");
    end
  end

  initial begin
    int n;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 40 * N; i++) begin
      logic signed [W-1:0] p, q;
      real r;
      n = i % N;
      if (i < N) begin p = -16'sd32768; q = -16'sd32768; end
      else if (i < 2 * N) begin p = 16'sd32767; q = 16'sd32767; end
      else begin p = W'($urandom); q = W'($urandom); end
      if (i % 7 == 3) begin
        in_valid <= 0;
        @(posedge clk);
      end
      in_valid <= 1; in_first <= (n == 0); in_n <= n[$clog2(N)-1:0]; in_pos <= p; in_neg <= q;
      r = ((N - n) * real'(p) + n * real'(q)) * (2.0 ** FRAC) / N;
      exp_q.push_back(int'($floor(r + 0.5)));
      cyc_q.push_back(cyc + 1);
      first_q.push_back(n == 0);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (6) @(posedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
