// lpf_iir_tb: self-checking test of the first-order low-pass filter.
// Runs the recursion y += (x - y) / 2^shift in real arithmetic beside the filter for random
// inputs and several shifts and requires agreement within 1 LSB; checks that shift = 0 passes
// the input through exactly, that a step reaches 1 - 1/e of its height after about 2^shift
// samples, and the one-clock latency.
module lpf_iir_tb;
  localparam int W = 48;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [W-1:0] in_data = '0;
  logic [3:0] shift = '0;
  logic out_valid;
  logic signed [W-1:0] out_data;
  int checks = 0, failures = 0;

  lpf_iir #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  real y;

  // drive one sample, wait for the result (must come exactly one clock later)
  task automatic sample(longint x, int k, output longint got);
    in_valid <= 1; in_data <= W'(x); shift <= 4'(k);
    @(posedge clk);
    in_valid <= 0;
    #1;
    check(out_valid == 1'b1, "latency one clock");
    got = longint'(out_data);
    if ((x % 5) == 0) @(posedge clk);   // idle clocks between samples
  endtask

  initial begin
    longint got, x;
    int n63;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // pass-through
    for (int i = 0; i < 50; i++) begin
      x = longint'($signed({$urandom, $urandom})) >>> 20;
      sample(x, 0, got);
      check(got == x, "shift 0 passes through");
      y = real'(x);
    end
    // random tracking against the real-valued recursion
    for (int k = 1; k <= 12; k += 3)
      for (int i = 0; i < 200; i++) begin
        real d;
        x = longint'($signed({$urandom, $urandom})) >>> 24;
        y = y + (real'(x) - y) / (2.0 ** k);
        sample(x, k, got);
        d = real'(got) - y;
        check(d <= 1.0 && d >= -1.0, $sformatf("shift %0d got %0d exp %.2f", k, got, y));
      end
    // step response with shift 6: 63 % of the step after about 64 samples
    for (int i = 0; i < 400; i++) sample(0, 0, got);
    n63 = 0;
    for (int i = 0; i < 300; i++) begin
      sample(64'sd1000000, 6, got);
      if (n63 == 0 && got >= 632121) n63 = i + 1;
    end
    check(n63 >= 60 && n63 <= 68, $sformatf("step reaches 63%% after %0d samples", n63));
    check(got > 985000, "step settles");   // 1 - exp(-300/64) = 0.991
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
