// cordic_atan_tb: self-checking test of the CORDIC arctangent.
// Drives vectors of random length and angle (all four quadrants, the axes, tiny and
// full-scale vectors) one per clock and compares the phase with atan2 in real arithmetic,
// modulo one turn, within 2 LSB of a 32-bit turn (rounding-limited, small vectors excepted);
// the latency must be ITER + 2 = 37 clocks.
module cordic_atan_tb;
  localparam int IN_W = 30, PHASE_W = 32;
  localparam real PI = 3.14159265358979323846;
  localparam int NV = 600;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [IN_W-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic [PHASE_W-1:0] out_phase;
  int checks = 0, failures = 0;

  cordic_atan #(.IN_W(IN_W), .PHASE_W(PHASE_W)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real exp_q[$], tol_q[$];
  int  cyc_q[$];
  real worst = 0.0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e, d, tol;
      int c;
      e = exp_q.pop_front(); tol = tol_q.pop_front(); c = cyc_q.pop_front();
      d = real'(out_phase) - e;                 // in LSB of a 2^32 turn
      if (d >  2.0 ** 31) d -= 2.0 ** 32;
      if (d < -(2.0 ** 31)) d += 2.0 ** 32;
      if (d < 0) d = -d;
      if (d > worst && tol < 3.0) worst = d;
      check(d <= tol, $sformatf("phase %0d exp %.1f diff %.1f", out_phase, e, d));
      check(cyc - c == 37, $sformatf("latency %0d", cyc - c));
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      real mag, ang, xr, yr, e;
      int xi, yi;
      if (i < 8) begin
        ang = 2.0 * PI * i / 8; mag = 400000000.0;
      end else begin
        ang = 2.0 * PI * ($urandom % 1000000) / 1000000.0;
        mag = (i % 10 == 0) ? 300.0 + ($urandom % 1000) : 1.0e6 + ($urandom % 500000000);
      end
      xr = mag * $cos(ang); yr = mag * $sin(ang);
      xi = int'($floor(xr + 0.5)); yi = int'($floor(yr + 0.5));
      e = $atan2(real'(yi), real'(xi)) / (2.0 * PI);
      if (e < 0) e += 1.0;
      e = e * (2.0 ** 32);
      in_valid <= 1; in_re <= IN_W'(xi); in_im <= IN_W'(yi);
      exp_q.push_back(e);
      // small vectors lose angle resolution: allow 2 LSB plus what the vector length gives
      tol_q.push_back(2.0 + (2.0 ** 32) / (2.0 * PI * mag * 256.0) * 4.0);
      cyc_q.push_back(cyc + 1);
      @(posedge clk);
      if (i % 13 == 5) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (45) @(posedge clk);
    check(exp_q.size() == 0, "all results seen");
    $display("worst error on large vectors %.2f LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
