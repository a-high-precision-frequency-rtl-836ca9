// pid_ctrl_tb: self-checking test of the PID controller.
// A reference model in 64-bit integer arithmetic (integrator, proportional and derivative
// terms, scaling by 2^-24, clipping to 16 bits, conditional integration) runs beside the
// controller for random errors and gains.  Also checked: open loop (lock_en low) holds the
// DAC word at u_hold and clears the state, the saturation flag at both ends, and the
// two-clock latency.
module pid_ctrl_tb;
  localparam int E_W = 48, K_W = 24, DAC_W = 16, GAIN_SH = 24;

  logic clk = 0, rst_n = 0;
  logic lock_en = 0, e_valid = 0;
  logic signed [E_W-1:0] e = '0;
  logic signed [K_W-1:0] kp = '0, ki = '0, kd = '0;
  logic [DAC_W-1:0] u_hold = 16'd32768;
  logic dac_valid, dac_sat;
  logic [DAC_W-1:0] dac_code;
  int checks = 0, failures = 0;
  int n_sat_hi = 0, n_sat_lo = 0;

  pid_ctrl #(.E_W(E_W), .K_W(K_W), .DAC_W(DAC_W), .GAIN_SH(GAIN_SH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  longint m_i = 0, m_eprev = 0;

  task automatic step(longint err);
    longint p, inc, d, inew, sum, u;
    bit hi, lo;
    e_valid <= 1; e <= E_W'(err);
    @(posedge clk);
    e_valid <= 0;
    // model
    p = err * longint'(kp); inc = err * longint'(ki); d = (err - m_eprev) * longint'(kd);
    inew = m_i + inc;
    sum = p + inew + d;
    u = (sum >>> GAIN_SH) + longint'(u_hold);
    hi = u > 65535; lo = u < 0;
    if (!((hi && inc > 0) || (lo && inc < 0))) m_i = inew;
    m_eprev = err;
    @(posedge clk);
    #1;
    check(dac_valid, "dac_valid two clocks after the error");
    check(dac_code == (hi ? 16'hFFFF : lo ? 16'h0 : 16'(u)), $sformatf("dac %0d exp %0d", dac_code, u));
    check(dac_sat == (hi | lo), "saturation flag");
    if (hi) n_sat_hi++;
    if (lo) n_sat_lo++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    u_hold <= 16'd30000;
    // open loop: held word, no dac_valid
    repeat (3) begin
      e_valid <= 1; e <= 48'sd123456789; kp <= 24'sd1000;
      @(posedge clk);
      e_valid <= 0;
      repeat (2) @(posedge clk);
      check(!dac_valid && dac_code == 16'd30000, "open loop holds u_hold");
    end
    // closed loop with random errors and gains
    lock_en <= 1; m_i = 0; m_eprev = 0;
    @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      if (i % 100 == 0) begin
        kp <= K_W'($urandom % 200000); ki <= K_W'($urandom % 20000); kd <= K_W'($urandom % 50000);
        @(posedge clk);
      end
      step(longint'($signed(32'($urandom))) >>> 2);
    end
    // drive into both limits, then back
    for (int i = 0; i < 30; i++) step(64'sd40000000000);
    for (int i = 0; i < 60; i++) step(-64'sd40000000000);
    for (int i = 0; i < 30; i++) step(64'sd100);
    // re-open the loop: state cleared, held word restored
    lock_en <= 0;
    repeat (2) @(posedge clk);
    check(dac_code == 16'd30000, "loop opened: back to u_hold");
    lock_en <= 1; m_i = 0; m_eprev = 0;
    @(posedge clk);
    for (int i = 0; i < 20; i++) step(longint'($signed(16'($urandom))));
    check(n_sat_hi > 0 && n_sat_lo > 0, $sformatf("both limits reached (%0d, %0d)", n_sat_hi, n_sat_lo));
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
