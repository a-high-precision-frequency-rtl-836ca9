// apfft_lock_top_full_tb: the frequency-locking core at its default size (N = 2048).
// Reference 0.1 cycle/sample (10 MHz at 100 MS/s, bin offset 0.2 as in the prototype),
// 16-bit ADC model with +-2 LSB noise, measurement interval Tp = 2 estimates (4096 samples).
//   S  common source: both channels see the same tone, the error must stay below
//      2e-5 turn per interval (the noise-floor test of the prototype, at a short Tp);
//   O  open loop, DUT 1e-5 cycle/sample (1 kHz at 100 MS/s) above: ferr = -0.04096 turn;
//   L  loop closed on a VCO model (1e-8 cycle/sample per DAC LSB, i.e. 1 Hz/LSB at 100 MS/s)
//      started 1000 LSB off: it must be pulled to within 2 LSB of the reference.
// Also checks the first-estimate latency of 9270 clocks and the 2048-clock estimate spacing.
module apfft_lock_top_full_tb;
  localparam real PI = 3.14159265358979323846;
  localparam real FR = 0.1;
  localparam real KV = 1.0e-8;
  localparam real F0 = 0.1 + 0.3e-8;

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  logic signed [15:0] adc_ref = '0, adc_dut = '0;
  logic [23:0] tp_frames = 24'd2;
  logic [3:0]  lpf_shift = '0;
  logic        lock_en = 0;
  logic signed [23:0] kp = 24'sd5, ki = 24'sd20, kd = 24'sd0;
  logic [15:0] dac_hold = 16'd32768;
  logic phase_valid, dphi_valid, ferr_valid, wrap_up, wrap_dn, dac_valid, dac_sat;
  logic [31:0] phase_ref, phase_dut, dphi;
  logic [10:0] peak_k_ref, peak_k_dut;
  logic signed [47:0] ferr;
  logic [15:0] dac_code;
  int checks = 0, failures = 0;

  apfft_lock_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // 0: common source, 1: fixed DUT offset, 2: VCO driven by the DAC
  int  mode = 0;
  real ph_r = 0.0, ph_d = 0.0, f_dut;
  int  cyc = 0, first_in = -1, first_phase = -1, last_phase = -1, n_phase = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    case (mode)
      0: f_dut = FR;
      1: f_dut = FR + 1.0e-5;
      default: f_dut = F0 + KV * (real'(dac_code) - 32768.0);
    endcase
    ph_r = ph_r + FR;    ph_r = ph_r - $floor(ph_r);
    ph_d = (mode == 0) ? ph_r : ph_d + f_dut;
    ph_d = ph_d - $floor(ph_d);
    adc_valid <= rst_n;
    if (rst_n && first_in < 0) first_in = cyc + 1;
    adc_ref <= 16'($rtoi($floor(30000.0 * $cos(2.0 * PI * ph_r) + 0.5)) + int'($urandom % 5) - 2);
    adc_dut <= 16'($rtoi($floor(30000.0 * $cos(2.0 * PI * ph_d) + 0.5)) + int'($urandom % 5) - 2);
  end

  always @(posedge clk) if (rst_n && phase_valid) begin
    if (first_phase < 0) first_phase = cyc;
    else check(cyc - last_phase == 2048, $sformatf("estimate spacing %0d", cyc - last_phase));
    last_phase = cyc;
    n_phase++;
  end

  // collect k intervals, return mean and largest magnitude of the last `use_last`
  task automatic measure(int k, int use_last, output real mean, output real peak);
    int got;
    real v;
    mean = 0.0; peak = 0.0; got = 0;
    while (got < k) begin
      @(posedge clk);
      if (ferr_valid) begin
        got++;
        if (got > k - use_last) begin
          v = real'(ferr) / (2.0 ** 32);
          mean += v;
          if (v > peak) peak = v;
          if (-v > peak) peak = -v;
        end
      end
    end
    mean = mean / use_last;
  endtask

  initial begin
    real m, p;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // S: common source
    measure(6, 4, m, p);
    $display("S: common-source error mean %.3e, max %.3e turn", m, p);
    check(p < 2e-5, "S: common-source error");
    check(first_phase - first_in == 9270, $sformatf("first-estimate latency %0d", first_phase - first_in));
    // O: fixed offset
    mode = 1;
    measure(8, 4, m, p);
    $display("O: open-loop error mean %.6f turn, expected %.6f", m, -1.0e-5 * 4096);
    check((m + 0.04096) < 1e-4 && (m + 0.04096) > -1e-4, "O: open-loop error");
    // L: closed loop
    dac_hold <= 16'd33768;
    mode = 2;
    measure(6, 1, m, p);
    lock_en <= 1;
    measure(60, 10, m, p);
    f_dut = F0 + KV * (real'(dac_code) - 32768.0);
    $display("L: locked error mean %.3e turn, dac %0d", m, dac_code);
    check((f_dut - FR) < 2 * KV && (FR - f_dut) < 2 * KV, $sformatf("L: VCO off by %.2f LSB", (f_dut - FR) / KV));
    check(n_phase > 0, "phase estimates seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
