// apfft_lock_top_tb: end-to-end test of the frequency-locking core at N = 64.
// The testbench models the two analogue sides: a reference tone at 0.1 cycle/sample (the
// 10 MHz / 100 MS/s ratio of the prototype) and a VCO whose frequency is
// f0 + KV * (dac_code - 32768), both sampled by an ideal 16-bit ADC with a little noise.
// Phases:
//   A  open loop, VCO 4000 LSB above the reference: ferr must equal (f_ref - f_dut) * Tp
//      within 2e-3 turn; the differential phase falls, so the wrap counter counts down.
//   B  open loop, VCO 4000 LSB below: same check, counter counts up.
//   C  loop closed (mode switch) with the low-pass filter on: the VCO must be pulled to the
//      reference to within 3 DAC LSB and the measured error must settle near zero.
// Each mechanism (phase estimates with both channels on different peak bins, wraps in both
// directions, filtering, the open/closed-loop switch, DAC updates) is counted, and a
// mechanism that never happened counts as a failure.
module apfft_lock_top_tb;
  localparam int  N   = 64;
  localparam int  TP  = 4;                  // estimates per measurement interval
  localparam real PI  = 3.14159265358979323846;
  localparam real FR  = 0.1;                // reference, cycles per sample
  localparam real F0  = 0.1 + 0.37e-6;      // VCO at mid-scale
  localparam real KV  = 1.0e-6;             // VCO gain, cycles per sample per DAC LSB

  logic clk = 0, rst_n = 0;
  logic adc_valid = 0;
  logic signed [15:0] adc_ref = '0, adc_dut = '0;
  logic [23:0] tp_frames = 24'(TP);
  logic [3:0]  lpf_shift = '0;
  logic        lock_en = 0;
  logic signed [23:0] kp = 24'sd2, ki = 24'sd5, kd = 24'sd0;
  logic [15:0] dac_hold = 16'd32768;
  logic phase_valid, dphi_valid, ferr_valid, wrap_up, wrap_dn, dac_valid, dac_sat;
  logic [31:0] phase_ref, phase_dut, dphi;
  logic [5:0]  peak_k_ref, peak_k_dut;
  logic signed [47:0] ferr;
  logic [15:0] dac_code;
  int checks = 0, failures = 0;

  apfft_lock_top #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // --- analogue models: tones, VCO and ADC --------------------------------------------
  real ph_r = 0.0, ph_d = 0.3, f_dut;
  always @(posedge clk) begin
    f_dut = F0 + KV * (real'(dac_code) - 32768.0);
    ph_r = ph_r + FR;    ph_r = ph_r - $floor(ph_r);
    ph_d = ph_d + f_dut; ph_d = ph_d - $floor(ph_d);
    adc_valid <= rst_n;
    adc_ref <= 16'($rtoi($floor(30000.0 * $cos(2.0 * PI * ph_r) + 0.5)) + int'($urandom % 5) - 2);
    adc_dut <= 16'($rtoi($floor(30000.0 * $cos(2.0 * PI * ph_d) + 0.5)) + int'($urandom % 5) - 2);
  end

  // --- mechanism counters ----------------------------------------------------------------
  int n_phase = 0, n_diff_bins = 0, n_up = 0, n_dn = 0, n_ferr = 0, n_dac = 0, n_switch = 0;
  int n_filtered = 0;
  real last_ferr = 0.0;
  always @(posedge clk) if (rst_n) begin
    if (phase_valid) begin n_phase++; if (peak_k_ref != peak_k_dut) n_diff_bins++; end
    if (wrap_up) n_up++;
    if (wrap_dn) n_dn++;
    if (ferr_valid) begin
      n_ferr++;
      last_ferr = real'(ferr) / (2.0 ** 32);
      if (lpf_shift != 0) n_filtered++;
    end
    if (dac_valid) n_dac++;
  end

  // wait for k measurement intervals and return the mean error of the last `use`
  task automatic measure(int k, int use_last, output real mean);
    int start;
    mean = 0.0;
    start = n_ferr;
    while (n_ferr < start + k) begin
      @(posedge clk);
      if (ferr_valid && n_ferr >= start + k - use_last) mean += real'(ferr) / (2.0 ** 32);
    end
    mean = mean / use_last;
  endtask

  initial begin
    real m, expect_f;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // A: open loop, VCO above the reference
    dac_hold <= 16'd36768;
    measure(12, 6, m);
    expect_f = (FR - (F0 + KV * 4000.0)) * N * TP;
    $display("A: mean ferr %.6f turn, expected %.6f", m, expect_f);
    check((m - expect_f) < 2e-3 && (expect_f - m) < 2e-3, $sformatf("A: ferr %.5f exp %.5f turn", m, expect_f));
    check(n_dn > 0, "A: wraps counted down");
    // B: open loop, VCO below the reference
    dac_hold <= 16'd28768;
    measure(12, 6, m);
    expect_f = (FR - (F0 - KV * 4000.0)) * N * TP;
    $display("B: mean ferr %.6f turn, expected %.6f", m, expect_f);
    check((m - expect_f) < 2e-3 && (expect_f - m) < 2e-3, $sformatf("B: ferr %.5f exp %.5f turn", m, expect_f));
    check(n_up > 0, "B: wraps counted up");
    // C: close the loop with filtering
    lpf_shift <= 4'd1;
    lock_en <= 1; n_switch++;
    measure(200, 50, m);
    $display("C: locked mean ferr %.6f turn, dac %0d", m, dac_code);
    check(m < 3e-3 && m > -3e-3, $sformatf("C: locked mean error %.6f turn", m));
    f_dut = F0 + KV * (real'(dac_code) - 32768.0);
    check((f_dut - FR) < 3 * KV && (FR - f_dut) < 3 * KV,
          $sformatf("C: VCO at %.8f, reference %.8f (dac %0d)", f_dut, FR, dac_code));
    $display("phases %0d (different peak bins %0d), wraps up %0d down %0d, intervals %0d (filtered %0d), DAC updates %0d, loop switches %0d",
             n_phase, n_diff_bins, n_up, n_dn, n_ferr, n_filtered, n_dac, n_switch);
    check(n_phase > 0,     "mechanism: phase estimates");
    check(n_diff_bins > 0, "mechanism: channels on different peak bins");
    check(n_up > 0,        "mechanism: wrap up");
    check(n_dn > 0,        "mechanism: wrap down");
    check(n_filtered > 0,  "mechanism: low-pass filtering");
    check(n_switch > 0,    "mechanism: open/closed-loop switch");
    check(n_dac > 0,       "mechanism: DAC updates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
