// apfft_noise_floor_tb: common-source noise-floor measurement for N = 1024, 2048 and 4096.
// One 0.1 cycle/sample tone (10 MHz at 100 MS/s: bin offsets 0.4, 0.2 and 0.4) plus
// independent white Gaussian noise per channel is fed to both channels of three cores, one
// per APFFT length.  The spread (standard deviation) of the frequency error in turns per
// interval is compared with the thermal-noise prediction
//     std = sqrt(2) / (pi * sqrt(3 N SNR) * sinc^2(delta))        [turns]
// at SNR = 50 dB and 72 dB (the SNR measured on the prototype).  Measurement interval:
// 2 estimates (2N samples), so the two segments of an interval do not overlap and the
// noise of successive estimates is independent.  The measured spread must lie within
// 0.7..1.4 times the prediction (about 60 intervals per point).
module apfft_noise_floor_tb;
  localparam real PI = 3.14159265358979323846;
  localparam int  NUM = 3;
  localparam int  NS [NUM] = '{1024, 2048, 4096};
  localparam int  INTERVALS = 60;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // approximately Gaussian, unit variance (sum of 12 uniforms)
  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction

  real snr_db = 50.0;
  real amp = 30000.0;
  real sigma;
  real ph = 0.0;
  always @(posedge clk) begin
    ph = ph + 0.1; ph = ph - $floor(ph);
    sigma = amp / (2.0 ** 0.5) / (10.0 ** (snr_db / 20.0));
  end

  bit done [NUM];
  real meas_std [NUM];

  for (genvar g = 0; g < NUM; g++) begin : g_core
    localparam int N = NS[g];
    logic adc_valid = 0;
    logic signed [15:0] adc_ref = '0, adc_dut = '0;
    logic phase_valid, dphi_valid, ferr_valid, wrap_up, wrap_dn, dac_valid, dac_sat;
    logic [31:0] phase_ref, phase_dut, dphi;
    logic [$clog2(N)-1:0] peak_k_ref, peak_k_dut;
    logic signed [47:0] ferr;
    logic [15:0] dac_code;

    apfft_lock_top #(.N(N)) u_core (
      .clk, .rst_n, .adc_valid, .adc_ref, .adc_dut,
      .tp_frames(24'd2), .lpf_shift(4'd0), .lock_en(1'b0), .kp(24'sd0), .ki(24'sd0), .kd(24'sd0),
      .dac_hold(16'd32768),
      .phase_valid, .phase_ref, .phase_dut, .peak_k_ref, .peak_k_dut,
      .dphi_valid, .dphi, .ferr_valid, .ferr, .wrap_up, .wrap_dn,
      .dac_valid, .dac_code, .dac_sat
    );

    always @(posedge clk) begin
      real c;
      c = amp * $cos(2.0 * PI * ph);
      adc_valid <= rst_n;
      adc_ref <= 16'($rtoi($floor(c + sigma * gauss() + 0.5)));
      adc_dut <= 16'($rtoi($floor(c + sigma * gauss() + 0.5)));
    end

    // collect INTERVALS errors after skipping the first two
    int n = 0;
    real s1 = 0.0, s2 = 0.0;
    always @(posedge clk) begin
      if (!rst_n) begin
        n = 0; s1 = 0.0; s2 = 0.0; done[g] = 0;
      end else if (ferr_valid && !done[g]) begin
        real v;
        v = real'(ferr) / (2.0 ** 32);
        n++;
        if (n > 2) begin s1 += v; s2 += v * v; end
        if (n == INTERVALS + 2) begin
          meas_std[g] = ((s2 - s1 * s1 / INTERVALS) / (INTERVALS - 1)) ** 0.5;
          done[g] = 1;
        end
      end
    end
  end

  initial begin
    real snrs [2] = '{50.0, 72.0};
    foreach (snrs[i]) begin
      snr_db = snrs[i];
      rst_n <= 0;
      repeat (3) @(posedge clk);
      rst_n <= 1;
      @(posedge clk);
      wait (done[0] && done[1] && done[2]);
      for (int g = 0; g < NUM; g++) begin
        real beta, delta, sinc2, pred, ratio;
        beta  = 0.1 * NS[g];
        delta = beta - $floor(beta + 0.5);
        if (delta < 0) delta = -delta;
        sinc2 = ($sin(PI * delta) / (PI * delta)) ** 2;
        pred  = (2.0 ** 0.5) / (PI * (3.0 * NS[g] * 10.0 ** (snr_db / 10.0)) ** 0.5 * sinc2);
        ratio = meas_std[g] / pred;
        $display("N=%0d delta=%.1f SNR=%.0f dB: std %.3e turn, predicted %.3e (ratio %.2f)",
                 NS[g], delta, snr_db, meas_std[g], pred, ratio);
        check(ratio > 0.7 && ratio < 1.4, $sformatf("N=%0d SNR=%.0f noise ratio %.2f", NS[g], snr_db, ratio));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
