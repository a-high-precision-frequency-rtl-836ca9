// apfft_lock_top: APFFT-based digital frequency-locking core (REF + DUT).
//
// Two identical all-phase-FFT channels estimate, every N samples, the phase of the
// reference (e.g. a rubidium clock) and of the device under test (a VCO) at the centre of the
// same (2N-1)-sample segment.  The frequency-deviation extraction (fde) turns the change of
// their difference over a measurement interval Tp into the frequency error
// (f_ref - f_dut) * Tp; a low-pass filter (lpf_iir) and a PID controller (pid_ctrl) turn it
// into the word for the DAC that tunes the VCO.  The ADC (two synchronous 16-bit channels at
// the 100 MHz system clock in the prototype) and the DAC are outside this core: the ADC
// samples come in as adc_ref/adc_dut with adc_valid, the control word leaves as dac_code.
//
// Run-time settings: tp_frames (Tp in units of N samples; 48828 gives about 1 s at 100 MS/s,
// 49 about 1 ms), lpf_shift (0 = no filtering), lock_en (0: open loop, DAC word = dac_hold),
// kp/ki/kd (PID gains, scaled by 2^-GAIN_SH), dac_hold (free-running tuning word).
// Outputs for a host: the per-segment phases and peak bins, the differential phase, the
// unfiltered frequency error ferr (the quantity the prototype sends out for statistics) and
// the wrap pulses of the unwrapping counter.
// Timing: first phases 9270 clocks after the first sample (N = 2048), then one pair every N
// clocks; ferr one clock after the phase pair that closes an interval; dac_code three clocks
// after ferr (filter one, PID two).
// The structure (two parallel APFFT channels, FDE, LPF, PID, DAC) follows the paper; the
// run-time settings as plain ports and all word formats are this design's choices.
module apfft_lock_top #(
  parameter int N       = 2048,
  parameter int ADC_W   = apfft_pkg::ADC_W,
  parameter int PHASE_W = apfft_pkg::PHASE_W,
  parameter int WRAP_W  = apfft_pkg::WRAP_W,
  parameter int TP_W    = 24,
  parameter int K_W     = 24,
  parameter int DAC_W   = 16,
  parameter int GAIN_SH = 24
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // ADC samples (synchronous for both channels)
  input  logic                           adc_valid,
  input  logic signed [ADC_W-1:0]        adc_ref,
  input  logic signed [ADC_W-1:0]        adc_dut,
  // settings
  input  logic [TP_W-1:0]                tp_frames,
  input  logic [3:0]                     lpf_shift,
  input  logic                           lock_en,
  input  logic signed [K_W-1:0]          kp,
  input  logic signed [K_W-1:0]          ki,
  input  logic signed [K_W-1:0]          kd,
  input  logic [DAC_W-1:0]               dac_hold,
  // phase estimates
  output logic                           phase_valid,
  output logic [PHASE_W-1:0]             phase_ref,
  output logic [PHASE_W-1:0]             phase_dut,
  output logic [$clog2(N)-1:0]           peak_k_ref,
  output logic [$clog2(N)-1:0]           peak_k_dut,
  // frequency-deviation extraction
  output logic                           dphi_valid,
  output logic [PHASE_W-1:0]             dphi,
  output logic                           ferr_valid,
  output logic signed [WRAP_W+PHASE_W-1:0] ferr,
  output logic                           wrap_up,
  output logic                           wrap_dn,
  // DAC
  output logic                           dac_valid,
  output logic [DAC_W-1:0]               dac_code,
  output logic                           dac_sat
);
  localparam int FW = WRAP_W + PHASE_W;

  logic                   dut_valid;
  logic                   f_valid;
  logic signed [FW-1:0]   f_data;

  apfft_channel #(.N(N), .ADC_W(ADC_W), .PHASE_W(PHASE_W)) u_ref (
    .clk, .rst_n, .in_valid(adc_valid), .in_data(adc_ref),
    .out_valid(phase_valid), .out_phase(phase_ref), .out_k(peak_k_ref)
  );

  apfft_channel #(.N(N), .ADC_W(ADC_W), .PHASE_W(PHASE_W)) u_dut (
    .clk, .rst_n, .in_valid(adc_valid), .in_data(adc_dut),
    .out_valid(dut_valid), .out_phase(phase_dut), .out_k(peak_k_dut)
  );

  a_channels_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                       phase_valid == dut_valid)
    else $error("apfft_lock_top: REF and DUT phase estimates out of step");

  fde #(.PHASE_W(PHASE_W), .WRAP_W(WRAP_W), .TP_W(TP_W)) u_fde (
    .clk, .rst_n,
    .in_valid(phase_valid), .phase_ref, .phase_dut, .tp_frames,
    .dphi_valid, .dphi, .ferr_valid, .ferr, .wrap_up, .wrap_dn
  );

  lpf_iir #(.W(FW)) u_lpf (
    .clk, .rst_n, .in_valid(ferr_valid), .in_data(ferr), .shift(lpf_shift),
    .out_valid(f_valid), .out_data(f_data)
  );

  pid_ctrl #(.E_W(FW), .K_W(K_W), .DAC_W(DAC_W), .GAIN_SH(GAIN_SH)) u_pid (
    .clk, .rst_n, .lock_en, .e_valid(f_valid), .e(f_data),
    .kp, .ki, .kd, .u_hold(dac_hold),
    .dac_valid, .dac_code, .dac_sat
  );

endmodule
