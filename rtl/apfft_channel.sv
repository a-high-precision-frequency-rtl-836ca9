// apfft_channel: one all-phase-FFT phase-estimation channel (REF or DUT).
//
// The chain of the prototype's per-channel pipeline:
//   seg_buffer   (2N-1)-sample segment, pairs (u[n], u[n-N])
//   ap_preproc   triangular weighting and folding into the N-point all-phase sequence
//   fft_r2sdf    N-point FFT, natural order
//   peak_bin_sel peak bin k* among the positive-frequency bins
//   cordic_atan  phase of X[k*] in turns
// The result is the phase of the input tone at the centre sample of each segment.  Segments
// are spaced by N samples, so a new phase arrives every N samples (20.48 us for N = 2048 at
// 100 MS/s) once the pipeline is full.
//
// Interface: one ADC sample per in_valid; out_valid pulses once per segment with out_phase
// (unsigned PHASE_W-bit fraction of a turn) and out_k (the peak bin).
// Latency from the first sample to the first phase: 2N (buffer) + 3 (preprocessing)
// + 2N + log2(N) (FFT) + N/2 + 3 (peak search) + 37 (CORDIC) = 9270 clocks for N = 2048
// (92.7 us; the prototype with its vendor FFT core reports 94.19 us).  Two channels with the
// same input timing produce their phases in the same clock.
// The chain and its order follow the paper's per-channel pipeline; the FFT is this design's own
// streaming core in place of the prototype's vendor core, which accounts for the latency difference.
module apfft_channel #(
  parameter int N       = 2048,
  parameter int ADC_W   = apfft_pkg::ADC_W,
  parameter int FRAC    = 2,                       // fraction bits kept by ap_preproc
  parameter int PHASE_W = apfft_pkg::PHASE_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [ADC_W-1:0] in_data,
  output logic                   out_valid,
  output logic [PHASE_W-1:0]     out_phase,
  output logic [$clog2(N)-1:0]   out_k
);
  localparam int LOG2N = $clog2(N);
  localparam int Y_W   = ADC_W + FRAC;
  localparam int F_W   = Y_W + LOG2N + 1;

  // segment buffer -> preprocessing
  logic                    sb_valid, sb_first;
  logic [LOG2N-1:0]        sb_n;
  logic signed [ADC_W-1:0] sb_pos, sb_neg;
  // preprocessing -> FFT
  logic                    ap_valid, ap_first;
  logic signed [Y_W-1:0]   ap_y;
  // FFT -> peak search
  logic                    ft_valid, ft_last;
  logic [LOG2N-1:0]        ft_k;
  logic signed [F_W-1:0]   ft_re, ft_im;
  // peak search -> CORDIC
  logic                    pk_valid;
  logic [LOG2N-1:0]        pk_k;
  logic signed [F_W-1:0]   pk_re, pk_im;

  seg_buffer #(.N(N), .W(ADC_W)) u_buf (
    .clk, .rst_n, .in_valid, .in_data,
    .out_valid(sb_valid), .out_first(sb_first), .out_n(sb_n),
    .out_pos(sb_pos), .out_neg(sb_neg)
  );

  ap_preproc #(.N(N), .W(ADC_W), .FRAC(FRAC)) u_ap (
    .clk, .rst_n,
    .in_valid(sb_valid), .in_first(sb_first), .in_n(sb_n), .in_pos(sb_pos), .in_neg(sb_neg),
    .out_valid(ap_valid), .out_first(ap_first), .out_y(ap_y)
  );

  fft_r2sdf #(.N(N), .IN_W(Y_W)) u_fft (
    .clk, .rst_n,
    .in_valid(ap_valid), .in_first(ap_first), .in_data(ap_y),
    .out_valid(ft_valid), .out_last(ft_last), .out_k(ft_k), .out_re(ft_re), .out_im(ft_im)
  );

  peak_bin_sel #(.N(N), .W(F_W)) u_peak (
    .clk, .rst_n,
    .in_valid(ft_valid), .in_k(ft_k), .in_re(ft_re), .in_im(ft_im),
    .out_valid(pk_valid), .out_k(pk_k), .out_re(pk_re), .out_im(pk_im)
  );

  cordic_atan #(.IN_W(F_W), .PHASE_W(PHASE_W)) u_cordic (
    .clk, .rst_n,
    .in_valid(pk_valid), .in_re(pk_re), .in_im(pk_im),
    .out_valid, .out_phase
  );

  // the peak bin travels beside the CORDIC (one result per frame, so a register suffices)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_k <= '0;
    else if (pk_valid) out_k <= pk_k;
  end

  logic unused_last;
  assign unused_last = ft_last;

endmodule
