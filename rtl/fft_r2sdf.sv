// fft_r2sdf: streaming N-point FFT, natural-order output (the "FFT core" of each channel).
//
// The prototype uses a vendor FFT core; this is a functionally equivalent pipelined FFT
// written for this design: log2(N) radix-2 single-path delay-feedback stages
// (r2sdf_stage, decimation in frequency) followed by a bit-reversal buffer (fft_reorder).
// It accepts one real sample per clock, frames back to back, and delivers one complex bin
// per clock in natural order, so a new N-point spectrum is available every N clocks.
//
// Scaling: unscaled.  The IN_W-bit real input is sign-extended to W = IN_W + log2(N) + 1
// bits, enough for the full log2(N) bits of growth plus one guard bit, so
// X[k] = sum_n y[n] exp(-j 2 pi k n / N) without any 1/N factor (the factor does not affect
// the phase).  Twiddles are TW_W-bit with TW_W-2 fraction bits.
// Timing: the first bin of a frame leaves (N-1) + log2(N) + N + 1 clocks after the frame's
// first sample when the input is continuous (4107 clocks for N = 2048; the vendor core of the
// prototype takes 4256).  in_first must be set on sample 0 of each frame; frames must start
// with the first sample after reset and follow each other without partial frames.
module fft_r2sdf #(
  parameter int N    = 2048,
  parameter int IN_W = 18,
  parameter int TW_W = 18,
  parameter int W    = IN_W + $clog2(N) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic signed [IN_W-1:0] in_data,
  output logic                  out_valid,
  output logic                  out_last,
  output logic [$clog2(N)-1:0]  out_k,
  output logic signed [W-1:0]   out_re,
  output logic signed [W-1:0]   out_im
);
  localparam int LOG2N = $clog2(N);

  logic                v   [LOG2N+1];
  logic signed [W-1:0] re  [LOG2N+1];
  logic signed [W-1:0] im  [LOG2N+1];

  assign v[0]  = in_valid;
  assign re[0] = W'(in_data);
  assign im[0] = '0;

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    r2sdf_stage #(.N(N), .STAGE(s), .W(W), .TW_W(TW_W)) u_stage (
      .clk, .rst_n,
      .in_valid (v[s]),   .in_re (re[s]),   .in_im (im[s]),
      .out_valid(v[s+1]), .out_re(re[s+1]), .out_im(im[s+1])
    );
  end

  fft_reorder #(.N(N), .W(W)) u_reorder (
    .clk, .rst_n,
    .in_valid (v[LOG2N]), .in_re(re[LOG2N]), .in_im(im[LOG2N]),
    .out_valid, .out_last, .out_k, .out_re, .out_im
  );

  // frame alignment: in_first must fall on sample 0 of the internal frame count
  logic [LOG2N-1:0] in_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_cnt <= '0;
    else if (in_valid) in_cnt <= in_cnt + 1'b1;
  end
  a_frame_align: assert property (@(posedge clk) disable iff (!rst_n)
                                  in_valid |-> (in_first == (in_cnt == '0)))
    else $error("fft_r2sdf: in_first out of step with the frame count");

endmodule
