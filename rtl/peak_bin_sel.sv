// peak_bin_sel: spectral peak-bin selection for one APFFT channel.
//
// For every natural-order spectrum from the FFT it scans the positive-frequency bins
// k = KMIN..N/2-1, computes |X[k]|^2 = re^2 + im^2 and keeps the bin with the largest value
// together with its real and imaginary parts; this is k*, the integer bin nearest to the
// tone, whose phase is the centre-sample phase estimate (paper eq. (17)-(18)).  Bin 0 (DC,
// e.g. ADC offset) is skipped by default (KMIN = 1) and bins N/2..N-1, the mirror image of a
// real input, are ignored.  On a tie the lower bin wins.
//
// Pipeline: input register, squaring, running maximum with frame decision, output register.  The result
// (out_valid for one clock, out_k, out_re, out_im) appears N/2 + 3 clocks after bin 0 of the
// frame was presented, i.e. 1027 clocks (10.27 us at 100 MHz) for N = 2048, as in the
// prototype.  One result per N-bin frame.  The squared-magnitude criterion and DC skipping are
// this design's choices; the paper only says that the peak bin is selected.
module peak_bin_sel #(
  parameter int N    = 2048,
  parameter int W    = 30,
  parameter int KMIN = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [$clog2(N)-1:0]  in_k,
  input  logic signed [W-1:0]   in_re,
  input  logic signed [W-1:0]   in_im,
  output logic                  out_valid,
  output logic [$clog2(N)-1:0]  out_k,
  output logic signed [W-1:0]   out_re,
  output logic signed [W-1:0]   out_im
);
  localparam int LOG2N = $clog2(N);
  localparam int MW    = 2 * W;

  typedef struct packed {
    logic                 valid;
    logic                 first;   // k == KMIN
    logic                 last;    // k == N/2-1
    logic [LOG2N-1:0]     k;
    logic signed [W-1:0]  re;
    logic signed [W-1:0]  im;
  } bin_t;

  bin_t          s1, s2;
  logic [MW-1:0] mag2;
  logic [MW-1:0] best_mag;
  logic [LOG2N-1:0] best_k;
  logic signed [W-1:0] best_re, best_im;
  logic          take;
  logic          res_valid;             // frame decision, registered once more for output
  logic [LOG2N-1:0] res_k;
  logic signed [W-1:0] res_re, res_im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
    end else begin
      s1.valid <= in_valid && (in_k >= LOG2N'(KMIN)) && (in_k < LOG2N'(N/2));
      s1.first <= (in_k == LOG2N'(KMIN));
      s1.last  <= (in_k == LOG2N'(N/2-1));
      s1.k     <= in_k;
      s1.re    <= in_re;
      s1.im    <= in_im;
      s2       <= s1;
    end
  end

  always_ff @(posedge clk) begin
    mag2 <= MW'(s1.re * s1.re) + MW'(s1.im * s1.im);
  end

  assign take = s2.valid && (s2.first || (mag2 > best_mag));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_mag  <= '0;
      best_k    <= '0;
      best_re   <= '0;
      best_im   <= '0;
      res_valid <= 1'b0;
      res_k     <= '0;
      res_re    <= '0;
      res_im    <= '0;
      out_valid <= 1'b0;
      out_k     <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      if (take) begin
        best_mag <= mag2;
        best_k   <= s2.k;
        best_re  <= s2.re;
        best_im  <= s2.im;
      end
      res_valid <= s2.valid && s2.last;
      if (s2.valid && s2.last) begin
        res_k  <= take ? s2.k  : best_k;
        res_re <= take ? s2.re : best_re;
        res_im <= take ? s2.im : best_im;
      end
      out_valid <= res_valid;
      out_k     <= res_k;
      out_re    <= res_re;
      out_im    <= res_im;
    end
  end

endmodule
