// ap_preproc: all-phase preprocessing (triangular weighting and folding accumulation).
//
// The (2N-1)-sample segment u[-N+1..N-1] is cut into N overlapping N-point subsequences that
// all contain the centre sample u[0]; each is rotated so that u[0] comes first and the N
// rotated copies are averaged (paper eq. (2)-(4)).  Element n of the average is
//     y_ap[n] = ((N-n) * u[n] + n * u[n-N]) / N ,      n = 0..N-1,
// i.e. the segment weighted by a triangle of peak 1 at u[0] and folded onto N points.
// An N-point FFT of y_ap then carries the phase of the centre sample without the
// leakage-dependent bias of a plain FFT (eq. (5)-(7)).
//
// Input: the stream of pairs (u[n], u[n-N]) from seg_buffer with index n.  Output: y_ap[n]
// as a signed W+FRAC-bit number, FRAC fraction bits kept from the division by N (rounded
// to nearest).  Three pipeline registers (multiply, add, round) give a latency of 3 clocks,
// the 0.03 us the prototype reports at 100 MHz; throughput is one sample per clock.
// Weights are exact integers (N-n and n); the output format and the rounding are this
// design's choices.
module ap_preproc #(
  parameter int N    = 2048,
  parameter int W    = apfft_pkg::ADC_W,
  parameter int FRAC = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic [$clog2(N)-1:0]   in_n,
  input  logic signed [W-1:0]    in_pos,   // u[n]
  input  logic signed [W-1:0]    in_neg,   // u[n-N]
  output logic                   out_valid,
  output logic                   out_first,
  output logic signed [W+FRAC-1:0] out_y
);
  localparam int LOG2N = $clog2(N);
  localparam int PW    = W + LOG2N + 2;   // product / sum width
  localparam int SH    = LOG2N - FRAC;    // division by N, keeping FRAC fraction bits

  logic [2:0]            v_q, f_q;
  logic signed [PW-1:0]  p_pos, p_neg, sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= '0;
      f_q <= '0;
    end else begin
      v_q <= {v_q[1:0], in_valid};
      f_q <= {f_q[1:0], in_first & in_valid};
    end
  end

  always_ff @(posedge clk) begin
    // stage 1: triangular weights
    p_pos <= PW'(in_pos) * PW'(signed'({1'b0, (LOG2N+1)'(N) - (LOG2N+1)'(in_n)}));
    p_neg <= PW'(in_neg) * PW'(signed'({2'b00, in_n}));
    // stage 2: fold the two halves
    sum   <= p_pos + p_neg;
    // stage 3: divide by N with rounding
    out_y <= (W+FRAC)'((sum + PW'(1 << (SH-1))) >>> SH);
  end

  assign out_valid = v_q[2];
  assign out_first = f_q[2];

endmodule
