// fft_reorder: bit-reversed to natural order conversion for a streaming N-point FFT.
//
// Two banks of N complex words are used alternately (ping-pong).  The bit-reversed frame
// coming from the SDF stages is written into one bank at address bitrev(i) while the other
// bank, holding the previous frame, is read in natural order 0..N-1.  Reading advances with
// the writing, one word per accepted input, so a continuous input stream gives a continuous
// output stream.  The first frame appears N inputs after the first input; each output is
// registered (latency N samples + 1 clock).  out_k is the bin index, out_last marks k = N-1.
// Part of this design's own FFT (the prototype's vendor core offers natural-order output too).
module fft_reorder #(
  parameter int N = 2048,
  parameter int W = 30
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [W-1:0]   in_re,
  input  logic signed [W-1:0]   in_im,
  output logic                  out_valid,
  output logic                  out_last,
  output logic [$clog2(N)-1:0]  out_k,
  output logic signed [W-1:0]   out_re,
  output logic signed [W-1:0]   out_im
);
  localparam int LOG2N = $clog2(N);

  logic signed [W-1:0] mem_re [2*N];
  logic signed [W-1:0] mem_im [2*N];
  logic [LOG2N-1:0]    idx, idx_rev;
  logic                bank;      // bank being written
  logic                full;      // one complete frame is stored

  always_comb
    for (int b = 0; b < LOG2N; b++) idx_rev[b] = idx[LOG2N-1-b];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx       <= '0;
      bank      <= 1'b0;
      full      <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_k     <= '0;
    end else begin
      out_valid <= in_valid & full;
      if (in_valid) begin
        idx      <= idx + 1'b1;
        out_k    <= idx;
        out_last <= (idx == LOG2N'(N-1));
        if (idx == LOG2N'(N-1)) begin
          bank <= ~bank;
          full <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      mem_re[{bank, idx_rev}] <= in_re;
      mem_im[{bank, idx_rev}] <= in_im;
      out_re <= mem_re[{~bank, idx}];
      out_im <= mem_im[{~bank, idx}];
    end
  end

endmodule
