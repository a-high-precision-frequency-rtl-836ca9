// seg_buffer: (2N-1)-sample segment buffer of one APFFT channel.
//
// The all-phase preprocessing needs, for every output index n = 0..N-1 of a segment with
// centre sample u[0], the two samples u[n] and u[n-N] (eq. (4): y[n] = ((N-n) u[n] + n u[n-N]) / N).
// The buffer is a circular memory of 2N words that is written with every ADC sample.  When
// sample s arrives, the word it overwrites is x[s-2N] and the word half the memory away is
// x[s-N]; both are read in the same cycle (read-before-write), so the pair
// (u[n], u[n-N]) = (x[s-N], x[s-2N]) comes out one sample at a time.  Consecutive segments
// are spaced by N samples and overlap by N-1 samples, so once primed the buffer delivers
// one N-point segment every N samples without gaps, which gives one phase estimate every
// N sampling clocks (20.48 us for N = 2048 at 100 MS/s).
//
// Interface: in_valid/in_data carry one sample per clock (the prototype samples at the
// 100 MHz system clock, but gaps are allowed).  For each accepted sample, once 2N-1 samples
// have been stored, one output is produced: out_pos = u[n], out_neg = u[n-N], out_n = n,
// out_first marks n = 0 (the segment's centre sample).
// Timing: out_* are registered one cycle after the sample that completes them; the first
// output appears 2N cycles (4096 for N = 2048) after the first sample, the buffering time the
// prototype reports.  u[-N] (read at n = 0) is never used because its weight is zero.
// The structure (circular memory, read-before-write) is this design's choice; the paper only
// states that a (2N-1)-point segment is buffered.
module seg_buffer #(
  parameter int N = 2048,
  parameter int W = apfft_pkg::ADC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [W-1:0]  in_data,
  output logic                 out_valid,
  output logic                 out_first,
  output logic [$clog2(N)-1:0] out_n,
  output logic signed [W-1:0]  out_pos,
  output logic signed [W-1:0]  out_neg
);
  localparam int LOG2N = $clog2(N);

  logic signed [W-1:0] mem [2*N];
  logic [LOG2N:0]      wp;       // write pointer, modulo 2N
  logic                primed;   // 2N-1 samples stored before the current one
  logic [LOG2N-1:0]    n_cnt;    // n of the pair read with the current sample

  // control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      primed    <= 1'b0;
      n_cnt     <= '0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_n     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        wp <= wp + 1'b1;
        if (wp == (LOG2N+1)'(2*N-1)) primed <= 1'b1;
        if (primed || wp == (LOG2N+1)'(2*N-1)) begin
          out_valid <= 1'b1;
          out_first <= (n_cnt == '0);
          out_n     <= n_cnt;
          n_cnt     <= n_cnt + 1'b1;
        end
      end
    end
  end

  // memory: read-before-write on the same address
  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_pos <= mem[wp ^ (LOG2N+1)'(N)];
      out_neg <= mem[wp];
      mem[wp] <= in_data;
    end
  end

endmodule
