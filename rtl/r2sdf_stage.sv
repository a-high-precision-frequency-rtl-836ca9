// r2sdf_stage: one radix-2 single-path delay-feedback (SDF) decimation-in-frequency stage.
//
// Stage STAGE of an N-point FFT works on blocks of 2D samples, D = N / 2^(STAGE+1).  During
// the first half of a block the incoming samples go into a D-deep feedback memory while the
// memory's previous content (the differences a-b of the last block) leaves the stage
// multiplied by the twiddle W_2D^j = exp(-j*pi*j/D), j = position in the half block.  During
// the second half the butterfly adds the stored sample a = x[i-D] and the new one b = x[i]:
// a+b leaves the stage at once, a-b goes back into the memory.  A chain of log2(N) such
// stages turns a natural-order stream into the DFT in bit-reversed order.
//
// One sample per accepted in_valid; the first D inputs only fill the memory, after that every
// input produces one registered output (stage delay D samples plus one clock).  The block
// position comes from a counter that starts with the first valid input after reset, so the
// input stream must start on a frame boundary and be contiguous in frames.  Data width W is
// kept from input to output (the caller provides the headroom); twiddles are TW_W-bit signed
// with TW_W-2 fraction bits and are computed at elaboration; products are rounded to nearest.
// This stage is part of this design's own FFT; the paper does not describe its FFT core's insides.
module r2sdf_stage #(
  parameter int N     = 2048,
  parameter int STAGE = 0,
  parameter int W     = 30,
  parameter int TW_W  = 18
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im
);
  localparam int D     = N >> (STAGE + 1);
  localparam int CW    = $clog2(N) - STAGE;      // counter over one 2D block
  localparam int PWD   = (D > 1) ? $clog2(D) : 1;
  localparam int TW_FRAC = TW_W - 2;

  typedef logic signed [TW_W-1:0] tw_t;
  typedef tw_t tw_rom_t [D];

  // W_2D^j = cos(pi j / D) - j sin(pi j / D), rounded to TW_FRAC fraction bits
  function automatic tw_rom_t mk_rom(input bit imag);
    tw_rom_t r;
    real a, v;
    for (int j = 0; j < D; j++) begin
      a = 3.14159265358979323846 * j / D;
      v = (imag ? -$sin(a) : $cos(a)) * (2.0 ** TW_FRAC);
      r[j] = tw_t'($rtoi(v + ((v >= 0.0) ? 0.5 : -0.5)));
    end
    return r;
  endfunction
  localparam tw_rom_t TW_RE = mk_rom(1'b0);
  localparam tw_rom_t TW_IM = mk_rom(1'b1);

  logic signed [W-1:0] mem_re [D];
  logic signed [W-1:0] mem_im [D];
  logic [CW-1:0]       cnt;
  logic [PWD-1:0]      ptr;
  logic                filled;
  logic                second_half;
  logic signed [W-1:0] fb_re, fb_im;        // feedback memory output
  logic signed [W+TW_W:0] m_re, m_im;       // twiddle products
  tw_t                 w_re, w_im;

  assign second_half = cnt[CW-1];
  assign fb_re = mem_re[ptr];
  assign fb_im = mem_im[ptr];
  assign w_re  = TW_RE[ptr];
  assign w_im  = TW_IM[ptr];

  always_comb begin
    m_re = (W+TW_W+1)'(fb_re) * (W+TW_W+1)'(w_re) - (W+TW_W+1)'(fb_im) * (W+TW_W+1)'(w_im)
         + (W+TW_W+1)'(1 << (TW_FRAC-1));
    m_im = (W+TW_W+1)'(fb_re) * (W+TW_W+1)'(w_im) + (W+TW_W+1)'(fb_im) * (W+TW_W+1)'(w_re)
         + (W+TW_W+1)'(1 << (TW_FRAC-1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      ptr       <= '0;
      filled    <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid & filled;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        ptr <= (ptr == PWD'(D-1)) ? '0 : ptr + 1'b1;
        if (ptr == PWD'(D-1)) filled <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!second_half) begin
        mem_re[ptr] <= in_re;
        mem_im[ptr] <= in_im;
        if (D == 1) begin
          out_re <= fb_re;
          out_im <= fb_im;
        end else begin
          out_re <= W'(m_re >>> TW_FRAC);
          out_im <= W'(m_im >>> TW_FRAC);
        end
      end else begin
        mem_re[ptr] <= fb_re - in_re;
        mem_im[ptr] <= fb_im - in_im;
        out_re      <= fb_re + in_re;
        out_im      <= fb_im + in_im;
      end
    end
  end

endmodule
