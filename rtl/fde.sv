// fde: frequency-deviation extraction (FDE) with counter-assisted phase unwrapping.
//
// Each pair of simultaneous phase estimates (REF, DUT) gives the differential phase
// dphi = phi_ref - phi_dut in [0, 1) turn (paper eq. (12)).  Every TP_FRAMES estimates
// (one measurement interval Tp = TP_FRAMES * N / Fs) the unit outputs
//     ferr = dphi_n - dphi_(n-1) + C_n         [turns]   (eq. (15) times 2*pi)
//          = (f_ref - f_dut) * Tp ,
// where dphi_(n-1) is the differential phase at the previous measurement instant and C_n the
// number of whole turns the differential phase made in between.  C_n comes from a wrap
// counter that is updated with every estimate in between (every N samples): a jump of the
// wrapped value by more than +1/2 turn counts as one wrap downwards (C -= 1), a jump by less
// than -1/2 turn as one wrap upwards (C += 1).  This tracks any |f_ref - f_dut| < Fs / (2N)
// (24.4 kHz for the prototype) without ambiguity, however long Tp is.
//
// Format: phases are unsigned PHASE_W-bit turns; ferr is signed WRAP_W.PHASE_W fixed point
// turns per Tp, proportional to the frequency error (divide by Tp for hertz; the PID gains
// absorb the constant).  tp_frames is a run-time setting (>= 1), sampled at each instant.
// Also given out: the per-estimate differential phase (dphi_valid/dphi) and one-clock
// wrap_up / wrap_dn pulses.  Timing: ferr and dphi are registered, one clock after the
// phase pair.  The very first estimate after reset only sets the first measurement instant.
// The counter-based unwrapping is cited by the paper from earlier work; the per-estimate
// comparison used here is this design's reading of it.
module fde #(
  parameter int PHASE_W = apfft_pkg::PHASE_W,
  parameter int WRAP_W  = apfft_pkg::WRAP_W,
  parameter int TP_W    = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,      // phases of both channels valid
  input  logic [PHASE_W-1:0]          phase_ref,
  input  logic [PHASE_W-1:0]          phase_dut,
  input  logic [TP_W-1:0]             tp_frames,     // measurement interval in estimates
  output logic                        dphi_valid,
  output logic [PHASE_W-1:0]          dphi,
  output logic                        ferr_valid,
  output logic signed [WRAP_W+PHASE_W-1:0] ferr,
  output logic                        wrap_up,
  output logic                        wrap_dn
);
  localparam int FW = WRAP_W + PHASE_W;

  logic [PHASE_W-1:0]      cur, prev, anchor;
  logic                    have_prev;
  logic [TP_W-1:0]         frame_cnt;
  logic signed [WRAP_W-1:0] c_cnt, c_next;
  logic signed [PHASE_W:0] raw;        // cur - prev, in (-1, 1) turn
  logic signed [PHASE_W:0] span;       // cur - anchor, in (-1, 1) turn
  logic                    up, dn, instant;

  assign cur  = phase_ref - phase_dut;
  assign raw  = signed'({1'b0, cur}) - signed'({1'b0, prev});
  assign span = signed'({1'b0, cur}) - signed'({1'b0, anchor});
  // raw >= +1/2 turn: the wrapped value jumped up, the true phase went down through 0
  assign dn   = (raw >= signed'((PHASE_W+1)'(1) << (PHASE_W-1)));
  assign up   = (raw <  -signed'((PHASE_W+1)'(1) << (PHASE_W-1)));
  assign c_next  = c_cnt + (up ? WRAP_W'(1) : '0) - (dn ? WRAP_W'(1) : '0);
  assign instant = (frame_cnt + 1'b1 >= tp_frames);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev       <= '0;
      anchor     <= '0;
      have_prev  <= 1'b0;
      frame_cnt  <= '0;
      c_cnt      <= '0;
      dphi_valid <= 1'b0;
      dphi       <= '0;
      ferr_valid <= 1'b0;
      ferr       <= '0;
      wrap_up    <= 1'b0;
      wrap_dn    <= 1'b0;
    end else begin
      dphi_valid <= in_valid;
      ferr_valid <= 1'b0;
      wrap_up    <= 1'b0;
      wrap_dn    <= 1'b0;
      if (in_valid) begin
        dphi <= cur;
        prev <= cur;
        if (!have_prev) begin
          have_prev <= 1'b1;
          anchor    <= cur;
          frame_cnt <= '0;
          c_cnt     <= '0;
        end else begin
          wrap_up <= up;
          wrap_dn <= dn;
          if (instant) begin
            ferr       <= FW'(span) + (FW'(c_next) <<< PHASE_W);
            ferr_valid <= 1'b1;
            anchor     <= cur;
            frame_cnt  <= '0;
            c_cnt      <= '0;
          end else begin
            frame_cnt  <= frame_cnt + 1'b1;
            c_cnt      <= c_next;
          end
        end
      end
    end
  end

endmodule
