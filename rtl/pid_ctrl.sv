// pid_ctrl: digital PID controller that turns the filtered frequency error into the DAC word.
//
// Per error sample e[m] (turns per Tp, signed):
//     I[m] = I[m-1] + ki * e[m]
//     u[m] = u_hold + (kp * e[m] + I[m] + kd * (e[m] - e[m-1])) / 2^GAIN_SH
// clipped to the unsigned DAC_W-bit range.  While lock_en is low the loop is open: the DAC
// word is u_hold (the free-running tuning word), the integrator and the previous error are
// cleared, so enabling the loop starts bumplessly from u_hold.  Anti-windup: the integrator is
// not advanced in a direction that pushes an already clipped output further (dac_sat shows
// clipping).  A positive error (REF faster than DUT) raises the DAC word, which suits a VCO
// whose frequency rises with the tuning voltage; use negative gains otherwise.
// Timing: two clocks from e_valid to dac_valid (products, then sum and clip).
// The paper gives the PID function, not its arithmetic; widths, gain format, anti-windup and
// the open-loop hold are this design's choices.
module pid_ctrl #(
  parameter int E_W     = apfft_pkg::FERR_W,
  parameter int K_W     = 24,
  parameter int DAC_W   = 16,
  parameter int GAIN_SH = 24
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 lock_en,
  input  logic                 e_valid,
  input  logic signed [E_W-1:0] e,
  input  logic signed [K_W-1:0] kp,
  input  logic signed [K_W-1:0] ki,
  input  logic signed [K_W-1:0] kd,
  input  logic [DAC_W-1:0]     u_hold,
  output logic                 dac_valid,
  output logic [DAC_W-1:0]     dac_code,
  output logic                 dac_sat
);
  localparam int PW = E_W + K_W + 2;     // product width
  localparam int AW = PW + 8;            // integrator / sum width

  logic signed [E_W:0]    e_prev, de;
  logic signed [PW-1:0]   p_term, i_inc, d_term;
  logic signed [AW-1:0]   i_acc, i_new, sum;
  logic signed [AW-1:0]   u_full;
  logic                   v1;
  logic                   hi, lo;
  logic [DAC_W-1:0]       u_clip;

  assign de = signed'({e[E_W-1], e}) - e_prev;

  // stage 1: gain products
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      p_term <= '0;
      i_inc  <= '0;
      d_term <= '0;
      e_prev <= '0;
    end else begin
      v1 <= e_valid & lock_en;
      if (!lock_en) begin
        e_prev <= '0;
      end else if (e_valid) begin
        p_term <= PW'(e)  * PW'(kp);
        i_inc  <= PW'(e)  * PW'(ki);
        d_term <= PW'(de) * PW'(kd);
        e_prev <= {e[E_W-1], e};
      end
    end
  end

  // stage 2: integrate, sum, scale, clip
  always_comb begin
    i_new  = i_acc + AW'(i_inc);
    sum    = AW'(p_term) + i_new + AW'(d_term);
    u_full = (sum >>> GAIN_SH) + signed'(AW'({1'b0, u_hold}));
    hi     = (u_full > AW'((1 << DAC_W) - 1));
    lo     = (u_full < 0);
    u_clip = hi ? '1 : lo ? '0 : DAC_W'(u_full);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_acc     <= '0;
      dac_valid <= 1'b0;
      dac_code  <= '0;
      dac_sat   <= 1'b0;
    end else begin
      dac_valid <= 1'b0;
      if (!lock_en) begin
        i_acc    <= '0;
        dac_code <= u_hold;
        dac_sat  <= 1'b0;
      end else if (v1) begin
        if (!((hi && i_inc > 0) || (lo && i_inc < 0))) i_acc <= i_new;
        dac_code  <= u_clip;
        dac_sat   <= hi | lo;
        dac_valid <= 1'b1;
      end
    end
  end

endmodule
