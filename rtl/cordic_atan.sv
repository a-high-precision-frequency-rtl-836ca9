// cordic_atan: pipelined CORDIC arctangent (vectoring mode), the phase unit of a channel.
//
// Computes the angle of the peak FFT bin, phase = atan2(im, re), as an unsigned PHASE_W-bit
// fraction of a turn (2^PHASE_W = 2*pi), range [0, 1) turn.  A pre-rotation by half a turn
// brings the vector into the right half plane; then ITER micro-rotations by +-atan(2^-i) drive
// the imaginary part to zero while the angle register ANG_W bits wide collects the rotation
// angles.  The table atan(2^-i)/(2*pi)*2^ANG_W is computed at elaboration.  Inputs are scaled
// up by GUARD bits before the shifts so that the last iterations still see the vector.
//
// Timing: fully pipelined, one vector per clock accepted; the result leaves ITER + 2 clocks
// after the input (input/pre-rotation register, ITER stages, rounding register), 37 clocks with
// the default ITER = 35, matching the 0.37 us of the prototype's CORDIC unit at 100 MHz.
// Accuracy: the angle error is a few 2^-ANG_W turns, far below one LSB of the phase word.
// The arctangent unit and its 37-clock latency follow the paper; the CORDIC structure, the
// widths and the phase-in-turns format are this design's choices.
module cordic_atan #(
  parameter int IN_W    = 30,
  parameter int PHASE_W = apfft_pkg::PHASE_W,
  parameter int ANG_W   = 40,
  parameter int ITER    = 35,
  parameter int GUARD   = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_valid,
  output logic [PHASE_W-1:0]      out_phase
);
  localparam int XW = IN_W + GUARD + 2;

  typedef logic [ANG_W-1:0] ang_t;
  typedef ang_t atan_rom_t [ITER];

  function automatic atan_rom_t mk_atan();
    atan_rom_t r;
    real v;
    for (int i = 0; i < ITER; i++) begin
      v = $atan(2.0 ** (-i)) / (2.0 * 3.14159265358979323846) * (2.0 ** ANG_W);
      r[i] = ang_t'(longint'(v + 0.5));
    end
    return r;
  endfunction
  localparam atan_rom_t ATAN = mk_atan();

  logic                 v [ITER+1];
  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  ang_t                 z [ITER+1];
  logic signed [XW-1:0] xi, yi;

  assign xi = XW'(in_re) <<< GUARD;
  assign yi = XW'(in_im) <<< GUARD;

  // stage 0: pre-rotation into the right half plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v[0] <= 1'b0;
    else        v[0] <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_re < 0) begin
      x[0] <= -xi;
      y[0] <= -yi;
      z[0] <= ang_t'(1) << (ANG_W-1);   // half a turn
    end else begin
      x[0] <= xi;
      y[0] <= yi;
      z[0] <= '0;
    end
  end

  // micro-rotations
  for (genvar i = 0; i < ITER; i++) begin : g_iter
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v[i+1] <= 1'b0;
      else        v[i+1] <= v[i];
    end
    always_ff @(posedge clk) begin
      if (y[i] >= 0) begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + ATAN[i];
      end else begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - ATAN[i];
      end
    end
  end

  // rounding to the phase word
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_phase <= '0;
    end else begin
      out_valid <= v[ITER];
      if (v[ITER])
        out_phase <= PHASE_W'((z[ITER] + (ang_t'(1) << (ANG_W-PHASE_W-1))) >> (ANG_W-PHASE_W));
    end
  end

endmodule
