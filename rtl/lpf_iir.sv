// lpf_iir: first-order IIR low-pass filter on the frequency-deviation stream.
//
// y[m] = y[m-1] + (x[m] - y[m-1]) / 2^shift, evaluated once per input sample, with shift a
// run-time setting from 0 to 15; shift = 0 passes the input through unfiltered.  The -3 dB
// corner is about fs_in / (2*pi*2^shift) for large shift (fs_in = 1/Tp).  The state keeps
// 16 extra fraction bits so that small errors are not lost in the division; the output is
// the state rounded back to W bits.  Timing: one clock from in_valid to out_valid.
// The paper names a low-pass filter ahead of the PID controller but not its form or
// bandwidth; the first-order recursion is this design's choice.
module lpf_iir #(
  parameter int W = apfft_pkg::FERR_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  input  logic [3:0]          shift,
  output logic                out_valid,
  output logic signed [W-1:0] out_data
);
  localparam int XF = 16;          // extra fraction bits of the state
  localparam int SW = W + XF + 1;

  logic signed [SW-1:0] state, x_ext, state_next;

  assign x_ext      = SW'(in_data) <<< XF;
  assign state_next = (shift == '0) ? x_ext : state + ((x_ext - state) >>> shift);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        state    <= state_next;
        out_data <= W'((state_next + (SW'(1) <<< (XF-1))) >>> XF);
      end
    end
  end

endmodule
