// dpi_filter: behavioural model of a differential-pair integrator (DPI), the
// current-mode first-order low-pass filter used across the chip for synaptic
// currents, the post trace and both stages of the Ca2+ trace.
//
// Continuous form: tau dI/dt = -I + (I_gain/I_tau) I_in. Discretised per tick as
//   I <- I + (gain*I_in - leak*I) >> K       (leak plays I_tau, gain plays I_gain)
// so the time constant is about 2^K/leak ticks and the steady state gain*I_in/leak.
// A one-tick input pulse `jump` adds jump_amp directly, modelling a spike that is
// integrated by a short pulse. The discretisation and K are this design's choices.
// All currents in pA. Updates on clk when tick is high.
module dpi_filter
  import texel_pkg::*;
#(
  parameter int unsigned K = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tick,
  input  cur_t i_in,
  input  cur_t gain,
  input  cur_t leak,
  input  logic jump,
  input  cur_t jump_amp,
  output cur_t i_out
);
  logic signed [65:0] drive, decay, nxt;

  always_comb begin
    drive = 66'(64'(gain) * 64'(i_in)) >>> K;
    decay = 66'(64'(leak) * 64'(i_out)) >>> K;
    if (decay == 0 && i_out != 0 && leak != 0) decay = 66'sd1;  // leak always empties
    nxt = 66'(i_out) + drive - decay + (jump ? 66'(jump_amp) : 66'sd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) i_out <= '0;
    else if (tick) begin
      if (nxt < 0)                      i_out <= '0;
      else if (nxt > 66'sh0_FFFF_FFFF)  i_out <= 32'hFFFF_FFFF;
      else                              i_out <= nxt[31:0];
    end
  end

endmodule
