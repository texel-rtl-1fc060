// post_traces: behavioural model of the per-neuron learning traces ("PL").
//
// The post trace is a DPI kicked by every postsynaptic spike; it is a short-term
// memory of the neuron's output. The Ca2+ trace is a second-order DPI (two
// cascaded DPI stages, first-order output I_FO and second-order output I_SO) kicked
// by the same spikes, giving a smooth, slower measure of the neuron's rate.
// Threshold comparisons produce:
//   post_above : I_POST > post_thr            (enables depression on a pre spike)
//   ca_above   : I_SO   > ca_thr_h
//   ca_below   : I_SO   < ca_thr_l
//   learn      : ca_thr_l <= I_SO <= ca_thr_h  (the window outside of which
//                                               learning stops)
// The traces, thresholds and gating follow the chip; the DPI discretisation is
// that of dpi_filter. The flags are combinational from the registered traces.
module post_traces
  import texel_pkg::*;
#(
  parameter int unsigned K = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  trace_bias_t b,
  input  logic        post_spike,
  output cur_t        i_post,
  output cur_t        i_fo,
  output cur_t        i_so,
  output logic        post_above,
  output logic        ca_above,
  output logic        ca_below,
  output logic        learn
);
  logic spk_q;

  // hold a spike until the next tick so none is missed between ticks
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) spk_q <= 1'b0;
    else if (tick) spk_q <= post_spike;
    else if (post_spike) spk_q <= 1'b1;
  end

  dpi_filter #(.K(K)) u_post (
    .clk, .rst_n, .tick, .i_in('0), .gain('0), .leak(b.post_leak),
    .jump(spk_q), .jump_amp(b.post_w), .i_out(i_post));

  dpi_filter #(.K(K)) u_fo (
    .clk, .rst_n, .tick, .i_in('0), .gain('0), .leak(b.ca_leak1),
    .jump(spk_q), .jump_amp(b.ca_w), .i_out(i_fo));

  // second stage: I_SO follows I_FO with unit DC gain (gain = leak)
  dpi_filter #(.K(K)) u_so (
    .clk, .rst_n, .tick, .i_in(i_fo), .gain(b.ca_leak2), .leak(b.ca_leak2),
    .jump(1'b0), .jump_amp('0), .i_out(i_so));

  assign post_above = (i_post > b.post_thr);
  assign ca_above   = (i_so > b.ca_thr_h);
  assign ca_below   = (i_so < b.ca_thr_l);
  assign learn      = !ca_above && !ca_below;

endmodule
