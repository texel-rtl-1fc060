// plastic_synapse: behavioural model of the learning circuit inside one plastic
// synapse ("ST" synaptic trace and "W" bistable weight/update logic).
//
// State: the pre trace I_pre (a DPI kicked by presynaptic spikes) and the analog
// weight V_w held on a capacitor (0..1800 mV). On each tick, with learning enabled
// and the neuron's Ca2+ trace inside its window (learn):
//   * pre spike while the post trace is above its low threshold: V_w -= pre_dep
//   * post spike: V_w += pot_gain*I_pre/256   (potentiation proportional to the
//                                               sampled pre trace)
//   * post spike while pre_thr_l < I_pre < pre_thr_h: V_w -= post_dep
// Independently, the bistability circuit drags V_w up by slew_up when it is above
// bist_thr and down by slew_dn when below, so over long times V_w settles at
// 0 or full scale. w_bin = (V_w > bist_thr) is the binarized weight; w_update
// pulses for one clock when w_bin flips, with w_new its new value, which starts a
// device write. prog/prog_val set V_w to a rail, used to program a weight matrix.
// The rules follow the chip's learning circuit; bias currents are applied as mV
// per tick (unit capacitor), which is this design's scaling.
module plastic_synapse
  import texel_pkg::*;
#(
  parameter int unsigned K = 10
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      tick,
  input  syn_bias_t b,
  input  logic      plast_en,
  input  logic      learn,
  input  logic      post_above,
  input  logic      pre,
  input  logic      post,
  input  logic      prog,
  input  logic      prog_val,
  output cur_t      i_pre,
  output logic [10:0] vw,
  output logic      w_bin,
  output logic      w_update,
  output logic      w_new
);
  logic pre_q, post_q, w_prev;
  logic signed [40:0] dv, vn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre_q  <= 1'b0;
      post_q <= 1'b0;
    end else if (tick) begin
      pre_q  <= pre;
      post_q <= post;
    end else begin
      if (pre)  pre_q  <= 1'b1;
      if (post) post_q <= 1'b1;
    end
  end

  dpi_filter #(.K(K)) u_pre (
    .clk, .rst_n, .tick, .i_in('0), .gain('0), .leak(b.pre_leak),
    .jump(pre_q), .jump_amp(b.pre_w), .i_out(i_pre));

  always_comb begin
    dv = '0;
    if (plast_en && learn) begin
      if (pre_q && post_above) dv = dv - 41'(b.pre_dep);
      if (post_q) begin
        dv = dv + 41'((64'(b.pot_gain) * 64'(i_pre)) >> 8);
        if ((i_pre > b.pre_thr_l) && (i_pre < b.pre_thr_h)) dv = dv - 41'(b.post_dep);
      end
    end
    if (32'(vw) > b.bist_thr) dv = dv + 41'(b.slew_up);
    else                      dv = dv - 41'(b.slew_dn);
    vn = 41'(vw) + dv;
    if (vn < 0) vn = '0;
    if (vn > 41'(VW_MAX)) vn = 41'(VW_MAX);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vw <= '0;
    else if (prog) vw <= prog_val ? 11'(VW_MAX) : 11'd0;
    else if (tick) vw <= vn[10:0];
  end

  assign w_bin = (32'(vw) > b.bist_thr);
  assign w_new = w_bin;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_prev   <= 1'b0;
      w_update <= 1'b0;
    end else begin
      w_prev   <= w_bin;
      w_update <= (w_bin != w_prev);
    end
  end

endmodule
