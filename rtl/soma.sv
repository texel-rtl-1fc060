// soma: behavioural model of the adaptive exponential integrate-and-fire
// (AdExp-I&F) neuron.
//
// Structure follows the chip's neuron: a somatic DPI integrates the DC input and
// the synaptic currents into the membrane current I_mem (leak and gain biases);
// an exponential module adds positive feedback that grows as I_mem approaches the
// spike threshold; a threshold module fires when I_mem reaches spk_thr; a
// refractory module then holds I_mem at zero for a time set by the refractory
// bias; an adaptation DPI is kicked by every spike and subtracts I_ahp from the
// input. Per tick:
//   net   = max(0, dc + exc - inh - I_ahp)
//   I_mem <- I_mem + (gain*net - leak*I_mem)>>K + (expg*I_mem^2/spk_thr)>>K
// The refractory period ends when refr (pA) accumulated over ticks reaches
// Q_REFR, i.e. it lasts about Q_REFR/refr ticks, as a current charging a capacitor.
// The equations and constants are this design's discretisation; the chip's
// circuit is analog and continuous-time. `spike` is a one-clock pulse on a tick.
module soma
  import texel_pkg::*;
#(
  parameter int unsigned K      = 10,
  parameter int unsigned Q_REFR = 65536
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick,
  input  soma_bias_t b,
  input  cur_t       i_exc,
  input  cur_t       i_inh,
  output logic       spike,
  output logic       refractory,
  output cur_t       i_mem,
  output cur_t       i_ahp
);
  logic signed [65:0] net, dmem, nxt;
  logic [63:0]        expfb;
  logic [31:0]        q_refr;

  always_comb begin
    net = 66'(b.dc) + 66'(i_exc) - 66'(i_inh) - 66'(i_ahp);
    if (net < 0) net = '0;
    expfb = (b.spk_thr == 0) ? 64'd0
          : ((64'(b.expg) * ((64'(i_mem) * 64'(i_mem)) / 64'(b.spk_thr))) >> K);
    dmem = ((66'(b.gain) * net) >>> K) - 66'((64'(b.leak) * 64'(i_mem)) >> K) + 66'(expfb);
    nxt  = 66'(i_mem) + dmem;
    if (nxt < 0) nxt = '0;
    if (nxt > 66'sh0_FFFF_FFFF) nxt = 66'sh0_FFFF_FFFF;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_mem      <= '0;
      i_ahp      <= '0;
      spike      <= 1'b0;
      refractory <= 1'b0;
      q_refr     <= '0;
    end else begin
      spike <= 1'b0;
      if (tick) begin
        // adaptation DPI decay
        i_ahp <= sat_sub(i_ahp, ((i_ahp != 0) && ((64'(b.ahp_leak) * 64'(i_ahp)) >> K) == 0 && b.ahp_leak != 0)
                                  ? 32'd1 : cur_t'((64'(b.ahp_leak) * 64'(i_ahp)) >> K));
        if (refractory) begin
          i_mem <= '0;
          if (sat_add(q_refr, b.refr) >= Q_REFR) refractory <= 1'b0;
          q_refr <= sat_add(q_refr, b.refr);
        end else if ((b.spk_thr != 0) && (nxt >= 66'(b.spk_thr))) begin
          spike      <= 1'b1;
          i_mem      <= '0;
          refractory <= 1'b1;
          q_refr     <= '0;
          i_ahp      <= sat_add(i_ahp, b.ahp_w);
        end else begin
          i_mem <= nxt[31:0];
        end
      end
    end
  end

endmodule
