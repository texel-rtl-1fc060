// neuron_block: one TEXEL neuron with its 58-synapse fan-in.
//
// Contents: 54 plastic synapses (each a learning circuit, a device controller and a
// differential normalizer), 4 static synapses (two excitatory, two inhibitory),
// four PSC DPIs (plastic excitatory, plastic inhibitory, static excitatory,
// static inhibitory), the AdExp-I&F soma, the post/Ca2+ learning traces and the
// address-event request latch of the neuron's digital logic.
// Spike path: a presynaptic pulse on a static synapse adds its weight bias to the
// matching static PSC DPI. On a plastic synapse it adds w_high or w_low (by the
// binary weight) to the plastic PSC DPI of the synapse's type (excitatory or
// inhibitory, configured per synapse row) in CMOS mode; in device mode (dev_en)
// it starts a device read instead and the normalizer current I_norm flows into
// that DPI for the length of the read pulse. Excitatory PSCs add to and inhibitory
// ones subtract from the soma input. A soma spike sets spike_req, which stays high
// until spike_grant, and is fed back as the postsynaptic spike of every plastic
// synapse and of the learning traces.
// Device pins: the READ/POT/DEP/IDLE gates of every synapse go out, the two device
// currents of every synapse come in (the devices themselves are off-chip/BEOL).
// dev_state of a synapse is the weight last read from its devices (I_norm > 0 at
// the end of a read). Monitoring: sel_syn chooses the synapse whose signals appear
// in `mon`; i_pleft is that synapse's own output current and i_pright the PSC
// current of the plastic DPI it feeds (this assignment is this design's reading of
// the chip's "left/right plastic synapse" monitor currents).
// Weight programming: prog[s] sets synapse s to prog_val.
// The block structure and counts follow the chip; the analog parts are the
// behavioural models documented in their own files. Timing: pre pulses are held
// until the next tick; spike_req rises one clock after the soma's tick.
module neuron_block
  import texel_pkg::*;
#(
  parameter int unsigned NPL = NUM_PLASTIC,
  parameter int unsigned NST = NUM_STATIC,
  parameter int unsigned K   = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                tick,
  input  nb_bias_t            b,
  input  nb_ctrl_t            ctrl,
  input  logic [NPL-1:0]      syn_inh,
  input  logic [NPL+NST-1:0]  pre_spike,
  input  logic [NPL-1:0]      prog,
  input  logic                prog_val,
  input  logic [SYN_W-1:0]    sel_syn,
  output logic [NPL-1:0]      w_bin,
  output logic                spike_req,
  input  logic                spike_grant,
  output logic [NPL-1:0]      dev_read,
  output logic [NPL-1:0]      dev_pot,
  output logic [NPL-1:0]      dev_dep,
  output logic [NPL-1:0]      dev_idle,
  output logic [NPL-1:0]      dev_int,
  input  cur_t                dev_i_pos [NPL],
  input  cur_t                dev_i_neg [NPL],
  output mon_t                mon
);
  logic [NPL+NST-1:0] pre_q;
  logic               post_spike;
  logic               learn, post_above, ca_above, ca_below;
  cur_t               i_post, i_fo, i_so;
  cur_t               i_pre  [NPL];
  logic [10:0]        vw     [NPL];
  logic [NPL-1:0]     w_upd, w_new, read_end, dev_state;
  cur_t               i_norm [NPL];
  cur_t               u_cur  [NPL];
  cur_t               psc    [4];
  cur_t               jump_amp [4];
  cur_t               dc_in  [4];
  cur_t               i_mem, i_ahp;
  logic               refractory;
  logic [1:0]         ctl_state [NPL];

  // hold presynaptic pulses until the next tick
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    pre_q <= '0;
    else if (tick) pre_q <= pre_spike;
    else           pre_q <= pre_q | pre_spike;
  end

  // ---------------- plastic synapses ----------------
  for (genvar s = 0; s < NPL; s++) begin : g_pl
    plastic_synapse #(.K(K)) u_syn (
      .clk, .rst_n, .tick, .b(b.syn), .plast_en(ctrl.plast_en), .learn,
      .post_above, .pre(pre_spike[s]), .post(post_spike),
      .prog(prog[s]), .prog_val, .i_pre(i_pre[s]), .vw(vw[s]),
      .w_bin(w_bin[s]), .w_update(w_upd[s]), .w_new(w_new[s]));

    device_controller #(.PW_W(REG_W)) u_ctl (
      .clk, .rst_n, .dev_en(ctrl.dev_en), .cont_read(ctrl.cont_read),
      .prechg(ctrl.prechg), .read_pw(ctrl.read_pw), .write_pw(ctrl.write_pw),
      .pre_spike(pre_spike[s]), .w_update(w_upd[s]), .w_new(w_new[s]),
      .read(dev_read[s]), .pot(dev_pot[s]), .dep(dev_dep[s]), .idle(dev_idle[s]),
      .intr(dev_int[s]), .read_end(read_end[s]), .state(ctl_state[s]));

    normalizer u_norm (
      .read(dev_read[s]), .i_pos(dev_i_pos[s]), .i_neg(dev_i_neg[s]),
      .norm_bias(b.norm_bias), .i_norm(i_norm[s]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)           dev_state[s] <= 1'b0;
      else if (read_end[s]) dev_state[s] <= (i_norm[s] != 0);
    end

    // output current of the synapse ("U"): device mode -> I_norm, CMOS mode ->
    // the efficacy bias picked by the binary weight
    assign u_cur[s] = ctrl.dev_en ? i_norm[s] : (w_bin[s] ? b.w_high : b.w_low);
  end

  // ---------------- PSC DPIs ----------------
  always_comb begin
    for (int d = 0; d < 4; d++) begin
      jump_amp[d] = '0;
      dc_in[d]    = '0;
    end
    for (int s = 0; s < NPL; s++) begin
      if (ctrl.dev_en) begin
        if (syn_inh[s]) dc_in[1] = sat_add(dc_in[1], i_norm[s]);
        else            dc_in[0] = sat_add(dc_in[0], i_norm[s]);
      end else if (pre_q[s]) begin
        if (syn_inh[s]) jump_amp[1] = sat_add(jump_amp[1], u_cur[s]);
        else            jump_amp[0] = sat_add(jump_amp[0], u_cur[s]);
      end
    end
    for (int k = 0; k < NST; k++) begin
      if (pre_q[NPL+k]) begin
        if (k < NST/2) jump_amp[2] = sat_add(jump_amp[2], b.st_w[k%4]);
        else           jump_amp[3] = sat_add(jump_amp[3], b.st_w[k%4]);
      end
    end
  end

  for (genvar d = 0; d < 4; d++) begin : g_psc
    dpi_filter #(.K(K)) u_psc (
      .clk, .rst_n, .tick, .i_in(dc_in[d]), .gain(b.psc_gain[d]), .leak(b.psc_leak[d]),
      .jump(jump_amp[d] != 0), .jump_amp(jump_amp[d]), .i_out(psc[d]));
  end

  // ---------------- soma and learning traces ----------------
  soma #(.K(K)) u_soma (
    .clk, .rst_n, .tick, .b(b.soma),
    .i_exc(sat_add(psc[0], psc[2])), .i_inh(sat_add(psc[1], psc[3])),
    .spike(post_spike), .refractory, .i_mem, .i_ahp);

  post_traces #(.K(K)) u_pl (
    .clk, .rst_n, .tick, .b(b.tr), .post_spike,
    .i_post, .i_fo, .i_so, .post_above, .ca_above, .ca_below, .learn);

  // ---------------- AER request latch ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           spike_req <= 1'b0;
    else if (post_spike)  spike_req <= 1'b1;
    else if (spike_grant) spike_req <= 1'b0;
  end

  // ---------------- monitor bundle ----------------
  logic [SYN_W-1:0] ss;
  always_comb begin
    ss = (int'(sel_syn) < NPL) ? sel_syn : '0;
    mon.i_so       = i_so;
    mon.i_post     = i_post;
    mon.i_sexc     = psc[2];
    mon.i_ahp      = i_ahp;
    mon.i_fo       = i_fo;
    mon.i_sinh     = psc[3];
    mon.i_pre      = i_pre[ss];
    mon.i_pleft    = u_cur[ss];
    mon.i_pright   = syn_inh[ss] ? psc[1] : psc[0];
    mon.i_devneg   = dev_read[ss] ? dev_i_neg[ss] : '0;
    mon.i_devnorm  = i_norm[ss];
    mon.i_mem      = refractory ? '0 : i_mem;
    mon.vw         = vw[ss];
    mon.ca_above   = ca_above;
    mon.ca_below   = ca_below;
    mon.post_above = post_above;
    mon.w_syn      = w_bin[ss];
    mon.dev_read   = dev_read[ss];
    mon.dev_write  = dev_pot[ss] | dev_dep[ss];
    mon.dev_int    = dev_int[ss] && (ctl_state[ss] == 2'd3);
    mon.dev_state  = dev_state[ss];
  end

endmodule
