// texel_core: one of the two TEXEL cores.
//
// Holds 90 neuron blocks (each with 54 plastic and 4 static synapses), the core's
// 64 x 23-bit register block, its 94-channel bias DAC, the monitor multiplexer
// with its 12 sADCs, and the neuron spike encoder.
// Inputs arrive from the chip's demultiplexer as two streams: spikes (decoded into
// a presynaptic pulse on one synapse) and configuration commands. A command
// writes or reads a register word, a DAC channel code, or the binary weight of one
// plastic synapse (writing a weight sets its V_w to a rail, which also starts a
// device write when device mode is on). One command is in flight at a time:
// cfg_ready is low while a read result waits to leave.
// Output stream: read results have priority over neuron spikes; spikes are taken
// from the neurons' request latches by a round-robin arbiter/encoder. out_pkt.core
// is CORE.
// Biases: every analog parameter of the neuron blocks, the normalizer and the
// sADCs is the current of one DAC channel (channel map in texel_pkg); all neuron
// blocks of the core share them, as the chip's biases are shared per core. Modes
// and device pulse widths come from the register block.
// The composition follows the chip; the channel and register maps are this
// design's own.
module texel_core
  import texel_pkg::*;
#(
  parameter int unsigned NRN  = NRN_PER_CORE,
  parameter int unsigned NPL  = NUM_PLASTIC,
  parameter int unsigned NST  = NUM_STATIC,
  parameter int unsigned K    = 10,
  parameter bit          CORE = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  // spike input
  input  logic              spk_valid,
  output logic              spk_ready,
  input  logic [NRN_W-1:0]  spk_neuron,
  input  logic [SYN_W-1:0]  spk_synapse,
  // configuration input
  input  logic              cfg_valid,
  output logic              cfg_ready,
  input  cfg_cmd_t          cfg_cmd,
  // output stream (spikes and read results)
  output logic              out_valid,
  input  logic              out_ready,
  output out_pkt_t          out_pkt,
  // device terminals of every plastic synapse
  output logic [NPL-1:0]    dev_read [NRN],
  output logic [NPL-1:0]    dev_pot  [NRN],
  output logic [NPL-1:0]    dev_dep  [NRN],
  output logic [NPL-1:0]    dev_idle [NRN],
  output logic [NPL-1:0]    dev_int  [NRN],
  input  cur_t              dev_i_pos [NRN][NPL],
  input  cur_t              dev_i_neg [NRN][NPL],
  // sADC requests of this core
  output logic [SADC_PER_CORE-1:0] sadc_req,
  input  logic [SADC_PER_CORE-1:0] sadc_ack,
  // digital monitor pins and analog monitor outputs of the selected neuron/synapse
  output mon_t              mon_sel
);
  localparam int unsigned NAW = (NRN > 1) ? $clog2(NRN) : 1;

  // ---------------- spike decoding ----------------
  logic [NPL+NST-1:0] pre_spike [NRN];
  logic [15:0]        n_dropped;

  spike_decoder #(.NRN(NRN), .NSYN(NPL+NST)) u_dec (
    .clk, .rst_n, .valid(spk_valid), .ready(spk_ready), .neuron(spk_neuron),
    .synapse(spk_synapse), .pre_spike, .n_dropped);

  // ---------------- configuration ----------------
  logic [REG_W-1:0] regs [REG_WORDS];
  logic [REG_W-1:0] reg_rdata;
  logic             reg_rvalid, reg_wr, reg_rd;
  logic [DAC_W-1:0] dac_rcode;
  logic             dac_rvalid, dac_wr, dac_rd;
  cur_t             dac_i [DAC_CH];
  logic [DAC_CH-1:0] dac_pfet;
  logic             accept;
  logic             resp_pend;
  out_pkt_t         resp;
  logic [NPL-1:0]   prog [NRN];
  logic             prog_val;
  logic [NPL-1:0]   w_bin [NRN];
  logic             wgt_rd_q;
  logic [NRN_W-1:0] wgt_n_q;
  logic [SYN_W-1:0] wgt_s_q;

  assign cfg_ready = !resp_pend && !reg_rvalid && !dac_rvalid && !wgt_rd_q;
  assign accept    = cfg_valid && cfg_ready;
  assign reg_wr    = accept && (cfg_cmd.op == OP_REG_WR);
  assign reg_rd    = accept && (cfg_cmd.op == OP_REG_RD);
  assign dac_wr    = accept && (cfg_cmd.op == OP_DAC_WR);
  assign dac_rd    = accept && (cfg_cmd.op == OP_DAC_RD);
  assign prog_val  = cfg_cmd.payload[13];

  register_block u_regs (
    .clk, .rst_n, .wr_en(reg_wr), .rd_en(reg_rd), .addr(cfg_cmd.payload[28:23]),
    .wr_data(cfg_cmd.payload[22:0]), .rd_data(reg_rdata), .rd_valid(reg_rvalid), .regs);

  dac_bank u_dac (
    .clk, .rst_n, .wr_en(dac_wr), .rd_en(dac_rd), .ch(cfg_cmd.payload[18:12]),
    .wr_code(cfg_cmd.payload[11:0]), .rd_code(dac_rcode), .rd_valid(dac_rvalid),
    .i_out(dac_i), .pfet(dac_pfet));

  for (genvar n = 0; n < NRN; n++) begin : g_prog
    always_comb begin
      for (int s = 0; s < NPL; s++)
        prog[n][s] = accept && (cfg_cmd.op == OP_WGT_WR)
                  && (int'(cfg_cmd.payload[12:6]) == n) && (int'(cfg_cmd.payload[5:0]) == s);
    end
  end

  // read results: one pending response register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_pend <= 1'b0;
      resp      <= '0;
      wgt_rd_q  <= 1'b0;
      wgt_n_q   <= '0;
      wgt_s_q   <= '0;
    end else begin
      wgt_rd_q <= accept && (cfg_cmd.op == OP_WGT_RD);
      if (accept) begin
        wgt_n_q <= cfg_cmd.payload[12:6];
        wgt_s_q <= cfg_cmd.payload[5:0];
        resp.addr <= (cfg_cmd.op == OP_DAC_RD) ? cfg_cmd.payload[17:12] : cfg_cmd.payload[28:23];
      end
      if (reg_rvalid) begin
        resp_pend <= 1'b1;
        resp.kind <= K_REG;
        resp.core <= CORE;
        resp.data <= reg_rdata;
      end else if (dac_rvalid) begin
        resp_pend <= 1'b1;
        resp.kind <= K_DAC;
        resp.core <= CORE;
        resp.data <= 23'(dac_rcode);
      end else if (wgt_rd_q) begin
        resp_pend <= 1'b1;
        resp.kind <= K_WGT;
        resp.core <= CORE;
        resp.data <= {9'd0, wgt_n_q, wgt_s_q,
                      (int'(wgt_n_q) < NRN && int'(wgt_s_q) < NPL) ? w_bin[wgt_n_q][wgt_s_q] : 1'b0};
      end else if (resp_pend && out_ready) begin
        resp_pend <= 1'b0;
      end
    end
  end

  // ---------------- bias and mode distribution ----------------
  nb_bias_t         nb;
  nb_ctrl_t         ctrl;
  logic [NPL-1:0]   syn_inh;
  logic [68:0]      type_bits;

  always_comb begin
    nb.soma.leak     = dac_i[B_LEAK];
    nb.soma.gain     = dac_i[B_GAIN];
    nb.soma.spk_thr  = dac_i[B_SPK_THR];
    nb.soma.refr     = dac_i[B_REFR];
    nb.soma.expg     = dac_i[B_EXP];
    nb.soma.ahp_w    = dac_i[B_AHP_W];
    nb.soma.ahp_leak = dac_i[B_AHP_LEAK];
    nb.soma.dc       = dac_i[B_DC];
    for (int d = 0; d < 4; d++) begin
      nb.psc_gain[d] = dac_i[B_PSC_GAIN0 + d];
      nb.psc_leak[d] = dac_i[B_PSC_LEAK0 + d];
      nb.st_w[d]     = dac_i[B_ST_W0 + d];
    end
    nb.w_high        = dac_i[B_W_HIGH];
    nb.w_low         = dac_i[B_W_LOW];
    nb.norm_bias     = dac_i[B_NORM];
    nb.syn.pre_w     = dac_i[B_PRE_W];
    nb.syn.pre_leak  = dac_i[B_PRE_LEAK];
    nb.syn.pre_thr_l = dac_i[B_PRE_THR_L];
    nb.syn.pre_thr_h = dac_i[B_PRE_THR_H];
    nb.syn.pot_gain  = dac_i[B_POT_GAIN];
    nb.syn.pre_dep   = dac_i[B_PRE_DEP];
    nb.syn.post_dep  = dac_i[B_POST_DEP];
    nb.syn.slew_up   = dac_i[B_SLEW_UP];
    nb.syn.slew_dn   = dac_i[B_SLEW_DN];
    nb.syn.bist_thr  = dac_i[B_BIST_THR];
    nb.tr.post_w     = dac_i[B_POST_W];
    nb.tr.post_leak  = dac_i[B_POST_LEAK];
    nb.tr.post_thr   = dac_i[B_POST_THR];
    nb.tr.ca_w       = dac_i[B_CA_W];
    nb.tr.ca_leak1   = dac_i[B_CA_LEAK1];
    nb.tr.ca_leak2   = dac_i[B_CA_LEAK2];
    nb.tr.ca_thr_l   = dac_i[B_CA_THR_L];
    nb.tr.ca_thr_h   = dac_i[B_CA_THR_H];
    ctrl.plast_en    = regs[R_CTRL][CTRL_PLAST_EN];
    ctrl.dev_en      = regs[R_CTRL][CTRL_DEV_EN];
    ctrl.cont_read   = regs[R_CTRL][CTRL_CONT_READ];
    ctrl.prechg      = regs[R_CTRL][CTRL_PRECHG];
    ctrl.read_pw     = regs[R_READ_PW];
    ctrl.write_pw    = regs[R_WRITE_PW];
    type_bits        = {regs[R_SYN_TYPE2], regs[R_SYN_TYPE1], regs[R_SYN_TYPE0]};
    syn_inh          = type_bits[NPL-1:0];
  end

  // ---------------- neuron blocks ----------------
  logic [NRN-1:0] spike_req, spike_grant;
  mon_t           mon [NRN];

  for (genvar n = 0; n < NRN; n++) begin : g_nrn
    neuron_block #(.NPL(NPL), .NST(NST), .K(K)) u_nb (
      .clk, .rst_n, .tick, .b(nb), .ctrl, .syn_inh,
      .pre_spike(pre_spike[n]), .prog(prog[n]), .prog_val,
      .sel_syn(regs[R_MONITOR][12:7]), .w_bin(w_bin[n]),
      .spike_req(spike_req[n]), .spike_grant(spike_grant[n]),
      .dev_read(dev_read[n]), .dev_pot(dev_pot[n]), .dev_dep(dev_dep[n]),
      .dev_idle(dev_idle[n]), .dev_int(dev_int[n]),
      .dev_i_pos(dev_i_pos[n]), .dev_i_neg(dev_i_neg[n]), .mon(mon[n]));
  end

  // ---------------- spike encoder and output merge ----------------
  logic           enc_valid, enc_ready;
  logic [NAW-1:0] enc_addr;

  arb_encoder #(.N(NRN), .AW(NAW)) u_enc (
    .clk, .rst_n, .req(spike_req), .grant(spike_grant),
    .out_valid(enc_valid), .out_ready(enc_ready), .out_addr(enc_addr));

  assign enc_ready = out_ready && !resp_pend;
  assign out_valid = resp_pend || enc_valid;

  always_comb begin
    if (resp_pend) out_pkt = resp;
    else begin
      out_pkt.kind = K_SPIKE;
      out_pkt.core = CORE;
      out_pkt.addr = '0;
      out_pkt.data = 23'(enc_addr);
    end
  end

  // ---------------- monitoring ----------------
  cur_t sadc_in [SADC_PER_CORE];

  monitor_mux #(.NRN(NRN)) u_mon (
    .mon, .sel_nrn(regs[R_MONITOR][6:0]), .i_dac(dac_i[B_CAL]), .sadc_in, .sel(mon_sel));

  for (genvar a = 0; a < SADC_PER_CORE; a++) begin : g_sadc
    sadc u_sadc (
      .clk, .rst_n, .tick, .en(regs[R_CTRL][CTRL_SADC_EN]), .i_in(sadc_in[a]),
      .off_bias(dac_i[B_SADC_OFF]), .thr(dac_i[B_SADC_THR]), .pwlk(dac_i[B_SADC_PWLK]),
      .reset(1'b0), .req(sadc_req[a]), .ack(sadc_ack[a]));
  end

endmodule
