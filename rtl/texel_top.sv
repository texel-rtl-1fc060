// texel_top: the TEXEL mixed-signal neuromorphic processor, two cores of 90
// neurons, each neuron with 54 plastic synapses (with on-chip learning and a
// differential memristive-device interface) and 4 static synapses.
//
// Data path: input packets arrive on a four-phase AER bus (aer_in_*), are
// synchronised (aer_rx) and split by opcode and core (aer_demux) into spikes for a
// core's spike decoder or configuration commands for its register block, DAC and
// weight programming. The two cores' output streams (neuron spikes and read
// results) are merged by a round-robin arbiter onto the four-phase output AER bus
// (aer_out_*). The 24 sADCs (12 per core) share a separate four-phase bus that
// carries only the 5-bit address of the sADC that spiked (sadc_*).
// The memristive devices are not part of the chip: the gate signals of every
// plastic synapse's device interface (READ, POT, DEP, IDLE) and its interrupt
// flag go out, and the two device currents it reads come back in, as arrays
// indexed [core][neuron][synapse]. The selected neuron/synapse monitor signals of
// each core come out on mon (digital pins and analog outputs).
// tick advances the behavioural analog models by one time step; clk runs the
// digital logic (the chip's logic is asynchronous; here it is clocked).
// The architecture follows the chip; packet formats, register and bias maps,
// and the clocked handshakes are this design's own.
module texel_top
  import texel_pkg::*;
#(
  parameter int unsigned NRN = NRN_PER_CORE,
  parameter int unsigned NPL = NUM_PLASTIC,
  parameter int unsigned NST = NUM_STATIC,
  parameter int unsigned K   = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tick,
  // input AER bus
  input  logic              aer_in_req,
  output logic              aer_in_ack,
  input  logic [IN_W-1:0]   aer_in_data,
  // output AER bus
  output logic              aer_out_req,
  input  logic              aer_out_ack,
  output logic [OUT_W-1:0]  aer_out_data,
  // sADC AER bus
  output logic              sadc_req,
  input  logic              sadc_ack,
  output logic [SADC_ADDR_W-1:0] sadc_addr,
  // memristive device interface of every plastic synapse
  output logic [NPL-1:0]    dev_read [NUM_CORES][NRN],
  output logic [NPL-1:0]    dev_pot  [NUM_CORES][NRN],
  output logic [NPL-1:0]    dev_dep  [NUM_CORES][NRN],
  output logic [NPL-1:0]    dev_idle [NUM_CORES][NRN],
  output logic [NPL-1:0]    dev_int  [NUM_CORES][NRN],
  input  cur_t              dev_i_pos [NUM_CORES][NRN][NPL],
  input  cur_t              dev_i_neg [NUM_CORES][NRN][NPL],
  // monitor pins / analog outputs per core
  output mon_t              mon [NUM_CORES]
);
  // ---------------- input ----------------
  logic            in_valid, in_ready;
  logic [IN_W-1:0] in_data;
  in_pkt_t         in_pkt;

  aer_rx #(.W(IN_W)) u_rx (
    .clk, .rst_n, .req(aer_in_req), .ack(aer_in_ack), .data(aer_in_data),
    .out_valid(in_valid), .out_ready(in_ready), .out_data(in_data));

  assign in_pkt = in_pkt_t'(in_data);

  logic [NUM_CORES-1:0] spk_valid, spk_ready, cfg_valid, cfg_ready;
  logic [NRN_W-1:0]     spk_neuron;
  logic [SYN_W-1:0]     spk_synapse;
  cfg_cmd_t             cfg_cmd;

  aer_demux #(.NUM_CORES_P(NUM_CORES)) u_demux (
    .in_pkt, .in_valid, .in_ready, .spk_valid, .spk_ready, .spk_neuron, .spk_synapse,
    .cfg_valid, .cfg_ready, .cfg_cmd);

  // ---------------- cores ----------------
  logic [NUM_CORES-1:0]     core_valid, core_ready;
  out_pkt_t                 core_pkt [NUM_CORES];
  logic [SADC_PER_CORE-1:0] s_req [NUM_CORES];
  logic [SADC_PER_CORE-1:0] s_ack [NUM_CORES];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    texel_core #(.NRN(NRN), .NPL(NPL), .NST(NST), .K(K), .CORE(c[0])) u_core (
      .clk, .rst_n, .tick,
      .spk_valid(spk_valid[c]), .spk_ready(spk_ready[c]), .spk_neuron, .spk_synapse,
      .cfg_valid(cfg_valid[c]), .cfg_ready(cfg_ready[c]), .cfg_cmd,
      .out_valid(core_valid[c]), .out_ready(core_ready[c]), .out_pkt(core_pkt[c]),
      .dev_read(dev_read[c]), .dev_pot(dev_pot[c]), .dev_dep(dev_dep[c]),
      .dev_idle(dev_idle[c]), .dev_int(dev_int[c]),
      .dev_i_pos(dev_i_pos[c]), .dev_i_neg(dev_i_neg[c]),
      .sadc_req(s_req[c]), .sadc_ack(s_ack[c]), .mon_sel(mon[c]));
  end

  // ---------------- output merge and AER out ----------------
  logic                 m_valid, m_ready;
  logic [0:0]           m_sel;

  arb_encoder #(.N(NUM_CORES), .AW(1)) u_merge (
    .clk, .rst_n, .req(core_valid), .grant(core_ready),
    .out_valid(m_valid), .out_ready(m_ready), .out_addr(m_sel));

  aer_tx #(.W(OUT_W)) u_tx (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(m_ready), .in_data(core_pkt[m_sel]),
    .req(aer_out_req), .ack(aer_out_ack), .data(aer_out_data));

  // ---------------- sADC bus ----------------
  localparam int unsigned NSADC = NUM_CORES * SADC_PER_CORE;
  logic [NSADC-1:0]       sa_req, sa_grant;
  logic                   sa_valid, sa_ready;
  logic [SADC_ADDR_W-1:0] sa_addr;

  always_comb begin
    for (int c = 0; c < NUM_CORES; c++) begin
      for (int a = 0; a < SADC_PER_CORE; a++) begin
        sa_req[c*SADC_PER_CORE + a] = s_req[c][a];
        s_ack[c][a]                 = sa_grant[c*SADC_PER_CORE + a];
      end
    end
  end

  arb_encoder #(.N(NSADC), .AW(SADC_ADDR_W)) u_sadc_enc (
    .clk, .rst_n, .req(sa_req), .grant(sa_grant),
    .out_valid(sa_valid), .out_ready(sa_ready), .out_addr(sa_addr));

  aer_tx #(.W(SADC_ADDR_W)) u_sadc_tx (
    .clk, .rst_n, .in_valid(sa_valid), .in_ready(sa_ready), .in_data(sa_addr),
    .req(sadc_req), .ack(sadc_ack), .data(sadc_addr));

endmodule
