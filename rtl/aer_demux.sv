// aer_demux: routes each incoming AER packet to the spike decoder or to the
// configuration path (register block, DAC storage, weight programming) of the
// core it addresses.
//
// The chip shares one input pipeline between spikes and register operations and
// splits it with demultiplexers; that split follows the chip. The opcode/core
// layout of the packet (texel_pkg) is this design's own. Purely combinational:
// in_ready is the ready of the selected output, so a packet passes in the cycle
// it is accepted. OP_NOP packets are accepted and dropped.
module aer_demux
  import texel_pkg::*;
#(
  parameter int unsigned NUM_CORES_P = NUM_CORES
) (
  input  in_pkt_t                       in_pkt,
  input  logic                          in_valid,
  output logic                          in_ready,
  // spike path, one per core
  output logic [NUM_CORES_P-1:0]        spk_valid,
  input  logic [NUM_CORES_P-1:0]        spk_ready,
  output logic [NRN_W-1:0]              spk_neuron,
  output logic [SYN_W-1:0]              spk_synapse,
  // configuration path, one per core
  output logic [NUM_CORES_P-1:0]        cfg_valid,
  input  logic [NUM_CORES_P-1:0]        cfg_ready,
  output cfg_cmd_t                      cfg_cmd
);
  int unsigned c;

  always_comb begin
    c           = int'(in_pkt.core);
    spk_valid   = '0;
    cfg_valid   = '0;
    spk_neuron  = in_pkt.payload[12:6];
    spk_synapse = in_pkt.payload[5:0];
    cfg_cmd.op      = in_pkt.op;
    cfg_cmd.payload = in_pkt.payload;
    in_ready    = 1'b1;
    if (c < NUM_CORES_P) begin
      if (in_pkt.op == OP_SPIKE) begin
        spk_valid[c] = in_valid;
        in_ready     = spk_ready[c];
      end else if (in_pkt.op != OP_NOP) begin
        cfg_valid[c] = in_valid;
        in_ready     = cfg_ready[c];
      end
    end
  end

endmodule
