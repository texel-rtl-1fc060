// spike_decoder: turns a spike packet (neuron, synapse) addressed to this core
// into a one-clock presynaptic pulse on that one synapse of that one neuron.
//
// Synapse ids 0..53 are the plastic synapses, 54..55 the static excitatory and
// 56..57 the static inhibitory ones (the id ordering is this design's choice).
// Packets naming a neuron or synapse beyond the core's range are accepted and
// dropped and counted in n_dropped. The decoder is always ready; the pulse appears
// one clock after the packet is accepted.
module spike_decoder
  import texel_pkg::*;
#(
  parameter int unsigned NRN  = NRN_PER_CORE,
  parameter int unsigned NSYN = NUM_SYN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid,
  output logic                 ready,
  input  logic [NRN_W-1:0]     neuron,
  input  logic [SYN_W-1:0]     synapse,
  output logic [NSYN-1:0]      pre_spike [NRN],
  output logic [15:0]          n_dropped
);
  assign ready = 1'b1;

  // one row of pulse flops per neuron (a generate loop, so that tools do not
  // unroll NRN x NSYN iterations inside one process)
  for (genvar n = 0; n < NRN; n++) begin : g_row
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) pre_spike[n] <= '0;
      else begin
        for (int s = 0; s < NSYN; s++)
          pre_spike[n][s] <= valid && (int'(neuron) == n) && (int'(synapse) == s);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_dropped <= '0;
    else if (valid && ((int'(neuron) >= NRN) || (int'(synapse) >= NSYN)))
      n_dropped <= n_dropped + 16'd1;
  end

endmodule
