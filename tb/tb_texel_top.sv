// tb_texel_top: end-to-end test of the chip at reduced size (6 neurons per core,
// 6 plastic synapses per neuron); the test itself is texel_top_env.
module tb_texel_top;
  texel_top_env #(.FULL(1'b0), .NRN(6), .NPL(6)) env ();
endmodule
