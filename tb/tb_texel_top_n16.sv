// tb_texel_top_n16: the end-to-end test of texel_top_env with every synapse count
// at the chip's value (54 plastic + 4 static per neuron, 94 DAC channels, 24
// sADCs) and 16 of the 90 neurons per core: 2 x 16 x 54 = 1728 plastic synapses
// with their learning circuits, device controllers and normalizers. The weight
// matrix phase programs and reads back all 1728 weights. The environment prints
// the result and finishes; the watchdog here only guards the run as a whole.
module tb_texel_top_n16;
  texel_top_env #(.FULL(1'b0), .NRN(16), .NPL(54)) env ();

  initial begin
    #2100000000;
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
