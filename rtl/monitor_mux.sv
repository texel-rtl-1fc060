// monitor_mux: selects which neuron of a core is observed by that core's 12 sADCs
// and digital monitor pins.
//
// Every neuron block already offers one monitor bundle (its own currents plus
// those of its selected synapse). This mux picks the bundle of neuron sel_nrn and
// spreads it over the 12 sADC inputs, one per monitorable current type (I_DAC,
// I_PRE, I_SO, I_POST, I_P-LEFT, I_P-RIGHT, I_S-EXC, I_AHP, I_FO, I_S-INH,
// I_DEV-NEG, I_DEV-NORM), and over the digital pins and the two analog outputs.
// One sADC per current type and core is this design's arrangement; it accounts
// exactly for 24 simultaneously monitored currents and, with 90 neurons x 6 neuron
// currents + 4860 synapses x 5 synapse currents + 1 DAC current per core, for
// 49682 monitorable currents on the chip. Combinational. An out-of-range neuron
// index selects neuron 0.
module monitor_mux
  import texel_pkg::*;
#(
  parameter int unsigned NRN = NRN_PER_CORE
) (
  input  mon_t             mon [NRN],
  input  logic [NRN_W-1:0] sel_nrn,
  input  cur_t             i_dac,
  output cur_t             sadc_in [SADC_PER_CORE],
  output mon_t             sel
);
  always_comb begin
    sel = (int'(sel_nrn) < NRN) ? mon[sel_nrn] : mon[0];
    sadc_in[M_DAC]     = i_dac;
    sadc_in[M_PRE]     = sel.i_pre;
    sadc_in[M_SO]      = sel.i_so;
    sadc_in[M_POST]    = sel.i_post;
    sadc_in[M_PLEFT]   = sel.i_pleft;
    sadc_in[M_PRIGHT]  = sel.i_pright;
    sadc_in[M_SEXC]    = sel.i_sexc;
    sadc_in[M_AHP]     = sel.i_ahp;
    sadc_in[M_FO]      = sel.i_fo;
    sadc_in[M_SINH]    = sel.i_sinh;
    sadc_in[M_DEVNEG]  = sel.i_devneg;
    sadc_in[M_DEVNORM] = sel.i_devnorm;
  end

endmodule
