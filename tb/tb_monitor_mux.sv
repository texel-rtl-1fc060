// tb_monitor_mux: gives every neuron's monitor bundle distinct values, sweeps the
// neuron selection (including out-of-range indices, which fall back to neuron 0)
// and checks that each of the 12 sADC inputs carries the right current type of
// the right neuron, that I_DAC passes through, and that the digital pin bundle
// follows the selection.
module tb_monitor_mux;
  import texel_pkg::*;
  localparam int NRN = 90;
  mon_t mon [NRN];
  logic [NRN_W-1:0] sel_nrn;
  cur_t i_dac;
  cur_t sadc_in [SADC_PER_CORE];
  mon_t sel;
  int checks = 0, failures = 0;

  monitor_mux #(.NRN(NRN)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic cur_t v(int n, int t);
    return cur_t'(n * 1000 + t * 7 + 1);
  endfunction

  initial begin
    int e;
    for (int n = 0; n < NRN; n++) begin
      mon[n].i_so      = v(n, M_SO);
      mon[n].i_post    = v(n, M_POST);
      mon[n].i_sexc    = v(n, M_SEXC);
      mon[n].i_ahp     = v(n, M_AHP);
      mon[n].i_fo      = v(n, M_FO);
      mon[n].i_sinh    = v(n, M_SINH);
      mon[n].i_pre     = v(n, M_PRE);
      mon[n].i_pleft   = v(n, M_PLEFT);
      mon[n].i_pright  = v(n, M_PRIGHT);
      mon[n].i_devneg  = v(n, M_DEVNEG);
      mon[n].i_devnorm = v(n, M_DEVNORM);
      mon[n].i_mem     = v(n, 99);
      mon[n].vw        = 11'(n * 13);
      {mon[n].ca_above, mon[n].ca_below, mon[n].post_above} = 3'(n);
      {mon[n].w_syn, mon[n].dev_read, mon[n].dev_write, mon[n].dev_int, mon[n].dev_state} = 5'(n * 3);
    end
    for (int s = 0; s < 128; s++) begin
      sel_nrn = NRN_W'(s);
      i_dac = cur_t'(s * 31 + 5);
      #1;
      e = (s < NRN) ? s : 0;
      chk(sadc_in[M_DAC] == cur_t'(s * 31 + 5), "I_DAC passes through");
      for (int t = 1; t < SADC_PER_CORE; t++)
        chk(sadc_in[t] == v(e, t), $sformatf("sel %0d sADC %0d = %0d", s, t, sadc_in[t]));
      chk(sel == mon[e], $sformatf("sel %0d pin bundle", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
