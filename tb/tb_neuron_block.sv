// tb_neuron_block: integration test of one neuron with a reduced fan-in (6 plastic
// + 4 static synapses) and a behavioural model of the off-chip differential device
// pairs (POT sets the pair to weight 1, DEP to weight 0; on READ the pair returns
// I_pos/I_neg = 3000/1000 pA for weight 1 and 1000/3000 pA for weight 0).
// Checks, in order:
//   * DC drive makes the soma spike, spike_req is held until spike_grant;
//   * static excitatory input drives spiking, static inhibition reduces it;
//   * CMOS mode: a programmed-1 synapse injects w_high, a 0 synapse w_low, an
//     inhibitory-row synapse feeds the inhibitory plastic DPI;
//   * learning: potentiation (post spikes with a high pre trace) flips a weight
//     0->1, depression (pre spikes while the post trace is high) flips it back,
//     and nothing moves with learning disabled or the Ca2+ window closed;
//   * device mode: weight programming writes the devices (POT/DEP), a pre spike
//     reads them (READ pulse, I_norm = norm_bias/2 for weight 1, 0 for weight 0,
//     dev_state follows), a pre spike during a write interrupts it (DEV_INT) and
//     the write restarts in full, learning flips are written to the devices,
//     continuous-read and pre-charge (IDLE) modes;
//   * READ and POT/DEP are never high together on a synapse.
module tb_neuron_block;
  import texel_pkg::*;
  localparam int NPL = 6, NST = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1;
  nb_bias_t b;
  nb_ctrl_t ctrl;
  logic [NPL-1:0] syn_inh = '0, prog = '0, w_bin;
  logic prog_val = 0;
  logic [NPL+NST-1:0] pre_spike = '0;
  logic [SYN_W-1:0] sel_syn = '0;
  logic spike_req, spike_grant = 0;
  logic [NPL-1:0] dev_read, dev_pot, dev_dep, dev_idle, dev_int;
  cur_t dev_i_pos [NPL], dev_i_neg [NPL];
  mon_t mon;
  int checks = 0, failures = 0;

  neuron_block #(.NPL(NPL), .NST(NST), .K(10)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- device-pair model ----------------
  logic [NPL-1:0] dstate = '0;
  int n_pot = 0, n_dep = 0, n_read = 0, n_int = 0;
  always @(posedge clk) for (int s = 0; s < NPL; s++) begin
    if (!rst_n) dstate[s] <= 1'b0;
    if (dev_pot[s]) dstate[s] <= 1'b1;
    if (dev_dep[s]) dstate[s] <= 1'b0;
  end
  always_comb for (int s = 0; s < NPL; s++) begin
    dev_i_pos[s] = dstate[s] ? 3000 : 1000;
    dev_i_neg[s] = dstate[s] ? 1000 : 3000;
  end
  logic [NPL-1:0] pot_q = '0, dep_q = '0, read_q = '0, int_q = '0;
  always @(negedge clk) begin
    for (int s = 0; s < NPL; s++) begin
      if (dev_pot[s] && !pot_q[s]) n_pot++;
      if (dev_dep[s] && !dep_q[s]) n_dep++;
      if (dev_read[s] && !read_q[s]) n_read++;
      if (dev_int[s] && !int_q[s]) n_int++;
      if (rst_n) chk(!(dev_read[s] && (dev_pot[s] || dev_dep[s])) && !(dev_pot[s] && dev_dep[s]),
                     "read/write exclusive");
    end
    pot_q = dev_pot; dep_q = dev_dep; read_q = dev_read; int_q = dev_int;
  end

  // ---------------- AER receiver: grant one cycle after req ----------------
  int n_spk = 0, req_cycles = 0;
  bit auto_grant = 1;
  always @(negedge clk) begin
    if (spike_req && !spike_grant && auto_grant) begin n_spk++; spike_grant = 1; end
    else spike_grant = 0;
  end

  task automatic pre(input int idx);
    @(negedge clk) pre_spike[idx] = 1'b1;
    @(negedge clk) pre_spike[idx] = 1'b0;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic prog_w(input int s, input bit v);
    @(negedge clk) begin prog[s] = 1'b1; prog_val = v; end
    @(negedge clk) prog[s] = 1'b0;
    idle(3);
  endtask

  // spikes produced by a train of pre spikes on input idx (period per)
  task automatic drive(input int idx, input int per, input int n, output int spk);
    int s0; s0 = n_spk;
    for (int i = 0; i < n; i++) begin pre(idx); idle(per - 2); end
    idle(50);
    spk = n_spk - s0;
  endtask

  task automatic peak_pright(input int idx, output cur_t pk);
    pk = 0;
    pre(idx);
    repeat (10) begin @(negedge clk); if (mon.i_pright > pk) pk = mon.i_pright; end
    idle(400);
  endtask

  initial begin
    int spk_a, spk_b, p0, d0, r0;
    cur_t pk1, pk0;
    b = '0; ctrl = '0;
    b.soma.leak = 64; b.soma.gain = 256; b.soma.spk_thr = 5000; b.soma.refr = 2048;
    b.soma.expg = 100; b.soma.ahp_leak = 4;
    for (int d = 0; d < 4; d++) begin b.psc_gain[d] = 50; b.psc_leak[d] = 50; end
    b.st_w[0] = 3000; b.st_w[1] = 3000; b.st_w[2] = 3000; b.st_w[3] = 3000;
    b.w_high = 3000; b.w_low = 300; b.norm_bias = 4000;
    b.syn.pre_w = 1000; b.syn.pre_leak = 20; b.syn.pre_thr_l = 200; b.syn.pre_thr_h = 600;
    b.syn.slew_up = 1; b.syn.slew_dn = 1; b.syn.bist_thr = 900;
    b.tr.post_w = 1000; b.tr.post_leak = 50; b.tr.post_thr = 300;
    b.tr.ca_w = 200; b.tr.ca_leak1 = 10; b.tr.ca_leak2 = 20;
    b.tr.ca_thr_l = 0; b.tr.ca_thr_h = 32'hFFFF_FFFF;
    ctrl.read_pw = 4; ctrl.write_pw = 8;
    idle(3); rst_n = 1; idle(2);
    chk(!spike_req && w_bin == '0 && dev_read == '0 && dev_pot == '0, "reset state");

    // ---- DC drive and the request/grant latch ----
    auto_grant = 0;
    b.soma.dc = 2000;
    wait (spike_req);
    idle(40);
    chk(spike_req, "spike_req held until grant");
    auto_grant = 1;
    idle(2);
    chk(!spike_req || n_spk > 0, "grant clears request");
    begin int s0; s0 = n_spk; idle(2000); chk(n_spk - s0 > 5, $sformatf("DC drive spikes: %0d", n_spk - s0)); end
    b.soma.dc = 0; idle(500);
    begin int s0; s0 = n_spk; idle(2000); chk(n_spk == s0, "no spikes without input"); end

    // ---- static synapses ----
    drive(NPL + 0, 10, 100, spk_a);
    chk(spk_a > 3, $sformatf("static exc drives spikes: %0d", spk_a));
    chk(mon.i_sexc > 0, "I_S-EXC monitor");
    idle(1000);
    for (int i = 0; i < 100; i++) begin
      @(negedge clk) pre_spike[NPL + 0] = 1; pre_spike[NPL + 2] = 1;
      @(negedge clk) pre_spike[NPL + 0] = 0; pre_spike[NPL + 2] = 0;
      idle(8);
      if (i == 50) chk(mon.i_sinh > 0, "I_S-INH monitor");
    end
    begin int s0; s0 = n_spk; idle(50); end
    spk_b = n_spk; idle(1000);
    begin
      int s0, s1;
      s0 = n_spk;
      for (int i = 0; i < 100; i++) begin
        @(negedge clk) begin pre_spike[NPL + 0] = 1; pre_spike[NPL + 3] = 1; end
        @(negedge clk) begin pre_spike[NPL + 0] = 0; pre_spike[NPL + 3] = 0; end
        idle(8);
      end
      idle(50);
      s1 = n_spk - s0;
      chk(s1 < spk_a, $sformatf("inhibition reduces rate: %0d < %0d", s1, spk_a));
    end
    idle(1000);

    // ---- CMOS-mode plastic synapses ----
    prog_w(0, 1); prog_w(1, 0);
    chk(w_bin[0] && !w_bin[1], "programmed weights");
    sel_syn = 0; idle(2);
    chk(mon.w_syn && mon.vw == VW_MAX && mon.i_pleft == b.w_high, "monitor of synapse 0");
    peak_pright(0, pk1);
    peak_pright(1, pk0);
    chk(pk1 >= 2900 && pk0 >= 250 && pk0 < 400, $sformatf("w_high/w_low efficacy %0d %0d", pk1, pk0));
    syn_inh[2] = 1; prog_w(2, 1); sel_syn = 2; idle(2);
    begin
      cur_t pk; pk = 0;
      pre(2);
      repeat (10) begin @(negedge clk); if (mon.i_pright > pk) pk = mon.i_pright; end
      chk(pk >= 2900 && dut.psc[0] == 0, "inhibitory row feeds the inhibitory plastic DPI");
    end
    syn_inh[2] = 0; idle(500);

    // ---- learning in CMOS mode ----
    // potentiation: high pre trace on synapse 3 and post spikes
    b.syn.pot_gain = 64; b.syn.pre_dep = 0; b.syn.post_dep = 0;
    sel_syn = 3;
    ctrl.plast_en = 0;
    b.soma.dc = 2000;
    for (int i = 0; i < 60; i++) begin pre(3); idle(8); end
    chk(!w_bin[3] && mon.vw == 0, "no learning while disabled");
    ctrl.plast_en = 1;
    b.tr.ca_thr_l = 32'hFFFF_0000;
    for (int i = 0; i < 60; i++) begin pre(3); idle(8); end
    chk(!w_bin[3], "no learning with the Ca2+ window closed");
    b.tr.ca_thr_l = 0;
    for (int i = 0; i < 60 && !w_bin[3]; i++) begin pre(3); idle(8); end
    chk(w_bin[3], $sformatf("potentiation flips weight 0->1 (vw=%0d)", mon.vw));
    b.soma.dc = 0;
    // depression: pre spikes while the post trace is above threshold
    b.syn.pot_gain = 0; b.syn.pre_dep = 300;
    idle(300);
    for (int i = 0; i < 200 && w_bin[3]; i++) begin
      @(negedge clk) b.soma.dc = 30000;
      wait (spike_req); b.soma.dc = 0;
      idle(3); pre(3); idle(60);
    end
    chk(!w_bin[3], $sformatf("depression flips weight 1->0 (vw=%0d)", mon.vw));
    ctrl.plast_en = 0; b.syn.pre_dep = 0; idle(500);

    // ---- device mode ----
    ctrl.dev_en = 1;
    p0 = n_pot; d0 = n_dep;
    prog_w(4, 1); idle(12);
    chk(n_pot == p0 + 1 && dstate[4], "programming a 1 writes POT");
    prog_w(4, 0); idle(12);
    chk(n_dep == d0 + 1 && !dstate[4], "programming a 0 writes DEP");
    prog_w(4, 1); idle(12);
    prog_w(5, 0); idle(12);
    chk(!dstate[5] && n_dep == d0 + 1, $sformatf("no write when the weight does not change (%0d %0d %b)", n_dep, d0, dstate));
    // read on a pre spike
    sel_syn = 4;
    r0 = n_read;
    begin
      cur_t nrm; bit seen; nrm = 0; seen = 0;
      @(negedge clk) pre_spike[4] = 1;
      @(negedge clk) pre_spike[4] = 0;
      repeat (8) begin
        @(negedge clk);
        if (mon.dev_read) begin seen = 1; nrm = mon.i_devnorm; chk(mon.i_devneg == 1000, "I_DEV-NEG monitor"); end
      end
      chk(seen && n_read == r0 + 1, "pre spike reads the devices");
      chk(nrm == 2000, $sformatf("I_norm = norm_bias*(Ip-In)/(Ip+In): %0d", nrm));
      chk(mon.dev_state == 1, "dev_state after reading a 1");
      chk(dut.psc[0] > 0, "device read drives the plastic PSC");
    end
    sel_syn = 5;
    begin
      bit seen; cur_t nrm; seen = 0; nrm = 0;
      pre(5);
      repeat (8) begin @(negedge clk); if (mon.dev_read) begin seen = 1; nrm = nrm | mon.i_devnorm; end end
      chk(seen && nrm == 0 && mon.dev_state == 0, $sformatf("reading a 0: I_norm = 0 (%0d %0d %0d)", seen, nrm, mon.dev_state));
    end
    // interrupt: pre spike during a write
    sel_syn = 4;
    begin
      int i0, pot_cycles; bit saw_int;
      i0 = n_int; pot_cycles = 0; saw_int = 0;
      @(negedge clk) begin prog[4] = 1; prog_val = 0; end
      @(negedge clk) prog[4] = 0;
      wait (dev_dep[4]);
      @(negedge clk); @(negedge clk);
      pre_spike[4] = 1;
      @(negedge clk) pre_spike[4] = 0;
      repeat (40) begin
        @(negedge clk);
        if (dev_dep[4]) pot_cycles++;
        if (mon.dev_int) saw_int = 1;
      end
      chk(saw_int && n_int == i0 + 1, "pre spike during a write raises DEV_INT");
      chk(pot_cycles == 8, $sformatf("write restarts with its full width after the read (%0d)", pot_cycles));
      chk(!dstate[4], "interrupted write completes");
    end
    // learning flips are written to the devices
    prog_w(3, 0); idle(12);
    b.syn.pot_gain = 64; ctrl.plast_en = 1; b.soma.dc = 2000;
    p0 = n_pot;
    for (int i = 0; i < 60 && !dstate[3]; i++) begin pre(3); idle(8); end
    idle(20);
    chk(w_bin[3] && dstate[3] && n_pot > p0, "learned flip written to the device (POT)");
    ctrl.plast_en = 0; b.soma.dc = 0; b.syn.pot_gain = 0;
    idle(300);
    // continuous read and pre-charge
    ctrl.cont_read = 1; idle(5);
    chk(dev_read == '1 && dev_idle == '0, "continuous read holds READ");
    ctrl.cont_read = 0; ctrl.prechg = 1; idle(5);
    chk(dev_read == '0 && dev_idle == '1, "pre-charge IDLE between pulses");
    ctrl.prechg = 0; idle(5);
    chk(dev_idle == '0, "IDLE off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
