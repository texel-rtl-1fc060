// tb_texel_core: one core at reduced size (4 neurons, 4 plastic + 4 static
// synapses per neuron), driven directly on its spike and configuration streams.
// Checks: register write/read responses (kind, core, address, data) and cfg_ready
// low while a response waits; DAC write/read and the distribution of the DAC
// currents and register mode bits to the neuron blocks (channel map); synapse-type
// register bits; weight write/read; spikes into a static synapse producing output
// spike packets with the right neuron address; read responses taking priority
// over pending spikes; sADC requests for the I_DAC monitor.
module tb_texel_core;
  import texel_pkg::*;
  localparam int NRN = 4, NPL = 4, NST = 4;
  logic clk = 0, rst_n = 0, tick = 1;
  always #5 clk = ~clk;
  logic spk_valid = 0, spk_ready;
  logic [NRN_W-1:0] spk_neuron = '0;
  logic [SYN_W-1:0] spk_synapse = '0;
  logic cfg_valid = 0, cfg_ready;
  cfg_cmd_t cfg_cmd = '0;
  logic out_valid, out_ready = 1;
  out_pkt_t out_pkt;
  logic [NPL-1:0] dev_read [NRN], dev_pot [NRN], dev_dep [NRN], dev_idle [NRN], dev_int [NRN];
  cur_t dev_i_pos [NRN][NPL], dev_i_neg [NRN][NPL];
  logic [SADC_PER_CORE-1:0] sadc_req, sadc_ack = '0;
  mon_t mon_sel;
  int checks = 0, failures = 0;

  texel_core #(.NRN(NRN), .NPL(NPL), .NST(NST), .CORE(1'b1)) dut (.*);

  always_comb for (int n = 0; n < NRN; n++) for (int s = 0; s < NPL; s++) begin
    dev_i_pos[n][s] = 0; dev_i_neg[n][s] = 0;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // output collector
  out_pkt_t resp_q [$];
  int n_spk [NRN];
  int n_sadc = 0;
  initial foreach (n_spk[i]) n_spk[i] = 0;
  always @(negedge clk) begin
    if (out_valid && out_ready) begin
      if (out_pkt.kind == K_SPIKE) begin
        chk(out_pkt.core == 1'b1 && int'(out_pkt.data) < NRN, "spike packet fields");
        n_spk[out_pkt.data]++;
      end else resp_q.push_back(out_pkt);
    end
    sadc_ack = sadc_req & ~sadc_ack;
    if (sadc_req[M_DAC] && sadc_ack[M_DAC]) n_sadc++;
  end

  task automatic cmd(op_e op, logic [29:0] pl);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_cmd.op = op; cfg_cmd.payload = pl; cfg_valid = 1;
    @(negedge clk) cfg_valid = 0;
  endtask
  task automatic spk(int n, int s);
    @(negedge clk);
    spk_neuron = 7'(n); spk_synapse = 6'(s); spk_valid = 1;
    while (!spk_ready) @(negedge clk);
    @(negedge clk) spk_valid = 0;
  endtask
  task automatic get(output out_pkt_t p);
    int t; t = 0;
    while (resp_q.size() == 0 && t < 100) begin @(negedge clk); t++; end
    if (resp_q.size() == 0) begin chk(0, "missing response"); p = '0; end
    else p = resp_q.pop_front();
  endtask
  function automatic cur_t dac_i(logic [11:0] c);
    cur_t m [6] = '{2200000, 290000, 36000, 4500, 570, 70};
    return (c[10:8] < 6) ? cur_t'((64'(m[c[10:8]]) * c[7:0]) >> 8) : 0;
  endfunction

  initial begin
    out_pkt_t p;
    repeat (3) @(negedge clk); rst_n = 1; repeat (2) @(negedge clk);
    // registers
    for (int a = 0; a < REG_WORDS; a += 7) begin
      cmd(OP_REG_WR, {1'b0, 6'(a), 23'(a * 1234 + 5)});
    end
    for (int a = 0; a < REG_WORDS; a += 7) begin
      cmd(OP_REG_RD, {1'b0, 6'(a), 23'd0});
      @(negedge clk);
      get(p);
      chk(p.kind == K_REG && p.core && p.addr == 6'(a) && p.data == 23'(a * 1234 + 5),
          $sformatf("register %0d read-back %h", a, p.data));
    end
    // cfg_ready low while a response waits
    out_ready = 0;
    cmd(OP_REG_RD, {1'b0, 6'd7, 23'd0});
    repeat (4) @(negedge clk);
    chk(!cfg_ready && out_valid && out_pkt.kind == K_REG, "response held, cfg_ready low");
    out_ready = 1; @(negedge clk); @(negedge clk);
    chk(cfg_ready, "cfg_ready after response");
    void'(resp_q.pop_front());
    // DAC channels and bias distribution
    for (int ch = 0; ch < DAC_CH; ch += 5) begin
      cmd(OP_DAC_WR, {11'd0, 7'(ch), 12'((ch * 37 + 11) & 12'h7FF)});
    end
    for (int ch = 0; ch < DAC_CH; ch += 5) begin
      cmd(OP_DAC_RD, {11'd0, 7'(ch), 12'd0});
      get(p);
      chk(p.kind == K_DAC && p.addr == 6'(ch) && p.data[11:0] == 12'((ch * 37 + 11) & 12'h7FF),
          $sformatf("DAC %0d read-back", ch));
    end
    cmd(OP_DAC_WR, {11'd0, 7'(B_SPK_THR), 12'h2A3});
    cmd(OP_DAC_WR, {11'd0, 7'(B_BIST_THR), 12'h340});
    cmd(OP_DAC_WR, {11'd0, 7'(B_CA_THR_H), 12'h1FF});
    cmd(OP_DAC_WR, {11'd0, 7'(B_NORM), 12'h3C0});
    @(negedge clk);
    chk(dut.nb.soma.spk_thr == dac_i(12'h2A3), "spike threshold bias from its channel");
    chk(dut.nb.syn.bist_thr == dac_i(12'h340), "bistability threshold bias");
    chk(dut.nb.tr.ca_thr_h == dac_i(12'h1FF), "Ca2+ high threshold bias");
    chk(dut.nb.norm_bias == dac_i(12'h3C0), "norm_bias");
    cmd(OP_REG_WR, {1'b0, 6'(R_CTRL), 23'b01111});
    cmd(OP_REG_WR, {1'b0, 6'(R_SYN_TYPE0), 23'b0101});
    @(negedge clk);
    chk(dut.ctrl.plast_en && dut.ctrl.dev_en && dut.ctrl.cont_read && dut.ctrl.prechg, "mode bits");
    chk(dut.syn_inh == 4'b0101, "synapse type bits");
    cmd(OP_REG_WR, {1'b0, 6'(R_CTRL), 23'd0});
    cmd(OP_REG_WR, {1'b0, 6'(R_SYN_TYPE0), 23'd0});
    // weights
    cmd(OP_WGT_WR, {16'd0, 1'b1, 7'd2, 6'd3});
    cmd(OP_WGT_RD, {16'd0, 1'b0, 7'd2, 6'd3});
    get(p);
    chk(p.kind == K_WGT && p.data[0] && p.data[13:1] == {7'd2, 6'd3}, "weight 1 read-back");
    cmd(OP_WGT_RD, {16'd0, 1'b0, 7'd2, 6'd2});
    get(p);
    chk(p.kind == K_WGT && !p.data[0], "unprogrammed weight reads 0");
    // biases for spiking
    begin
      logic [11:0] c_leak = {1'b0, 3'd5, 8'd234}, c_gain = {1'b0, 3'd4, 8'd115},
                   c_thr = {1'b0, 3'd2, 8'd35}, c_refr = {1'b0, 3'd3, 8'd116},
                   c_w = {1'b0, 3'd2, 8'd60}, c_lk = {1'b0, 3'd5, 8'd183};
      cmd(OP_DAC_WR, {11'd0, 7'(B_LEAK), c_leak});
      cmd(OP_DAC_WR, {11'd0, 7'(B_GAIN), c_gain});
      cmd(OP_DAC_WR, {11'd0, 7'(B_SPK_THR), c_thr});
      cmd(OP_DAC_WR, {11'd0, 7'(B_REFR), c_refr});
      cmd(OP_DAC_WR, {11'd0, 7'(B_ST_W0), c_w});
      cmd(OP_DAC_WR, {11'd0, 7'(B_PSC_LEAK0 + 2), c_lk});
      cmd(OP_DAC_WR, {11'd0, 7'(B_AHP_W), 12'd0});
    end
    for (int i = 0; i < 60; i++) begin spk(3, NPL); repeat (6) @(negedge clk); end
    repeat (100) @(negedge clk);
    chk(n_spk[3] > 0 && n_spk[0] == 0 && n_spk[1] == 0 && n_spk[2] == 0,
        $sformatf("spikes from the driven neuron only: %0d %0d %0d %0d", n_spk[0], n_spk[1], n_spk[2], n_spk[3]));
    // priority of read responses over spikes
    out_ready = 0;
    for (int i = 0; i < 30; i++) begin spk(3, NPL); repeat (6) @(negedge clk); end
    chk(out_valid && out_pkt.kind == K_SPIKE, $sformatf("spike waiting %0d %0d %0d", out_valid, out_pkt.kind, dut.spike_req));
    cfg_cmd.op = OP_REG_RD; cfg_cmd.payload = {1'b0, 6'(R_READ_PW), 23'd0}; cfg_valid = 1;
    @(negedge clk) cfg_valid = 0;
    repeat (3) @(negedge clk);
    chk(out_valid && out_pkt.kind == K_REG, "read response overtakes waiting spike");
    out_ready = 1;
    repeat (20) @(negedge clk);
    get(p);
    chk(p.kind == K_REG && p.data == 23'(READ_PW_RST), "priority response data");
    // sADC: I_DAC monitor
    cmd(OP_DAC_WR, {11'd0, 7'(B_CAL), {1'b0, 3'd3, 8'd128}});
    cmd(OP_DAC_WR, {11'd0, 7'(B_SADC_THR), {1'b0, 3'd2, 8'd128}});
    cmd(OP_DAC_WR, {11'd0, 7'(B_SADC_PWLK), {1'b0, 3'd4, 8'd255}});
    cmd(OP_REG_WR, {1'b0, 6'(R_CTRL), 23'(1 << CTRL_SADC_EN)});
    repeat (500) @(negedge clk);
    chk(n_sadc > 0, $sformatf("sADC events of the I_DAC channel: %0d", n_sadc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
