// texel_top_env: end-to-end test environment of the whole chip, shared by the
// reduced-size test (tb_texel_top) and the default-size test (tb_texel_top_full).
// With FULL=1 the top is instantiated with no parameter list, i.e. at the chip's
// sizes (2 x 90 neurons x 58 synapses); otherwise with NRN neurons and NPL
// plastic synapses per neuron.
//
// Around the top it puts: a four-phase AER sender for input packets, an AER
// receiver for the output bus that acknowledges after a random 0..4-cycle delay
// (back-pressure), an sADC-bus receiver, and a behavioural model of the off-chip
// differential device pair of every plastic synapse (POT sets it to weight 1, DEP
// to weight 0; it returns I_pos/I_neg = 3000/1000 pA for weight 1, 1000/3000 pA
// for weight 0).
// The test configures both cores through the bus (DAC biases, registers), then
// counts each mechanism and fails for any that never happens:
//   register, DAC and weight write + read-back; static-synapse input producing
//   output spikes from both cores; device write on weight programming (POT/DEP);
//   device read on a plastic pre spike; write interrupted by a read (DEV_INT);
//   continuous-read mode; on-chip learning flipping a weight (and writing the
//   device); sADC events from both cores on the sADC bus; output back-pressure;
//   a binary weight matrix over every plastic synapse of both cores programmed
//   and read back (the inference set-up of the chip).
module texel_top_env
  import texel_pkg::*;
#(
  parameter bit          FULL = 1'b0,
  parameter int unsigned NRN  = 6,
  parameter int unsigned NPL  = 6
) ();
  localparam int unsigned N = FULL ? NRN_PER_CORE : NRN;
  localparam int unsigned P = FULL ? NUM_PLASTIC : NPL;

  logic clk = 0, rst_n = 0, tick = 1;
  always #5 clk = ~clk;
  logic             aer_in_req = 0, aer_in_ack;
  logic [IN_W-1:0]  aer_in_data = '0;
  logic             aer_out_req, aer_out_ack = 0;
  logic [OUT_W-1:0] aer_out_data;
  logic             sadc_req, sadc_ack = 0;
  logic [SADC_ADDR_W-1:0] sadc_addr;
  logic [P-1:0]     dev_read [NUM_CORES][N];
  logic [P-1:0]     dev_pot  [NUM_CORES][N];
  logic [P-1:0]     dev_dep  [NUM_CORES][N];
  logic [P-1:0]     dev_idle [NUM_CORES][N];
  logic [P-1:0]     dev_int  [NUM_CORES][N];
  cur_t             dev_i_pos [NUM_CORES][N][P];
  cur_t             dev_i_neg [NUM_CORES][N][P];
  mon_t             mon [NUM_CORES];

  if (FULL) begin : g_full
    texel_top dut (.*);
  end else begin : g_red
    texel_top #(.NRN(N), .NPL(P)) dut (.*);
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- device-pair model ----------------
  logic [P-1:0] dstate [NUM_CORES][N];
  int n_pot = 0, n_dep = 0, n_read = 0, n_int = 0, n_cont = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NUM_CORES; c++)
      for (int n = 0; n < int'(N); n++) begin
        if (!rst_n) dstate[c][n] <= '0;
        else dstate[c][n] <= (dstate[c][n] | dev_pot[c][n]) & ~dev_dep[c][n];
      end
  end
  always_comb begin
    for (int c = 0; c < NUM_CORES; c++)
      for (int n = 0; n < int'(N); n++)
        for (int s = 0; s < int'(P); s++) begin
          dev_i_pos[c][n][s] = dstate[c][n][s] ? 32'd3000 : 32'd1000;
          dev_i_neg[c][n][s] = dstate[c][n][s] ? 32'd1000 : 32'd3000;
        end
  end
  // pulse counters (rising edges on any synapse)
  logic any_pot, any_dep, any_read, any_int, pot_q = 0, dep_q = 0, read_q = 0, int_q = 0;
  always_comb begin
    any_pot = 0; any_dep = 0; any_read = 0; any_int = 0;
    for (int c = 0; c < NUM_CORES; c++)
      for (int n = 0; n < int'(N); n++) begin
        any_pot  |= |dev_pot[c][n];
        any_dep  |= |dev_dep[c][n];
        any_read |= |dev_read[c][n];
        any_int  |= |dev_int[c][n];
      end
  end
  always @(negedge clk) begin
    if (any_pot && !pot_q) n_pot++;
    if (any_dep && !dep_q) n_dep++;
    if (any_read && !read_q) n_read++;
    if (any_int && !int_q) n_int++;
    pot_q = any_pot; dep_q = any_dep; read_q = any_read; int_q = any_int;
  end

  // ---------------- output AER receiver with random back-pressure ----------------
  out_pkt_t resp_q [$];
  int n_spk [NUM_CORES];
  int n_bp = 0, wait_cnt = 0, dly = 0;
  initial begin n_spk[0] = 0; n_spk[1] = 0; end
  always @(negedge clk) begin
    if (aer_out_req && !aer_out_ack) begin
      if (wait_cnt == 0) dly = $urandom_range(0, 4);
      if (wait_cnt >= dly) begin
        out_pkt_t p;
        p = out_pkt_t'(aer_out_data);
        if (p.kind == K_SPIKE) n_spk[p.core]++;
        else resp_q.push_back(p);
        aer_out_ack = 1;
        if (wait_cnt > 0) n_bp++;
        wait_cnt = 0;
      end else wait_cnt++;
    end else if (!aer_out_req && aer_out_ack) aer_out_ack = 0;
  end

  // ---------------- sADC bus receiver ----------------
  int n_sadc [NUM_CORES*SADC_PER_CORE];
  initial foreach (n_sadc[i]) n_sadc[i] = 0;
  always @(negedge clk) begin
    if (sadc_req && !sadc_ack) begin
      if (int'(sadc_addr) < NUM_CORES*SADC_PER_CORE) n_sadc[sadc_addr]++;
      sadc_ack = 1;
    end else if (!sadc_req && sadc_ack) sadc_ack = 0;
  end

  // ---------------- bus helpers ----------------
  task automatic send(input in_pkt_t p);
    @(negedge clk);
    while (aer_in_ack) @(negedge clk);
    aer_in_data = p; aer_in_req = 1;
    while (!aer_in_ack) @(negedge clk);
    aer_in_req = 0;
  endtask

  function automatic in_pkt_t pk(op_e op, int c, logic [29:0] pl);
    in_pkt_t p; p.op = op; p.core = c[0]; p.payload = pl; return p;
  endfunction

  function automatic logic [11:0] dac_code(longint pa);
    longint m [6] = '{2200000, 290000, 36000, 4500, 570, 70};
    for (int sel = 5; sel >= 0; sel--)
      if (pa <= m[sel] || sel == 0) begin
        longint f; f = (pa * 256 + m[sel] / 2) / m[sel];
        if (f > 255) f = 255;
        return {1'b0, 3'(sel), 8'(f)};
      end
    return '0;
  endfunction

  task automatic reg_wr(int c, int a, logic [22:0] d);
    send(pk(OP_REG_WR, c, {1'b0, 6'(a), d}));
  endtask
  task automatic dac_wr(int c, int ch, longint pa);
    send(pk(OP_DAC_WR, c, {11'd0, 7'(ch), dac_code(pa)}));
  endtask
  task automatic spike(int c, int n, int s);
    send(pk(OP_SPIKE, c, {17'd0, 7'(n), 6'(s)}));
  endtask
  task automatic wgt_wr(int c, int n, int s, bit v);
    send(pk(OP_WGT_WR, c, {16'd0, v, 7'(n), 6'(s)}));
  endtask
  task automatic get_resp(output out_pkt_t p);
    int t; t = 0;
    while (resp_q.size() == 0 && t < 2000) begin @(negedge clk); t++; end
    if (resp_q.size() == 0) begin p = '0; chk(0, "no read response"); end
    else p = resp_q.pop_front();
  endtask
  task automatic wgt_rd(int c, int n, int s, output bit v);
    out_pkt_t p;
    send(pk(OP_WGT_RD, c, {17'd0, 7'(n), 6'(s)}));
    get_resp(p);
    chk(p.kind == K_WGT && p.core == c[0] && p.data[13:1] == {7'(n), 6'(s)}, "weight read response");
    v = p.data[0];
  endtask

  // ---------------- mechanism counters ----------------
  int m_matrix = 0;
  // binary test pattern for the weight matrix (diagonal stripes, differs per core)
  function automatic bit wpat(int c, int n, int s);
    return ((n * 7 + s * 3 + c) % 5) < 2;
  endfunction
  int m_reg = 0, m_dac = 0, m_wgt = 0, m_learn = 0, m_cont = 0, m_spk0 = 0, m_spk1 = 0;

  task automatic configure(int c);
    dac_wr(c, B_LEAK, 64);      dac_wr(c, B_GAIN, 256);   dac_wr(c, B_SPK_THR, 5000);
    dac_wr(c, B_REFR, 2048);    dac_wr(c, B_EXP, 100);    dac_wr(c, B_AHP_LEAK, 4);
    for (int d = 0; d < 4; d++) begin dac_wr(c, B_PSC_GAIN0 + d, 50); dac_wr(c, B_PSC_LEAK0 + d, 50); end
    for (int d = 0; d < 4; d++) dac_wr(c, B_ST_W0 + d, 3000);
    dac_wr(c, B_W_HIGH, 3000);  dac_wr(c, B_W_LOW, 300);  dac_wr(c, B_NORM, 4000);
    dac_wr(c, B_PRE_W, 1000);   dac_wr(c, B_PRE_LEAK, 20);
    dac_wr(c, B_PRE_THR_L, 200); dac_wr(c, B_PRE_THR_H, 600);
    dac_wr(c, B_POT_GAIN, 64);  dac_wr(c, B_SLEW_UP, 1);  dac_wr(c, B_SLEW_DN, 1);
    dac_wr(c, B_BIST_THR, 900);
    dac_wr(c, B_POST_W, 1000);  dac_wr(c, B_POST_LEAK, 50); dac_wr(c, B_POST_THR, 300);
    dac_wr(c, B_CA_W, 200);     dac_wr(c, B_CA_LEAK1, 10); dac_wr(c, B_CA_LEAK2, 20);
    dac_wr(c, B_CA_THR_L, 0);   dac_wr(c, B_CA_THR_H, 2200000);
    dac_wr(c, B_SADC_OFF, 10);  dac_wr(c, B_SADC_THR, 100000); dac_wr(c, B_SADC_PWLK, 512);
    dac_wr(c, B_CAL, 2000);
  endtask

  initial begin
    #2000000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    out_pkt_t p;
    bit v;
    int nt, st;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);
    configure(0); configure(1);
    $display("configured at %0t", $time);

    // ---- register / DAC read-back ----
    for (int c = 0; c < 2; c++) begin
      send(pk(OP_REG_RD, c, {1'b0, 6'(R_READ_PW), 23'd0}));
      get_resp(p);
      chk(p.kind == K_REG && p.core == c[0] && p.addr == 6'(R_READ_PW) && p.data == 23'(READ_PW_RST),
          "reset value of READ_PW");
      reg_wr(c, 20, 23'h5A5A5 + c);
      send(pk(OP_REG_RD, c, {1'b0, 6'd20, 23'd0}));
      get_resp(p);
      chk(p.kind == K_REG && p.data == 23'h5A5A5 + c, "register write/read-back");
      if (p.data == 23'h5A5A5 + c) m_reg++;
      send(pk(OP_DAC_RD, c, {11'd0, 7'(B_SPK_THR), 12'd0}));
      get_resp(p);
      chk(p.kind == K_DAC && p.data[11:0] == dac_code(5000), "DAC read-back");
      if (p.data[11:0] == dac_code(5000)) m_dac++;
    end
    reg_wr(0, R_CTRL, 23'(1 << CTRL_SADC_EN));
    reg_wr(1, R_CTRL, 23'(1 << CTRL_SADC_EN));

    // ---- spikes through static synapses of both cores ----
    for (int i = 0; i < 60; i++) begin
      spike(0, 1 % N, P + 0);
      spike(1, (N - 1), P + 1);
    end
    repeat (200) @(negedge clk);
    chk(n_spk[0] > 0, $sformatf("core 0 output spikes: %0d", n_spk[0]));
    chk(n_spk[1] > 0, $sformatf("core 1 output spikes: %0d", n_spk[1]));
    m_spk0 = n_spk[0]; m_spk1 = n_spk[1];

    // ---- weight write / read-back (CMOS mode) ----
    wgt_wr(0, 2 % N, 3 % P, 1);
    wgt_rd(0, 2 % N, 3 % P, v);
    chk(v == 1, "weight 1 read back");
    if (v) m_wgt++;
    wgt_wr(1, 0, P - 1, 1);
    wgt_wr(1, 0, P - 1, 0);
    wgt_rd(1, 0, P - 1, v);
    chk(v == 0, "weight 0 read back");
    if (!v) m_wgt++;

    // ---- device mode: programming writes, pre spikes read ----
    reg_wr(0, R_CTRL, 23'((1 << CTRL_SADC_EN) | (1 << CTRL_DEV_EN)));
    reg_wr(0, R_WRITE_PW, 23'd40);
    wgt_wr(0, 3 % N, 1, 1);
    repeat (60) @(negedge clk);
    chk(n_pot > 0 && dstate[0][3 % N][1], "weight programming writes POT");
    nt = n_read;
    spike(0, 3 % N, 1);
    repeat (20) @(negedge clk);
    chk(n_read > nt, "pre spike reads the device pair");
    // interrupt: a pre spike on the synapse while its write is running
    nt = n_int;
    wgt_wr(0, 3 % N, 1, 0);
    spike(0, 3 % N, 1);
    repeat (100) @(negedge clk);
    chk(n_int > nt, "write interrupted by a read (DEV_INT)");
    chk(n_dep > 0 && !dstate[0][3 % N][1], "interrupted DEP write completes");
    // continuous read
    reg_wr(0, R_CTRL, 23'((1 << CTRL_SADC_EN) | (1 << CTRL_DEV_EN) | (1 << CTRL_CONT_READ)));
    repeat (5) @(negedge clk);
    chk(dev_read[0][0] == '1 && dev_read[0][N-1] == '1, "continuous-read mode holds READ");
    if (dev_read[0][0] == '1) m_cont++;
    reg_wr(0, R_CTRL, 23'((1 << CTRL_SADC_EN) | (1 << CTRL_DEV_EN)));

    // ---- on-chip learning: potentiation of synapse (4, 5) of core 0 ----
    reg_wr(0, R_CTRL, 23'((1 << CTRL_SADC_EN) | (1 << CTRL_DEV_EN) | (1 << CTRL_PLAST_EN)));
    st = n_pot;
    v = 0;
    for (int i = 0; i < 40 && !v; i++) begin
      for (int j = 0; j < 5; j++) begin
        spike(0, 4 % N, 5 % P);
        spike(0, 4 % N, P + 0);
      end
      wgt_rd(0, 4 % N, 5 % P, v);
    end
    chk(v, "learning potentiates the weight");
    if (v) m_learn++;
    repeat (60) @(negedge clk);
    chk(n_pot > st && dstate[0][4 % N][5 % P], "learned weight written to the device");
    reg_wr(0, R_CTRL, 23'(1 << CTRL_SADC_EN));

    // ---- weight matrix: program every plastic synapse of both cores, read all back ----
    begin
      int bad; bad = 0;
      for (int c = 0; c < 2; c++)
        for (int n = 0; n < int'(N); n++)
          for (int s = 0; s < int'(P); s++) wgt_wr(c, n, s, wpat(c, n, s));
      for (int c = 0; c < 2; c++)
        for (int n = 0; n < int'(N); n++)
          for (int s = 0; s < int'(P); s++) begin
            wgt_rd(c, n, s, v);
            if (v != wpat(c, n, s)) bad++;
          end
      chk(bad == 0, $sformatf("weight matrix read-back: %0d of %0d wrong", bad, 2 * N * P));
      if (bad == 0) m_matrix++;
    end

    repeat (500) @(negedge clk);
    // ---- mechanism summary ----
    begin
      int s0, s1;
      s0 = 0; s1 = 0;
      for (int a = 0; a < SADC_PER_CORE; a++) begin s0 += n_sadc[a]; s1 += n_sadc[SADC_PER_CORE + a]; end
      $display("mechanisms: reg=%0d dac=%0d wgt=%0d spk0=%0d spk1=%0d pot=%0d dep=%0d read=%0d int=%0d cont=%0d learn=%0d matrix=%0d sadc0=%0d sadc1=%0d backpressure=%0d",
               m_reg, m_dac, m_wgt, m_spk0, m_spk1, n_pot, n_dep, n_read, n_int, m_cont, m_learn, m_matrix, s0, s1, n_bp);
      chk(m_reg > 0, "mechanism: register read-back");
      chk(m_dac > 0, "mechanism: DAC read-back");
      chk(m_wgt > 0, "mechanism: weight read-back");
      chk(m_spk0 > 0 && m_spk1 > 0, "mechanism: spikes from both cores");
      chk(n_pot > 0 && n_dep > 0, "mechanism: device writes");
      chk(n_read > 0, "mechanism: device reads");
      chk(n_int > 0, "mechanism: interrupt");
      chk(m_cont > 0, "mechanism: continuous read");
      chk(m_learn > 0, "mechanism: learning");
      chk(m_matrix > 0, "mechanism: full weight matrix programmed and read back");
      chk(s0 > 0 && s1 > 0, "mechanism: sADC events of both cores");
      chk(n_sadc[M_DAC] > 0 && n_sadc[SADC_PER_CORE + M_DAC] > 0, "sADC I_DAC channels");
      chk(n_bp > 0, "mechanism: output back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
