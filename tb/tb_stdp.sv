// tb_stdp: the learning-circuit experiments, on one plastic synapse and its
// neuron's learning traces (plastic_synapse + post_traces), with the post spikes
// imposed directly as in a characterisation set-up.
//  1. STDP curve: for pre-post delays dt = t_pre - t_post from -60 to +60 ticks,
//     program V_w to a rail (0 for dt <= 0, full scale for dt > 0), disable the
//     bistability drift, apply 5 pairings and record dw. Expected: potentiation
//     for pre-before-post (dt < 0) decaying with |dt|; depression for
//     post-before-pre (dt > 0) while the post trace is above threshold, none at
//     long delays.
//  2. Configurable curve: with the post-spike depression enabled for a middle
//     band of pre-trace values, some pre-before-post delays become depressive
//     (measured from full scale, where potentiation saturates).
//  3. SRDP: Poisson pre and post trains at low and high rates with bistability on,
//     repeated trials from the low state; the fraction of trials ending high
//     must be larger for high pre/post rates than for low ones.
module tb_stdp;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1, pre = 0, post = 0, prog = 0, prog_val = 0, plast_en = 1;
  syn_bias_t sb;
  trace_bias_t tb_;
  cur_t i_pre, i_post, i_fo, i_so;
  logic [10:0] vw;
  logic w_bin, w_update, w_new, post_above, ca_above, ca_below, learn;
  int checks = 0, failures = 0;

  plastic_synapse #(.K(10)) u_syn (
    .clk, .rst_n, .tick, .b(sb), .plast_en, .learn, .post_above, .pre, .post,
    .prog, .prog_val, .i_pre, .vw, .w_bin, .w_update, .w_new);
  post_traces #(.K(10)) u_tr (
    .clk, .rst_n, .tick, .b(tb_), .post_spike(post), .i_post, .i_fo, .i_so,
    .post_above, .ca_above, .ca_below, .learn);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #400000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic set_w(input bit v);
    @(negedge clk) begin prog = 1; prog_val = v; end
    @(negedge clk) prog = 0;
  endtask

  // one pairing: pre at 0 and post at -dt (dt = t_pre - t_post)
  task automatic pairing(input int dt);
    int tp, tq, t0;
    tp = (dt > 0) ? dt : 0;   // pre time
    tq = (dt > 0) ? 0 : -dt;  // post time
    for (int t = 0; t <= ((tp > tq) ? tp : tq); t++) begin
      @(negedge clk);
      pre = (t == tp); post = (t == tq);
    end
    @(negedge clk) begin pre = 0; post = 0; end
    repeat (300) @(negedge clk);
  endtask

  int dw [int];
  task automatic curve(input bit from_top);
    for (int dt = -60; dt <= 60; dt += 10) begin
      int v0;
      set_w(from_top || dt > 0);
      repeat (400) @(negedge clk);
      v0 = vw;
      for (int k = 0; k < 5; k++) pairing(dt);
      dw[dt] = int'(vw) - v0;
    end
  endtask

  initial begin
    int hi_cnt, lo_cnt;
    sb = '0; tb_ = '0;
    sb.pre_w = 1000; sb.pre_leak = 40; sb.pre_thr_l = 300; sb.pre_thr_h = 700;
    sb.pot_gain = 20; sb.pre_dep = 30; sb.post_dep = 0;
    sb.slew_up = 0; sb.slew_dn = 0; sb.bist_thr = 900;
    tb_.post_w = 1000; tb_.post_leak = 40; tb_.post_thr = 300;
    tb_.ca_w = 200; tb_.ca_leak1 = 10; tb_.ca_leak2 = 20;
    tb_.ca_thr_l = 0; tb_.ca_thr_h = 32'hFFFF_FFFF;
    repeat (3) @(negedge clk); rst_n = 1;
    // ---- 1. STDP curve ----
    curve(0);
    foreach (dw[dt]) $display("STDP dt=%0d dw=%0d", dt, dw[dt]);
    for (int dt = -60; dt < 0; dt += 10) chk(dw[dt] > 0, $sformatf("potentiation at dt=%0d", dt));
    for (int dt = -60; dt < -10; dt += 10) chk(dw[dt] < dw[dt + 10], $sformatf("potentiation decays with |dt| at %0d", dt));
    for (int dt = 10; dt <= 30; dt += 10) chk(dw[dt] < 0, $sformatf("depression at dt=%0d", dt));
    chk(dw[60] == 0, "no depression once the post trace has decayed");
    // ---- 2. depressive region for pre-before-post pairings ----
    // (weights start at full scale so that depression is visible for every dt)
    sb.post_dep = 400;
    curve(1);
    foreach (dw[dt]) $display("STDP(post_dep) dt=%0d dw=%0d", dt, dw[dt]);
    begin
      bit any_dep; any_dep = 0;
      for (int dt = -60; dt < 0; dt += 10) if (dw[dt] < 0) any_dep = 1;
      chk(any_dep, "post_dep makes some pre-before-post delays depressive");
      chk(dw[-10] == 0, "short pre-before-post delay not depressed (pre trace above its window)");
      chk(dw[-60] == 0, "long pre-before-post delay not depressed (pre trace below its window)");
    end
    sb.post_dep = 0;
    // ---- 3. SRDP ----
    sb.slew_up = 2; sb.slew_dn = 2;
    tb_.ca_thr_l = 150;
    for (int cond = 0; cond < 2; cond++) begin
      int n_hi, rate;
      n_hi = 0;
      rate = cond ? 8 : 300;  // mean inter-spike interval in ticks
      for (int trial = 0; trial < 10; trial++) begin
        set_w(0);
        repeat (2000) begin
          @(negedge clk);
          pre  = ($urandom_range(0, rate - 1) == 0);
          post = ($urandom_range(0, rate - 1) == 0);
        end
        @(negedge clk) begin pre = 0; post = 0; end
        repeat (1500) @(negedge clk);
        if (w_bin) n_hi++;
      end
      $display("SRDP interval=%0d high fraction %0d/10", rate, n_hi);
      if (cond) hi_cnt = n_hi; else lo_cnt = n_hi;
    end
    chk(hi_cnt > lo_cnt, $sformatf("SRDP: high rates favour the high state (%0d vs %0d of 10)", hi_cnt, lo_cnt));
    chk(lo_cnt <= 2, "SRDP: low rates leave the weight low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
