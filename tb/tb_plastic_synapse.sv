// tb_plastic_synapse: checks the learning circuit model every tick against a
// reference recursion written here, under random pre/post spikes and gating, and
// checks the qualitative rule: pre-before-post pairings at high pre trace
// potentiate the synapse to the high state, pre spikes while the post trace is
// high depress it to the low state, nothing changes while learning is blocked
// (Ca2+ outside its window), bistability holds the rails, and every flip of the
// binary weight emits one w_update pulse.
module tb_plastic_synapse;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1, plast_en = 1, learn = 1, post_above = 0, pre = 0, post = 0, prog = 0, prog_val = 0;
  syn_bias_t b;
  cur_t i_pre;
  logic [10:0] vw;
  logic w_bin, w_update, w_new;
  int checks = 0, failures = 0, n_upd = 0, n_flip = 0;

  plastic_synapse #(.K(10)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference
  longint rp, rv;
  bit rpq, rpoq, ref_on = 0, wprev = 0;
  always @(posedge clk) if (ref_on) begin
    longint dv, dk;
    if (prog) rv = prog_val ? 1800 : 0;
    else begin
      dv = 0;
      if (plast_en && learn) begin
        if (rpq && post_above) dv -= b.pre_dep;
        if (rpoq) begin
          dv += (longint'(b.pot_gain) * rp) >> 8;
          if (rp > b.pre_thr_l && rp < b.pre_thr_h) dv -= b.post_dep;
        end
      end
      if (rv > b.bist_thr) dv += b.slew_up; else dv -= b.slew_dn;
      rv = rv + dv; if (rv < 0) rv = 0; if (rv > 1800) rv = 1800;
    end
    dk = (longint'(b.pre_leak) * rp) >>> 10;
    if (dk == 0 && rp != 0 && b.pre_leak != 0) dk = 1;
    rp = rp - dk + (rpq ? b.pre_w : 0); if (rp < 0) rp = 0;
    rpq = pre; rpoq = post;
  end

  always @(negedge clk) if (ref_on) begin
    chk(longint'(vw) == rv && longint'(i_pre) == rp, $sformatf("vw %0d/%0d ipre %0d/%0d", vw, rv, i_pre, rp));
    chk(w_bin == (rv > b.bist_thr), "binary weight");
  end

  always @(posedge clk) if (rst_n) begin
    if (w_update) n_upd++;
    if (w_bin != wprev) n_flip++;
    wprev <= w_bin;
  end

  task automatic pair(input int gap);
    @(negedge clk) pre = 1;
    @(negedge clk) pre = 0;
    repeat (gap) @(negedge clk);
    post = 1;
    @(negedge clk) post = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    b = '0;
    b.pre_w = 1000; b.pre_leak = 20; b.pre_thr_l = 200; b.pre_thr_h = 600;
    b.pot_gain = 64; b.pre_dep = 120; b.post_dep = 50;
    b.slew_up = 1; b.slew_dn = 1; b.bist_thr = 900;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    rp = 0; rv = 0; rpq = 0; rpoq = 0;
    @(posedge clk); #1 ref_on = 1;
    repeat (20) @(negedge clk);
    chk(vw == 0 && !w_bin, "rests low");
    // potentiation by close pre->post pairs
    for (int i = 0; i < 6; i++) pair(1);
    chk(w_bin, "pre-post pairing potentiates to high");
    repeat (1500) @(negedge clk);
    chk(vw == 1800, "bistability drives to the high rail");
    // depression by pre spikes while the post trace is high
    post_above = 1;
    for (int i = 0; i < 12; i++) begin
      @(negedge clk) pre = 1; @(negedge clk) pre = 0; repeat (3) @(negedge clk);
    end
    post_above = 0;
    chk(!w_bin, "pre spikes with post trace above threshold depress");
    repeat (1500) @(negedge clk);
    chk(vw == 0, "bistability drives to the low rail");
    // stop-learning: nothing changes while learn is low
    learn = 0;
    for (int i = 0; i < 6; i++) pair(1);
    chk(vw == 0, "no potentiation outside the Ca2+ window");
    learn = 1;
    // programming
    @(negedge clk) begin prog = 1; prog_val = 1; end
    @(negedge clk) prog = 0;
    chk(vw == 1800 && w_bin, "program high");
    // random activity
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      pre  = ($urandom_range(0, 15) == 0);
      post = ($urandom_range(0, 15) == 0);
      post_above = ($urandom_range(0, 3) == 0);
      learn = ($urandom_range(0, 7) != 0);
      plast_en = ($urandom_range(0, 15) != 0);
    end
    pre = 0; post = 0;
    repeat (3) @(negedge clk);
    chk(n_upd == n_flip && n_flip > 2, $sformatf("one update pulse per flip (%0d/%0d)", n_upd, n_flip));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
