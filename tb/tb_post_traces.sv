// tb_post_traces: drives postsynaptic spike trains at a low, a medium and a high
// rate and checks the post trace and the two Ca2+ stages against a reference
// recursion written here, and the flags: post_above right after a spike, the Ca2+
// window (learn) closed at low rate (ca_below), open at medium rate and closed
// again at high rate (ca_above).
module tb_post_traces;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1, post_spike = 0;
  trace_bias_t b;
  cur_t i_post, i_fo, i_so;
  logic post_above, ca_above, ca_below, learn;
  int checks = 0, failures = 0;

  post_traces #(.K(10)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  longint rpost, rfo, rso;
  bit rq, ref_on = 0;
  function automatic longint dpi(longint x, longint inp, longint g, longint l, bit j, longint amp);
    longint d, k, n;
    d = (g * inp) >>> 10;
    k = (l * x) >>> 10;
    if (k == 0 && x != 0 && l != 0) k = 1;
    n = x + d - k + (j ? amp : 0);
    return (n < 0) ? 0 : n;
  endfunction
  always @(posedge clk) if (ref_on) begin
    longint fo_old;
    fo_old = rfo;
    rpost = dpi(rpost, 0, 0, b.post_leak, rq, b.post_w);
    rfo   = dpi(rfo, 0, 0, b.ca_leak1, rq, b.ca_w);
    rso   = dpi(rso, fo_old, b.ca_leak2, b.ca_leak2, 0, 0);
    rq = post_spike;
  end
  always @(negedge clk) if (ref_on)
    chk(longint'(i_post) == rpost && longint'(i_fo) == rfo && longint'(i_so) == rso,
        $sformatf("traces %0d/%0d %0d/%0d %0d/%0d", i_post, rpost, i_fo, rfo, i_so, rso));

  task automatic train(input int period, input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk) post_spike = 1;
      @(negedge clk) post_spike = 0;
      repeat (period - 2) @(negedge clk);
    end
  endtask

  initial begin
    int open_cnt;
    b = '0;
    b.post_w = 1000; b.post_leak = 50; b.post_thr = 300;
    b.ca_w = 200; b.ca_leak1 = 10; b.ca_leak2 = 20; b.ca_thr_l = 100; b.ca_thr_h = 600;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    rpost = 0; rfo = 0; rso = 0; rq = 0;
    @(posedge clk); #1 ref_on = 1;
    @(negedge clk);
    chk(ca_below && !learn, "silent neuron: Ca2+ below window");
    @(negedge clk) post_spike = 1;
    @(negedge clk) post_spike = 0;
    @(negedge clk);
    chk(post_above, "post trace above threshold after a spike");
    repeat (300) @(negedge clk);
    chk(!post_above, "post trace decays");
    train(400, 10);
    chk(ca_below, "low rate: below window");
    train(100, 40);
    chk(learn && !ca_above && !ca_below, $sformatf("medium rate: inside window (so=%0d)", i_so));
    train(20, 120);
    chk(ca_above && !learn, $sformatf("high rate: above window (so=%0d)", i_so));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
