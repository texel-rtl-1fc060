// tb_soma: checks the AdExp-I&F model tick by tick against a reference recursion
// written here (membrane, exponential feedback, threshold, refractory, adaptation),
// then checks the behaviour the chip's neuron is measured for: the firing rate
// rises with the DC input, the adaptation current makes the inter-spike interval
// grow after a step onset, and the refractory period lasts Q_REFR/refr ticks.
module tb_soma;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1;
  soma_bias_t b;
  cur_t i_exc = 0, i_inh = 0, i_mem, i_ahp;
  logic spike, refractory;
  int checks = 0, failures = 0;

  soma #(.K(10), .Q_REFR(65536)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference model
  longint rm, ra, rq;
  bit     rr, rs;
  task automatic ref_step;
    longint net, fb, dm, nx, dec;
    dec = (longint'(b.ahp_leak) * ra) >>> 10;
    if (dec == 0 && ra != 0 && b.ahp_leak != 0) dec = 1;
    rs = 0;
    if (rr) begin
      rm = 0; rq = rq + b.refr;
      if (rq >= 65536) rr = 0;
      ra = ra - dec; if (ra < 0) ra = 0;
    end else begin
      net = longint'(b.dc) + i_exc - i_inh - ra; if (net < 0) net = 0;
      fb  = (b.spk_thr == 0) ? 0 : ((longint'(b.expg) * ((rm * rm) / b.spk_thr)) >>> 10);
      dm  = ((longint'(b.gain) * net) >>> 10) - ((longint'(b.leak) * rm) >>> 10) + fb;
      nx  = rm + dm; if (nx < 0) nx = 0;
      if (b.spk_thr != 0 && nx >= b.spk_thr) begin
        rs = 1; rm = 0; rr = 1; rq = 0; ra = ra + b.ahp_w;
      end else begin
        rm = nx; ra = ra - dec; if (ra < 0) ra = 0;
      end
    end
  endtask

  initial begin
    int nsp, nsp_lo, nsp_hi, last, isi_first, isi_last, nref;
    b = '0;
    b.leak = 64; b.gain = 256; b.spk_thr = 5000; b.refr = 2048; b.expg = 100;
    b.ahp_w = 0; b.ahp_leak = 4; b.dc = 800;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    rm = 0; ra = 0; rq = 0; rr = 0;
    nsp = 0;
    for (int t = 0; t < 3000; t++) begin
      @(posedge clk); ref_step();
      @(negedge clk);
      chk(spike == rs && longint'(i_mem) == rm && longint'(i_ahp) == ra,
          $sformatf("t=%0d spike %0d/%0d mem %0d/%0d ahp %0d/%0d", t, spike, rs, i_mem, rm, i_ahp, ra));
      if (spike) nsp++;
      if (failures > 5) break;
    end
    chk(nsp > 5, $sformatf("neuron fires with DC input (%0d spikes)", nsp));
    // refractory length: ~65536/2048 = 32 ticks of zero membrane
    while (!spike) @(negedge clk);
    nref = 0;
    @(negedge clk);
    while (refractory) begin nref++; @(negedge clk); end
    chk(nref + 1 == 32, $sformatf("refractory ticks %0d", nref + 1));  // incl. the spike tick
    // f-I: more DC, more spikes
    nsp_lo = nsp;
    b.dc = 2000;
    nsp_hi = 0;
    for (int t = 0; t < 3000; t++) begin @(negedge clk); if (spike) nsp_hi++; end
    chk(nsp_hi > nsp_lo, $sformatf("rate rises with DC: %0d -> %0d", nsp_lo, nsp_hi));
    // adaptation: ISI lengthens after step onset
    b.dc = 0; b.ahp_w = 400;
    repeat (3000) @(negedge clk);
    b.dc = 2000;
    last = -1; isi_first = 0; isi_last = 0; nsp = 0;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (spike) begin
        if (last >= 0) begin
          if (isi_first == 0) isi_first = t - last;
          isi_last = t - last;
        end
        last = t; nsp++;
      end
    end
    chk(nsp > 3 && isi_last > isi_first, $sformatf("adaptation: first ISI %0d last ISI %0d", isi_first, isi_last));
    chk(i_ahp > 0, "adaptation current builds up");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
