// tb_sadc: closes the sADC handshake with an acknowledging receiver and measures
// the interval between output spikes for a sweep of input currents. Each interval
// must equal 1 (ack) + ceil(Q_REFR/pwlk) (refractory) + ceil(thr/I) (integration)
// clock ticks, so the rate rises monotonically with the current. Also checks that
// EN=0 integrates off_bias instead of the input, that reset discharges C_mem and
// that a zero threshold (unconfigured) produces no events.
module tb_sadc;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1, en = 1, reset = 0, ack = 0, req;
  cur_t i_in, off_bias, thr, pwlk;
  int checks = 0, failures = 0;
  localparam int QR = 4096;

  sadc #(.Q_REFR(QR)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Acknowledging receiver: acks one cycle after req, counts events.
  int n_ev = 0; longint last_t = -1, intv = -1, cyc = 0;
  bit auto_ack = 1;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (req && !ack && auto_ack) begin
      if (last_t >= 0) intv = cyc - last_t;
      last_t = cyc; n_ev++;
      ack = 1;
    end else ack = 0;
  end

  function automatic longint cdiv(longint a, longint b);
    return (a + b - 1) / b;
  endfunction

  task automatic measure(input cur_t cur, output longint iv);
    i_in = cur; last_t = -1; intv = -1;
    wait (intv >= 0); intv = -1; wait (intv >= 0);
    iv = intv;
  endtask

  initial begin
    longint iv, prev_iv;
    thr = 20000; pwlk = 512; off_bias = 10; i_in = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    prev_iv = 1 << 30;
    for (int k = 0; k < 12; k++) begin
      cur_t c;
      c = 100 + k * k * 400;
      measure(c, iv);
      chk(iv == 1 + cdiv(QR, pwlk) + cdiv(thr, c),
          $sformatf("I=%0d interval %0d expected %0d", c, iv, 1 + cdiv(QR, pwlk) + cdiv(thr, c)));
      chk(iv <= prev_iv, "rate monotonic in current");
      prev_iv = iv;
    end
    // Refractory set by pwlk
    pwlk = 64;
    measure(5000, iv);
    chk(iv == 1 + cdiv(QR, 64) + cdiv(thr, 5000), $sformatf("refractory via pwlk: %0d", iv));
    pwlk = 512;
    // EN = 0: off_bias integrates, input ignored
    en = 0; off_bias = 2000;
    measure(100000, iv);
    chk(iv == 1 + cdiv(QR, pwlk) + cdiv(thr, 2000), $sformatf("EN=0 uses off_bias: %0d", iv));
    en = 1;
    // Reset discharges C_mem: with reset held no events appear
    auto_ack = 0;
    @(negedge clk); reset = 1; i_in = 1000;
    begin
      int e0; e0 = n_ev;
      repeat (200) begin @(negedge clk); chk(!req, "no req while reset"); end
    end
    reset = 0; auto_ack = 1;
    // zero threshold: no events
    thr = 0; @(negedge clk);
    begin
      int e0; e0 = n_ev;
      repeat (500) @(negedge clk);
      chk(n_ev == e0, "thr=0 gives no events");
    end
    // tick gating: no progress without tick
    thr = 20000; tick = 0;
    begin
      int e0; e0 = n_ev;
      repeat (500) @(negedge clk);
      chk(n_ev == e0, "no events without tick");
    end
    tick = 1;
    measure(20000, iv);
    chk(iv == 1 + cdiv(QR, pwlk) + 1, $sformatf("resumes with tick: %0d", iv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
