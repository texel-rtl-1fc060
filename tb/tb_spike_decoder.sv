// tb_spike_decoder: sends spike addresses (some out of range) and checks that
// exactly the addressed synapse pulses, for one clock, one clock later, and that
// out-of-range addresses are counted and produce no pulse.
module tb_spike_decoder;
  localparam int NRN = 6, NSYN = 58;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid = 0, ready;
  logic [6:0] neuron = 0;
  logic [5:0] synapse = 0;
  logic [NSYN-1:0] pre_spike [NRN];
  logic [15:0] n_dropped;
  int checks = 0, failures = 0, drops = 0;

  spike_decoder #(.NRN(NRN), .NSYN(NSYN)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n, s, cnt;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      n = $urandom_range(0, NRN);       // NRN itself is out of range
      s = $urandom_range(0, NSYN + 2);
      @(negedge clk);
      valid = 1; neuron = 7'(n); synapse = 6'(s);
      chk(ready, "always ready");
      @(negedge clk);
      valid = 0;
      cnt = 0;
      for (int a = 0; a < NRN; a++)
        for (int b = 0; b < NSYN; b++)
          if (pre_spike[a][b]) begin
            cnt++;
            chk(a == n && b == s, "right synapse");
          end
      if (n < NRN && s < NSYN) chk(cnt == 1, "one pulse");
      else begin
        chk(cnt == 0, "no pulse out of range");
        drops++;
      end
      @(negedge clk);
      cnt = 0;
      for (int a = 0; a < NRN; a++) if (pre_spike[a] != 0) cnt++;
      chk(cnt == 0, "pulse lasts one clock");
    end
    chk(int'(n_dropped) == drops, "drop counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
