// tb_arb_encoder: sources raise requests at random and hold them until granted;
// checks every grant matches out_addr, grants are one-hot, each request is served
// exactly once, and round-robin fairness (with all requesting, N grants cover all).
module tb_arb_encoder;
  localparam int N = 24, AW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req = '0, grant;
  logic out_valid, out_ready = 0;
  logic [AW-1:0] out_addr;
  int checks = 0, failures = 0, raised = 0, served = 0;

  arb_encoder #(.N(N), .AW(AW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [N-1:0] seen;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      out_ready = 1'($urandom);
      #1;
      chk(out_valid == (req != 0), "valid iff some request");
      if (grant != 0) begin
        chk($onehot(grant), "one-hot grant");
        chk(grant[out_addr] && req[out_addr], "grant matches address");
      end
      chk((grant != 0) == (out_valid && out_ready), "grant on handshake");
      @(posedge clk);
      req = req & ~grant;
      served += $countones(grant);
      for (int i = 0; i < N; i++)
        if (!req[i] && ($urandom_range(0, 9) == 0)) begin req[i] = 1; raised++; end
    end
    @(negedge clk); out_ready = 1;
    while (req != 0) begin
      @(posedge clk); req = req & ~grant; served += $countones(grant);
    end
    chk(served == raised, $sformatf("served %0d raised %0d", served, raised));
    // fairness
    @(negedge clk); req = '1; seen = '0;
    for (int i = 0; i < N; i++) begin
      #1; seen |= grant;
      @(posedge clk); #1;
    end
    chk(seen == '1, "round robin serves all in N cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
