// tb_aer_rx: drives four-phase packets into aer_rx with a random-ready sink and
// checks packet order/content, the four handshake phases and the req->valid
// latency (3 clocks).
module tb_aer_rx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, ack, out_valid, out_ready;
  logic [33:0] data = '0, out_data;
  int checks = 0, failures = 0;
  logic [33:0] sent [$];

  aer_rx #(.W(34)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sink
  always @(posedge clk) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (out_valid && out_ready) begin
      chk(sent.size() > 0 && out_data == sent[0], "packet content/order");
      if (sent.size() > 0) void'(sent.pop_front());
    end
  end

  initial begin
    int t0, lat;
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      data = {$urandom, $urandom} ;
      sent.push_back(data);
      req = 1;
      t0 = 0;
      // latency req -> valid
      while (!out_valid) begin @(negedge clk); t0++; end
      if (i == 0) chk(t0 == 3, $sformatf("req->valid latency %0d", t0));
      while (!ack) @(posedge clk);
      chk(req == 1, "ack while req high");
      @(negedge clk) req = 0;
      while (ack) @(posedge clk);
      chk(!out_valid, "no valid after ack fell");
    end
    repeat (5) @(posedge clk);
    chk(sent.size() == 0, "all packets delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
