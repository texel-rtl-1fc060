// tb_aer_tx: feeds a stream of packets into aer_tx and acts as a four-phase
// receiver with random delays; checks every packet arrives once, in order, with
// data stable while req is high, and that in_ready is low during a handshake.
module tb_aer_tx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, req, ack = 0;
  logic [31:0] in_data = '0, data;
  int checks = 0, failures = 0, got = 0;
  logic [31:0] exp_q [$];

  aer_tx #(.W(32)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // receiver
  initial begin
    logic [31:0] d;
    forever begin
      @(negedge clk);
      if (req) begin
        d = data;
        repeat ($urandom_range(0, 4)) begin
          @(negedge clk);
          chk(data == d, "data stable while req");
          chk(!in_ready, "busy during handshake");
        end
        chk(exp_q.size() > 0 && d == exp_q[0], "order/content");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        got++;
        ack <= 1;
        while (req) @(negedge clk);
        repeat ($urandom_range(0, 3)) @(negedge clk);
        ack <= 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1;
      in_data  = $urandom;
      exp_q.push_back(in_data);
      @(negedge clk) in_valid = 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    while (got < 30) @(posedge clk);
    chk(got == 30, "count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
