// tb_dpi_filter: checks the DPI model against a reference Euler recursion
// computed here: step response (settles to gain*I_in/leak), decay to zero with
// the input removed, and jump inputs.
module tb_dpi_filter;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick = 1, jump = 0;
  cur_t i_in = 0, gain = 0, leak = 0, jump_amp = 0, i_out;
  int checks = 0, failures = 0;

  dpi_filter #(.K(10)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint r, d, dk;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    gain = 64; leak = 32; i_in = 1000;
    r = 0;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      d  = (longint'(gain) * longint'(i_in)) >>> 10;
      dk = (longint'(leak) * r) >>> 10;
      if (dk == 0 && r != 0) dk = 1;
      r = r + d - dk;
      if (r < 0) r = 0;
      chk(longint'(i_out) == r, $sformatf("step t=%0d dut=%0d ref=%0d", t, i_out, r));
    end
    chk(i_out > 1900 && i_out <= 2000, "settles near gain*I_in/leak = 2000");
    i_in = 0;
    repeat (2000) @(negedge clk);
    chk(i_out == 0, "decays to zero");
    // jumps accumulate
    @(negedge clk); jump = 1; jump_amp = 500; leak = 0;
    @(negedge clk); jump = 0;
    chk(i_out == 500, "jump adds amplitude");
    tick = 0; jump = 1;
    @(negedge clk); jump = 0;
    chk(i_out == 500, "no update without tick");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
