// tb_register_block: checks reset values, random writes against a reference
// array, registered read-back with one clock latency, and the parallel view.
module tb_register_block;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [5:0] addr = 0;
  logic [22:0] wr_data = 0, rd_data;
  logic [22:0] regs [64];
  logic [22:0] ref_m [64];
  int checks = 0, failures = 0;

  register_block dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) ref_m[i] = '0;
    ref_m[R_READ_PW] = 23'd4;
    ref_m[R_WRITE_PW] = 23'd8;
    @(negedge clk);
    for (int i = 0; i < 64; i++) chk(regs[i] == ref_m[i], "reset value");
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en = 1'($urandom); rd_en = !wr_en; addr = 6'($urandom); wr_data = 23'($urandom);
      if (rd_en) begin
        @(negedge clk);
        wr_en = 0; rd_en = 0;
        chk(rd_valid && rd_data == ref_m[addr], $sformatf("read word %0d", addr));
      end else begin
        ref_m[addr] = wr_data;
        @(negedge clk);
        wr_en = 0;
        chk(regs[addr] == ref_m[addr], "parallel view after write");
      end
    end
    for (int i = 0; i < 64; i++) chk(regs[i] == ref_m[i], "final contents");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
