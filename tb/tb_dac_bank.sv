// tb_dac_bank: programs random codes into all 94 channels and checks each
// channel's current against master*fine/256 computed here from the six master
// currents, the polarity bit, read-back and out-of-range channel writes.
module tb_dac_bank;
  import texel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, rd_valid;
  logic [6:0] ch = 0;
  logic [11:0] wr_code = 0, rd_code;
  cur_t i_out [94];
  logic [93:0] pfet;
  logic [11:0] ref_c [94];
  int checks = 0, failures = 0;
  longint unsigned masters [8] = '{2200000, 290000, 36000, 4500, 570, 70, 0, 0};

  dac_bank dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint unsigned e;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 94; i++) begin
      @(negedge clk);
      wr_en = 1; ch = 7'(i); wr_code = 12'($urandom);
      if (i == 0) wr_code = 12'h0FF;     // full-scale 2.2 uA
      if (i == 1) wr_code = 12'hD80;     // 70 pA / 2 on the pFET side
      ref_c[i] = wr_code;
    end
    @(negedge clk);
    wr_en = 1; ch = 7'd120; wr_code = 12'hFFF;  // out of range, ignored
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 94; i++) begin
      e = (masters[ref_c[i][10:8]] * longint'(ref_c[i][7:0])) >> 8;
      chk(longint'(i_out[i]) == e, $sformatf("ch %0d current %0d exp %0d", i, i_out[i], e));
      chk(pfet[i] == ref_c[i][11], "polarity");
    end
    chk(i_out[0] == 32'd2191406, "full-scale channel");
    chk(i_out[1] == 32'd35 && pfet[1], "smallest master");
    for (int i = 0; i < 94; i += 7) begin
      @(negedge clk);
      rd_en = 1; ch = 7'(i);
      @(negedge clk);
      rd_en = 0;
      chk(rd_valid && rd_code == ref_c[i], "read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
