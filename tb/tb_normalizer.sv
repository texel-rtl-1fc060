// tb_normalizer: sweeps the device current ratio and checks rectification
// (zero unless I_pos > I_neg), the normalised-difference value, scaling by
// norm_bias, and zero output outside a read.
module tb_normalizer;
  import texel_pkg::*;
  logic read;
  cur_t i_pos, i_neg, norm_bias, i_norm;
  int checks = 0, failures = 0;

  normalizer dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    longint e;
    norm_bias = 200000;   // 200 nA
    read = 1;
    // high weight with on/off ratio 100: close to norm_bias
    i_pos = 1000; i_neg = 10; #1;
    chk(i_norm == 196039, "ratio 100 gives 98% of norm_bias");
    i_pos = 10; i_neg = 1000; #1;
    chk(i_norm == 0, "low weight gives no current");
    i_pos = 500; i_neg = 500; #1;
    chk(i_norm == 0, "equal devices give no current");
    for (int i = 0; i < 300; i++) begin
      i_pos = $urandom_range(0, 100000);
      i_neg = $urandom_range(0, 100000);
      norm_bias = $urandom_range(0, 2200000);
      read = ($urandom_range(0, 4) != 0);
      #1;
      if (read && i_pos > i_neg) e = (longint'(norm_bias) * longint'(i_pos - i_neg)) / (longint'(i_pos) + longint'(i_neg));
      else e = 0;
      chk(longint'(i_norm) == e, $sformatf("random %0d %0d", i_pos, i_neg));
      chk(i_norm <= norm_bias, "never above norm_bias");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
