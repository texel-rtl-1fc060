// tb_aer_demux: random packets through aer_demux; checks the routing of every
// opcode/core combination, the forwarded fields and the ready back-pressure.
module tb_aer_demux;
  import texel_pkg::*;
  in_pkt_t in_pkt;
  logic in_valid, in_ready;
  logic [1:0] spk_valid, spk_ready, cfg_valid, cfg_ready;
  logic [6:0] spk_neuron;
  logic [5:0] spk_synapse;
  cfg_cmd_t cfg_cmd;
  int checks = 0, failures = 0;

  aer_demux #(.NUM_CORES_P(2)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      in_pkt.op      = op_e'($urandom_range(0, 7));
      in_pkt.core    = 1'($urandom);
      in_pkt.payload = 30'($urandom);
      in_valid       = 1'($urandom);
      spk_ready      = 2'($urandom);
      cfg_ready      = 2'($urandom);
      #1;
      if (in_pkt.op == OP_SPIKE) begin
        chk(spk_valid == (in_valid ? (2'b01 << in_pkt.core) : 2'b00), "spike routed");
        chk(cfg_valid == 2'b00, "no cfg on spike");
        chk(in_ready == spk_ready[in_pkt.core], "spike ready");
        chk(spk_neuron == in_pkt.payload[12:6] && spk_synapse == in_pkt.payload[5:0], "fields");
      end else if (in_pkt.op == OP_NOP) begin
        chk(spk_valid == 0 && cfg_valid == 0 && in_ready, "nop dropped");
      end else begin
        chk(cfg_valid == (in_valid ? (2'b01 << in_pkt.core) : 2'b00), "cfg routed");
        chk(spk_valid == 2'b00, "no spike on cfg");
        chk(in_ready == cfg_ready[in_pkt.core], "cfg ready");
        chk(cfg_cmd.op == in_pkt.op && cfg_cmd.payload == in_pkt.payload, "cfg fields");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
