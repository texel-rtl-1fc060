// dac_bank: behavioural model of one core's 94-channel, 12-bit bias DAC,
// including its digital configuration storage.
//
// Each channel stores a 12-bit code: bits [10:8] pick one of six master currents
// (2.2 uA, 0.29 uA, 36 nA, 4.5 nA, 0.57 nA, 70 pA), bits [7:0] divide it in 256
// steps, and bit [11] selects whether the channel is sourced by an nFET or a pFET.
// The six master currents, the 8-bit fine division and the polarity selection are
// the chip's; the bit order within the code is this design's choice. The output is
// the ideal current master*fine/256 in integer pA (the analog divider on the chip
// is not perfectly monotonic; the model is). Select values 6 and 7 give 0.
// Interface: one channel written per clock (wr_en), read back one clock after
// rd_en; all channel currents are continuously available on i_out.
module dac_bank
  import texel_pkg::*;
#(
  parameter int unsigned CH = DAC_CH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic              rd_en,
  input  logic [CH_W-1:0]   ch,
  input  logic [DAC_W-1:0]  wr_code,
  output logic [DAC_W-1:0]  rd_code,
  output logic              rd_valid,
  output cur_t              i_out [CH],
  output logic [CH-1:0]     pfet
);
  logic [DAC_W-1:0] code [CH];

  function automatic cur_t master(logic [2:0] sel);
    unique case (sel)
      3'd0:    return 32'd2_200_000;
      3'd1:    return 32'd290_000;
      3'd2:    return 32'd36_000;
      3'd3:    return 32'd4_500;
      3'd4:    return 32'd570;
      3'd5:    return 32'd70;
      default: return 32'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CH; i++) code[i] <= '0;
      rd_code  <= '0;
      rd_valid <= 1'b0;
    end else begin
      if (wr_en && (int'(ch) < CH)) code[ch] <= wr_code;
      rd_valid <= rd_en;
      if (rd_en) rd_code <= (int'(ch) < CH) ? code[ch] : '0;
    end
  end

  always_comb begin
    for (int i = 0; i < CH; i++) begin
      i_out[i] = cur_t'((64'(master(code[i][10:8])) * 64'(code[i][7:0])) >> 8);
      pfet[i]  = code[i][11];
    end
  end

endmodule
