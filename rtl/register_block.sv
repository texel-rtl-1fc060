// register_block: the per-core configuration memory, 64 words of 23 bits.
//
// Holds the mode flags, monitor selection, device pulse widths and plastic synapse
// types (word assignment in texel_pkg). One word can be written or read per clock
// (rd_data is registered, valid one clock after rd_en) and every word is also
// visible at once on `regs`, the way the chip's register cells drive the circuits
// they configure. Size follows the chip; the word assignment and reset values
// (zero, except the two device pulse widths) are this design's own.
module register_block
  import texel_pkg::*;
#(
  parameter int unsigned WORDS = REG_WORDS,
  parameter int unsigned WIDTH = REG_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic                       rd_en,
  input  logic [$clog2(WORDS)-1:0]   addr,
  input  logic [WIDTH-1:0]           wr_data,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       rd_valid,
  output logic [WIDTH-1:0]           regs [WORDS]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WORDS; i++) regs[i] <= '0;
      regs[R_READ_PW]  <= WIDTH'(READ_PW_RST);
      regs[R_WRITE_PW] <= WIDTH'(WRITE_PW_RST);
      rd_data  <= '0;
      rd_valid <= 1'b0;
    end else begin
      if (wr_en) regs[addr] <= wr_data;
      rd_valid <= rd_en;
      if (rd_en) rd_data <= regs[addr];
    end
  end

endmodule
