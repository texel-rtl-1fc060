// aer_tx: four-phase (return-to-zero) address-event sender.
//
// Takes one packet from a clocked valid/ready stream, drives it on data, raises
// req, waits for the (synchronised) ack, drops req and waits for ack to fall
// before taking the next packet. data is held stable while req is high. Used for
// the output spike/read-back bus and for the 5-bit sADC bus. Throughput is bounded
// by the receiver: one packet per full handshake, at least 6 clock cycles.
// The four-phase protocol follows the chip; the synchronised clocked form is this
// design's choice.
module aer_tx #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         req,
  input  logic         ack,
  output logic [W-1:0] data
);
  typedef enum logic [1:0] {IDLE, REQ_HI, REQ_LO} st_e;
  st_e  st;
  logic ack_s1, ack_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_s1 <= 1'b0;
      ack_s2 <= 1'b0;
    end else begin
      ack_s1 <= ack;
      ack_s2 <= ack_s1;
    end
  end

  assign in_ready = (st == IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= IDLE;
      req  <= 1'b0;
      data <= '0;
    end else begin
      unique case (st)
        IDLE: if (in_valid) begin
          data <= in_data;
          req  <= 1'b1;
          st   <= REQ_HI;
        end
        REQ_HI: if (ack_s2) begin
          req <= 1'b0;
          st  <= REQ_LO;
        end
        REQ_LO: if (!ack_s2) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

  // Bundled-data rule: data must not change while req is high.
  assert property (@(posedge clk) disable iff (!rst_n) (req && $past(req)) |-> $stable(data));

endmodule
