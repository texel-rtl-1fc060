// aer_rx: four-phase (return-to-zero) address-event receiver.
//
// The chip's periphery is asynchronous and talks to the outside over a bundled-
// data AER bus with a req/ack handshake. This block turns that bus into a clocked
// valid/ready stream: req is synchronised with two flip-flops, the packet is
// captured when the synchronised req rises, offered on out_valid, and ack is
// raised once the stream has taken it. ack falls after req has fallen, which
// completes the four phases. The sender must hold data stable while req is high
// (bundled-data rule). Latency: 3 clock cycles from req to out_valid.
// The handshake protocol follows the chip; the clocked implementation with a
// synchroniser is this design's choice (the chip itself is clockless).
module aer_rx #(
  parameter int unsigned W = 34
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  output logic         ack,
  input  logic [W-1:0] data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  typedef enum logic [1:0] {WAIT_REQ, HOLD, ACKED} st_e;
  st_e  st;
  logic req_s1, req_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_s1 <= 1'b0;
      req_s2 <= 1'b0;
    end else begin
      req_s1 <= req;
      req_s2 <= req_s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= WAIT_REQ;
      ack      <= 1'b0;
      out_data <= '0;
    end else begin
      unique case (st)
        WAIT_REQ: if (req_s2) begin
          out_data <= data;
          st       <= HOLD;
        end
        HOLD: if (out_ready) begin
          ack <= 1'b1;
          st  <= ACKED;
        end
        ACKED: if (!req_s2) begin
          ack <= 1'b0;
          st  <= WAIT_REQ;
        end
        default: st <= WAIT_REQ;
      endcase
    end
  end

  assign out_valid = (st == HOLD);

endmodule
