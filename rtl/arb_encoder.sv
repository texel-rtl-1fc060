// arb_encoder: round-robin arbiter and address encoder for a set of
// address-event request lines.
//
// Used twice: to turn the spikes of a core's 90 neurons into neuron addresses on
// the output AER bus, and to turn the 24 sADC requests into the 5-bit sADC bus.
// Each source holds req high until it sees its grant. Whenever at least one req is
// high, out_valid is high with out_addr = the first requester at or after the
// round-robin pointer; when the stream takes it (out_ready), that source gets a
// one-clock grant and the pointer moves past it, so no source can starve another.
// One address per clock at most. Encoding follows the chip's AER encoders; the
// round-robin arbitration is this design's choice.
module arb_encoder #(
  parameter int unsigned N  = 90,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  output logic [N-1:0]  grant,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [AW-1:0] out_addr
);
  logic [AW-1:0] ptr;
  logic          found;
  int unsigned   idx, win;

  always_comb begin
    found = 1'b0;
    win   = 0;
    for (int unsigned k = 0; k < N; k++) begin
      idx = int'(ptr) + k;
      if (idx >= N) idx = idx - N;
      if (!found && req[idx]) begin
        found = 1'b1;
        win   = idx;
      end
    end
    out_valid = found;
    out_addr  = AW'(win);
  end

  always_comb begin
    grant = '0;
    if (found && out_ready) grant[win] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (found && out_ready) ptr <= (win + 1 >= N) ? '0 : AW'(win + 1);
  end

endmodule
