// sadc: behavioural model of the spiking analog-to-digital converter used to
// monitor on-chip currents.
//
// The monitored current (EN=1) or the fixed off_bias current (EN=0) charges the
// integrating capacitor C_mem of an op-amp integrator. When the integrated charge
// passes the comparator level (ref_l plus the hysteresis) the comparator flips and
// the handshake block raises req. The acknowledge (or reset) discharges C_mem and
// starts the refractory period: C_refr is charged by the pwlk current and C_mem
// stays shorted until it is full. The output spike rate is therefore a monotonic
// function of the input current. Model per tick: q += I (not while req or
// refractory); req when q >= thr; on ack: q = 0 and r accumulates pwlk until
// Q_REFR. thr stands for ref_l + V_hys as a charge level in pA*ticks. The
// behaviour follows the chip's schematic; the charge-domain discretisation is
// this design's.
module sadc
  import texel_pkg::*;
#(
  parameter int unsigned Q_REFR = 4096
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tick,
  input  logic en,
  input  cur_t i_in,
  input  cur_t off_bias,
  input  cur_t thr,
  input  cur_t pwlk,
  input  logic reset,
  output logic req,
  input  logic ack
);
  cur_t q, r;
  logic refr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q    <= '0;
      r    <= '0;
      req  <= 1'b0;
      refr <= 1'b0;
    end else if (ack || reset) begin
      q    <= '0;
      r    <= '0;
      req  <= 1'b0;
      refr <= 1'b1;
    end else if (tick) begin
      if (refr) begin
        r <= sat_add(r, pwlk);
        if (sat_add(r, pwlk) >= Q_REFR) refr <= 1'b0;
      end else if (!req) begin
        q <= sat_add(q, en ? i_in : off_bias);
        if ((thr != 0) && (sat_add(q, en ? i_in : off_bias) >= thr)) req <= 1'b1;
      end
    end
  end

endmodule
