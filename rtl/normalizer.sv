// normalizer: behavioural model of the differential normalizer that reads a
// synapse's pair of memristive devices.
//
// While read is high the currents sourced through the positive and negative
// devices are compared; the output
//   I_norm = norm_bias * (I_pos - I_neg) / (I_pos + I_neg)   if I_pos > I_neg
//   I_norm = 0                                               otherwise
// is a rectified, normalised difference scaled by the norm_bias current, so a
// stored high weight (R_pos < R_neg) gives a current near norm_bias when the on/off
// ratio is large, and a low weight gives none. The rectification and the scaling
// by norm_bias follow the chip; the exact normalised-difference form is this
// design's reading of "proportional to the normalized discrepancy". Combinational;
// currents in pA.
module normalizer
  import texel_pkg::*;
(
  input  logic read,
  input  cur_t i_pos,
  input  cur_t i_neg,
  input  cur_t norm_bias,
  output cur_t i_norm
);
  logic [32:0] sum;
  logic [63:0] num;

  always_comb begin
    sum = {1'b0, i_pos} + {1'b0, i_neg};
    num = 64'(norm_bias) * 64'(i_pos - i_neg);
    if (read && (i_pos > i_neg) && (sum != 0)) i_norm = cur_t'(num / 64'(sum));
    else                                       i_norm = '0;
  end

endmodule
