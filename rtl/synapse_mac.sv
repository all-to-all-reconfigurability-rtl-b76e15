// synapse_mac - multiply-free local field of one p-bit, 2-body and 3-body.
//
// Computes I' = h + sum_k (s_j[k] ? J2[k] : 0) + sum_p ((s_a[p] & s_b[p]) ? J3[p] : 0).
// Because p-bit states are binary (0/1), each 2-body term is a two-input
// multiplexer choosing 0 or the weight, and each 3-body term is the same
// multiplexer selected by the AND of the two neighbour spins. The partial sums
// of the 2-body and 3-body terms are also output for the energy unit.
// Purely combinational.
//
// This follows the published higher-order p-bit: one weight multiplexer as in
// the 2-body design and one controlled by two neighbouring spins through an AND
// gate. The slot counts K2 and K3 are parameters (defaults from the 3-regular
// XORSAT structure: 9 2-body neighbours, 3 clause pairs per spin).
module synapse_mac
  import pbit_pkg::*;
#(
  parameter int unsigned K2 = 9,
  parameter int unsigned K3 = 3
) (
  input  weight_t          j2 [K2],
  input  logic [K2-1:0]    s_j,
  input  weight_t          j3 [K3],
  input  logic [K3-1:0]    s_a,
  input  logic [K3-1:0]    s_b,
  input  weight_t          h,
  output acc_t             sum2,
  output acc_t             sum3,
  output acc_t             field
);
  always_comb begin
    sum2 = '0;
    for (int k = 0; k < int'(K2); k++)
      sum2 += s_j[k] ? acc_t'(j2[k]) : acc_t'(0);
    sum3 = '0;
    for (int p = 0; p < int'(K3); p++)
      sum3 += (s_a[p] & s_b[p]) ? acc_t'(j3[p]) : acc_t'(0);
    field = sum2 + sum3 + acc_t'(h);
  end
endmodule
