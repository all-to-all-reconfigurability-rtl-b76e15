// energy_unit - on-chip energy of one replica.
//
// Computes  e6 = -sum_i s_i * (6*h_i + 3*sum2_i + 2*sum3_i),
// where sum2_i and sum3_i are the p-bit's own masked 2-body and 3-body weight
// sums (from its synapse). With symmetric weights this equals six times the
// binary-form energy E_b = -(sum_{i<j<k} J3 s_i s_j s_k + sum_{i<j} J2 s_i s_j
// + sum_i h_i s_i): each pair appears twice and each triple three times in the
// per-p-bit sums, so the factors 3 and 2 make the result exact in integers.
// Units are those of the weights (2^-6), which the host writes multiplied by
// beta, so the result is 6*beta*E_b; E_b differs from the bipolar Ising
// energy by a constant of the instance.
//
// Timing: two pipeline stages. Per-p-bit terms are registered on the cycle
// after start, the total on the next; valid pulses with it, two cycles after
// start (about 22 ns at 90 MHz; the published design reports about 56 ns).
// States must be stable from start until valid.
//
// The published design reports only that energy is computed on chip and how
// fast; the formula and pipeline are this design's.
module energy_unit
  import pbit_pkg::*;
#(
  parameter int unsigned N  = 112,
  parameter int unsigned EW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [N-1:0]         s,
  input  weight_t              h    [N],
  input  acc_t                 sum2 [N],
  input  acc_t                 sum3 [N],
  output logic signed [EW-1:0] energy,
  output logic                 valid
);
  typedef logic signed [EW-1:0] e_t;
  e_t   term [N];
  logic stage1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stage1 <= 1'b0;
      valid  <= 1'b0;
      energy <= '0;
      for (int i = 0; i < int'(N); i++) term[i] <= '0;
    end else begin
      stage1 <= start;
      valid  <= stage1;
      if (start)
        for (int i = 0; i < int'(N); i++)
          term[i] <= s[i] ? (e_t'(6) * e_t'(h[i]) + e_t'(3) * e_t'(sum2[i]) + e_t'(2) * e_t'(sum3[i]))
                          : e_t'(0);
      if (stage1) begin
        e_t acc;
        acc = '0;
        for (int i = 0; i < int'(N); i++) acc -= term[i];
        energy <= acc;
      end
    end
  end
endmodule
