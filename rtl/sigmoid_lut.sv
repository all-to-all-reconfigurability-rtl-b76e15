// sigmoid_lut - activation table of a p-bit (the "tanh" block of the p-bit).
//
// Input is the beta-scaled binary local field I' in 2^-6 units (pbit_pkg::acc_t).
// It is saturated to [-8, 8) and truncated to steps of 1/16, giving a 256-entry
// address; the entry is P(s=1) = 1/(1+exp(-I')) as a 32-bit unsigned fraction.
// The table is a constant computed at elaboration (pbit_pkg::SIGMOID_TABLE),
// i.e. a ROM. Purely combinational.
//
// The published design specifies a 32-bit lookup table; its address range and
// resolution are this design's choice.
module sigmoid_lut
  import pbit_pkg::*;
(
  input  acc_t field,
  output rnd_t prob
);
  localparam int SHIFT = int'(W_FRAC) - int'(LUT_FRAC);
  localparam int AMAX  = int'(LUT_N / 2) - 1;

  acc_t               q;
  logic [LUT_AW-1:0]  addr;

  always_comb begin
    q = field >>> SHIFT;                        // now in 1/16 steps
    if (q > acc_t'(AMAX))         addr = '1;    // saturate high
    else if (q < acc_t'(-AMAX-1)) addr = '0;    // saturate low
    else                          addr = LUT_AW'(q + acc_t'(LUT_N / 2));
    prob = SIGMOID_TABLE[addr];
  end
endmodule
