// xoshiro128ss - xoshiro128** pseudo-random number generator, one per p-bit.
//
// Holds a 128-bit state s0..s3. The output rnd is the scrambled value
// rotl(s1*5, 7)*9 of the current state, so it is valid combinationally; when
// en is high the state advances by one step on the rising clock edge. The
// multiplications by 5 and 9 are shift-and-add. A synchronous active-low reset
// loads seed, which must not be all zero.
//
// The published design names only "Xoshiro" as its generator; the ** variant
// with 32-bit output is this design's choice. Each p-bit owns one generator
// and advances it exactly when the p-bit updates (its coloured clock fires).
module xoshiro128ss (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [127:0] seed,
  input  logic         en,
  output logic [31:0]  rnd
);
  logic [31:0] s0, s1, s2, s3;
  logic [31:0] m5, r7;

  function automatic logic [31:0] rotl(input logic [31:0] x, input int unsigned k);
    return (x << k) | (x >> (32 - k));
  endfunction

  always_comb begin
    m5  = (s1 << 2) + s1;
    r7  = rotl(m5, 7);
    rnd = (r7 << 3) + r7;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {s0, s1, s2, s3} <= seed;
    end else if (en) begin
      s0 <= s0 ^ (s3 ^ s1);
      s1 <= s1 ^ (s2 ^ s0);
      s2 <= (s2 ^ s0) ^ (s1 << 9);
      s3 <= rotl(s3 ^ s1, 11);
    end
  end
endmodule
