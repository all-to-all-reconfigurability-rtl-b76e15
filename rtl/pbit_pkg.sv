// pbit_pkg - shared types and constants of the master-graph p-computer.
//
// Weights and biases are signed fixed point s{6}{6}: one sign bit, six integer
// bits and six fraction bits (13 bits), as in the published design. The host
// writes them already multiplied by the replica's inverse temperature beta, so
// the p-bit never multiplies by beta itself.
//
// The activation table maps the binary local field I' (same 2^-6 units) to the
// probability that the p-bit becomes 1, as a 32-bit unsigned fraction. Because
// the binary field equals twice the bipolar field, P(s=1) = (1+tanh(beta*I))/2
// = 1/(1+exp(-beta*I')), a logistic sigmoid of I'. The table size (256 entries,
// field clipped to [-8,8) in steps of 1/16) is this design's choice.
//
// The configuration record is the host's only way in: one write per cycle,
// addressed by region, replica, p-bit, slot and instance.
package pbit_pkg;

  // Weight format s{6}{6}
  localparam int unsigned W_W    = 13;
  localparam int unsigned W_FRAC = 6;
  typedef logic signed [W_W-1:0] weight_t;

  // Random number and probability width
  localparam int unsigned RND_W = 32;
  typedef logic [RND_W-1:0] rnd_t;

  // Local-field accumulator: wide enough for 1 bias + 12 weights of 13 bits
  localparam int unsigned ACC_W = 18;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Activation table geometry
  localparam int unsigned LUT_AW   = 8;            // 256 entries
  localparam int unsigned LUT_FRAC = 4;            // address step 1/16
  localparam int unsigned LUT_N    = 1 << LUT_AW;

  // Colour code width (up to 8 colours)
  localparam int unsigned COLOR_W = 3;

  // Logistic sigmoid of table entry a (signed address a - LUT_N/2), 32-bit.
  function automatic rnd_t sigmoid_entry(input int a);
    real x, y, sc;
    x  = real'(a - int'(LUT_N / 2)) / real'(1 << LUT_FRAC);
    y  = 1.0 / (1.0 + $exp(-x));
    sc = y * 4294967296.0;
    if (sc >= 4294967295.0) return '1;
    return rnd_t'(longint'(sc));
  endfunction

  function automatic rnd_t [LUT_N-1:0] make_sigmoid_table();
    rnd_t [LUT_N-1:0] t;
    for (int a = 0; a < int'(LUT_N); a++) t[a] = sigmoid_entry(a);
    return t;
  endfunction

  localparam rnd_t [LUT_N-1:0] SIGMOID_TABLE = make_sigmoid_table();

  // splitmix32 finaliser, used to derive distinct PRNG seeds per p-bit
  function automatic logic [31:0] mix32(input logic [31:0] z0);
    logic [31:0] z;
    z = z0 + 32'h9E37_79B9;
    z = (z ^ (z >> 16)) * 32'h85EB_CA6B;
    z = (z ^ (z >> 13)) * 32'hC2B2_AE35;
    return z ^ (z >> 16);
  endfunction

  // 128-bit xoshiro seed for global p-bit number g (never all zero)
  function automatic logic [127:0] pbit_seed(input logic [31:0] base, input int unsigned g);
    logic [31:0] k;
    k = base ^ (g * 32'h0100_0193);
    return {mix32(k), mix32(k + 32'd1), mix32(k + 32'd2), mix32(k + 32'd3) | 32'd1};
  endfunction

  // Host configuration regions
  typedef enum logic [3:0] {
    CFG_NEIGH  = 4'd0,  // instance table: 2-body neighbour index   [inst][pbit][slot]
    CFG_PAIR_J = 4'd1,  // instance table: 3-body first neighbour   [inst][pbit][slot]
    CFG_PAIR_K = 4'd2,  // instance table: 3-body second neighbour  [inst][pbit][slot]
    CFG_COLOR  = 4'd3,  // instance table: colour                   [inst][pbit]
    CFG_J2     = 4'd4,  // beta*J'(2) weight                        [rep][pbit][slot]
    CFG_J3     = 4'd5,  // beta*J'(3) weight                        [rep][pbit][slot]
    CFG_BIAS   = 4'd6,  // beta*h' bias                             [rep][pbit]
    CFG_STATE  = 4'd7,  // p-bit state (initialisation, swaps)      [rep][pbit]
    CFG_INST   = 4'd8   // instance selector                        data
  } cfg_region_e;

  typedef struct packed {
    logic        en;
    cfg_region_e region;
    logic [7:0]  rep;
    logic [15:0] pbit;
    logic [7:0]  slot;
    logic [7:0]  inst;
    logic [31:0] data;
  } cfg_wr_t;

endpackage
