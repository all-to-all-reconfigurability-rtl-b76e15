// pbit - one probabilistic bit of the reconfigurable master graph.
//
// Datapath, all inside one system cycle:
//   neighbour muxes -> synapse_mac (I' = h + sum J2*s_j + sum J3*s_a*s_b)
//   -> sigmoid_lut (P(s=1) as 32 bits) -> comparator against the PRNG output.
// When the colour enable chosen by the clock mux is high, the state register
// takes (P > rnd) and the PRNG advances; otherwise the p-bit holds. Because
// p-bits of one colour never neighbour each other, all of them update on the
// same edge without error (graph-coloured Gibbs sampling).
//
// Weights J2[slot], J3[slot] and bias h are registers written through the
// configuration record when sel is high (the parent decodes replica and p-bit
// number). The host writes them pre-multiplied by beta. A CFG_STATE write sets
// the state directly (random initialisation, replica swaps) and wins over an
// update in the same cycle. Synchronous active-low reset clears weights, bias
// and state and loads the PRNG seed.
//
// Structure (neighbour mux, instance-selected clock mux, weight muxes, AND
// gate, sum, activation, comparator, PRNG) follows the published p-bit; widths,
// the register write port and the enable-style clocking are this design's.
module pbit
  import pbit_pkg::*;
#(
  parameter int unsigned N  = 112,
  parameter int unsigned K2 = 9,
  parameter int unsigned K3 = 3,
  parameter int unsigned NC = 6,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [127:0]       seed,
  input  cfg_wr_t            cfg,
  input  logic               sel,
  input  logic [NC-1:0]      phase_en,
  input  logic [COLOR_W-1:0] color,
  input  logic [IW-1:0]      idx2 [K2],
  input  logic [IW-1:0]      idxa [K3],
  input  logic [IW-1:0]      idxb [K3],
  input  logic [N-1:0]       states,
  output logic               s,
  output weight_t            h_o,
  output acc_t               sum2,
  output acc_t               sum3
);
  weight_t      j2 [K2];
  weight_t      j3 [K3];
  weight_t      h;
  logic [K2-1:0] m2;
  logic [K3-1:0] ma, mb;
  logic         upd;
  acc_t         field;
  rnd_t         prob, rnd;

  neighbor_mux #(.N(N), .K(K2), .IW(IW)) u_nm2 (.states(states), .idx(idx2), .m(m2));
  neighbor_mux #(.N(N), .K(K3), .IW(IW)) u_nma (.states(states), .idx(idxa), .m(ma));
  neighbor_mux #(.N(N), .K(K3), .IW(IW)) u_nmb (.states(states), .idx(idxb), .m(mb));

  clock_mux #(.NC(NC), .CW(COLOR_W)) u_cm (.phase_en(phase_en), .color(color), .en(upd));

  synapse_mac #(.K2(K2), .K3(K3)) u_mac (
    .j2(j2), .s_j(m2), .j3(j3), .s_a(ma), .s_b(mb), .h(h),
    .sum2(sum2), .sum3(sum3), .field(field)
  );

  sigmoid_lut u_lut (.field(field), .prob(prob));

  xoshiro128ss u_rng (.clk(clk), .rst_n(rst_n), .seed(seed), .en(upd), .rnd(rnd));

  logic wr;
  assign wr = cfg.en && sel;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(K2); k++) j2[k] <= '0;
      for (int p = 0; p < int'(K3); p++) j3[p] <= '0;
      h <= '0;
      s <= 1'b0;
    end else begin
      if (wr && cfg.region == CFG_J2 && 32'(cfg.slot) < K2) j2[cfg.slot[$clog2(K2+1)-1:0]] <= weight_t'(cfg.data);
      if (wr && cfg.region == CFG_J3 && 32'(cfg.slot) < K3) j3[cfg.slot[$clog2(K3+1)-1:0]] <= weight_t'(cfg.data);
      if (wr && cfg.region == CFG_BIAS) h <= weight_t'(cfg.data);
      if (wr && cfg.region == CFG_STATE) s <= cfg.data[0];
      else if (upd)                      s <= (prob > rnd);
    end
  end

  assign h_o = h;
endmodule
