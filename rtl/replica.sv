// replica - one parallel-tempering replica: N p-bits of the master graph.
//
// All replicas are the same network; they differ only in the beta-scaled
// weights the host writes into their p-bits. A replica instantiates N pbit
// blocks, feeds each one the whole state vector of the replica, its rows of
// the shared instance tables and the shared colour phases, and decodes the
// configuration record's replica and p-bit fields into a per-p-bit select.
// Its energy_unit computes the replica's energy when energy_start pulses.
//
// PRNG seeds are fixed per p-bit from SEED and the global p-bit number
// REP*N + i (pbit_pkg::pbit_seed) and loaded at reset.
module replica
  import pbit_pkg::*;
#(
  parameter int unsigned N    = 112,
  parameter int unsigned K2   = 9,
  parameter int unsigned K3   = 3,
  parameter int unsigned NC   = 6,
  parameter int unsigned REP  = 0,
  parameter logic [31:0] SEED = 32'h1234_5678,
  parameter int unsigned IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic [NC-1:0]      phase_en,
  input  logic [IW-1:0]      cur_idx2  [N][K2],
  input  logic [IW-1:0]      cur_idxa  [N][K3],
  input  logic [IW-1:0]      cur_idxb  [N][K3],
  input  logic [COLOR_W-1:0] cur_color [N],
  input  logic               energy_start,
  output logic [N-1:0]       states,
  output logic signed [31:0] energy,
  output logic               energy_valid
);
  weight_t h    [N];
  acc_t    sum2 [N];
  acc_t    sum3 [N];

  for (genvar i = 0; i < int'(N); i++) begin : g_pbit
    logic sel;
    assign sel = (32'(cfg.rep) == REP) && (32'(cfg.pbit) == i);
    pbit #(.N(N), .K2(K2), .K3(K3), .NC(NC), .IW(IW)) u_pbit (
      .clk(clk), .rst_n(rst_n),
      .seed(pbit_seed(SEED, REP * N + i)),
      .cfg(cfg), .sel(sel),
      .phase_en(phase_en), .color(cur_color[i]),
      .idx2(cur_idx2[i]), .idxa(cur_idxa[i]), .idxb(cur_idxb[i]),
      .states(states),
      .s(states[i]), .h_o(h[i]), .sum2(sum2[i]), .sum3(sum3[i])
    );
  end

  energy_unit #(.N(N)) u_energy (
    .clk(clk), .rst_n(rst_n), .start(energy_start),
    .s(states), .h(h), .sum2(sum2), .sum3(sum3),
    .energy(energy), .valid(energy_valid)
  );
endmodule
