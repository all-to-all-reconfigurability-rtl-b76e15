// pcomputer_top - reconfigurable sparse master-graph p-computer (top level).
//
// N_REPLICAS replicas of an N_PBITS p-bit network run graph-coloured Gibbs
// sampling in parallel. One set of instance tables holds N_INST sparse problem
// instances (neighbour indices and colours); the instance selector chooses
// which one every p-bit's neighbour and clock multiplexers follow. One phase
// generator drives the N_COLORS colour enables shared by all replicas, so a
// full sweep of every replica takes N_COLORS system cycles whatever the size.
// Each p-bit has 2-body and 3-body synapse slots (K2, K3), so the same
// hardware runs quadratised (2-body, J3 = 0) and native cubic XORSAT.
//
// Host interface (plain signals, one clock domain):
//   cfg       one configuration write per cycle (pbit_pkg::cfg_wr_t): instance
//             tables, instance select, beta-scaled weights/biases per replica,
//             p-bit states (random initialisation and replica swaps).
//   start, n_sweeps -> busy, done: run n_sweeps sweeps then measure energies.
//   states[r], energy[r]: replica states and 6*beta*E_b (see energy_unit),
//             valid from done until the next start.
// Replica-exchange decisions, temperature profiles and ground-state checks
// are the host's, as in the published system, where an external CPU does them.
//
// Default sizes follow the largest published second-order configuration:
// 112 p-bits x 9 replicas, 100 instances, 6 colours. Slot counts K2 = 9 and
// K3 = 3 are derived from the 3-regular 3-XORSAT structure.
module pcomputer_top
  import pbit_pkg::*;
#(
  parameter int unsigned N_PBITS    = 112,
  parameter int unsigned N_REPLICAS = 9,
  parameter int unsigned N_INST     = 100,
  parameter int unsigned N_COLORS   = 6,
  parameter int unsigned K2         = 9,
  parameter int unsigned K3         = 3,
  parameter logic [31:0] SEED       = 32'h1234_5678,
  parameter int unsigned IW         = (N_PBITS > 1) ? $clog2(N_PBITS) : 1,
  parameter int unsigned SW         = (N_INST > 1) ? $clog2(N_INST) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  input  logic               start,
  input  logic [31:0]        n_sweeps,
  output logic               busy,
  output logic               done,
  output logic [31:0]        sweeps_done,
  output logic [SW-1:0]      inst_sel,
  output logic [N_PBITS-1:0] states [N_REPLICAS],
  output logic signed [31:0] energy [N_REPLICAS]
);
  logic [N_COLORS-1:0] phase_en;
  logic                sweep_tick, run, energy_start;
  logic [N_REPLICAS-1:0] e_valid;

  logic [IW-1:0]      cur_idx2  [N_PBITS][K2];
  logic [IW-1:0]      cur_idxa  [N_PBITS][K3];
  logic [IW-1:0]      cur_idxb  [N_PBITS][K3];
  logic [COLOR_W-1:0] cur_color [N_PBITS];

  instance_tables #(.N(N_PBITS), .N_INST(N_INST), .K2(K2), .K3(K3), .IW(IW), .SW(SW)) u_tables (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .inst_sel(inst_sel),
    .cur_idx2(cur_idx2), .cur_idxa(cur_idxa), .cur_idxb(cur_idxb), .cur_color(cur_color)
  );

  phase_clock_gen #(.NC(N_COLORS)) u_phase (
    .clk(clk), .rst_n(rst_n), .run(run), .phase_en(phase_en), .sweep_tick(sweep_tick)
  );

  sweep_controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .n_sweeps(n_sweeps),
    .sweep_tick(sweep_tick), .energy_valid(&e_valid),
    .run(run), .energy_start(energy_start), .busy(busy), .done(done),
    .sweeps_done(sweeps_done)
  );

  for (genvar r = 0; r < int'(N_REPLICAS); r++) begin : g_rep
    replica #(.N(N_PBITS), .K2(K2), .K3(K3), .NC(N_COLORS), .REP(r), .SEED(SEED), .IW(IW)) u_rep (
      .clk(clk), .rst_n(rst_n), .cfg(cfg), .phase_en(phase_en),
      .cur_idx2(cur_idx2), .cur_idxa(cur_idxa), .cur_idxb(cur_idxb), .cur_color(cur_color),
      .energy_start(energy_start),
      .states(states[r]), .energy(energy[r]), .energy_valid(e_valid[r])
    );
  end

  // The network must not be rewired or rewritten while it is sampling.
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (cfg.en && cfg.region inside {CFG_J2, CFG_J3, CFG_BIAS, CFG_STATE, CFG_INST}) |-> !busy)
    else $error("pcomputer_top: configuration write while busy");
endmodule
