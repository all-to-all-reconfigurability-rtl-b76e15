// instance_tables - master graph storage and instance selector.
//
// The master graph houses N_INST sparse problem instances on the same p-bits.
// For every instance and p-bit this block stores the K2 2-body neighbour
// indices, the K3 pairs of 3-body neighbour indices and the p-bit's colour.
// The instance selector register picks one instance; its rows drive every
// p-bit's neighbour and clock multiplexers (cur_* outputs, combinational from
// the registered selector). All replicas share one copy, since replicas are
// the same graph at different temperatures.
//
// Writes come from the host configuration record (CFG_NEIGH, CFG_PAIR_J,
// CFG_PAIR_K, CFG_COLOR, CFG_INST), one per cycle, taking effect next cycle.
// Each table is a memory with one word per instance, holding the packed rows of
// all p-bits; a write updates one field of a word, and the single read port
// returns the whole word of the selected instance. The tables are not reset:
// the host writes every entry of an instance before selecting it. The
// selector resets to instance 0.
//
// The published design fixes the neighbour sets at synthesis and reprograms
// weights with the instance selection; holding the indices in writable tables
// is this design's choice.
module instance_tables
  import pbit_pkg::*;
#(
  parameter int unsigned N      = 112,
  parameter int unsigned N_INST = 100,
  parameter int unsigned K2     = 9,
  parameter int unsigned K3     = 3,
  parameter int unsigned IW     = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned SW     = (N_INST > 1) ? $clog2(N_INST) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_wr_t            cfg,
  output logic [SW-1:0]      inst_sel,
  output logic [IW-1:0]      cur_idx2  [N][K2],
  output logic [IW-1:0]      cur_idxa  [N][K3],
  output logic [IW-1:0]      cur_idxb  [N][K3],
  output logic [COLOR_W-1:0] cur_color [N]
);
  logic [N-1:0][K2-1:0][IW-1:0] t_idx2  [N_INST];
  logic [N-1:0][K3-1:0][IW-1:0] t_idxa  [N_INST];
  logic [N-1:0][K3-1:0][IW-1:0] t_idxb  [N_INST];
  logic [N-1:0][COLOR_W-1:0]    t_color [N_INST];
  logic [N-1:0][K2-1:0][IW-1:0] row2;
  logic [N-1:0][K3-1:0][IW-1:0] rowa, rowb;
  logic [N-1:0][COLOR_W-1:0]    rowc;

  logic in_inst, in_pbit, in_s2, in_s3;
  logic [SW-1:0] wi;
  logic [IW-1:0] wp;
  always_comb begin
    in_inst = 32'(cfg.inst) < N_INST;
    in_pbit = 32'(cfg.pbit) < N;
    in_s2   = 32'(cfg.slot) < K2;
    in_s3   = 32'(cfg.slot) < K3;
    wi      = cfg.inst[SW-1:0];
    wp      = cfg.pbit[IW-1:0];
  end

  always_ff @(posedge clk) begin
    if (cfg.en && in_inst && in_pbit) begin
      unique case (cfg.region)
        CFG_NEIGH:  if (in_s2) t_idx2[wi][wp][cfg.slot[$clog2(K2+1)-1:0]] <= cfg.data[IW-1:0];
        CFG_PAIR_J: if (in_s3) t_idxa[wi][wp][cfg.slot[$clog2(K3+1)-1:0]] <= cfg.data[IW-1:0];
        CFG_PAIR_K: if (in_s3) t_idxb[wi][wp][cfg.slot[$clog2(K3+1)-1:0]] <= cfg.data[IW-1:0];
        CFG_COLOR:  t_color[wi][wp] <= cfg.data[COLOR_W-1:0];
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) inst_sel <= '0;
    else if (cfg.en && cfg.region == CFG_INST && 32'(cfg.data) < N_INST) inst_sel <= cfg.data[SW-1:0];
  end

  // One read port per table: the word of the selected instance.
  assign row2 = t_idx2[inst_sel];
  assign rowa = t_idxa[inst_sel];
  assign rowb = t_idxb[inst_sel];
  assign rowc = t_color[inst_sel];

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      for (int k = 0; k < int'(K2); k++) cur_idx2[i][k] = row2[i][k];
      for (int p = 0; p < int'(K3); p++) begin
        cur_idxa[i][p] = rowa[i][p];
        cur_idxb[i][p] = rowb[i][p];
      end
      cur_color[i] = rowc[i];
    end
  end
endmodule
