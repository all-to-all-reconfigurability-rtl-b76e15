// tb_replica - one replica (REP = 1) of 12 p-bits running a cubic XORSAT
// instance, with the instance-table rows and colour phases driven by the
// testbench. After each sweep the states must equal the reference model; the
// energy must match; configuration writes addressed to another replica must
// not change anything.
module tb_replica;
  import pbit_pkg::*;
  import pc_ref_pkg::*;
  import xorsat_gen_pkg::*;
  localparam int N = 12, K2 = 9, K3 = 3, NC = 6, IW = 4;
  localparam logic [31:0] SEED = 32'hCAFE_0001;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic [NC-1:0] phase_en;
  logic [IW-1:0] cur_idx2 [N][K2];
  logic [IW-1:0] cur_idxa [N][K3];
  logic [IW-1:0] cur_idxb [N][K3];
  logic [COLOR_W-1:0] cur_color [N];
  logic energy_start;
  logic [N-1:0] states;
  logic signed [31:0] energy;
  logic energy_valid;
  int checks = 0, failures = 0;
  pc_model m;
  xorsat_inst x;

  replica #(.N(N), .K2(K2), .K3(K3), .NC(NC), .REP(1), .SEED(SEED), .IW(IW)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .phase_en(phase_en), .cur_idx2(cur_idx2), .cur_idxa(cur_idxa),
    .cur_idxb(cur_idxb), .cur_color(cur_color), .energy_start(energy_start), .states(states),
    .energy(energy), .energy_valid(energy_valid));
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(cfg_region_e region, int rep, int pb, int slot, int data);
    cfg = '0; cfg.en = 1; cfg.region = region; cfg.rep = 8'(rep); cfg.pbit = 16'(pb);
    cfg.slot = 8'(slot); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  initial begin
    cfg = '0; phase_en = '0; energy_start = 0;
    m = new(N, 2, 1, K2, K3, NC, SEED);     // model replica 1 = the DUT
    x = new(N, 1);
    checks++;
    if (!x.colorize(NC)) begin failures++; $display("FAIL colouring"); end
    x.load_tables(m, 0);
    x.load_weights(m, 1, 1.0);
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < K2; k++) cur_idx2[i][k] = IW'(m.neigh[i*K2 + k]);
      for (int p = 0; p < K3; p++) begin cur_idxa[i][p] = IW'(m.pa[i*K3 + p]); cur_idxb[i][p] = IW'(m.pb[i*K3 + p]); end
      cur_color[i] = COLOR_W'(m.color[i]);
    end
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < K2; k++) wr(CFG_J2, 1, i, k, m.j2[(N + i)*K2 + k]);
      for (int p = 0; p < K3; p++) wr(CFG_J3, 1, i, p, m.j3[(N + i)*K3 + p]);
      wr(CFG_BIAS, 1, i, 0, m.h[N + i]);
      m.s[N + i] = 1'($urandom());
      wr(CFG_STATE, 1, i, 0, int'(m.s[N + i]));
      wr(CFG_STATE, 0, i, 0, int'(!m.s[N + i]));      // other replica: ignored
      wr(CFG_BIAS, 0, i, 0, 1000);                     // other replica: ignored
    end
    for (int sw = 0; sw < 200; sw++) begin
      for (int c = 0; c < NC; c++) begin phase_en = NC'(1 << c); @(negedge clk); end
      phase_en = '0;
      m.sweep(0);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (states[i] !== m.s[N + i]) begin failures++; $display("FAIL sweep %0d p-bit %0d", sw, i); end
      end
      if (sw % 50 == 49) begin
        energy_start = 1; @(negedge clk); energy_start = 0;
        while (!energy_valid) @(negedge clk);
        checks++;
        if (longint'(energy) != m.energy6(0, 1)) begin failures++; $display("FAIL energy %0d model %0d", energy, m.energy6(0, 1)); end
      end
    end
    checks++;
    if (m.flips == 0) begin failures++; $display("FAIL no flips"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
