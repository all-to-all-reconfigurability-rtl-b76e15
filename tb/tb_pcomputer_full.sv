// tb_pcomputer_full - end-to-end test of the p-computer at its default size (112 p-bits, 9 replicas, 100 instances); each block runs 100 sweeps, as between two swap attempts.
//
// A host model programs several instances into the master graph (a quadratised
// XORSAT instance with auxiliary p-bits, and cubic instances that use the
// 3-body synapse slots and leave p-bits parked), writes beta-scaled weights
// for every replica, random initial states, and then runs blocks of sweeps.
// After every block the states of every replica must equal the independent
// reference model bit for bit, the energies must equal the model's, and done
// must come n_sweeps*6 + 4 cycles after start (one sweep per 6 cycles
// whatever the size). Between blocks it switches instances, swaps replica
// states, and measures energy only. Each of these mechanisms is counted and
// must occur at least once; parked p-bits must never change.
module tb_pcomputer_full;
  import pbit_pkg::*;
  import pc_ref_pkg::*;
  import xorsat_gen_pkg::*;
  localparam int N = 112, R = 9, NI = 100, K2 = 9, K3 = 3, NC = 6;
  localparam int SW = (NI > 1) ? $clog2(NI) : 1;
  localparam int BLOCKS = 3, MAXSW = 100;
  localparam logic [31:0] SEED = 32'h1234_5678;

  logic clk = 0, rst_n = 0, start = 0;
  cfg_wr_t cfg;
  logic [31:0] n_sweeps, sweeps_done;
  logic busy, done;
  logic [SW-1:0] inst_sel;
  logic [N-1:0] states [R];
  logic signed [31:0] energy [R];
  int checks = 0, failures = 0;
  int n_switch = 0, n_runs = 0, n_eonly = 0, n_swaps = 0, n_parked_ok = 0;
  int cycles = 0;

  pcomputer_top dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .start(start), .n_sweeps(n_sweeps), .busy(busy), .done(done),
    .sweeps_done(sweeps_done), .inst_sel(inst_sel), .states(states), .energy(energy));
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    #2000000000; failures++; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  pc_model m;
  xorsat_inst insts [NI];
  int used [$];
  real betas [R];

  task automatic wr(cfg_region_e region, int rep, int inst, int pb, int slot, int data);
    cfg = '0; cfg.en = 1; cfg.region = region; cfg.rep = 8'(rep); cfg.inst = 8'(inst);
    cfg.pbit = 16'(pb); cfg.slot = 8'(slot); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  task automatic push_tables(int q);
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < K2; k++) wr(CFG_NEIGH, 0, q, i, k, m.neigh[(q*N + i)*K2 + k]);
      for (int p = 0; p < K3; p++) begin
        wr(CFG_PAIR_J, 0, q, i, p, m.pa[(q*N + i)*K3 + p]);
        wr(CFG_PAIR_K, 0, q, i, p, m.pb[(q*N + i)*K3 + p]);
      end
      wr(CFG_COLOR, 0, q, i, 0, m.color[q*N + i]);
    end
  endtask

  task automatic push_weights(int r);
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < K2; k++) wr(CFG_J2, r, 0, i, k, m.j2[(r*N + i)*K2 + k]);
      for (int p = 0; p < K3; p++) wr(CFG_J3, r, 0, i, p, m.j3[(r*N + i)*K3 + p]);
      wr(CFG_BIAS, r, 0, i, 0, m.h[r*N + i]);
    end
  endtask

  task automatic set_state(int r, int i, bit v);
    m.s[r*N + i] = v;
    wr(CFG_STATE, r, 0, i, 0, int'(v));
  endtask

  task automatic compare(int q, string what);
    for (int r = 0; r < R; r++) begin
      int bad;
      bad = 0;
      for (int i = 0; i < N; i++) if (states[r][i] !== m.s[r*N + i]) bad++;
      checks++;
      if (bad != 0) begin failures++; $display("FAIL %s: replica %0d has %0d p-bits off the model", what, r, bad); end
      checks++;
      if (longint'(energy[r]) != m.energy6(q, r)) begin
        failures++; $display("FAIL %s: replica %0d energy %0d model %0d", what, r, energy[r], m.energy6(q, r));
      end
    end
  endtask

  task automatic run_block(int q, int ns);
    int t0;
    n_sweeps = ns;
    start = 1; t0 = cycles; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cycles - t0 != ns * NC + 4) begin failures++; $display("FAIL %0d sweeps took %0d cycles", ns, cycles - t0); end
    checks++;
    if (int'(sweeps_done) != ns) begin failures++; $display("FAIL sweeps_done %0d", sweeps_done); end
    for (int s = 0; s < ns; s++) m.sweep(q);
    compare(q, $sformatf("instance %0d after %0d sweeps", q, ns));
    if (ns == 0) n_eonly++; else n_runs++;
  endtask

  task automatic select(int q);
    if (int'(inst_sel) != q) n_switch++;
    wr(CFG_INST, 0, 0, 0, 0, q);
    checks++; if (int'(inst_sel) != q) begin failures++; $display("FAIL instance select"); end
    for (int r = 0; r < R; r++) begin
      insts[q].load_weights(m, r, betas[r]);
      push_weights(r);
      for (int i = 0; i < N; i++) set_state(r, i, (i < insts[q].npb) ? 1'($urandom()) : 1'b0);
    end
  endtask

  initial begin
    int colors_used;
    cfg = '0; n_sweeps = 0;
    m = new(N, R, NI, K2, K3, NC, SEED);
    for (int r = 0; r < R; r++) betas[r] = 0.4 + 0.5 * r;
    // instance 0: quadratised XORSAT filling all p-bits; last instance: cubic
    // with all p-bits; one more cubic instance of a third of the p-bits
    used = '{0, NI - 1, NI / 2};
    insts[0] = new(N / 2, 0);
    insts[NI - 1] = new(N, 1);
    insts[NI / 2] = new(N / 3, 1);
    foreach (used[u]) begin
      checks++;
      if (!insts[used[u]].colorize(NC)) begin failures++; $display("FAIL no %0d-colouring for instance %0d", NC, used[u]); end
      insts[used[u]].load_tables(m, used[u]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (used[u]) push_tables(used[u]);
    colors_used = 0;
    for (int c = 0; c < NC; c++) begin
      bit any;
      any = 0;
      foreach (used[u]) for (int i = 0; i < insts[used[u]].npb; i++) if (insts[used[u]].color[i] == c) any = 1;
      colors_used += any;
    end
    for (int b = 0; b < BLOCKS; b++) begin
      int q;
      q = used[b % 3];
      select(q);
      run_block(q, 0);                             // energy of the random start
      run_block(q, $urandom_range(1, MAXSW));
      // swap two replicas' states, as a replica exchange does
      begin
        int r1, r2;
        bit tmp [N];
        r1 = $urandom_range(0, R - 1); r2 = (r1 + 1) % R;
        for (int i = 0; i < N; i++) tmp[i] = m.s[r1*N + i];
        for (int i = 0; i < N; i++) set_state(r1, i, m.s[r2*N + i]);
        for (int i = 0; i < N; i++) set_state(r2, i, tmp[i]);
        n_swaps++;
      end
      run_block(q, MAXSW);
      // parked p-bits keep their written value 0
      if (insts[q].npb < N) begin
        bit ok;
        ok = 1;
        for (int r = 0; r < R; r++) for (int i = insts[q].npb; i < N; i++) if (states[r][i] !== 1'b0) ok = 0;
        checks++;
        if (!ok) begin failures++; $display("FAIL parked p-bit changed"); end else n_parked_ok++;
      end
    end
    $display("mechanisms: instance switches %0d, sweep runs %0d, energy-only runs %0d, state swaps %0d, 3-body terms active %0d, parked checks %0d, colours used %0d, flips %0d",
             n_switch, n_runs, n_eonly, n_swaps, m.j3_hits, n_parked_ok, colors_used, m.flips);
    checks += 7;
    if (n_switch == 0) begin failures++; $display("FAIL no instance switch"); end
    if (n_runs == 0) begin failures++; $display("FAIL no sweep run"); end
    if (n_eonly == 0) begin failures++; $display("FAIL no energy-only run"); end
    if (n_swaps == 0) begin failures++; $display("FAIL no swap"); end
    if (m.j3_hits == 0) begin failures++; $display("FAIL 3-body path never active"); end
    if (n_parked_ok == 0) begin failures++; $display("FAIL parked p-bits never checked"); end
    if (m.flips == 0 || colors_used < 4) begin failures++; $display("FAIL network never flipped / too few colours"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
