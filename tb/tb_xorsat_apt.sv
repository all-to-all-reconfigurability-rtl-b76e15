// tb_xorsat_apt - runs the XORSAT workload with parallel tempering, both
// forms on one design: a planted 3-regular 3-XORSAT instance of 32 variables
// as a quadratised problem (32 + 32 auxiliary p-bits, instance 0) and as a
// native cubic problem (32 p-bits, instance 1), 5 replicas each.
//
// The testbench plays the host: fixed inverse-temperature ladder, 100 sweeps
// between swap attempts, alternating (even, odd) / (odd, even) neighbour
// pairs, Metropolis acceptance min(1, exp(dE*dbeta)) on the energies the chip
// reports, swaps done by rewriting the two replicas' states. A run succeeds
// when any replica reports the ground-state energy (within rounding); the state is then checked
// to satisfy every clause. Each form must succeed within 3000 swap attempts.
module tb_xorsat_apt;
  import pbit_pkg::*;
  import pc_ref_pkg::*;
  import xorsat_gen_pkg::*;
  localparam int V = 32, N = 2 * V, R = 5, NI = 2, K2 = 9, K3 = 3, NC = 6;
  localparam int SWEEPS_PER_SWAP = 100, MAX_SWAPS = 3000;

  logic clk = 0, rst_n = 0, start = 0;
  cfg_wr_t cfg;
  logic [31:0] n_sweeps, sweeps_done;
  logic busy, done;
  logic inst_sel;
  logic [N-1:0] states [R];
  logic signed [31:0] energy [R];
  int checks = 0, failures = 0;
  pc_model m;
  xorsat_inst insts [NI];
  real betas [R] = '{0.3, 0.6, 1.0, 1.6, 2.5};
  longint gs [R];
  int accepted = 0, proposed = 0;

  pcomputer_top #(.N_PBITS(N), .N_REPLICAS(R), .N_INST(NI), .N_COLORS(NC), .K2(K2), .K3(K3)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .start(start), .n_sweeps(n_sweeps), .busy(busy), .done(done),
    .sweeps_done(sweeps_done), .inst_sel(inst_sel), .states(states), .energy(energy));
  always #5 clk = ~clk;

  initial begin
    #2000000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(cfg_region_e region, int rep, int inst, int pb, int slot, int data);
    cfg = '0; cfg.en = 1; cfg.region = region; cfg.rep = 8'(rep); cfg.inst = 8'(inst);
    cfg.pbit = 16'(pb); cfg.slot = 8'(slot); cfg.data = 32'(data);
    @(negedge clk);
    cfg = '0;
  endtask

  // Weights are rounded per replica, so different solutions of the same
  // instance differ by a little in the reported energy. One violated clause
  // costs 2 in the bipolar energy, 6*64*beta*2 in the reported units; a
  // quarter of that separates solutions from non-solutions.
  function automatic longint tol(int r);
    return longint'(6.0 * 64.0 * betas[r] * 0.5);
  endfunction

  task automatic run(int ns);
    n_sweeps = ns; start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic run_form(int q, string form);
    int swaps, hit;
    // program instance q and the replicas' weights
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < K2; k++) wr(CFG_NEIGH, 0, q, i, k, m.neigh[(q*N + i)*K2 + k]);
      for (int p = 0; p < K3; p++) begin
        wr(CFG_PAIR_J, 0, q, i, p, m.pa[(q*N + i)*K3 + p]);
        wr(CFG_PAIR_K, 0, q, i, p, m.pb[(q*N + i)*K3 + p]);
      end
      wr(CFG_COLOR, 0, q, i, 0, m.color[q*N + i]);
    end
    wr(CFG_INST, 0, 0, 0, 0, q);
    for (int r = 0; r < R; r++) begin
      insts[q].load_weights(m, r, betas[r]);
      for (int i = 0; i < N; i++) begin
        for (int k = 0; k < K2; k++) wr(CFG_J2, r, 0, i, k, m.j2[(r*N + i)*K2 + k]);
        for (int p = 0; p < K3; p++) wr(CFG_J3, r, 0, i, p, m.j3[(r*N + i)*K3 + p]);
        wr(CFG_BIAS, r, 0, i, 0, m.h[r*N + i]);
        wr(CFG_STATE, r, 0, i, 0, (i < insts[q].npb) ? int'($urandom_range(0, 1)) : 0);
      end
      gs[r] = insts[q].ground6(m, q, r);
    end
    hit = -1;
    for (swaps = 0; swaps < MAX_SWAPS && hit < 0; swaps++) begin
      run(SWEEPS_PER_SWAP);
      for (int r = 0; r < R; r++) begin
        checks++;
        if (longint'(energy[r]) < gs[r] - tol(r)) begin failures++; $display("FAIL %s: energy below ground state", form); end
        if (longint'(energy[r]) <= gs[r] + tol(r) && hit < 0) hit = r;
      end
      if (hit >= 0) break;
      for (int a = swaps % 2; a + 1 < R; a += 2) begin
        real ea, eb, x;
        ea = real'(energy[a]) / (6.0 * 64.0 * betas[a]);
        eb = real'(energy[a + 1]) / (6.0 * 64.0 * betas[a + 1]);
        x = (betas[a] - betas[a + 1]) * (ea - eb);
        proposed++;
        if (x >= 0.0 || ($urandom() / 4294967296.0) < $exp(x)) begin
          logic [N-1:0] sa, sb;
          accepted++;
          sa = states[a]; sb = states[a + 1];
          for (int i = 0; i < N; i++) begin wr(CFG_STATE, a, 0, i, 0, int'(sb[i])); wr(CFG_STATE, a + 1, 0, i, 0, int'(sa[i])); end
        end
      end
    end
    checks++;
    if (hit < 0) begin
      failures++; $display("FAIL %s: no ground state in %0d swap attempts", form, MAX_SWAPS);
    end else begin
      bit st [];
      st = new[N];
      for (int i = 0; i < N; i++) st[i] = states[hit][i];
      checks++;
      if (!insts[q].satisfied(st)) begin failures++; $display("FAIL %s: reported ground state violates a clause", form); end
      $display("%s form: ground state in replica %0d (beta %0.1f) after %0d swap attempts = %0d sweeps",
               form, hit, betas[hit], swaps + 1, (swaps + 1) * SWEEPS_PER_SWAP);
    end
  endtask

  initial begin
    cfg = '0; n_sweeps = 0;
    m = new(N, R, NI, K2, K3, NC, 32'h1234_5678);
    insts[0] = new(V, 0);
    insts[1] = rebuild_cubic(insts[0]);   // same clauses and planted assignment
    for (int q = 0; q < NI; q++) begin
      checks++;
      if (!insts[q].colorize(NC)) begin failures++; $display("FAIL colouring of instance %0d", q); end
      insts[q].load_tables(m, q);
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run_form(0, "quadratic");
    run_form(1, "cubic");
    $display("swap acceptance %0d/%0d", accepted, proposed);
    checks++;
    if (accepted == 0) begin failures++; $display("FAIL no swap accepted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cubic form of the same clause set
  function automatic xorsat_inst rebuild_cubic(xorsat_inst src);
    xorsat_inst c;
    c = new(src.V, 1);
    c.cl = src.cl; c.sign = src.sign; c.planted = src.planted;
    c.build();
    return c;
  endfunction
endmodule
