// tb_sweep_controller - drives the controller with a real phase generator and
// a model energy unit (valid two cycles after energy_start). For several sweep
// counts (including 0, energy only) checks that run lasts exactly
// n_sweeps*6 cycles, that the sweep count is reported, that energy_start
// pulses once, and that done comes n_sweeps*6 + 4 cycles after start.
module tb_sweep_controller;
  localparam int NC = 6;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] n_sweeps;
  logic run, energy_start, busy, done, sweep_tick;
  logic [31:0] sweeps_done;
  logic [NC-1:0] phase_en;
  logic ev1, ev2;
  int checks = 0, failures = 0;

  phase_clock_gen #(.NC(NC)) u_ph (.clk(clk), .rst_n(rst_n), .run(run), .phase_en(phase_en), .sweep_tick(sweep_tick));
  sweep_controller dut (.clk(clk), .rst_n(rst_n), .start(start), .n_sweeps(n_sweeps), .sweep_tick(sweep_tick),
                        .energy_valid(ev2), .run(run), .energy_start(energy_start), .busy(busy), .done(done),
                        .sweeps_done(sweeps_done));
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin ev1 <= rst_n && energy_start; ev2 <= rst_n && ev1; end

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int tests [5] = '{1, 3, 0, 100, 7};
    @(negedge clk); @(negedge clk); rst_n = 1;
    checks++; if (busy || run || done) begin failures++; $display("FAIL idle after reset"); end
    foreach (tests[t]) begin
      int cyc, run_cyc, es;
      n_sweeps = tests[t];
      start = 1; @(negedge clk); start = 0;
      cyc = 1; run_cyc = 0; es = 0;
      while (!done && cyc < 1000) begin
        run_cyc += run; es += energy_start;
        checks++; if (!busy) begin failures++; $display("FAIL busy low while working"); end
        @(negedge clk); cyc++;
      end
      checks += 4;
      if (run_cyc != tests[t] * NC) begin failures++; $display("FAIL run cycles %0d for %0d sweeps", run_cyc, tests[t]); end
      if (es != 1) begin failures++; $display("FAIL energy_start pulses %0d", es); end
      if (cyc != tests[t] * NC + 4) begin failures++; $display("FAIL done after %0d cycles (%0d sweeps)", cyc, tests[t]); end
      if (int'(sweeps_done) != tests[t]) begin failures++; $display("FAIL sweeps_done %0d", sweeps_done); end
      @(negedge clk);
      checks++; if (busy || done) begin failures++; $display("FAIL not idle after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
