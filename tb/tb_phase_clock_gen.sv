// tb_phase_clock_gen - checks that with run high the enables are one-hot and
// step 0..5, that sweep_tick comes once every 6 cycles with phase 5, that
// nothing is enabled with run low, and that a new run restarts at phase 0.
module tb_phase_clock_gen;
  localparam int NC = 6;
  logic clk = 0, rst_n = 0, run = 0;
  logic [NC-1:0] phase_en;
  logic sweep_tick;
  int checks = 0, failures = 0;

  phase_clock_gen #(.NC(NC)) dut (.clk(clk), .rst_n(rst_n), .run(run), .phase_en(phase_en), .sweep_tick(sweep_tick));
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (phase_en=%b tick=%b)", what, phase_en, sweep_tick); end
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst_n = 1;
    chk(phase_en == 0 && !sweep_tick, "idle");
    for (int runs = 0; runs < 3; runs++) begin
      int len;
      len = 6 * (runs + 1) + runs;   // last run stops mid-sweep
      run = 1;
      for (int c = 0; c < len; c++) begin
        #1;
        chk(phase_en == NC'(1 << (c % NC)), $sformatf("run %0d cycle %0d phase", runs, c));
        chk(sweep_tick == ((c % NC) == NC - 1), $sformatf("run %0d cycle %0d tick", runs, c));
        @(negedge clk);
      end
      run = 0;
      #1 chk(phase_en == 0 && !sweep_tick, "stopped");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
