// tb_clock_mux - exhaustive over all phase-enable patterns and colour codes;
// colours without a phase (6, 7) must never enable.
module tb_clock_mux;
  localparam int NC = 6;
  logic [NC-1:0] phase_en;
  logic [2:0] color;
  logic en;
  int checks = 0, failures = 0;

  clock_mux #(.NC(NC), .CW(3)) dut (.phase_en(phase_en), .color(color), .en(en));

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < (1 << NC); p++)
      for (int c = 0; c < 8; c++) begin
        phase_en = NC'(p); color = 3'(c);
        #1;
        checks++;
        if (en !== ((c < NC) ? p[c] : 1'b0)) begin failures++; $display("FAIL p=%b c=%0d", p, c); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
