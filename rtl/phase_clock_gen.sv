// phase_clock_gen - colour phase generator (the phase-shifted p-bit clocks).
//
// While run is high, a counter steps through phases 0..NC-1, one per system
// cycle, and phase_en is the one-hot enable of the current phase: colour c
// updates in phase c. The last phase of each pass raises sweep_tick, since by
// then every p-bit of every colour has had one update: one Monte Carlo sweep.
// When run is low no phase is enabled and the counter returns to 0, so every
// run starts with colour 0.
//
// The published design uses NC = 6 phase-shifted 15 MHz clocks; with one
// enable per system cycle that corresponds to a 90 MHz system clock and one
// sweep per 66.67 ns. The phase order is this design's choice.
module phase_clock_gen #(
  parameter int unsigned NC = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  output logic [NC-1:0] phase_en,
  output logic          sweep_tick
);
  localparam int unsigned PW = (NC > 1) ? $clog2(NC) : 1;
  logic [PW-1:0] phase;

  always_ff @(posedge clk) begin
    if (!rst_n || !run)                phase <= '0;
    else if (32'(phase) == NC - 1)     phase <= '0;
    else                               phase <= phase + 1'b1;
  end

  always_comb begin
    phase_en   = run ? (NC'(1) << phase) : '0;
    sweep_tick = run && (32'(phase) == NC - 1);
  end
endmodule
