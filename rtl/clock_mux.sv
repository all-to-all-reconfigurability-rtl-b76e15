// clock_mux - colour (clock) multiplexer of one p-bit.
//
// The phase generator drives one update enable per colour, each high for one
// system cycle per sweep, at shifted phases. This mux passes the enable of the
// colour the active instance assigns to the p-bit. A colour code with no phase
// (>= NC) never updates the p-bit, which is how unused p-bits are parked.
// Combinational.
//
// The published design multiplexes real phase-shifted 15 MHz clocks; this
// design uses enables on a single clock instead, which is the same schedule
// without gated clocks.
module clock_mux #(
  parameter int unsigned NC = 6,
  parameter int unsigned CW = 3
) (
  input  logic [NC-1:0] phase_en,
  input  logic [CW-1:0] color,
  output logic          en
);
  always_comb en = (32'(color) < NC) ? phase_en[color] : 1'b0;
endmodule
