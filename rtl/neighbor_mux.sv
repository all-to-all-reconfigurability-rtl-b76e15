// neighbor_mux - neighbour multiplexer of one p-bit.
//
// For each of K synapse slots, picks from the replica's state vector the state
// of the p-bit whose index the active instance stores for that slot. The
// indices come from the instance tables, already selected by the instance
// selector, so changing instance rewires the p-bit without resynthesis. An
// index outside the replica reads as 0. Purely combinational.
//
// In the published design each p-bit multiplexes only the neighbours it can
// have in the instances built in; here every slot can reach any p-bit.
module neighbor_mux #(
  parameter int unsigned N  = 112,
  parameter int unsigned K  = 9,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]  states,
  input  logic [IW-1:0] idx [K],
  output logic [K-1:0]  m
);
  always_comb begin
    for (int k = 0; k < int'(K); k++)
      m[k] = (32'(idx[k]) < N) ? states[idx[k]] : 1'b0;
  end
endmodule
