// sweep_controller - runs a block of Monte Carlo sweeps between swap attempts.
//
// Handshake with the host: while idle (busy low) the host pulses start with
// n_sweeps. The controller raises run for exactly n_sweeps sweeps (counted with
// the phase generator's sweep_tick), then pulses energy_start so every replica
// computes its energy, waits for energy_valid, and pulses done with busy
// falling in the same cycle. States, energies and weights are then stable for
// the host to read, swap and rewrite. start with n_sweeps = 0 only measures
// the energies. A start while busy is a protocol error (asserted, ignored).
//
// FSM: IDLE -> RUN -> ENERGY -> IDLE. Latency from start to done is
// n_sweeps*NC + 4 cycles (one cycle into RUN, NC cycles per sweep, one to
// start the energy units, two of energy pipeline).
//
// The published design runs 100 sweeps between swap attempts and leaves swaps
// to an external CPU; this handshake is this design's.
module sweep_controller (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] n_sweeps,
  input  logic        sweep_tick,
  input  logic        energy_valid,
  output logic        run,
  output logic        energy_start,
  output logic        busy,
  output logic        done,
  output logic [31:0] sweeps_done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_ENERGY} state_e;
  state_e      st;
  logic [31:0] target;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      target       <= '0;
      sweeps_done  <= '0;
      energy_start <= 1'b0;
      done         <= 1'b0;
    end else begin
      energy_start <= 1'b0;
      done         <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          target      <= n_sweeps;
          sweeps_done <= '0;
          if (n_sweeps == 0) begin
            st           <= S_ENERGY;
            energy_start <= 1'b1;
          end else begin
            st <= S_RUN;
          end
        end
        S_RUN: if (sweep_tick) begin
          sweeps_done <= sweeps_done + 1;
          if (sweeps_done + 1 == target) begin
            st           <= S_ENERGY;
            energy_start <= 1'b1;
          end
        end
        S_ENERGY: if (energy_valid) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign run  = (st == S_RUN);
  assign busy = (st != S_IDLE);

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("sweep_controller: start while busy");
endmodule
