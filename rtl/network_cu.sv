// network_cu: network control unit, the global time-step sequencer.
//
// Function. An inference is N_CYCLES time steps. On start the network CU
// clears the layers and the output counters, then loops: it waits until the
// AND of all ready signals (input interface, every layer, output interface) is
// high, asserts one start pulse to all of them at once and increments its step
// counter CNT. When CNT equals N_CYCLES (STOP) and every layer and the output
// interface are ready again, the inference is over and ready is raised (the
// input interface is not waited for then: it has no further step to deliver).
//
// Interface. start/ready with the outside world. clear: one-cycle pulse at the
// beginning of an inference (zero membranes, spikes and counters).
// in_start/in_ready, layer_start/layer_ready[], out_start/out_ready: the
// start/ready handshakes with the blocks it synchronises. A block accepting a
// start must drop its ready at that same clock edge unless it has already
// finished its work by then. step: the current value of CNT.
//
// Timing. One cycle between the last ready and the next start; the step time
// is set by the slowest block.
//
// Following the architecture: the counter, its comparison with N_CYCLES, the
// AND of the ready signals and the common start. The clear pulse is this
// design's choice; how state is reset between inferences is not specified.
module network_cu
  import spiker_pkg::*;
#(
  parameter int unsigned N_CYCLES = 100,
  parameter int unsigned N_LAYERS = 2,
  localparam int unsigned SW      = bits_for(N_CYCLES)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                ready,
  output logic                clear,
  output logic                in_start,
  input  logic                in_ready,
  output logic [N_LAYERS-1:0] layer_start,
  input  logic [N_LAYERS-1:0] layer_ready,
  output logic                out_start,
  input  logic                out_ready,
  output logic [SW-1:0]       step
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN} state_e;
  state_e state_q;
  logic   all_ready, stop, go, finished;

  assign all_ready = in_ready && (&layer_ready) && out_ready;
  assign stop      = (step == SW'(N_CYCLES));
  assign go        = (state_q == S_RUN) && all_ready && !stop;
  assign finished  = (state_q == S_RUN) && stop && (&layer_ready) && out_ready;

  assign ready       = (state_q == S_IDLE);
  assign clear       = (state_q == S_CLEAR);
  assign in_start    = go;
  assign layer_start = {N_LAYERS{go}};
  assign out_start   = go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      step    <= '0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (start) state_q <= S_CLEAR;
        S_CLEAR: begin
          step    <= '0;
          state_q <= S_RUN;
        end
        S_RUN: begin
          if (go)                      step    <= step + 1'b1;
          else if (finished)           state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_step_bound: assert property (@(posedge clk) disable iff (!rst_n) step <= SW'(N_CYCLES));

endmodule
