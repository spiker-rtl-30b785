// output_interface: spike counters of the output layer.
//
// Function. One counter per output neuron. Each start adds the output layer's
// current spike vector to the counters, so that after an inference count[k] is
// the number of time steps in which output neuron k fired. The class decision
// (for instance, the most active neuron wins) is left to whoever reads the
// counters. Counters saturate at their maximum value.
//
// Interface. start/ready handshake with the network CU; ready is always high
// because a start is fully handled at the clock edge that sees it. clear zeroes
// the counters (start of an inference). spikes: the output layer's spikes.
//
// Timing. Counters update at the clock edge where start is high.
//
// The counters and the handshake follow the architecture; the counter width
// (enough for N_CYCLES) and the saturation are this design's choices.
module output_interface #(
  parameter int unsigned N_OUT = 10,
  parameter int unsigned CNTW  = 7     // holds N_CYCLES = 100
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        start,
  output logic                        ready,
  input  logic [N_OUT-1:0]            spikes,
  output logic [N_OUT-1:0][CNTW-1:0]  count
);

  assign ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (clear) begin
      count <= '0;
    end else if (start) begin
      for (int k = 0; k < N_OUT; k++) begin
        if (spikes[k] && count[k] != '1) count[k] <= count[k] + 1'b1;
      end
    end
  end

endmodule
