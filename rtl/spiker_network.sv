// spiker_network: top level of the spiking neural network accelerator.
//
// Function. A chain of N_LAYERS fully connected spiking layers, synchronised
// by a network CU. Each inference runs N_CYCLES time steps. At every step the
// network CU starts, all at once, the input interface (outside this module),
// every layer and the output spike counters; each layer integrates the spikes
// its predecessor produced in the previous step, so all layers work in
// parallel and a spike needs one step per layer to cross the network. The
// output counters hold, per output neuron, the number of steps in which it
// fired; the class is the neuron with the highest count.
//
// Default configuration: 784-128-10 feed-forward network of first-order LIF
// neurons with subtractive reset, 6-bit membranes, 4-bit weights, 100 time
// steps (the MNIST set-up). The parameters also describe the recurrent
// second-order LIF set-up (700-200-20, RECURRENT = '{1,0}, NEURON_LIF2, 8-bit
// membranes, 6-bit feed-forward and 5-bit feedback weights). Neuron model,
// reset mode and widths are common to all layers; threshold and reset value
// are per layer; the decay shifts are common.
//
// Interface.
//   start/ready          : begin an inference / inference finished (counts valid).
//   in_start/in_ready    : handshake with the input interface. in_spikes must
//                          hold the spike vector of the next step whenever
//                          in_ready is high; in_start (one cycle) means that
//                          vector has been taken and the next may be prepared.
//   wr_*                 : weight loading, one weight per cycle, into layer
//                          wr_layer, feed-forward (wr_fb=0) or feedback memory,
//                          row wr_row = source index, column wr_col = neuron.
//   out_count            : spike count of each output neuron.
//   step                 : current time step.
// Timing. About N_CYCLES * (largest active layer input count + 5) cycles per
// inference when every step carries spikes, about 5 cycles per empty step.
//
// Tool notes. wr_row and wr_col share the width needed for the largest layer
// size, so the upper bits of wr_col are unused when the widest layer is an
// input layer (lint: unused bits).
module spiker_network
  import spiker_pkg::*;
#(
  parameter int unsigned   N_CYCLES    = 100,
  parameter int unsigned   N_LAYERS    = 2,
  parameter int unsigned   SIZES [N_LAYERS+1] = '{784, 128, 10},
  parameter bit            RECURRENT [N_LAYERS] = '{1'b0, 1'b0},
  parameter neuron_model_e MODEL       = NEURON_LIF1,
  parameter reset_mode_e   RESET       = RESET_SUBTRACTIVE,
  parameter int unsigned   BW          = 6,
  parameter int unsigned   WBW_FF      = 4,
  parameter int unsigned   WBW_FB      = 4,
  parameter logic signed [BW-1:0] VTH    [N_LAYERS] = '{6'sd8, 6'sd8},
  parameter logic signed [BW-1:0] VRESET [N_LAYERS] = '{6'sd0, 6'sd0},
  parameter int unsigned   ALPHA_SHIFT = 3,
  parameter int unsigned   BETA_SHIFT  = 3,
  localparam int unsigned  N_IN   = SIZES[0],
  localparam int unsigned  N_OUT  = SIZES[N_LAYERS],
  localparam int unsigned  WBW    = (WBW_FF > WBW_FB) ? WBW_FF : WBW_FB,
  localparam int unsigned  OCW    = bits_for(N_CYCLES),
  localparam int unsigned  SW     = bits_for(N_CYCLES),
  localparam int unsigned  LW     = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1,
  localparam int unsigned  RW     = $clog2(max_size(SIZES) > 1 ? max_size(SIZES) : 2),
  localparam int unsigned  CW     = $clog2(max_size(SIZES) > 1 ? max_size(SIZES) : 2)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      ready,
  output logic                      in_start,
  input  logic                      in_ready,
  input  logic [N_IN-1:0]           in_spikes,
  input  logic                      wr_en,
  input  logic [LW-1:0]             wr_layer,
  input  logic                      wr_fb,
  input  logic [RW-1:0]             wr_row,
  input  logic [CW-1:0]             wr_col,
  input  logic [WBW-1:0]            wr_data,
  output logic [N_OUT-1:0][OCW-1:0] out_count,
  output logic [SW-1:0]             step
);

  function automatic int unsigned max_size(input int unsigned s [N_LAYERS+1]);
    int unsigned m = 0;
    for (int i = 0; i <= N_LAYERS; i++) if (s[i] > m) m = s[i];
    return m;
  endfunction

  // Bit offset of layer boundary k in the flat spike vector.
  function automatic int unsigned offset(input int unsigned k);
    int unsigned o = 0;
    for (int i = 0; i < k; i++) o += SIZES[i];
    return o;
  endfunction

  localparam int unsigned TOTAL = offset(N_LAYERS + 1);

  logic [TOTAL-1:0]    spikes;       // [input | layer 0 out | layer 1 out | ...]
  logic                clear, out_start, out_ready;
  logic [N_LAYERS-1:0] layer_start, layer_ready;

  assign spikes[N_IN-1:0] = in_spikes;

  network_cu #(.N_CYCLES(N_CYCLES), .N_LAYERS(N_LAYERS)) u_network_cu (
    .clk, .rst_n, .start, .ready, .clear,
    .in_start, .in_ready,
    .layer_start, .layer_ready,
    .out_start, .out_ready,
    .step
  );

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_layer
    localparam int unsigned NI  = SIZES[l];
    localparam int unsigned NO  = SIZES[l+1];
    localparam int unsigned OI  = offset(l);
    localparam int unsigned OO  = offset(l + 1);
    localparam int unsigned LRW = ((NI > NO ? NI : NO) > 1) ? $clog2(NI > NO ? NI : NO) : 1;
    localparam int unsigned LCW = (NO > 1) ? $clog2(NO) : 1;
    localparam int unsigned LWB = RECURRENT[l] ? ((WBW_FF > WBW_FB) ? WBW_FF : WBW_FB) : WBW_FF;

    spiker_layer #(
      .N_FF(NI), .N_NEU(NO), .RECURRENT(RECURRENT[l]), .MODEL(MODEL), .RESET(RESET),
      .BW(BW), .WBW_FF(WBW_FF), .WBW_FB(RECURRENT[l] ? WBW_FB : WBW_FF),
      .VTH(VTH[l]), .VRESET(VRESET[l]), .ALPHA_SHIFT(ALPHA_SHIFT), .BETA_SHIFT(BETA_SHIFT)
    ) u_layer (
      .clk, .rst_n, .clear,
      .start      (layer_start[l]),
      .ready      (layer_ready[l]),
      .spikes_in  (spikes[OI +: NI]),
      .spikes_out (spikes[OO +: NO]),
      .wr_en      (wr_en && (wr_layer == LW'(l))),
      .wr_fb      (wr_fb),
      .wr_row     (LRW'(wr_row)),
      .wr_col     (LCW'(wr_col)),
      .wr_data    (wr_data[LWB-1:0])
    );
  end

  output_interface #(.N_OUT(N_OUT), .CNTW(OCW)) u_output (
    .clk, .rst_n, .clear,
    .start  (out_start),
    .ready  (out_ready),
    .spikes (spikes[offset(N_LAYERS) +: N_OUT]),
    .count  (out_count)
  );

endmodule
