// neuron: one spiking neuron, a neuron CU driving a neuron datapath.
//
// The neuron behaves as a multiply-accumulate unit with no multiplier: the
// synaptic product W*s_in is an AND, and the decay by alpha or beta is a shift
// and a subtraction (alpha, beta = 1 - 2^-shift). MODEL and RESET choose one of
// six variants: IF, first-order LIF or second-order LIF, each with a
// subtractive or a fixed reset.
//
// Interface. start/op/ready: handshake with the layer controller (see
// neuron_cu). weight/spike_in: the synaptic weight and input spike of the
// input being integrated, valid with start. spike: registered output spike of
// the last time step. vm/isyn: state, for observation. clear: zero the state
// at the start of an inference.
//
// Timing. One cycle per operation; the second-order LIF's leak takes two.
module neuron
  import spiker_pkg::*;
#(
  parameter neuron_model_e        MODEL       = NEURON_LIF1,
  parameter reset_mode_e          RESET       = RESET_SUBTRACTIVE,
  parameter int unsigned          BW          = 6,
  parameter int unsigned          WBW         = 4,
  parameter logic signed [BW-1:0] VTH         = 8,
  parameter logic signed [BW-1:0] VRESET      = 0,
  parameter int unsigned          ALPHA_SHIFT = 3,
  parameter int unsigned          BETA_SHIFT  = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  start,
  input  neuron_op_e            op,
  output logic                  ready,
  input  logic signed [WBW-1:0] weight,
  input  logic                  spike_in,
  output logic                  spike,
  output logic signed [BW-1:0]  vm,
  output logic signed [BW-1:0]  isyn
);

  dp_ctrl_t ctrl;
  logic     fire;

  neuron_cu #(.MODEL(MODEL), .RESET(RESET)) u_cu (
    .clk, .rst_n, .clear, .start, .op, .fire, .ready, .ctrl, .spike
  );

  neuron_dp #(
    .MODEL(MODEL), .RESET(RESET), .BW(BW), .WBW(WBW), .VTH(VTH), .VRESET(VRESET),
    .ALPHA_SHIFT(ALPHA_SHIFT), .BETA_SHIFT(BETA_SHIFT)
  ) u_dp (
    .clk, .rst_n, .clear, .ctrl, .weight, .spike_in, .fire, .vm, .isyn
  );

endmodule
