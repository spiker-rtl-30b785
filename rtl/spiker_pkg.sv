// spiker_pkg: types and helpers shared by the spiking-network accelerator.
//
// The accelerator supports three neuron models (integrate-and-fire, first-order
// leaky integrate-and-fire, second-order LIF with a synaptic-current state) and
// two reset modes (subtractive: the threshold is taken off the membrane; fixed:
// the membrane is loaded with a reset value). Those six combinations are the
// ones the architecture is built around. Membranes, currents and weights are
// two's-complement fixed-point numbers.
//
// The operation code that travels with a neuron's start signal (leak, integrate
// one input, fire) and the saturating add/subtract are choices of this design:
// the architecture only prescribes a start/ready pair between layer and neuron
// controllers and values that saturate instead of wrapping when quantised.
package spiker_pkg;

  // Neuron model: IF (no leak), first-order LIF, second-order LIF.
  typedef enum logic [1:0] {
    NEURON_IF   = 2'd0,
    NEURON_LIF1 = 2'd1,
    NEURON_LIF2 = 2'd2
  } neuron_model_e;

  // Reset applied after a spike.
  typedef enum logic {
    RESET_SUBTRACTIVE = 1'b0,  // Vm <- Vm - Vth
    RESET_FIXED       = 1'b1   // Vm <- Vreset
  } reset_mode_e;

  // Operation requested by the layer controller together with neurons_start.
  typedef enum logic [1:0] {
    OP_LEAK  = 2'd0,  // one time step's exponential decay (and Isyn -> Vm for LIF2)
    OP_INTEG = 2'd1,  // integrate one input: weight AND spike
    OP_FIRE  = 2'd2   // compare with the threshold, emit the spike, apply the reset
  } neuron_op_e;

  // Select of the multiplexer in front of an adder: I = integrate path,
  // L = leakage path, R = reset path, S = synaptic current (LIF2 membrane adder).
  typedef enum logic [1:0] {
    SEL_I = 2'd0,
    SEL_L = 2'd1,
    SEL_R = 2'd2,
    SEL_S = 2'd3
  } dp_sel_e;

  // Control word from a neuron CU to its datapath.
  typedef struct packed {
    dp_sel_e v_sel;     // membrane adder input select
    logic    v_sub;     // 1: Vm - operand, 0: Vm + operand
    logic    v_en;      // load the membrane register
    logic    v_rst_sel; // fixed reset: load Vreset instead of the adder output
    dp_sel_e i_sel;     // synaptic-current adder input select (SEL_I or SEL_L)
    logic    i_sub;
    logic    i_en;
  } dp_ctrl_t;

  // Number of bits needed to hold the values 0 .. n.
  function automatic int unsigned bits_for(input int unsigned n);
    int unsigned b = 1;
    while ((64'd1 << b) <= 64'(n)) b++;
    return b;
  endfunction

endpackage
