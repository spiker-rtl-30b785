// neuron_dp: datapath of one spiking neuron, for all six neuron variants.
//
// Function. The membrane potential Vm (and, for the second-order LIF model, the
// synaptic current Isyn) is updated by a single adder/subtractor per state
// variable, fed through a small multiplexer:
//   I (integrate) : the input weight ANDed with the input spike (W & s_in),
//   L (leakage)   : the state shifted right, so that x - (x >>> k) = (1-2^-k)*x
//                   implements a decay factor alpha or beta that is one minus a
//                   power of two,
//   R (reset)     : the threshold Vth, subtracted on a spike (subtractive reset),
//   S             : Isyn, added to Vm (second-order LIF only).
// With the fixed reset a second multiplexer after the adder loads Vreset into
// Vm instead. A comparator drives FIRE = (Vm > Vth), signed.
// Model by model: IF uses I and R; first-order LIF adds L on Vm; second-order
// LIF integrates W & s_in into Isyn, decays Isyn by alpha and Vm by beta, and
// adds Isyn to Vm.
//
// Interface. ctrl comes from neuron_cu; weight is a two's-complement synaptic
// weight of WBW bits, sign-extended here to the neuron width BW; spike_in is the
// input spike selected by the layer controller. vm / isyn expose the state.
// clear zeroes the state synchronously (start of a new inference).
//
// Timing. Registers load on the rising clock edge when their enable is high;
// FIRE is combinational from the registered Vm.
//
// Following the architecture: the multiplexer inputs, the shift-based decay,
// the AND for the synapse, the comparator and the fixed/subtractive reset
// structure. This design's own choices: additions and subtractions saturate at
// the limits of BW bits rather than wrap (the same rule the quantiser applies
// to out-of-range values); the threshold, reset value and shifts are
// per-layer constants given as parameters.
//
// Tool notes. Only the second-order LIF reads the Isyn fields of ctrl; for the
// other models lint reports those bits as unused.
module neuron_dp
  import spiker_pkg::*;
#(
  parameter neuron_model_e             MODEL       = NEURON_LIF1,
  parameter reset_mode_e               RESET       = RESET_SUBTRACTIVE,
  parameter int unsigned               BW          = 6,  // membrane / current width
  parameter int unsigned               WBW         = 4,  // weight width (<= BW)
  parameter logic signed [BW-1:0]      VTH         = 8,
  parameter logic signed [BW-1:0]      VRESET      = 0,
  parameter int unsigned               ALPHA_SHIFT = 3,  // alpha = 1 - 2^-ALPHA_SHIFT
  parameter int unsigned               BETA_SHIFT  = 3   // beta  = 1 - 2^-BETA_SHIFT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  dp_ctrl_t              ctrl,
  input  logic signed [WBW-1:0] weight,
  input  logic                  spike_in,
  output logic                  fire,
  output logic signed [BW-1:0]  vm,
  output logic signed [BW-1:0]  isyn
);

  localparam logic signed [BW:0] MAXV = (BW+1)'((1 << (BW-1)) - 1);
  localparam logic signed [BW:0] MINV = -(BW+1)'(1 << (BW-1));

  // Saturating a +/- b on BW bits.
  function automatic logic signed [BW-1:0] sat_addsub(input logic signed [BW-1:0] a,
                                                      input logic signed [BW-1:0] b,
                                                      input logic sub);
    logic signed [BW:0] r;
    r = sub ? (BW+1)'(a) - (BW+1)'(b) : (BW+1)'(a) + (BW+1)'(b);
    if (r > MAXV)      return MAXV[BW-1:0];
    else if (r < MINV) return MINV[BW-1:0];
    else               return r[BW-1:0];
  endfunction

  // Synapse: weight AND spike.
  logic signed [BW-1:0] w_ext, w_and;
  assign w_ext = BW'(weight);                 // sign extension (weight is signed)
  assign w_and = w_ext & {BW{spike_in}};

  // ---------------- synaptic current (second-order LIF only) ----------------
  if (MODEL == NEURON_LIF2) begin : g_isyn
    logic signed [BW-1:0] isyn_q, i_op;
    always_comb i_op = (ctrl.i_sel == SEL_L) ? (isyn_q >>> ALPHA_SHIFT) : w_and;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          isyn_q <= '0;
      else if (clear)      isyn_q <= '0;
      else if (ctrl.i_en)  isyn_q <= sat_addsub(isyn_q, i_op, ctrl.i_sub);
    end
    assign isyn = isyn_q;
  end else begin : g_no_isyn
    assign isyn = '0;
  end

  // ---------------- membrane potential ----------------
  logic signed [BW-1:0] vm_q, v_leak, v_op, v_sum, v_next;

  // Leakage term V>>>b, kept in its own signed signal so that the shift stays
  // arithmetic (a conditional with an unsigned operand would make it logical).
  if (MODEL == NEURON_IF) begin : g_no_leak
    assign v_leak = '0;
  end else begin : g_leak
    assign v_leak = vm_q >>> BETA_SHIFT;
  end

  always_comb begin
    unique case (ctrl.v_sel)
      SEL_I:   v_op = w_and;
      SEL_L:   v_op = v_leak;
      SEL_R:   v_op = VTH;
      default: v_op = isyn;   // SEL_S
    endcase
    v_sum  = sat_addsub(vm_q, v_op, ctrl.v_sub);
    v_next = (RESET == RESET_FIXED && ctrl.v_rst_sel) ? VRESET : v_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         vm_q <= '0;
    else if (clear)     vm_q <= '0;
    else if (ctrl.v_en) vm_q <= v_next;
  end

  assign vm   = vm_q;
  assign fire = (vm_q > VTH);

  initial begin
    assert (WBW <= BW) else $error("neuron_dp: weight width %0d exceeds neuron width %0d", WBW, BW);
  end

endmodule
