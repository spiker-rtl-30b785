// neuron_cu: control unit of one neuron.
//
// Function. The layer controller starts the neuron with one of three
// operations (spiker_pkg::neuron_op_e) and the neuron CU turns it into the
// datapath controls SEL, ADD/SUB and EN:
//   OP_LEAK  : IF - nothing; first-order LIF - Vm <= Vm - (Vm >>> beta_shift);
//              second-order LIF - two cycles: first Vm <= Vm - (Vm >>> beta_shift),
//              then Vm <= Vm + Isyn together with Isyn <= Isyn - (Isyn >>> alpha_shift),
//              so that Vm[n] = beta*Vm[n-1] + Isyn[n-1] as in the model equations.
//   OP_INTEG : IF and first-order LIF - Vm <= Vm + (W & s_in);
//              second-order LIF      - Isyn <= Isyn + (W & s_in).
//   OP_FIRE  : SPIKE <= FIRE (Vm > Vth); on a spike, subtractive reset
//              Vm <= Vm - Vth or fixed reset Vm <= Vreset.
//
// Interface / timing. start/ready handshake: ready is high when the neuron can
// accept a start. An operation is applied on the clock edge at which start is
// seen (one cycle); the second-order LIF leak holds ready low for one extra
// cycle while it does its second half. spike is registered and holds the
// result of the last OP_FIRE until the next one. clear (new inference) returns
// the controller to idle and zeroes spike.
//
// The operation code alongside start, and the two-cycle split of the
// second-order leak, are this design's choices; the architecture names the
// controls (SEL, ADD/SUB, EN, FIRE, SPIKE) but not the sequencing.
module neuron_cu
  import spiker_pkg::*;
#(
  parameter neuron_model_e MODEL = NEURON_LIF1,
  parameter reset_mode_e   RESET = RESET_SUBTRACTIVE
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       start,
  input  neuron_op_e op,
  input  logic       fire,
  output logic       ready,
  output dp_ctrl_t   ctrl,
  output logic       spike
);

  typedef enum logic {S_IDLE, S_LEAK2} state_e;
  state_e state_q, state_d;
  logic   spike_d;

  always_comb begin
    ctrl    = '{v_sel: SEL_I, v_sub: 1'b0, v_en: 1'b0, v_rst_sel: 1'b0,
                i_sel: SEL_I, i_sub: 1'b0, i_en: 1'b0};
    state_d = state_q;
    spike_d = spike;
    ready   = (state_q == S_IDLE);

    unique case (state_q)
      S_IDLE: if (start) begin
        unique case (op)
          OP_LEAK: begin
            if (MODEL != NEURON_IF) begin
              ctrl.v_sel = SEL_L;
              ctrl.v_sub = 1'b1;
              ctrl.v_en  = 1'b1;
            end
            if (MODEL == NEURON_LIF2) state_d = S_LEAK2;
          end
          OP_INTEG: begin
            if (MODEL == NEURON_LIF2) begin
              ctrl.i_sel = SEL_I;
              ctrl.i_en  = 1'b1;
            end else begin
              ctrl.v_sel = SEL_I;
              ctrl.v_en  = 1'b1;
            end
          end
          OP_FIRE: begin
            spike_d = fire;
            if (fire) begin
              ctrl.v_sel     = SEL_R;
              ctrl.v_sub     = 1'b1;
              ctrl.v_en      = 1'b1;
              ctrl.v_rst_sel = (RESET == RESET_FIXED);
            end
          end
          default: ;
        endcase
      end
      S_LEAK2: begin
        // Vm <= Vm + Isyn[n-1] and Isyn <= alpha * Isyn[n-1], same edge.
        ctrl.v_sel = SEL_S;
        ctrl.v_en  = 1'b1;
        ctrl.i_sel = SEL_L;
        ctrl.i_sub = 1'b1;
        ctrl.i_en  = 1'b1;
        state_d    = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      spike   <= 1'b0;
    end else if (clear) begin
      state_q <= S_IDLE;
      spike   <= 1'b0;
    end else begin
      state_q <= state_d;
      spike   <= spike_d;
    end
  end

endmodule
