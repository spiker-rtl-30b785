// tb_neuron_cu: self-checking test of the neuron control unit on its own.
//
// All six variants (IF, LIF1, LIF2 x subtractive, fixed reset) receive random
// start/op pulses, a random FIRE input from the (absent) datapath and an
// occasional clear. Every cycle the control word, ready and the spike output
// are compared with the expected sequencing:
//   leak  : IF nothing; LIF1 one cycle V - L; LIF2 V - L, then a second cycle
//           with ready low doing V + S and I - L
//   integ : I + (W AND s) for LIF2, V + (W AND s) otherwise
//   fire  : spike <= FIRE; if FIRE, V - Vth (and the Vreset select for fixed reset)
// Starts during the busy cycle of the LIF2 leak are offered too (the CU must
// ignore them while ready is low). Each op, the busy cycle and both fire
// outcomes are counted and must all occur.
//
// The control-word encoding and the busy cycle of the second-order leak are
// this design's choices; the set of operations each model needs follows the
// neuron datapaths of the architecture.
module tb_neuron_cu;
  import spiker_pkg::*;

  localparam int N_CYC = 6000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, start, fire;
  neuron_op_e op;
  int checks = 0, failures = 0;
  int n_op [3];
  int n_busy = 0, n_fire = 0, n_nofire = 0;

  logic     ready [6];
  dp_ctrl_t ctrl  [6];
  logic     spike [6];

  for (genvar g = 0; g < 6; g++) begin : g_var
    neuron_cu #(.MODEL(neuron_model_e'(g % 3)), .RESET(reset_mode_e'(g / 3))) dut (
      .clk, .rst_n, .clear, .start, .op, .fire,
      .ready(ready[g]), .ctrl(ctrl[g]), .spike(spike[g]));
  end

  function automatic dp_ctrl_t idle_ctrl();
    return '{v_sel: SEL_I, v_sub: 1'b0, v_en: 1'b0, v_rst_sel: 1'b0,
             i_sel: SEL_I, i_sub: 1'b0, i_en: 1'b0};
  endfunction

  initial begin
    bit busy [6];
    bit spk  [6];
    clear = 1'b0; start = 1'b0; op = OP_LEAK; fire = 1'b0;
    foreach (busy[g]) begin busy[g] = 0; spk[g] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int k = 0; k < N_CYC; k++) begin
      clear = ($urandom_range(0, 99) == 0);
      start = ($urandom_range(0, 2) != 0);
      op    = neuron_op_e'($urandom_range(0, 2));
      fire  = $urandom_range(0, 1);
      #1;
      for (int g = 0; g < 6; g++) begin
        automatic neuron_model_e m = neuron_model_e'(g % 3);
        automatic reset_mode_e   r = reset_mode_e'(g / 3);
        automatic dp_ctrl_t      e = idle_ctrl();
        automatic bit            next_busy = 0;
        if (busy[g]) begin
          e.v_sel = SEL_S; e.v_en = 1'b1;
          e.i_sel = SEL_L; e.i_sub = 1'b1; e.i_en = 1'b1;
          if (g == 2) n_busy++;
        end else if (start) begin
          unique case (op)
            OP_LEAK: begin
              if (m != NEURON_IF) begin e.v_sel = SEL_L; e.v_sub = 1'b1; e.v_en = 1'b1; end
              next_busy = (m == NEURON_LIF2);
            end
            OP_INTEG: begin
              if (m == NEURON_LIF2) e.i_en = 1'b1;
              else                  e.v_en = 1'b1;
            end
            default: begin
              if (fire) begin
                e.v_sel = SEL_R; e.v_sub = 1'b1; e.v_en = 1'b1;
                e.v_rst_sel = (r == RESET_FIXED);
              end
            end
          endcase
        end
        checks += 3;
        if (ready[g] !== !busy[g]) begin
          failures++; $display("cycle %0d variant %0d: ready %b", k, g, ready[g]);
        end
        if (ctrl[g] !== e) begin
          failures++;
          $display("cycle %0d variant %0d: ctrl %h expected %h", k, g, ctrl[g], e);
        end
        if (spike[g] !== spk[g]) begin
          failures++; $display("cycle %0d variant %0d: spike %b", k, g, spike[g]);
        end
        // state update at the coming edge
        if (clear) begin
          busy[g] = 0; spk[g] = 0;
        end else begin
          if (!busy[g] && start && op == OP_FIRE) spk[g] = fire;
          busy[g] = next_busy;
        end
      end
      if (start && !clear) begin
        n_op[int'(op)]++;
        if (op == OP_FIRE) begin if (fire) n_fire++; else n_nofire++; end
      end
      @(negedge clk);
    end
    $display("leak %0d integ %0d fire %0d (fired %0d, not %0d), LIF2 busy cycles %0d",
             n_op[0], n_op[1], n_op[2], n_fire, n_nofire, n_busy);
    checks++;
    if (n_op[0] == 0 || n_op[1] == 0 || n_op[2] == 0 || n_busy == 0 || n_fire == 0 || n_nofire == 0) begin
      failures++;
      $display("FAIL: a sequencing case never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_CYC + 1000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
