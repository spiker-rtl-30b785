// tb_neuron: self-checking test of the neuron (control unit + datapath) in all
// six variants: IF, first-order LIF, second-order LIF, each with subtractive
// and with fixed reset.
//
// Every variant gets the same kind of random operation sequence (leak,
// integrate one input with a random weight and random input spike, fire) through
// the start/op/ready handshake, with a clear pulse now and then. After each
// operation the membrane, the synaptic current and the output spike are
// compared with an integer model of the neuron equations:
//   leak  : LIF1 V -= V>>>b; LIF2 V -= V>>>b, then V += I and I -= I>>>a (old I)
//   integ : (W AND s) added to I (LIF2) or to V (IF, LIF1), saturating
//   fire  : spike = V > Vth; subtractive V -= Vth or fixed V = Vreset
// Weights cover the full signed range so that saturation is reached; the test
// counts leaks, integrations, spikes, resets and saturations and fails if any
// never happened. The wait after each start is the neuron's own ready, checked
// to come back within 3 cycles.
//
// The neuron equations follow the neuron models of the architecture; the
// operation codes, the two-cycle second-order leak and saturation are this
// design's choices.
module tb_neuron;
  import spiker_pkg::*;

  localparam int BW = 6, WBW = 4, N_OPS = 3000;
  localparam logic signed [BW-1:0] VTH = 6'sd9, VRESET = -6'sd3;
  localparam int ASH = 2, BSH = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1'b1; end

  int checks [6];
  int failures [6];
  int n_fire [6], n_sat [6], n_integ [6];
  bit done [6];

  for (genvar g = 0; g < 6; g++) begin : g_var
    localparam neuron_model_e M = neuron_model_e'(g % 3);
    localparam reset_mode_e   R = reset_mode_e'(g / 3);

    logic clear, start, ready, spike_in, spike;
    neuron_op_e op;
    logic signed [WBW-1:0] weight;
    logic signed [BW-1:0]  vm, isyn;

    neuron #(.MODEL(M), .RESET(R), .BW(BW), .WBW(WBW), .VTH(VTH), .VRESET(VRESET),
             .ALPHA_SHIFT(ASH), .BETA_SHIFT(BSH)) dut (
      .clk, .rst_n, .clear, .start, .op, .ready, .weight, .spike_in, .spike, .vm, .isyn
    );

    function automatic int sat(int x, ref int ns);
      if (x > 31)  begin ns++; return 31;  end
      if (x < -32) begin ns++; return -32; end
      return x;
    endfunction

    initial begin
      automatic int v = 0, i = 0, s = 0;
      automatic int chk = 0, fl = 0, nf = 0, ns = 0, ni = 0;
      clear = 1'b0; start = 1'b0; op = OP_LEAK; weight = '0; spike_in = 1'b0;
      done[g] = 1'b0;
      wait (rst_n === 1'b1);
      @(posedge clk);
      for (int k = 0; k < N_OPS; k++) begin
        automatic int r = int'($urandom_range(0, 99));
        automatic int w = int'($urandom_range(0, 15)) - 8 + ((k / 500) % 2 == 0 ? 3 : -3);
        automatic bit sp = ($urandom_range(0, 3) != 0);
        automatic int waitc = 0;
        if (w > 7) w = 7;
        if (w < -8) w = -8;
        if (r < 2) begin
          // clear pulse
          clear <= 1'b1;
          @(posedge clk);
          clear <= 1'b0;
          v = 0; i = 0; s = 0;
        end else begin
          neuron_op_e o;
          o = (r < 22) ? OP_LEAK : (r < 82) ? OP_INTEG : OP_FIRE;
          start <= 1'b1; op <= o; weight <= WBW'(w); spike_in <= sp;
          @(posedge clk);
          start <= 1'b0;
          // model
          unique case (o)
            OP_LEAK: begin
              if (M != NEURON_IF) v = sat(v - (v >>> BSH), ns);
              if (M == NEURON_LIF2) begin
                v = sat(v + i, ns);
                i = sat(i - (i >>> ASH), ns);
              end
            end
            OP_INTEG: if (sp) begin
              ni++;
              if (M == NEURON_LIF2) i = sat(i + w, ns);
              else                  v = sat(v + w, ns);
            end
            default: begin
              s = (v > int'(VTH));
              if (s) begin
                nf++;
                if (R == RESET_SUBTRACTIVE) v = sat(v - int'(VTH), ns);
                else                        v = int'(VRESET);
              end
            end
          endcase
        end
        // wait for the neuron to be ready again
        #1;
        while (!ready && waitc < 4) begin @(posedge clk); #1; waitc++; end
        chk++;
        if (!ready) begin
          fl++;
          $display("variant %0d op %0d: ready did not return", g, k);
        end
        chk += 3;
        if (int'(vm) != v || int'(isyn) != (M == NEURON_LIF2 ? i : 0) || int'(spike) != s) begin
          fl++;
          $display("variant %0d op %0d: vm %0d/%0d isyn %0d/%0d spike %0d/%0d (got/expected)",
                   g, k, vm, v, isyn, i, spike, s);
        end
      end
      checks[g] = chk; failures[g] = fl; n_fire[g] = nf; n_sat[g] = ns; n_integ[g] = ni;
      done[g] = 1'b1;
    end
  end

  initial begin
    automatic int c = 0, f = 0;
    wait (rst_n === 1'b1);
    @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    for (int g = 0; g < 6; g++) begin
      c += checks[g] + 3; f += failures[g];
      $display("variant %0d: %0d spikes, %0d saturations, %0d integrations",
               g, n_fire[g], n_sat[g], n_integ[g]);
      if (n_fire[g] == 0 || n_sat[g] == 0 || n_integ[g] == 0) begin
        f++;
        $display("FAIL: variant %0d did not exercise spikes, saturation and integration", g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
