// tb_neuron_dp: self-checking test of the neuron datapath on its own.
//
// Two datapaths are driven with random control words every cycle (all mux
// selects, add/sub, enables, the fixed-reset select) and random weights and
// input spikes, with an occasional clear: a second-order LIF with fixed reset
// (the one with every element: Isyn adder, both shifts, Vreset mux) and an IF
// with subtractive reset (no leak term, no Isyn). An integer model of the
// datapath is stepped alongside; membrane, current and FIRE are compared after
// every clock edge. Saturation at both ends, each mux input and FIRE are
// counted and must all occur.
//
// The datapath elements (operand multiplexer, adder/subtractor, comparator,
// shift for the decay, Vreset selection) follow the architecture; saturation
// and the exact control-word fields are this design's choices.
module tb_neuron_dp;
  import spiker_pkg::*;

  localparam int BW = 6, WBW = 4, N_CYC = 20000;
  localparam logic signed [BW-1:0] VTH = 6'sd10, VRESET = 6'sd2;
  localparam int ASH = 2, BSH = 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_sat_hi = 0, n_sat_lo = 0, n_fire = 0, n_rst = 0;

  logic clear;
  dp_ctrl_t ctrl;
  logic signed [WBW-1:0] weight;
  logic spike_in;
  logic fire_a, fire_b;
  logic signed [BW-1:0] vm_a, isyn_a, vm_b, isyn_b;

  neuron_dp #(.MODEL(NEURON_LIF2), .RESET(RESET_FIXED), .BW(BW), .WBW(WBW), .VTH(VTH),
              .VRESET(VRESET), .ALPHA_SHIFT(ASH), .BETA_SHIFT(BSH)) dut_a (
    .clk, .rst_n, .clear, .ctrl, .weight, .spike_in, .fire(fire_a), .vm(vm_a), .isyn(isyn_a));
  neuron_dp #(.MODEL(NEURON_IF), .RESET(RESET_SUBTRACTIVE), .BW(BW), .WBW(WBW), .VTH(VTH),
              .VRESET(VRESET), .ALPHA_SHIFT(ASH), .BETA_SHIFT(BSH)) dut_b (
    .clk, .rst_n, .clear, .ctrl, .weight, .spike_in, .fire(fire_b), .vm(vm_b), .isyn(isyn_b));

  function automatic int sat(int x);
    if (x > 31)  begin n_sat_hi++; return 31;  end
    if (x < -32) begin n_sat_lo++; return -32; end
    return x;
  endfunction

  // one clock edge of the model; lif2: model A, else model B
  function automatic void model_step(bit lif2, inout int v, inout int i, input dp_ctrl_t c,
                                     input int w, input bit s, input bit clr);
    int ws, vop, vn, iop;
    if (clr) begin v = 0; i = 0; return; end
    ws = s ? w : 0;
    unique case (c.v_sel)
      SEL_I:   vop = ws;
      SEL_L:   vop = lif2 ? (v >>> BSH) : 0;
      SEL_R:   vop = int'(VTH);
      default: vop = lif2 ? i : 0;
    endcase
    vn = sat(c.v_sub ? v - vop : v + vop);
    if (lif2 && c.v_rst_sel) vn = int'(VRESET);
    iop = (c.i_sel == SEL_L) ? (i >>> ASH) : ws;
    if (lif2 && c.i_en) i = sat(c.i_sub ? i - iop : i + iop);
    if (c.v_en) v = vn;
  endfunction

  initial begin
    automatic int va = 0, ia = 0, vb = 0, ib = 0;
    clear = 1'b0; ctrl = '0; weight = '0; spike_in = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int k = 0; k < N_CYC; k++) begin
      automatic dp_ctrl_t c;
      automatic int w = int'($urandom_range(0, 15)) - 8;
      automatic bit s = $urandom_range(0, 1);
      automatic bit clr = ($urandom_range(0, 199) == 0);
      c.v_sel = dp_sel_e'($urandom_range(0, 3));
      c.v_sub = $urandom_range(0, 1);
      // bias towards long runs of additions or subtractions to reach saturation
      if ((k / 300) % 3 == 0) c.v_sub = ($urandom_range(0, 9) == 0) ? ~c.v_sub : 1'b0;
      if ((k / 300) % 3 == 1) c.v_sub = ($urandom_range(0, 9) == 0) ? ~c.v_sub : 1'b1;
      c.v_en = $urandom_range(0, 1);
      c.v_rst_sel = ($urandom_range(0, 15) == 0);
      c.i_sel = $urandom_range(0, 1) ? SEL_L : SEL_I;
      c.i_sub = c.v_sub;
      c.i_en = $urandom_range(0, 1);
      if (c.v_rst_sel && c.v_en) n_rst++;
      ctrl = c; weight = WBW'(w); spike_in = s; clear = clr;
      // FIRE is combinational on the current membrane
      checks += 2;
      if (fire_a !== (va > int'(VTH))) begin failures++; $display("cycle %0d: FIRE A %b", k, fire_a); end
      if (fire_b !== (vb > int'(VTH))) begin failures++; $display("cycle %0d: FIRE B %b", k, fire_b); end
      if (fire_a) n_fire++;
      model_step(1'b1, va, ia, c, w, s, clr);
      model_step(1'b0, vb, ib, c, w, s, clr);
      @(negedge clk);
      checks += 4;
      if (int'(vm_a) != va || int'(isyn_a) != ia) begin
        failures++;
        $display("cycle %0d: A vm %0d/%0d isyn %0d/%0d (got/expected)", k, vm_a, va, isyn_a, ia);
        va = int'(vm_a); ia = int'(isyn_a);
      end
      if (int'(vm_b) != vb || int'(isyn_b) != 0) begin
        failures++;
        $display("cycle %0d: B vm %0d/%0d isyn %0d (got/expected)", k, vm_b, vb, isyn_b);
        vb = int'(vm_b);
      end
    end
    $display("saturations high %0d low %0d, fires %0d, fixed resets %0d",
             n_sat_hi, n_sat_lo, n_fire, n_rst);
    checks += 4;
    if (n_sat_hi == 0) begin failures++; $display("FAIL: no saturation at the top"); end
    if (n_sat_lo == 0) begin failures++; $display("FAIL: no saturation at the bottom"); end
    if (n_fire == 0)   begin failures++; $display("FAIL: FIRE never high"); end
    if (n_rst == 0)    begin failures++; $display("FAIL: fixed reset never used"); end
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
