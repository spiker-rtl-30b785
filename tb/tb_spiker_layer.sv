// tb_spiker_layer: self-checking test of one spiking layer against the
// reference model.
//
// Two layers run side by side:
//   0  12 inputs, 6 neurons, recurrent, second-order LIF, subtractive reset,
//      8-bit neurons, 6-bit feed-forward and 5-bit feedback weights,
//   1  9 inputs, 7 neurons, feed-forward only, first-order LIF, fixed reset,
//      6-bit neurons, 4-bit weights.
// Random weights are written through the weight port (and into a one-layer
// instance of the reference model), the layer is cleared, then run for 300
// time steps with random input vectors (some all zero), checking all output
// spikes after every step. A second clear half way checks that the state is
// zeroed. Spikes, spike-free steps, feedback loops and saturation must occur.
//
// A layer of parallel neurons fed one input at a time, with optional
// all-to-all feedback, follows the architecture; the two layer configurations
// and their thresholds are this testbench's choices.
module tb_spiker_layer;
  import spiker_pkg::*;
  import snn_ref_pkg::*;

  localparam int N_STEPS = 300;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1'b1; end

  int  checks [2];
  int  failures [2];
  bit  done [2];
  int  n_spk [2], n_empty [2], n_fbl [2], n_sat [2];

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int            NFF  = (g == 0) ? 12 : 9;
    localparam int            NNEU = (g == 0) ? 6 : 7;
    localparam bit            RC   = (g == 0);
    localparam neuron_model_e M    = (g == 0) ? NEURON_LIF2 : NEURON_LIF1;
    localparam reset_mode_e   R    = (g == 0) ? RESET_SUBTRACTIVE : RESET_FIXED;
    localparam int            BW   = (g == 0) ? 8 : 6;
    localparam int            WFF  = (g == 0) ? 6 : 4;
    localparam int            WFB  = (g == 0) ? 5 : 4;
    localparam int            IVTH = (g == 0) ? 12 : 7;
    localparam int            IVRS = (g == 0) ? 0 : -2;
    localparam int            ASH  = 2, BSH = (g == 0) ? 3 : 2;
    localparam int            WBW  = (WFF > WFB) ? WFF : WFB;
    localparam int            ROWS = (NFF > NNEU) ? NFF : NNEU;
    localparam int            RW   = $clog2(ROWS), CW = $clog2(NNEU);

    logic clear, start, ready, wr_en, wr_fb;
    logic [NFF-1:0]  spikes_in;
    logic [NNEU-1:0] spikes_out;
    logic [RW-1:0]   wr_row;
    logic [CW-1:0]   wr_col;
    logic [WBW-1:0]  wr_data;

    spiker_layer #(.N_FF(NFF), .N_NEU(NNEU), .RECURRENT(RC), .MODEL(M), .RESET(R), .BW(BW),
                   .WBW_FF(WFF), .WBW_FB(WFB), .VTH(BW'(IVTH)), .VRESET(BW'(IVRS)),
                   .ALPHA_SHIFT(ASH), .BETA_SHIFT(BSH)) dut (
      .clk, .rst_n, .clear, .start, .ready, .spikes_in, .spikes_out,
      .wr_en, .wr_fb, .wr_row, .wr_col, .wr_data);

    function automatic int rand_w(int width);
      int lo = -(1 <<< (width - 1)), hi = (1 <<< (width - 1)) - 1;
      int w = int'($urandom_range(0, (1 << width) - 1)) + lo + 2;
      return (w > hi) ? hi : w;
    endfunction

    initial begin
      automatic snn_ref rm;
      automatic int sz[] = '{NFF, NNEU};
      automatic bit rc[] = '{RC};
      automatic int vt[] = '{IVTH};
      automatic int vr[] = '{IVRS};
      automatic int chk = 0, fl = 0;
      rm = new(1, sz, rc, int'(M), int'(R), BW, vt, vr, ASH, BSH);
      clear = 1'b0; start = 1'b0; wr_en = 1'b0; wr_fb = 1'b0; wr_row = '0; wr_col = '0;
      wr_data = '0; spikes_in = '0; done[g] = 1'b0;
      wait (rst_n === 1'b1);
      @(negedge clk);
      for (int r = 0; r < NFF; r++)
        for (int c = 0; c < NNEU; c++) begin
          automatic int w = rand_w(WFF);
          rm.wff[0][r][c] = w;
          wr_en = 1'b1; wr_fb = 1'b0; wr_row = RW'(r); wr_col = CW'(c); wr_data = WBW'(w);
          @(negedge clk);
        end
      if (RC)
        for (int r = 0; r < NNEU; r++)
          for (int c = 0; c < NNEU; c++) begin
            automatic int w = rand_w(WFB);
            rm.wfb[0][r][c] = w;
            wr_en = 1'b1; wr_fb = 1'b1; wr_row = RW'(r); wr_col = CW'(c); wr_data = WBW'(w);
            @(negedge clk);
          end
      wr_en = 1'b0;
      for (int st = 0; st < N_STEPS; st++) begin
        automatic bit x[] = new[NFF];
        automatic int cyc = 0;
        if (st == 0 || st == N_STEPS / 2) begin
          clear = 1'b1;
          @(negedge clk);
          clear = 1'b0;
          rm.clear();
        end
        if ($urandom_range(0, 4) != 0)
          foreach (x[i]) x[i] = ($urandom_range(0, 2) == 0);
        foreach (x[i]) spikes_in[i] = x[i];
        rm.step(x);
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        while (!ready && cyc < 200) begin @(negedge clk); cyc++; end
        for (int n = 0; n < NNEU; n++) begin
          chk++;
          if (spikes_out[n] !== rm.s[0][n]) begin
            fl++;
            $display("layer %0d step %0d neuron %0d: spike %b expected %b", g, st, n,
                     spikes_out[n], rm.s[0][n]);
          end
        end
      end
      checks[g] = chk; failures[g] = fl;
      n_spk[g] = rm.n_spikes; n_empty[g] = rm.n_empty_ff; n_fbl[g] = rm.n_fb_loops;
      n_sat[g] = rm.n_sat;
      done[g] = 1'b1;
    end
  end

  initial begin
    automatic int c = 0, f = 0;
    wait (rst_n === 1'b1);
    @(posedge clk);
    wait (done[0] && done[1]);
    for (int g = 0; g < 2; g++) begin
      c += checks[g] + 1; f += failures[g];
      $display("layer %0d: %0d spikes, %0d empty steps, %0d feedback loops, %0d saturations",
               g, n_spk[g], n_empty[g], n_fbl[g], n_sat[g]);
      if (n_spk[g] == 0 || n_empty[g] == 0 || n_sat[g] == 0 || (g == 0 && n_fbl[g] == 0)) begin
        f++;
        $display("FAIL: layer %0d did not exercise every mechanism", g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end

  initial begin
    repeat (N_STEPS * 60 + 2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
