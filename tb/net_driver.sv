// net_driver: stimulus and checker for spiker_network, shared by the
// network-level testbenches.
//
// It loads random weights through the weight-write port, then runs N_INFER
// inferences. For each it draws a random spike train (each input spikes with
// probability RATE_PCT per step; a whole step is left empty with probability
// EMPTY_PCT), plays the input interface (presents the step's vector with
// in_ready, takes in_start as "consumed" and then waits 0..IN_DELAY cycles
// before presenting the next one), and at the end compares every output
// counter with the reference model of snn_ref_pkg. It also measures the
// cycles per inference and, when CHECK_LAT is set, checks them against bounds
// derived from the layer sizes and the number of steps with input spikes. Mechanism counts (empty steps skipped,
// feedback loops run and skipped, saturations, spikes, input stalls) are
// returned so the testbench can require each to have happened.
//
// The start/ready handshake it plays with the network, and the idea of an input
// interface that keeps pace with the accelerator, follow the architecture;
// the random spike trains, the random input delays and the latency bounds are
// this testbench's own choices.
module net_driver
  import spiker_pkg::*;
  import snn_ref_pkg::*;
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
  parameter int            VTH    [N_LAYERS] = '{8, 8},
  parameter int            VRESET [N_LAYERS] = '{0, 0},
  parameter int unsigned   ALPHA_SHIFT = 3,
  parameter int unsigned   BETA_SHIFT  = 3,
  parameter int unsigned   N_INFER     = 2,
  parameter int unsigned   RATE_PCT    = 20,
  parameter int unsigned   EMPTY_PCT   = 20,
  parameter int unsigned   IN_DELAY    = 2,
  parameter int unsigned   W_BIAS      = 1,   // shifts random weights upwards
  parameter bit            CHECK_LAT   = 1'b0,
  parameter int unsigned   SEED        = 1,
  parameter int unsigned   CLK_PERIOD  = 10,   // in this module's time unit
  localparam int unsigned  N_IN  = SIZES[0],
  localparam int unsigned  N_OUT = SIZES[N_LAYERS],
  localparam int unsigned  WBW   = (WBW_FF > WBW_FB) ? WBW_FF : WBW_FB,
  localparam int unsigned  OCW   = bits_for(N_CYCLES),
  localparam int unsigned  LW    = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1,
  localparam int unsigned  MAXS  = max_size(SIZES),
  localparam int unsigned  RW    = $clog2(MAXS > 1 ? MAXS : 2)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  output logic                      start,
  input  logic                      ready,
  input  logic                      in_start,
  output logic                      in_ready,
  output logic [N_IN-1:0]           in_spikes,
  output logic                      wr_en,
  output logic [LW-1:0]             wr_layer,
  output logic                      wr_fb,
  output logic [RW-1:0]             wr_row,
  output logic [RW-1:0]             wr_col,
  output logic [WBW-1:0]            wr_data,
  input  logic [N_OUT-1:0][OCW-1:0] out_count,
  output logic                      done,
  output int                        checks,
  output int                        failures,
  output int                        n_empty_ff,
  output int                        n_active_ff,
  output int                        n_fb_loops,
  output int                        n_fb_skipped,
  output int                        n_sat,
  output int                        n_spikes,
  output int                        n_in_stall,
  output int                        n_count_nonzero
);

  function automatic int unsigned max_size(input int unsigned s [N_LAYERS+1]);
    int unsigned m = 0;
    for (int i = 0; i <= N_LAYERS; i++) if (s[i] > m) m = s[i];
    return m;
  endfunction

  snn_ref ref_m;
  bit     xs[][];      // spike train of the current inference [step][input]
  int     k_in;        // index of the vector presented by the input model
  bit     running;

  initial begin
    int sz[];
    bit rc[];
    int vt[], vr[];
    sz = new[N_LAYERS+1];
    rc = new[N_LAYERS];
    vt = new[N_LAYERS];
    vr = new[N_LAYERS];
    for (int i = 0; i <= N_LAYERS; i++) sz[i] = SIZES[i];
    for (int i = 0; i < N_LAYERS; i++) begin
      rc[i] = RECURRENT[i]; vt[i] = VTH[i]; vr[i] = VRESET[i];
    end
    ref_m = new(N_LAYERS, sz, rc, int'(MODEL), int'(RESET), BW, vt, vr, ALPHA_SHIFT, BETA_SHIFT);
  end

  // longest input loop of any layer (feed-forward plus feedback inputs)
  function automatic int unsigned max_loop();
    int unsigned m = 0;
    for (int l = 0; l < N_LAYERS; l++) begin
      automatic int unsigned n = SIZES[l] + (RECURRENT[l] ? SIZES[l+1] : 0);
      if (n > m) m = n;
    end
    return m;
  endfunction
  localparam int unsigned MAXLOOP = max_loop();

  function automatic int rand_w(int width);
    int lo = -(1 <<< (width-1));
    int hi = (1 <<< (width-1)) - 1;
    int w  = int'($urandom_range(0, (1 << width) - 1)) + lo + int'(W_BIAS);
    if (w > hi) w = hi;
    return w;
  endfunction

  // Input interface model: presents step k_in's vector with in_ready; an
  // in_start consumes it, then the next vector follows after 0..IN_DELAY cycles.
  bit load_req;    // driver: present the first vector of a new inference
  int delay_cnt;
  initial begin
    in_ready = 1'b0; in_spikes = '0; n_in_stall = 0; k_in = 0; delay_cnt = 0;
  end
  always @(posedge clk) begin
    if (load_req) begin
      k_in = 0;
      for (int i = 0; i < int'(N_IN); i++) in_spikes[i] <= xs[0][i];
      in_ready  <= 1'b1;
      delay_cnt = 0;
    end else if (running) begin
      if (in_ready && in_start) begin
        k_in++;
        in_ready  <= 1'b0;
        delay_cnt = int'($urandom_range(0, IN_DELAY));
        if (delay_cnt == 0 && k_in < int'(N_CYCLES)) begin
          for (int i = 0; i < int'(N_IN); i++) in_spikes[i] <= xs[k_in][i];
          in_ready <= 1'b1;
        end
      end else if (!in_ready && k_in < int'(N_CYCLES)) begin
        if (delay_cnt > 1) begin
          delay_cnt--;
          n_in_stall++;
        end else begin
          n_in_stall++;
          delay_cnt = 0;
          for (int i = 0; i < int'(N_IN); i++) in_spikes[i] <= xs[k_in][i];
          in_ready <= 1'b1;
        end
      end
    end
  end

  initial begin
    int unsigned dummy;
    longint t0, lat;
    dummy = $urandom(SEED);
    load_req = 1'b0; start = 1'b0; wr_en = 1'b0; wr_layer = '0; wr_fb = 1'b0;
    wr_row = '0; wr_col = '0; wr_data = '0; done = 1'b0; running = 1'b0;
    checks = 0; failures = 0; n_count_nonzero = 0;
    wait (rst_n === 1'b1);
    @(posedge clk);
    // ---- weight loading ----
    for (int l = 0; l < int'(N_LAYERS); l++) begin
      for (int r = 0; r < int'(SIZES[l]); r++)
        for (int c = 0; c < int'(SIZES[l+1]); c++) begin
          automatic int w = rand_w(WBW_FF);
          ref_m.wff[l][r][c] = w;
          wr_en <= 1'b1; wr_layer <= LW'(l); wr_fb <= 1'b0;
          wr_row <= RW'(r); wr_col <= RW'(c); wr_data <= WBW'(w);
          @(posedge clk);
        end
      if (RECURRENT[l])
        for (int r = 0; r < int'(SIZES[l+1]); r++)
          for (int c = 0; c < int'(SIZES[l+1]); c++) begin
            automatic int w = rand_w(WBW_FB);
            ref_m.wfb[l][r][c] = w;
            wr_en <= 1'b1; wr_layer <= LW'(l); wr_fb <= 1'b1;
            wr_row <= RW'(r); wr_col <= RW'(c); wr_data <= WBW'(w);
            @(posedge clk);
          end
    end
    wr_en <= 1'b0;
    @(posedge clk);

    // ---- inferences ----
    for (int inf = 0; inf < int'(N_INFER); inf++) begin
      automatic int n_act_in = 0;
      xs = new[N_CYCLES];
      foreach (xs[s]) begin
        bit empty, any;
        xs[s] = new[N_IN];
        empty = (int'($urandom_range(0, 99)) < int'(EMPTY_PCT));
        any = 0;
        foreach (xs[s][i]) begin
          xs[s][i] = !empty && ($urandom_range(0, 99) < RATE_PCT);
          any |= xs[s][i];
        end
        if (any) n_act_in++;
      end
      ref_m.clear();
      for (int s = 0; s < int'(N_CYCLES); s++) ref_m.step(xs[s]);

      // present the first vector, then start
      load_req <= 1'b1;
      @(posedge clk);
      load_req <= 1'b0;
      running  <= 1'b1;
      wait (ready === 1'b1);
      @(posedge clk);
      start <= 1'b1;
      t0 = $time;
      @(posedge clk);
      start <= 1'b0;
      @(posedge clk);
      wait (ready === 1'b1);
      lat = longint'(($time - t0) / longint'(CLK_PERIOD));
      running  <= 1'b0;
      @(posedge clk);
      $display("%m inference %0d: %0d cycles", inf, lat);
      for (int k = 0; k < int'(N_OUT); k++) begin
        checks++;
        if (int'(out_count[k]) != ref_m.count[k]) begin
          failures++;
          $display("%m MISMATCH inference %0d out %0d: got %0d expected %0d",
                   inf, k, out_count[k], ref_m.count[k]);
        end
        if (out_count[k] != 0) n_count_nonzero++;
      end
      checks++;
      if (k_in != int'(N_CYCLES)) begin
        failures++;
        $display("input interface started %0d times, expected %0d", k_in, N_CYCLES);
      end
      if (CHECK_LAT) begin
        // a step whose input vector carries a spike runs the first layer's
        // input loop (at least N_IN cycles); no step is longer than the
        // largest loop of any layer plus a few control cycles
        automatic longint lo = longint'(n_act_in) * longint'(N_IN);
        automatic longint hi = longint'(N_CYCLES) * (longint'(MAXLOOP) + 10 + longint'(IN_DELAY)) + 10;
        checks++;
        $display("%m inference %0d: %0d of %0d steps with input spikes, latency %0d cycles = %0d us at 100 MHz",
                 inf, n_act_in, N_CYCLES, lat, lat / 100);
        if (lat < lo || lat > hi) begin
          failures++;
          $display("latency %0d cycles outside [%0d, %0d]", lat, lo, hi);
        end
      end
    end
    n_empty_ff   = ref_m.n_empty_ff;
    n_active_ff  = ref_m.n_active_ff;
    n_fb_loops   = ref_m.n_fb_loops;
    n_fb_skipped = ref_m.n_fb_skipped;
    n_sat        = ref_m.n_sat;
    n_spikes     = ref_m.n_spikes;
    done = 1'b1;
  end

endmodule
