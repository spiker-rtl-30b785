// tb_spiker_network_shd: the accelerator in the spoken-digit configuration at
// full size: 700 inputs, a recurrent hidden layer of 200 second-order LIF
// neurons and 20 outputs, subtractive reset, 8-bit membranes and currents,
// 6-bit feed-forward and 5-bit feedback weights, 100 time steps (184,000
// synapses).
//
// All weights are loaded at random; one inference runs with an input spike
// train in which about half of the steps carry no spike at all (as for the
// audio encoding, where about 48 % of the steps are active) and active steps
// have about 5 % of the inputs spiking. Output counts are checked against the
// reference model and the latency against the layer sizes. The feedback
// group of the hidden layer runs in every step after the hidden layer has
// fired once, which adds up to 200 cycles to each step.
//
// Sizes, widths, neuron model, recurrence and step count are the spoken-digit
// configuration of the architecture; the threshold, random weights and the
// sparse input trains are this testbench's choices.
module tb_spiker_network_shd;
  import spiker_pkg::*;

  localparam int unsigned SZ [3] = '{700, 200, 20};
  localparam bit          RC [2] = '{1'b1, 1'b0};
  localparam logic signed [7:0] VTH [2] = '{8'sd24, 8'sd24};
  localparam logic signed [7:0] VRS [2] = '{8'sd0, 8'sd0};
  localparam int IVTH [2] = '{24, 24};
  localparam int IVRS [2] = '{0, 0};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1'b1; end

  logic start, ready, in_start, in_ready, wr_en, wr_fb, done;
  logic [699:0] in_spikes;
  logic [0:0] wr_layer;
  logic [9:0] wr_row, wr_col;
  logic [5:0] wr_data;
  logic [19:0][6:0] out_count;
  logic [6:0] step;
  int chk, fail, n_empty, n_act, n_fbl, n_fbs, n_sat, n_spk, n_stall, n_nz;

  spiker_network #(.N_CYCLES(100), .N_LAYERS(2), .SIZES(SZ), .RECURRENT(RC),
    .MODEL(NEURON_LIF2), .RESET(RESET_SUBTRACTIVE), .BW(8), .WBW_FF(6), .WBW_FB(5),
    .VTH(VTH), .VRESET(VRS), .ALPHA_SHIFT(3), .BETA_SHIFT(3)
  ) dut (
    .clk, .rst_n, .start, .ready, .in_start, .in_ready, .in_spikes, .wr_en, .wr_layer,
    .wr_fb, .wr_row, .wr_col, .wr_data, .out_count, .step
  );

  net_driver #(.N_CYCLES(100), .N_LAYERS(2), .SIZES(SZ), .RECURRENT(RC),
    .MODEL(NEURON_LIF2), .RESET(RESET_SUBTRACTIVE), .BW(8), .WBW_FF(6), .WBW_FB(5),
    .VTH(IVTH), .VRESET(IVRS), .ALPHA_SHIFT(3), .BETA_SHIFT(3),
    .N_INFER(1), .RATE_PCT(5), .EMPTY_PCT(52), .IN_DELAY(0), .W_BIAS(4),
    .CHECK_LAT(1'b1), .SEED(7)
  ) drv (
    .clk, .rst_n, .start, .ready, .in_start, .in_ready, .in_spikes, .wr_en, .wr_layer,
    .wr_fb, .wr_row, .wr_col, .wr_data, .out_count, .done, .checks(chk), .failures(fail),
    .n_empty_ff(n_empty), .n_active_ff(n_act), .n_fb_loops(n_fbl), .n_fb_skipped(n_fbs),
    .n_sat(n_sat), .n_spikes(n_spk), .n_in_stall(n_stall), .n_count_nonzero(n_nz)
  );

  initial begin
    automatic int checks, failures;
    wait (rst_n === 1'b1);
    @(posedge clk);
    wait (done);
    checks = chk + 3; failures = fail;
    $display("spikes %0d, feedback loops run %0d / skipped %0d, empty layer steps %0d, non-zero counts %0d",
             n_spk, n_fbl, n_fbs, n_empty, n_nz);
    if (n_spk == 0) begin failures++; $display("FAIL: no spikes"); end
    if (n_fbl == 0) begin failures++; $display("FAIL: feedback never used"); end
    if (n_nz == 0)  begin failures++; $display("FAIL: all output counts zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
