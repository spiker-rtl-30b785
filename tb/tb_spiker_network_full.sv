// tb_spiker_network_full: the accelerator at its full default size, the MNIST
// configuration: 784 inputs, 128 hidden and 10 output first-order LIF neurons
// with subtractive reset, 6-bit membranes, 4-bit weights, 100 time steps.
//
// The network is instantiated with its defaults only. All 101,632 weights are
// loaded with random values through the weight port; then two inferences run
// with random input spike trains (about 15 % of the inputs spike in each step,
// as a rate-coded image would) presented by an input interface model that
// always has the next vector ready, as a memory-mapped input buffer would.
// Every output count is compared with the reference model and the latency
// (cycles from start to ready) is checked against the layer sizes; with every
// step active it is about 100 x 790 cycles, 0.79 ms at 100 MHz.
//
// Sizes, widths, neuron model and step count are the image-classification
// configuration of the architecture; the random weights, thresholds and input
// trains are this testbench's choices (no trained network is involved).
module tb_spiker_network_full;
  import spiker_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1'b1; end

  logic start, ready, in_start, in_ready, wr_en, wr_fb, done;
  logic [783:0] in_spikes;
  logic [0:0] wr_layer;
  logic [9:0] wr_row, wr_col;
  logic [3:0] wr_data;
  logic [9:0][6:0] out_count;
  logic [6:0] step;
  int chk, fail, n_empty, n_act, n_fbl, n_fbs, n_sat, n_spk, n_stall, n_nz;

  spiker_network dut (
    .clk, .rst_n, .start, .ready, .in_start, .in_ready, .in_spikes, .wr_en, .wr_layer,
    .wr_fb, .wr_row, .wr_col, .wr_data, .out_count, .step
  );

  net_driver #(.N_INFER(2), .RATE_PCT(15), .EMPTY_PCT(0), .IN_DELAY(0), .W_BIAS(1),
               .CHECK_LAT(1'b1), .SEED(5)) drv (
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
    checks = chk + 2; failures = fail;
    $display("neuron spikes %0d, non-zero output counts %0d, saturations %0d", n_spk, n_nz, n_sat);
    if (n_spk == 0) begin failures++; $display("FAIL: no spikes"); end
    if (n_nz == 0)  begin failures++; $display("FAIL: all output counts zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
