// tb_spiker_network: end-to-end test of the accelerator at reduced sizes.
//
// Three networks run side by side, each against the reference model:
//   A  24-10-4 feed-forward, first-order LIF, subtractive reset, 6/4-bit
//      (the MNIST configuration scaled down),
//   B  16-8-3 with a recurrent hidden layer, second-order LIF, fixed reset,
//      8-bit membranes, 6-bit feed-forward and 5-bit feedback weights
//      (the SHD configuration scaled down),
//   C  12-6-5-3, three layers of IF neurons with fixed reset.
// Every output counter of every inference is compared. The test also requires
// that each mechanism happened at least once: a spike-free step skipped by a
// layer CU, a feedback loop run and one skipped, a saturated addition, output
// spikes, the input interface holding the network back, non-zero counts.
//
// The network structure and neuron models follow the architecture; the
// reduced sizes, thresholds and stimulus are this testbench's choices.
module tb_spiker_network;
  import spiker_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  initial begin repeat (3) @(posedge clk); rst_n = 1'b1; end

  int checks = 0, failures = 0;

  // ---------------- network A ----------------
  localparam int unsigned A_SZ [3] = '{24, 10, 4};
  localparam int unsigned A_CYC = 16;
  localparam bit A_RC [2] = '{1'b0, 1'b0};
  localparam logic signed [5:0] A_VTH [2] = '{6'sd8, 6'sd6};
  localparam logic signed [5:0] A_VRS [2] = '{6'sd0, 6'sd0};
  localparam int A_IVTH [2] = '{8, 6};
  localparam int A_IVRS [2] = '{0, 0};
  logic a_start, a_ready, a_in_start, a_in_ready, a_wr_en, a_wr_fb, a_done;
  logic [23:0] a_in_spikes;
  logic [0:0] a_wr_layer;
  logic [4:0] a_wr_row, a_wr_col;
  logic [3:0] a_wr_data;
  logic [3:0][4:0] a_count;
  logic [4:0] a_step;
  int a_chk, a_fail, a_empty, a_act, a_fbl, a_fbs, a_sat, a_spk, a_stall, a_nz;

  spiker_network #(.N_CYCLES(A_CYC), .N_LAYERS(2), .SIZES(A_SZ), .RECURRENT(A_RC),
    .MODEL(NEURON_LIF1), .RESET(RESET_SUBTRACTIVE), .BW(6), .WBW_FF(4), .WBW_FB(4),
    .VTH(A_VTH), .VRESET(A_VRS), .ALPHA_SHIFT(3), .BETA_SHIFT(3)
  ) dut_a (
    .clk, .rst_n, .start(a_start), .ready(a_ready), .in_start(a_in_start), .in_ready(a_in_ready),
    .in_spikes(a_in_spikes), .wr_en(a_wr_en), .wr_layer(a_wr_layer), .wr_fb(a_wr_fb),
    .wr_row(a_wr_row), .wr_col(a_wr_col), .wr_data(a_wr_data), .out_count(a_count), .step(a_step)
  );
  net_driver #(.N_CYCLES(A_CYC), .N_LAYERS(2), .SIZES(A_SZ), .RECURRENT(A_RC),
    .MODEL(NEURON_LIF1), .RESET(RESET_SUBTRACTIVE), .BW(6), .WBW_FF(4), .WBW_FB(4),
    .VTH(A_IVTH), .VRESET(A_IVRS), .ALPHA_SHIFT(3), .BETA_SHIFT(3),
    .N_INFER(3), .CHECK_LAT(1'b1), .RATE_PCT(25), .EMPTY_PCT(30), .IN_DELAY(2), .W_BIAS(2), .SEED(11)
  ) drv_a (
    .clk, .rst_n, .start(a_start), .ready(a_ready), .in_start(a_in_start), .in_ready(a_in_ready),
    .in_spikes(a_in_spikes), .wr_en(a_wr_en), .wr_layer(a_wr_layer), .wr_fb(a_wr_fb),
    .wr_row(a_wr_row), .wr_col(a_wr_col), .wr_data(a_wr_data), .out_count(a_count),
    .done(a_done), .checks(a_chk), .failures(a_fail), .n_empty_ff(a_empty), .n_active_ff(a_act),
    .n_fb_loops(a_fbl), .n_fb_skipped(a_fbs), .n_sat(a_sat), .n_spikes(a_spk),
    .n_in_stall(a_stall), .n_count_nonzero(a_nz)
  );

  // ---------------- network B ----------------
  localparam int unsigned B_SZ [3] = '{16, 8, 3};
  localparam int unsigned B_CYC = 16;
  localparam bit B_RC [2] = '{1'b1, 1'b0};
  localparam logic signed [7:0] B_VTH [2] = '{8'sd20, 8'sd16};
  localparam logic signed [7:0] B_VRS [2] = '{-8'sd4, 8'sd0};
  localparam int B_IVTH [2] = '{20, 16};
  localparam int B_IVRS [2] = '{-4, 0};
  logic b_start, b_ready, b_in_start, b_in_ready, b_wr_en, b_wr_fb, b_done;
  logic [15:0] b_in_spikes;
  logic [0:0] b_wr_layer;
  logic [3:0] b_wr_row, b_wr_col;
  logic [5:0] b_wr_data;
  logic [2:0][4:0] b_count;
  logic [4:0] b_step;
  int b_chk, b_fail, b_empty, b_act, b_fbl, b_fbs, b_sat, b_spk, b_stall, b_nz;

  spiker_network #(.N_CYCLES(B_CYC), .N_LAYERS(2), .SIZES(B_SZ), .RECURRENT(B_RC),
    .MODEL(NEURON_LIF2), .RESET(RESET_FIXED), .BW(8), .WBW_FF(6), .WBW_FB(5),
    .VTH(B_VTH), .VRESET(B_VRS), .ALPHA_SHIFT(2), .BETA_SHIFT(3)
  ) dut_b (
    .clk, .rst_n, .start(b_start), .ready(b_ready), .in_start(b_in_start), .in_ready(b_in_ready),
    .in_spikes(b_in_spikes), .wr_en(b_wr_en), .wr_layer(b_wr_layer), .wr_fb(b_wr_fb),
    .wr_row(b_wr_row), .wr_col(b_wr_col), .wr_data(b_wr_data), .out_count(b_count), .step(b_step)
  );
  net_driver #(.N_CYCLES(B_CYC), .N_LAYERS(2), .SIZES(B_SZ), .RECURRENT(B_RC),
    .MODEL(NEURON_LIF2), .RESET(RESET_FIXED), .BW(8), .WBW_FF(6), .WBW_FB(5),
    .VTH(B_IVTH), .VRESET(B_IVRS), .ALPHA_SHIFT(2), .BETA_SHIFT(3),
    .N_INFER(3), .CHECK_LAT(1'b1), .RATE_PCT(20), .EMPTY_PCT(40), .IN_DELAY(1), .W_BIAS(8), .SEED(23)
  ) drv_b (
    .clk, .rst_n, .start(b_start), .ready(b_ready), .in_start(b_in_start), .in_ready(b_in_ready),
    .in_spikes(b_in_spikes), .wr_en(b_wr_en), .wr_layer(b_wr_layer), .wr_fb(b_wr_fb),
    .wr_row(b_wr_row), .wr_col(b_wr_col), .wr_data(b_wr_data), .out_count(b_count),
    .done(b_done), .checks(b_chk), .failures(b_fail), .n_empty_ff(b_empty), .n_active_ff(b_act),
    .n_fb_loops(b_fbl), .n_fb_skipped(b_fbs), .n_sat(b_sat), .n_spikes(b_spk),
    .n_in_stall(b_stall), .n_count_nonzero(b_nz)
  );

  // ---------------- network C ----------------
  localparam int unsigned C_SZ [4] = '{12, 6, 5, 3};
  localparam int unsigned C_CYC = 12;
  localparam bit C_RC [3] = '{1'b0, 1'b0, 1'b0};
  localparam logic signed [5:0] C_VTH [3] = '{6'sd5, 6'sd4, 6'sd4};
  localparam logic signed [5:0] C_VRS [3] = '{6'sd0, -6'sd2, 6'sd1};
  localparam int C_IVTH [3] = '{5, 4, 4};
  localparam int C_IVRS [3] = '{0, -2, 1};
  logic c_start, c_ready, c_in_start, c_in_ready, c_wr_en, c_wr_fb, c_done;
  logic [11:0] c_in_spikes;
  logic [1:0] c_wr_layer;
  logic [3:0] c_wr_row, c_wr_col;
  logic [3:0] c_wr_data;
  logic [2:0][3:0] c_count;
  logic [3:0] c_step;
  int c_chk, c_fail, c_empty, c_act, c_fbl, c_fbs, c_sat, c_spk, c_stall, c_nz;

  spiker_network #(.N_CYCLES(C_CYC), .N_LAYERS(3), .SIZES(C_SZ), .RECURRENT(C_RC),
    .MODEL(NEURON_IF), .RESET(RESET_FIXED), .BW(6), .WBW_FF(4), .WBW_FB(4),
    .VTH(C_VTH), .VRESET(C_VRS), .ALPHA_SHIFT(3), .BETA_SHIFT(3)
  ) dut_c (
    .clk, .rst_n, .start(c_start), .ready(c_ready), .in_start(c_in_start), .in_ready(c_in_ready),
    .in_spikes(c_in_spikes), .wr_en(c_wr_en), .wr_layer(c_wr_layer), .wr_fb(c_wr_fb),
    .wr_row(c_wr_row), .wr_col(c_wr_col), .wr_data(c_wr_data), .out_count(c_count), .step(c_step)
  );
  net_driver #(.N_CYCLES(C_CYC), .N_LAYERS(3), .SIZES(C_SZ), .RECURRENT(C_RC),
    .MODEL(NEURON_IF), .RESET(RESET_FIXED), .BW(6), .WBW_FF(4), .WBW_FB(4),
    .VTH(C_IVTH), .VRESET(C_IVRS), .ALPHA_SHIFT(3), .BETA_SHIFT(3),
    .N_INFER(2), .CHECK_LAT(1'b1), .RATE_PCT(30), .EMPTY_PCT(20), .IN_DELAY(0), .W_BIAS(2), .SEED(37)
  ) drv_c (
    .clk, .rst_n, .start(c_start), .ready(c_ready), .in_start(c_in_start), .in_ready(c_in_ready),
    .in_spikes(c_in_spikes), .wr_en(c_wr_en), .wr_layer(c_wr_layer), .wr_fb(c_wr_fb),
    .wr_row(c_wr_row), .wr_col(c_wr_col), .wr_data(c_wr_data), .out_count(c_count),
    .done(c_done), .checks(c_chk), .failures(c_fail), .n_empty_ff(c_empty), .n_active_ff(c_act),
    .n_fb_loops(c_fbl), .n_fb_skipped(c_fbs), .n_sat(c_sat), .n_spikes(c_spk),
    .n_in_stall(c_stall), .n_count_nonzero(c_nz)
  );

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-28s happened %0d times", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  initial begin
    wait (rst_n === 1'b1);
    @(posedge clk);
    wait (a_done && b_done && c_done);
    checks   += a_chk + b_chk + c_chk;
    failures += a_fail + b_fail + c_fail;
    need("empty step skipped (A)",       a_empty);
    need("empty step skipped (C)",       c_empty);
    need("active step loop (A)",         a_act);
    need("feedback loop run (B)",        b_fbl);
    need("feedback loop skipped (B)",    b_fbs);
    need("saturation (A+B+C)",           a_sat + b_sat + c_sat);
    need("spikes (A)",                   a_spk);
    need("spikes (B)",                   b_spk);
    need("spikes (C)",                   c_spk);
    need("input interface stall (A+B)",  a_stall + b_stall);
    need("non-zero output count (A)",    a_nz);
    need("non-zero output count (B)",    b_nz);
    need("non-zero output count (C)",    c_nz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
