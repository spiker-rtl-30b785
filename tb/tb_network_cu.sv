// tb_network_cu: self-checking test of the network control unit.
//
// N_CYCLES = 7 time steps, three layers. The input interface, the three layers
// and the output interface are modelled as blocks that, after a start, keep
// their ready low for a random 0..4 cycles. Over a number of inferences
// (started at random moments, with start also pulsed while busy) the test
// checks, every cycle:
//   - the clear pulse comes exactly one cycle after an accepted start,
//   - in_start, every layer_start and out_start are one common pulse,
//   - a start is only given when every block is ready,
//   - step counts the starts, and each inference has exactly N_CYCLES of them,
//   - ready returns only after the last step's layers and output are ready
//     again (the input interface is not waited for after the last step).
// It counts starts held back by each kind of block and requires all of them.
//
// The checked behaviour (common start once every ready is high, a counter up to
// N_CYCLES, ready at the end) follows the network control of the architecture;
// the clear pulse and the end without waiting for the input interface are
// this design's choices.
module tb_network_cu;

  localparam int N_CYCLES = 7, N_LAYERS = 3, N_INF = 40;
  localparam int SW = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, ready, clear, in_start, in_ready, out_start, out_ready;
  logic [N_LAYERS-1:0] layer_start, layer_ready;
  logic [SW-1:0] step;

  network_cu #(.N_CYCLES(N_CYCLES), .N_LAYERS(N_LAYERS)) dut (
    .clk, .rst_n, .start, .ready, .clear, .in_start, .in_ready, .layer_start,
    .layer_ready, .out_start, .out_ready, .step);

  // busy models: index 0 input, 1..3 layers, 4 output
  int busy [5];
  assign in_ready  = (busy[0] == 0);
  assign out_ready = (busy[4] == 0);
  for (genvar l = 0; l < N_LAYERS; l++) begin : g_lr
    assign layer_ready[l] = (busy[l+1] == 0);
  end

  int checks = 0, failures = 0, n_held [5], n_inf = 0;

  task automatic err(string s);
    failures++;
    $display("%0t: %s", $time, s);
  endtask

  initial begin
    automatic int starts = 0, state = 0;
    automatic bit go;   // 0 idle, 1 clear expected, 2 running
    start = 1'b0;
    foreach (busy[b]) begin busy[b] = 0; n_held[b] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (n_inf < N_INF) begin
      start = ($urandom_range(0, 3) == 0);
      #1;
      checks += 4;
      // common start pulse
      if (layer_start !== {N_LAYERS{in_start}} || out_start !== in_start)
        err("start pulses differ");
      // start only when everyone is ready, and only while running
      if (in_start && !(in_ready && (&layer_ready) && out_ready)) err("start while a block is busy");
      if (in_start && state != 2) err("start outside an inference");
      if (clear !== (state == 1)) err("clear pulse wrong");
      if (ready !== (state == 0)) err("ready wrong");
      if (state == 2 && !in_start) begin
        if (!in_ready)      n_held[0]++;
        if (!(&layer_ready)) n_held[1]++;
        if (!out_ready)     n_held[4]++;
      end
      checks++;
      if (state == 2 && int'(step) != starts) err($sformatf("step %0d, %0d starts", step, starts));
      go = in_start;
      @(posedge clk);
      #1;  // after the DUT has sampled this edge
      // model of the blocks
      foreach (busy[b]) if (busy[b] > 0) busy[b]--;
      if (go) foreach (busy[b]) busy[b] = int'($urandom_range(0, 4));
      // model of the sequence
      unique case (state)
        0: if (start) state = 1;
        1: begin state = 2; starts = 0; end
        default: begin
          if (go) starts++;
        end
      endcase
      if (state == 2 && starts == N_CYCLES && busy[1] == 0 && busy[2] == 0 && busy[3] == 0
          && busy[4] == 0) begin
        // all layers and the output ready after the last step: the CU finishes now
        @(negedge clk);
        checks++;
        if (ready !== 1'b0) err("finished one cycle early");
        @(posedge clk); #1;
        checks++;
        if (ready !== 1'b1) err("did not finish after the last step");
        if (starts != N_CYCLES) err("wrong number of steps");
        state = 0;
        n_inf++;
      end
      @(negedge clk);
    end
    $display("held back by input %0d, layers %0d, output %0d", n_held[0], n_held[1], n_held[4]);
    checks++;
    if (n_held[0] == 0 || n_held[1] == 0 || n_held[4] == 0) err("FAIL: some block never held a step back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_INF * N_CYCLES * 20 + 1000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
