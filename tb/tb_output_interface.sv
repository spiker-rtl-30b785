// tb_output_interface: self-checking test of the output spike counters.
//
// Five 4-bit counters get random spike vectors with random start pulses and an
// occasional clear. After each cycle every counter is compared with a model:
// clear zeroes, start adds the spike bit, the count saturates at 15. ready
// must always be high. Counting, clearing and saturation must all occur.
//
// One counter per output neuron follows the architecture; saturation of the
// counters and counting the previous step's spikes are this design's choices.
module tb_output_interface;

  localparam int N_OUT = 5, CNTW = 4, N_CYC = 3000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, start, ready;
  logic [N_OUT-1:0] spikes;
  logic [N_OUT-1:0][CNTW-1:0] count;

  output_interface #(.N_OUT(N_OUT), .CNTW(CNTW)) dut (
    .clk, .rst_n, .clear, .start, .ready, .spikes, .count);

  int checks = 0, failures = 0, n_inc = 0, n_clr = 0, n_sat = 0;

  initial begin
    int m [N_OUT];
    clear = 1'b0; start = 1'b0; spikes = '0;
    foreach (m[k]) m[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int c = 0; c < N_CYC; c++) begin
      clear  = ($urandom_range(0, 59) == 0);
      start  = $urandom_range(0, 1);
      spikes = N_OUT'($urandom);
      if (clear) begin
        n_clr++;
        foreach (m[k]) m[k] = 0;
      end else if (start) begin
        foreach (m[k]) if (spikes[k]) begin
          if (m[k] == 15) n_sat++; else begin m[k]++; n_inc++; end
        end
      end
      @(negedge clk);
      checks++;
      if (ready !== 1'b1) begin failures++; $display("cycle %0d: ready low", c); end
      for (int k = 0; k < N_OUT; k++) begin
        checks++;
        if (int'(count[k]) != m[k]) begin
          failures++; $display("cycle %0d: count[%0d] %0d expected %0d", c, k, count[k], m[k]);
        end
      end
    end
    checks++;
    if (n_inc == 0 || n_clr == 0 || n_sat == 0) begin
      failures++; $display("FAIL: increments %0d clears %0d saturations %0d", n_inc, n_clr, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_CYC + 100) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
