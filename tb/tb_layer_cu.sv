// tb_layer_cu: self-checking test of the layer control unit.
//
// A layer CU with 10 feed-forward and 5 feedback inputs is driven through many
// time steps. The neurons are modelled by a ready signal that goes low for a
// random 0..2 cycles after each neuron start; the weight memory by remembering
// the last address read. In the first half of the steps the memory behaves as
// a block RAM (syn_ready always high, row one clock after rd_en); in the
// second half it is a slow memory that, after each read, pulls syn_ready low
// for a random 0..3 cycles and only then shows the new row. Input spikes
// are random per step, often all-zero per group, and are changed at random
// while the step runs (the CU must work from the vector sampled at start).
// For every step the sequence of neuron operations is checked:
//   OP_LEAK once, then OP_INTEG for inputs 0..N_FF-1 if any feed-forward spike,
//   then for N_FF..N_FF+N_FB-1 if any feedback spike, then OP_FIRE, then ready;
// each OP_INTEG must come with the weight row of that input on the memory
// output, the sampled spike of that input on single_spike and the right
// rd_fb. Neurons may only be started while ready, reads only while syn_ready.
// Active and empty groups of both kinds, neuron stalls and memory stalls must
// all occur.
//
// The expected sequence (sample, OR, count over the inputs, skip an empty step)
// follows the layer control of the architecture; the leak and fire operations
// around the loop and the per-group skip of the feedback inputs are this
// design's choices and are checked as such.
module tb_layer_cu;
  import spiker_pkg::*;

  localparam int N_FF = 10, N_FB = 5, N_TOT = N_FF + N_FB, N_STEPS = 400;
  localparam int CNTW = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, start, ready, neurons_ready, neurons_start, single_spike, rd_en, rd_fb;
  logic syn_ready;
  neuron_op_e neurons_op;
  logic [N_FF-1:0] spikes_ff;
  logic [N_FB-1:0] spikes_fb;
  logic [CNTW-1:0] rd_addr;

  layer_cu #(.N_FF(N_FF), .N_FB(N_FB)) dut (
    .clk, .rst_n, .clear, .start, .ready, .spikes_ff, .spikes_fb, .neurons_ready,
    .neurons_start, .neurons_op, .single_spike, .rd_en, .rd_addr, .rd_fb, .syn_ready);

  int checks = 0, failures = 0, n_mem_stall = 0;
  bit slow_mem = 0;      // second half: memory with a variable fetch time
  int mem_wait = 0;      // cycles until the pending row appears
  int mem_pend = -1;
  int n_ff_act = 0, n_ff_empty = 0, n_fb_act = 0, n_fb_empty = 0, n_stall = 0;
  int busy = 0;
  int mem_addr = -1;
  assign neurons_ready = (busy == 0);

  task automatic err(string s);
    failures++;
    $display("%0t: %s", $time, s);
  endtask

  initial begin
    clear = 1'b0; start = 1'b0; spikes_ff = '0; spikes_fb = '0;
    slow_mem = 0; mem_wait = 0; mem_pend = -1; mem_addr = -1; busy = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int st = 0; st < N_STEPS; st++) begin
      automatic logic [N_TOT-1:0] spk;
      automatic int exp_idx [$];
      automatic int phase = 0, cyc = 0;   // phase 0 leak, 1 integ, 2 fire, 3 done
      slow_mem = (st >= N_STEPS / 2);
      spikes_ff = ($urandom_range(0, 2) == 0) ? '0 : N_FF'($urandom);
      spikes_fb = ($urandom_range(0, 2) == 0) ? '0 : N_FB'($urandom);
      spk = {spikes_fb, spikes_ff};
      if (|spikes_ff) begin n_ff_act++; for (int i = 0; i < N_FF; i++) exp_idx.push_back(i); end
      else n_ff_empty++;
      if (|spikes_fb) begin n_fb_act++; for (int i = N_FF; i < N_TOT; i++) exp_idx.push_back(i); end
      else n_fb_empty++;
      // wait until the CU is ready, then start it
      while (!ready) @(negedge clk);
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      while (phase != 3 && cyc < 400) begin
        @(negedge clk);
        cyc++;
        // inputs may change while the step runs
        if ($urandom_range(0, 3) == 0) begin spikes_ff = N_FF'($urandom); spikes_fb = N_FB'($urandom); end
        #1;
        checks++;
        if (ready) begin
          if (phase != 2) err($sformatf("step %0d: ready before fire (phase %0d)", st, phase));
          phase = 3;
          break;
        end
        if (neurons_start) begin
          checks++;
          if (!neurons_ready) err("neurons started while not ready");
          if (!syn_ready) err("neurons started before the weight row was ready");
          unique case (neurons_op)
            OP_LEAK: begin
              if (phase != 0) err("leak out of order");
              phase = 1;
            end
            OP_INTEG: begin
              automatic int e = (exp_idx.size() > 0) ? exp_idx.pop_front() : -1;
              checks += 3;
              if (phase != 1) err("integrate out of order");
              if (mem_addr != e) err($sformatf("step %0d: row %0d delivered, expected input %0d", st, mem_addr, e));
              if (e >= 0 && single_spike !== spk[e]) err($sformatf("step %0d: single spike of input %0d wrong", st, e));
              if (e >= 0 && rd_fb !== (e >= N_FF)) err("rd_fb wrong");
            end
            default: begin
              if (phase != 1 && phase != 0) err("fire out of order");
              if (exp_idx.size() != 0) err($sformatf("step %0d: fire with %0d inputs left", st, exp_idx.size()));
              phase = 2;
            end
          endcase
        end else if (!neurons_ready) n_stall++;
        else if (!syn_ready) n_mem_stall++;
        if (rd_en && !syn_ready) err("read started while the memory was not ready");
        @(posedge clk); #1;
      end
      if (phase != 3) err($sformatf("step %0d did not finish", st));
    end
    checks++;
    if (n_ff_act == 0 || n_ff_empty == 0 || n_fb_act == 0 || n_fb_empty == 0 || n_stall == 0 ||
        n_mem_stall == 0)
      err("FAIL: a case never happened");
    $display("ff active %0d empty %0d, fb active %0d empty %0d, neuron stalls %0d, memory stalls %0d",
             n_ff_act, n_ff_empty, n_fb_act, n_fb_empty, n_stall, n_mem_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight memory and neuron-ready models, sampled at the clock edge
  assign syn_ready = (mem_wait == 0);
  always @(posedge clk) begin
    if (rd_en) begin
      if (!slow_mem) mem_addr <= int'(rd_addr);
      else begin
        automatic int w = int'($urandom_range(0, 3));
        if (w == 0) mem_addr <= int'(rd_addr);
        else begin mem_pend <= int'(rd_addr); mem_wait <= w; end
      end
    end else if (mem_wait == 1) begin
      mem_addr <= mem_pend; mem_wait <= 0;
    end else if (mem_wait > 1) mem_wait <= mem_wait - 1;
    if (neurons_start) busy <= int'($urandom_range(0, 2));
    else if (busy > 0) busy <= busy - 1;
  end

  initial begin
    repeat (N_STEPS * 120 + 1000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
