// layer_cu: layer control unit, which feeds a layer's input spikes to its neurons.
//
// Function. All neurons of a layer are updated in parallel, while the layer's
// inputs are presented one after another. When the network controller starts
// a time step, the layer CU samples the input spike vector into a register and
// ORs it (ACTIVE). It then
//   1. starts the neurons with OP_LEAK (the per-step decay),
//   2. if at least one input spike is active, counts CNT over the inputs:
//      CNT addresses the weight memory row and selects the sampled spike
//      (SINGLE SPIKE), and the neurons are started with OP_INTEG once per
//      input; the loop stops when CNT reaches the number of inputs (STOP),
//   3. starts the neurons with OP_FIRE, then raises ready.
// A step with no active spike skips the whole input loop: only the leak and
// the fire operations are done.
// A recurrent layer has a second group of N_FB inputs, its own spikes of the
// previous step, presented after the N_FF feed-forward inputs (CNT from N_FF to
// N_FF+N_FB-1). Each group has its own OR and is skipped on its own when it
// carries no spike.
//
// Interface. start/ready with the network CU; neurons_start/neurons_op and
// neurons_ready (the AND of all neuron ready signals) with the neurons;
// rd_en/rd_addr to the weight memories (rd_addr is CNT over both groups);
// rd_fb tells which memory the row delivered with neurons_start came from.
// syn_ready is the ready of the synapse interface: a read (rd_en, its start)
// is only issued while it is high, and after a read the row counts as
// delivered once it is high again. A block RAM holds it high all the time
// (row one clock after rd_en); a memory that needs longer to fetch a row,
// such as an external one, pulls it low until the row is on its output.
//
// Timing. The weight memory has one cycle of read latency, so the loop is a
// two-stage pipeline (issue the read, then start the neurons with the read
// row); it stalls while neurons_ready or syn_ready is low. An active step of N inputs takes
// about N + 4 cycles, an empty step 3 cycles.
//
// Following the architecture: sampling register, OR gate, counter, spike
// multiplexer, comparison with the input count, start/ready loops with the
// neurons and with the synapse interface, skipping of spike-free steps, sequential feedback inputs. This
// design's own choices: the explicit leak and fire operations around the loop,
// the read pipeline, and the per-group skip.
//
// Tool notes. With N_FB = 0 the spikes_fb input is a one-bit placeholder that
// is not read (lint: unused signal). The handshake assertion uses rst_n in its
// disable condition while the registers use it as an asynchronous reset, which
// lint reports as a net used both ways; it is only an assertion.
module layer_cu
  import spiker_pkg::*;
#(
  parameter int unsigned N_FF = 784,  // feed-forward inputs
  parameter int unsigned N_FB = 0,    // feedback inputs (0: no recurrence)
  localparam int unsigned N_TOT = N_FF + N_FB,
  localparam int unsigned CNTW  = bits_for(N_TOT),
  localparam int unsigned FBW   = (N_FB > 0) ? N_FB : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // network CU handshake
  input  logic              start,
  output logic              ready,
  // input spikes
  input  logic [N_FF-1:0]   spikes_ff,
  input  logic [FBW-1:0]    spikes_fb,
  // neurons
  input  logic              neurons_ready,
  output logic              neurons_start,
  output neuron_op_e        neurons_op,
  output logic              single_spike,
  // weight memories
  output logic              rd_en,
  output logic [CNTW-1:0]   rd_addr,
  output logic              rd_fb,
  input  logic              syn_ready
);

  typedef enum logic [1:0] {S_IDLE, S_LEAK, S_LOOP, S_FIRE} state_e;

  state_e            state_q;
  logic [N_TOT-1:0]  spk_q;        // sampled spikes {feedback, feed-forward}
  logic              act_ff_q, act_fb_q;
  logic [CNTW-1:0]   cnt_q;        // CNT: next input to read
  logic [CNTW-1:0]   end_q;        // STOP value of the current loop
  logic [CNTW-1:0]   cnt_d1_q;     // input whose weight row is on the memory output
  logic              v1_q;         // a row is on the memory output, not yet used

  logic [N_TOT-1:0]  spk_in;
  logic              active_ff, active_fb;

  if (N_FB > 0) begin : g_fb
    assign spk_in    = {spikes_fb, spikes_ff};
    assign active_fb = |spikes_fb;
  end else begin : g_nofb
    assign spk_in    = spikes_ff;
    assign active_fb = 1'b0;
  end
  assign active_ff = |spikes_ff;   // ACTIVE

  logic consume, stall, issue, loop_done;
  always_comb begin
    consume   = (state_q == S_LOOP) && v1_q && neurons_ready && syn_ready;
    stall     = v1_q && !(neurons_ready && syn_ready);
    issue     = (state_q == S_LOOP) && (cnt_q != end_q) && syn_ready && !stall;
    loop_done = (state_q == S_LOOP) && (cnt_q == end_q) && (!v1_q || consume);
  end

  always_comb begin
    ready         = (state_q == S_IDLE);
    neurons_start = 1'b0;
    neurons_op    = OP_LEAK;
    unique case (state_q)
      S_LEAK: begin neurons_start = neurons_ready; neurons_op = OP_LEAK;  end
      S_LOOP: begin neurons_start = consume;       neurons_op = OP_INTEG; end
      S_FIRE: begin neurons_start = neurons_ready; neurons_op = OP_FIRE;  end
      default: ;
    endcase
    single_spike = spk_q[cnt_d1_q[$clog2(N_TOT > 1 ? N_TOT : 2)-1:0]];
    rd_en        = issue;
    rd_addr      = cnt_q;
    rd_fb        = (cnt_d1_q >= CNTW'(N_FF));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      spk_q    <= '0;
      act_ff_q <= 1'b0;
      act_fb_q <= 1'b0;
      cnt_q    <= '0;
      end_q    <= '0;
      cnt_d1_q <= '0;
      v1_q     <= 1'b0;
    end else if (clear) begin
      state_q  <= S_IDLE;
      v1_q     <= 1'b0;
      cnt_q    <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          spk_q    <= spk_in;
          act_ff_q <= active_ff;
          act_fb_q <= active_fb;
          state_q  <= S_LEAK;
        end
        S_LEAK: if (neurons_ready) begin
          v1_q <= 1'b0;
          if (act_ff_q) begin
            cnt_q   <= '0;
            end_q   <= act_fb_q ? CNTW'(N_TOT) : CNTW'(N_FF);
            state_q <= S_LOOP;
          end else if (act_fb_q) begin
            cnt_q   <= CNTW'(N_FF);
            end_q   <= CNTW'(N_TOT);
            state_q <= S_LOOP;
          end else begin
            state_q <= S_FIRE;
          end
        end
        S_LOOP: begin
          if (issue) begin
            cnt_q    <= cnt_q + 1'b1;
            cnt_d1_q <= cnt_q;
            v1_q     <= 1'b1;
          end else if (consume) begin
            v1_q     <= 1'b0;
          end
          if (loop_done) state_q <= S_FIRE;
        end
        S_FIRE: if (neurons_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The neurons are only started when all of them are ready.
  a_start_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    neurons_start |-> neurons_ready);

  // A read is only started while the synapse interface is ready.
  a_read_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> syn_ready);

endmodule
