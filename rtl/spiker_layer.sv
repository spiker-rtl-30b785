// spiker_layer: one fully connected spiking layer.
//
// Function. N_NEU neurons share a layer CU and a synaptic weight memory. At
// each time step the layer CU presents the N_FF input spikes one by one; for
// each, the weight memory delivers the row of that input (one weight per
// neuron) and every neuron integrates its own weight in the same cycle.
// With RECURRENT set the layer also has all-to-all connections from its own
// neurons back to itself: the layer's output spikes of the previous step are
// presented after the feed-forward inputs, with their weights in a second
// memory whose width WBW_FB may differ from the feed-forward width WBW_FF.
//
// Interface. start/ready with the network CU (one time step per start).
// spikes_in: the previous layer's (or the input interface's) spikes, sampled
// at start. spikes_out: each neuron's spike from its last fire operation;
// valid whenever ready is high. Weight loading: wr_en writes wr_data into the
// feed-forward (wr_fb = 0) or feedback (wr_fb = 1) memory at row wr_row
// (input index) and column wr_col (neuron index). clear zeroes the neuron
// state for a new inference. INIT_FF / INIT_FB optionally name hex files
// that preload the two weight memories (format in synapse_rom).
//
// Timing. See layer_cu: about N_FF + 4 cycles for a step whose inputs carry a
// spike, plus N_NEU + 1 for the feedback group of a recurrent layer when its
// spikes are not all zero; 3 cycles (4 for second-order LIF) for an empty step.
//
// The weight memories are on-chip block RAMs, so the synapse ready of the
// layer CU is held high; a slower memory would drive it instead.
//
// Tool notes. The neurons' vm/isyn outputs are left open here (they exist for
// testing a neuron on its own); lint reports them as empty pin connections.
// rd_fb is unused in a layer without recurrence, where there is a single
// weight memory.
module spiker_layer
  import spiker_pkg::*;
#(
  parameter int unsigned          N_FF        = 784,
  parameter int unsigned          N_NEU       = 128,
  parameter bit                   RECURRENT   = 1'b0,
  parameter neuron_model_e        MODEL       = NEURON_LIF1,
  parameter reset_mode_e          RESET       = RESET_SUBTRACTIVE,
  parameter int unsigned          BW          = 6,
  parameter int unsigned          WBW_FF      = 4,
  parameter int unsigned          WBW_FB      = 4,
  parameter logic signed [BW-1:0] VTH         = 8,
  parameter logic signed [BW-1:0] VRESET      = 0,
  parameter int unsigned          ALPHA_SHIFT = 3,
  parameter int unsigned          BETA_SHIFT  = 3,
  parameter string                INIT_FF     = "",  // optional weight files,
  parameter string                INIT_FB     = "",  // see synapse_rom
  localparam int unsigned N_FB  = RECURRENT ? N_NEU : 0,
  localparam int unsigned WBW   = (WBW_FF > WBW_FB) ? WBW_FF : WBW_FB,
  localparam int unsigned ROWS  = (N_FF > N_NEU) ? N_FF : N_NEU,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW    = (N_NEU > 1) ? $clog2(N_NEU) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               start,
  output logic               ready,
  input  logic [N_FF-1:0]    spikes_in,
  output logic [N_NEU-1:0]   spikes_out,
  input  logic               wr_en,
  input  logic               wr_fb,
  input  logic [RW-1:0]      wr_row,
  input  logic [CW-1:0]      wr_col,
  input  logic [WBW-1:0]     wr_data
);

  localparam int unsigned CNTW = bits_for(N_FF + N_FB);
  localparam int unsigned FFAW = (N_FF > 1) ? $clog2(N_FF) : 1;
  localparam int unsigned FBAW = (N_NEU > 1) ? $clog2(N_NEU) : 1;

  logic             neurons_start, neurons_ready, single_spike;
  neuron_op_e       neurons_op;
  logic             rd_en, rd_fb;
  logic [CNTW-1:0]  rd_addr;
  logic [N_NEU-1:0] neuron_ready;
  logic [N_NEU-1:0][WBW-1:0]    weights;
  logic [N_NEU-1:0][WBW_FF-1:0] ff_row;

  assign neurons_ready = &neuron_ready;   // AND of the neurons' ready signals

  layer_cu #(.N_FF(N_FF), .N_FB(N_FB)) u_cu (
    .clk, .rst_n, .clear, .start, .ready,
    .spikes_ff (spikes_in),
    .spikes_fb (spikes_out[((N_FB > 0) ? N_FB : 1)-1:0]),
    .neurons_ready, .neurons_start, .neurons_op, .single_spike,
    .rd_en, .rd_addr, .rd_fb,
    .syn_ready (1'b1)   // block-RAM weights: a row is always ready one clock after its read
  );

  // Feed-forward weights: row = input index.
  synapse_rom #(.DEPTH(N_FF), .N_COL(N_NEU), .WBW(WBW_FF), .INIT_FILE(INIT_FF)) u_ff_rom (
    .clk,
    .rd_en   (rd_en && (rd_addr < CNTW'(N_FF))),
    .rd_addr (FFAW'(rd_addr)),
    .rd_data (ff_row),
    .wr_en   (wr_en && !wr_fb),
    .wr_addr (FFAW'(wr_row)),
    .wr_col  (wr_col),
    .wr_data (wr_data[WBW_FF-1:0])
  );

  if (RECURRENT) begin : g_fb
    logic [N_NEU-1:0][WBW_FB-1:0] fb_row;
    // Feedback weights: row = index of the source neuron in this layer.
    synapse_rom #(.DEPTH(N_NEU), .N_COL(N_NEU), .WBW(WBW_FB), .INIT_FILE(INIT_FB)) u_fb_rom (
      .clk,
      .rd_en   (rd_en && (rd_addr >= CNTW'(N_FF))),
      .rd_addr (FBAW'(rd_addr - CNTW'(N_FF))),
      .rd_data (fb_row),
      .wr_en   (wr_en && wr_fb),
      .wr_addr (FBAW'(wr_row)),
      .wr_col  (wr_col),
      .wr_data (wr_data[WBW_FB-1:0])
    );
    for (genvar n = 0; n < N_NEU; n++) begin : g_sel
      assign weights[n] = rd_fb ? WBW'($signed(fb_row[n])) : WBW'($signed(ff_row[n]));
    end
  end else begin : g_nofb
    for (genvar n = 0; n < N_NEU; n++) begin : g_sel
      assign weights[n] = WBW'($signed(ff_row[n]));
    end
  end

  for (genvar n = 0; n < N_NEU; n++) begin : g_neuron
    neuron #(
      .MODEL(MODEL), .RESET(RESET), .BW(BW), .WBW(WBW), .VTH(VTH), .VRESET(VRESET),
      .ALPHA_SHIFT(ALPHA_SHIFT), .BETA_SHIFT(BETA_SHIFT)
    ) u_neuron (
      .clk, .rst_n, .clear,
      .start    (neurons_start),
      .op       (neurons_op),
      .ready    (neuron_ready[n]),
      .weight   (weights[n]),
      .spike_in (single_spike),
      .spike    (spikes_out[n]),
      .vm       (),
      .isyn     ()
    );
  end

endmodule
