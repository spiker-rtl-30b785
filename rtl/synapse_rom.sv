// synapse_rom: synaptic weight memory of one layer (one block-RAM array).
//
// Function. Row r holds the weights from layer input r to every neuron of the
// layer, N_COL weights of WBW bits side by side, so that one read delivers the
// weights of all neurons in parallel; the layer controller reads the row of
// the input it is currently presenting. Row r, column c is the weight of the
// synapse from input r to neuron c.
//
// Interface / timing. Synchronous read: rd_data is the row at rd_addr one clock
// after rd_en, and holds its value while rd_en is low (block-RAM output
// register behaviour). The write port loads one weight per cycle (row wr_addr,
// column wr_col); it stands for the initialisation of the memory with trained,
// quantised weights, which on an FPGA happens when the device is configured.
// During inference the memory is only read, so it acts as a ROM. Instead (or
// before) loading through the port, the array can be filled at elaboration
// from a hex file named by INIT_FILE: one line per row, the row's N_COL
// weights as one hexadecimal word with column 0 in the least significant bits.
// An empty INIT_FILE leaves the array to the write port.
//
// The row-per-input organisation and the parallel read follow the
// architecture, and so does the initialisation file; the one-weight write port
// and the read latency of one cycle are this design's choices.
module synapse_rom #(
  parameter int unsigned DEPTH = 784,  // number of layer inputs (rows)
  parameter int unsigned N_COL = 128,  // number of neurons (weights per row)
  parameter int unsigned WBW   = 4,    // weight width
  parameter string       INIT_FILE = "", // optional $readmemh file, row per line
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW   = (N_COL > 1) ? $clog2(N_COL) : 1
) (
  input  logic                          clk,
  input  logic                          rd_en,
  input  logic [AW-1:0]                 rd_addr,
  output logic [N_COL-1:0][WBW-1:0]     rd_data,
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [CW-1:0]                 wr_col,
  input  logic [WBW-1:0]                wr_data
);

  logic [N_COL-1:0][WBW-1:0] mem [DEPTH];

  initial begin
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_col] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
