// tb_synapse_rom: self-checking test of the synaptic weight memory.
//
// A 40-row x 12-column memory of 5-bit weights is filled one weight per cycle
// through the write port with random values (kept in a shadow array), with
// rows written in random order and some weights overwritten. Then random
// reads, mixed with idle cycles (rd_en low) and further writes, are checked:
// the row appears on rd_data one clock after rd_en and stays unchanged while
// rd_en is low. Reads of the first and last rows must both occur.
// A second, 16 x 4 x 4-bit memory is preloaded from tb/synapse_rom_init.hex,
// whose weight at row r, column c is (5r + 3c + 7) mod 16; every row is read
// back and compared with that formula before anything is written.
//
// Whole-row reads follow the architecture's parallel weight access; the
// one-cycle read latency, the hold and the write port are this design's
// choices.
module tb_synapse_rom;

  localparam int DEPTH = 40, N_COL = 12, WBW = 5, N_CYC = 4000;
  localparam int AW = $clog2(DEPTH), CW = $clog2(N_COL);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      rd_en, wr_en;
  logic [AW-1:0]             rd_addr, wr_addr;
  logic [CW-1:0]             wr_col;
  logic [WBW-1:0]            wr_data;
  logic [N_COL-1:0][WBW-1:0] rd_data;

  synapse_rom #(.DEPTH(DEPTH), .N_COL(N_COL), .WBW(WBW)) dut (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_col, .wr_data);

  logic [WBW-1:0] shadow [DEPTH][N_COL];

  // preloaded memory
  logic            i_rd_en;
  logic [3:0]      i_rd_addr;
  logic [3:0][3:0] i_rd_data;
  synapse_rom #(.DEPTH(16), .N_COL(4), .WBW(4), .INIT_FILE("tb/synapse_rom_init.hex")) dut_init (
    .clk, .rd_en(i_rd_en), .rd_addr(i_rd_addr), .rd_data(i_rd_data), .wr_en(1'b0),
    .wr_addr(4'd0), .wr_col(2'd0), .wr_data(4'd0));
  int checks = 0, failures = 0, n_first = 0, n_last = 0, n_hold = 0;

  initial begin
    logic [N_COL-1:0][WBW-1:0] expect_q;
    bit have;
    rd_en = 1'b0; wr_en = 1'b0; rd_addr = '0; wr_addr = '0; wr_col = '0; wr_data = '0;
    i_rd_en = 1'b0; i_rd_addr = '0;
    @(negedge clk);
    // preloaded contents
    for (int r = 0; r < 16; r++) begin
      i_rd_en = 1'b1; i_rd_addr = 4'(r);
      @(posedge clk); #1;
      i_rd_en = 1'b0;
      for (int c = 0; c < 4; c++) begin
        checks++;
        if (int'(i_rd_data[c]) != (5 * r + 3 * c + 7) % 16) begin
          failures++;
          $display("preloaded row %0d col %0d: %0d", r, c, i_rd_data[c]);
        end
      end
      @(negedge clk);
    end
    // fill every weight, rows in a scrambled order (r * 7 mod DEPTH is a permutation)
    for (int k = 0; k < DEPTH; k++) begin
      automatic int r = (k * 7) % DEPTH;
      for (int c = 0; c < N_COL; c++) begin
        wr_en = 1'b1; wr_addr = AW'(r); wr_col = CW'(c); wr_data = WBW'($urandom);
        shadow[r][c] = wr_data;
        @(negedge clk);
      end
    end
    wr_en = 1'b0;
    have = 0;
    for (int k = 0; k < N_CYC; k++) begin
      automatic int a = int'($urandom_range(0, DEPTH - 1));
      rd_en = ($urandom_range(0, 3) != 0);
      rd_addr = AW'(a);
      // occasional write to a row other than the one being read
      wr_en = ($urandom_range(0, 9) == 0) && (a != 0);
      wr_addr = '0; wr_col = CW'($urandom_range(0, N_COL - 1)); wr_data = WBW'($urandom);
      if (wr_en) shadow[0][wr_col] = wr_data;
      @(posedge clk); #1;
      if (rd_en) begin
        for (int c = 0; c < N_COL; c++) expect_q[c] = shadow[a][c];
        have = 1;
        if (a == 0) n_first++;
        if (a == DEPTH - 1) n_last++;
      end else if (have) n_hold++;
      if (have) begin
        checks++;
        if (rd_data !== expect_q) begin
          failures++;
          $display("cycle %0d: row %0d read %h expected %h", k, a, rd_data, expect_q);
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_first == 0 || n_last == 0 || n_hold == 0) begin
      failures++; $display("FAIL: first row, last row or hold never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N_CYC + DEPTH * N_COL + 1100) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
