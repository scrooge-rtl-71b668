// scrooge_tb_sram: traceback memory holding the DENT-trimmed DP table.
//
// With SENE the table R itself is stored, not the edges between entries;
// with DENT only the entries traceback can reach are kept: columns
// 0..W-O, all W+1 rows, and the W-O+1 leading bits of each entry. For
// W=64, O=33 that is 32 columns x 65 rows x 32 bits = 66,560 bits.
//
// The memory is split into one bank per stored column so that the DC
// array can write the entries of one diagonal, one per column, in a
// single cycle (wr_* ports, one per bank). Three read ports serve the
// traceback unit, which needs three neighbour entries per step: each bank
// reads the requested rows, and the registered column address selects
// the bank afterwards. Reads are synchronous: the data of an address
// presented in cycle t appears in cycle t+1. A read of an entry written in the same cycle returns the old
// contents. The memory is not reset; traceback reads only entries the
// current window has written.
//
// The paper sizes this memory (and estimates it as an SRAM); the banking
// and the port count are this design's choices.
module scrooge_tb_sram #(
  parameter int unsigned W = 64,
  parameter int unsigned O = 33,
  localparam int unsigned CW    = $clog2(W+1),
  localparam int unsigned SCOLS = W - O + 1,
  localparam int unsigned SBITS = W - O + 1,
  localparam int unsigned COLW  = $clog2(SCOLS+1)
) (
  input  logic                         clk,
  input  logic  [SCOLS-1:0]            wr_en,
  input  logic  [SCOLS-1:0][CW-1:0]    wr_row,
  input  logic  [SCOLS-1:0][SBITS-1:0] wr_data,
  input  logic  [2:0][COLW-1:0]        rd_col,
  input  logic  [2:0][CW-1:0]          rd_row,
  output logic  [2:0][SBITS-1:0]       rd_data
);

  // Bank outputs of the three ports, before the column select.
  logic [SCOLS-1:0][2:0][SBITS-1:0] bank_q;
  logic [2:0][COLW-1:0]             col_q;
  logic [2:0]                       ok_q;

  for (genvar c = 0; c < SCOLS; c++) begin : g_bank
    logic [SBITS-1:0] bank [W+1];
    always_ff @(posedge clk) begin
      if (wr_en[c] && int'(wr_row[c]) <= W)
        bank[wr_row[c]] <= wr_data[c];
      for (int p = 0; p < 3; p++)
        if (int'(rd_row[p]) <= W)
          bank_q[c][p] <= bank[rd_row[p]];
    end
  end

  always_ff @(posedge clk) begin
    col_q <= rd_col;
    for (int p = 0; p < 3; p++)
      ok_q[p] <= (int'(rd_col[p]) < SCOLS) && (int'(rd_row[p]) <= W);
  end

  always_comb begin
    for (int p = 0; p < 3; p++) begin
      rd_data[p] = '1;
      for (int c = 0; c < SCOLS; c++)
        if (ok_q[p] && int'(col_q[p]) == c)
          rd_data[p] = bank_q[c][p];
    end
  end

endmodule
