// scrooge_seq_buffer: on-chip store of one sequence pair (text and pattern).
//
// Two memories of MAX_LEN bases, two bits per base: one holds the text
// (the reference region), the other the pattern (the read). The host
// writes bases one at a time through the write port (wr_sel = 0 text,
// 1 pattern). The window controller reads one base of each memory per
// cycle; reads are synchronous (address in cycle t, data in cycle t+1).
// Addresses at or beyond MAX_LEN read as base A; the window controller
// never uses such bases, it masks them by the window lengths.
//
// The paper only names a DC SRAM beside the DC logic. Holding the pair
// there, its size (MAX_LEN) and the ports are this design's choices.
module scrooge_seq_buffer
  import scrooge_pkg::*;
#(
  parameter int unsigned MAX_LEN = 16384,
  localparam int unsigned AW = $clog2(MAX_LEN)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_sel,    // 0: text, 1: pattern
  input  logic [AW-1:0] wr_addr,
  input  base_t         wr_data,
  input  logic [AW:0]   t_rd_addr,
  output base_t         t_rd_data,
  input  logic [AW:0]   p_rd_addr,
  output base_t         p_rd_data
);

  base_t text_mem [MAX_LEN];
  base_t pat_mem  [MAX_LEN];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel) text_mem[wr_addr] <= wr_data;
    if (wr_en &&  wr_sel) pat_mem[wr_addr]  <= wr_data;
  end

  always_ff @(posedge clk) begin
    t_rd_data <= (int'(t_rd_addr) < MAX_LEN) ? text_mem[t_rd_addr[AW-1:0]] : BASE_A;
    p_rd_data <= (int'(p_rd_addr) < MAX_LEN) ? pat_mem[p_rd_addr[AW-1:0]]  : BASE_A;
  end

endmodule
