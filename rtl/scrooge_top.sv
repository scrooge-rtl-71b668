// scrooge_top: one Scrooge sequence-alignment core.
//
// Aligns a pattern (read) against a text (reference region) under the
// edit distance and streams the edit operations (the CIGAR string, one
// operation per output) of the alignment. It is the GenASM accelerator
// organisation with the Scrooge storage reductions applied:
//   scrooge_seq_buffer   holds the sequence pair (host writes it)
//   scrooge_window_ctrl  windowing heuristic (window W, overlap O)
//   scrooge_pm_gen       pattern masks of the current window
//   scrooge_dc_array     diagonal-wise DP construction with Early Termination
//   scrooge_tb_sram      DENT-trimmed table store (SENE: entries, not edges)
//   scrooge_tb_logic     traceback that regenerates edges from entries
//
// Use: write the text (wr_sel=0) and pattern (wr_sel=1) bases through the
// write port, then pulse start with text_len and pat_len; keep them stable
// until done. et_en selects Early Termination (1, the proposed setting)
// or full construction of every window table (0). Operations appear on
// op_valid/op, first to last, with no back-pressure; done pulses after the
// last one, with edits (the alignment's edit count), n_ops and n_windows.
//
// Per window the core spends W+1 cycles loading, W+d+2 cycles in the DC
// array (d = window edit distance, 2W+2 without Early Termination), and
// two cycles per traceback operation plus two.
module scrooge_top
  import scrooge_pkg::*;
#(
  parameter int unsigned W       = 64,
  parameter int unsigned O       = 33,
  parameter int unsigned MAX_LEN = 16384,
  localparam int unsigned CW    = $clog2(W+1),
  localparam int unsigned AW    = $clog2(MAX_LEN),
  localparam int unsigned LW    = $clog2(MAX_LEN+1),
  localparam int unsigned SCOLS = W - O + 1,
  localparam int unsigned SBITS = W - O + 1,
  localparam int unsigned COLW  = $clog2(SCOLS+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host write port of the sequence buffer
  input  logic          wr_en,
  input  logic          wr_sel,
  input  logic [AW-1:0] wr_addr,
  input  base_t         wr_data,
  // alignment control
  input  logic          start,
  input  logic          et_en,
  input  logic [LW-1:0] text_len,
  input  logic [LW-1:0] pat_len,
  output logic          busy,
  output logic          done,
  // CIGAR stream and summary
  output logic          op_valid,
  output op_t           op,
  output logic [LW-1:0] edits,
  output logic [LW:0]   n_ops,
  output logic [LW-1:0] n_windows,
  output logic          et_hit      // last window's DC stopped early
);

  logic [AW:0] t_rd_addr, p_rd_addr;
  base_t       t_rd_data, p_rd_data;

  base_t [W-1:0]    win_text, win_pat;
  logic [CW-1:0]    n_len, m_len;
  logic [3:0][W-1:0] pm;

  logic             dc_start, dc_done, dc_busy;
  logic [CW-1:0]    dc_dist;
  logic [SCOLS-1:0]            wr_en_s;
  logic [SCOLS-1:0][CW-1:0]    wr_row_s;
  logic [SCOLS-1:0][SBITS-1:0] wr_data_s;

  logic [2:0][COLW-1:0]  rd_col;
  logic [2:0][CW-1:0]    rd_row;
  logic [2:0][SBITS-1:0] rd_data;

  logic          tb_start, tb_done, tb_busy;
  logic [CW-1:0] tb_text_used, tb_pat_used;

  scrooge_seq_buffer #(.MAX_LEN(MAX_LEN)) u_buf (
    .clk, .wr_en, .wr_sel, .wr_addr, .wr_data,
    .t_rd_addr, .t_rd_data, .p_rd_addr, .p_rd_data
  );

  scrooge_window_ctrl #(.W(W), .MAX_LEN(MAX_LEN)) u_ctrl (
    .clk, .rst_n, .start, .text_len, .pat_len,
    .t_rd_addr, .t_rd_data, .p_rd_addr, .p_rd_data,
    .win_text, .win_pat, .n_len, .m_len,
    .dc_start, .dc_done,
    .tb_start, .tb_done, .tb_text_used, .tb_pat_used,
    .op_valid, .op,
    .busy, .done, .edits, .n_ops, .n_windows
  );

  scrooge_pm_gen #(.W(W)) u_pm (
    .pat (win_pat), .m_len, .pm
  );

  scrooge_dc_array #(.W(W), .O(O)) u_dc (
    .clk, .rst_n, .start (dc_start), .et_en,
    .text (win_text), .n_len, .m_len, .pm,
    .busy (dc_busy), .done (dc_done), .win_dist (dc_dist), .et_hit,
    .wr_en (wr_en_s), .wr_row (wr_row_s), .wr_data (wr_data_s)
  );

  scrooge_tb_sram #(.W(W), .O(O)) u_sram (
    .clk, .wr_en (wr_en_s), .wr_row (wr_row_s), .wr_data (wr_data_s),
    .rd_col, .rd_row, .rd_data
  );

  scrooge_tb_logic #(.W(W), .O(O)) u_tb (
    .clk, .rst_n, .start (tb_start), .win_dist (dc_dist),
    .text (win_text), .n_len, .m_len, .pm,
    .rd_col, .rd_row, .rd_data,
    .busy (tb_busy), .op_valid, .op, .done (tb_done),
    .text_used (tb_text_used), .pat_used (tb_pat_used)
  );

endmodule
