// scrooge_window_ctrl: windowing controller of one alignment.
//
// Long sequences are aligned greedily in windows. Each window takes the
// next W bases of text and of pattern (fewer at the ends), computes the
// window's DP table (DC array), traces back the first W-O edges
// (traceback unit), and moves the text and pattern start positions on by
// the bases those edges consumed; the remaining O bases of the window
// are aligned again as part of the next one. The alignment ends when the
// whole pattern has been consumed. Trailing text beyond the aligned
// pattern is not reported (GenASM-style alignment of the full pattern
// against a prefix of the text).
//
// Per window: WINDOW computes the window lengths n_len = min(W, text
// left) and m_len = min(W, pattern left); LOAD reads the W bases of each
// sequence from the sequence buffer, one per cycle each (W+1 cycles);
// DC starts the DC array and waits for done; TB starts the traceback and
// waits for done; then the positions advance. Operations from the
// traceback unit are counted: edits (all but M) and operations.
//
// Interface: start (with text_len, pat_len stable until done) begins an
// alignment in IDLE; done pulses at the end, with edits, n_ops and
// n_windows valid until the next start. A zero-length pattern finishes at
// once with no operations.
//
// Follows the paper: the greedy window of W bases with overlap O. This
// design's choices: advancing by the bases traceback consumed (see the
// README for the paper's two descriptions), loading through a one-base
// port, and the handling of the sequence ends.
module scrooge_window_ctrl
  import scrooge_pkg::*;
#(
  parameter int unsigned W       = 64,
  parameter int unsigned MAX_LEN = 16384,
  localparam int unsigned CW = $clog2(W+1),
  localparam int unsigned AW = $clog2(MAX_LEN),
  localparam int unsigned LW = $clog2(MAX_LEN+1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [LW-1:0]        text_len,
  input  logic [LW-1:0]        pat_len,
  // sequence buffer read ports
  output logic [AW:0]          t_rd_addr,
  input  base_t                t_rd_data,
  output logic [AW:0]          p_rd_addr,
  input  base_t                p_rd_data,
  // window handed to the datapath
  output base_t [W-1:0]        win_text,
  output base_t [W-1:0]        win_pat,
  output logic [CW-1:0]        n_len,
  output logic [CW-1:0]        m_len,
  // DC array
  output logic                 dc_start,
  input  logic                 dc_done,
  // traceback
  output logic                 tb_start,
  input  logic                 tb_done,
  input  logic [CW-1:0]        tb_text_used,
  input  logic [CW-1:0]        tb_pat_used,
  input  logic                 op_valid,
  input  op_t                  op,
  // status
  output logic                 busy,
  output logic                 done,
  output logic [LW-1:0]        edits,
  output logic [LW:0]          n_ops,
  output logic [LW-1:0]        n_windows
);

  typedef enum logic [2:0] {S_IDLE, S_WINDOW, S_LOAD, S_DC, S_TB} state_t;
  state_t state;

  logic [LW-1:0] tpos, ppos;
  logic [CW:0]   k;          // load counter

  logic [LW-1:0] t_left, p_left;
  assign t_left = text_len - tpos;
  assign p_left = pat_len - ppos;

  assign t_rd_addr = (AW+1)'(tpos) + (AW+1)'(k);
  assign p_rd_addr = (AW+1)'(ppos) + (AW+1)'(k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tpos      <= '0;
      ppos      <= '0;
      k         <= '0;
      n_len     <= '0;
      m_len     <= '0;
      win_text  <= '0;
      win_pat   <= '0;
      dc_start  <= 1'b0;
      tb_start  <= 1'b0;
      done      <= 1'b0;
      edits     <= '0;
      n_ops     <= '0;
      n_windows <= '0;
    end else begin
      dc_start <= 1'b0;
      tb_start <= 1'b0;
      done     <= 1'b0;
      if (op_valid) begin
        n_ops <= n_ops + 1'b1;
        if (op != OP_M) edits <= edits + 1'b1;
      end
      case (state)
        S_IDLE: if (start) begin
          tpos      <= '0;
          ppos      <= '0;
          edits     <= '0;
          n_ops     <= '0;
          n_windows <= '0;
          state     <= S_WINDOW;
        end
        S_WINDOW: begin
          if (p_left == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            n_len <= (t_left >= LW'(W)) ? CW'(W) : CW'(t_left);
            m_len <= (p_left >= LW'(W)) ? CW'(W) : CW'(p_left);
            k     <= '0;
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          // data of address k-1 arrives now
          if (k != '0) begin
            win_text[k-1] <= t_rd_data;
            win_pat[k-1]  <= p_rd_data;
          end
          if (int'(k) == W) begin
            dc_start <= 1'b1;
            state    <= S_DC;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DC: if (dc_done) begin
          tb_start <= 1'b1;
          state    <= S_TB;
        end
        S_TB: if (tb_done) begin
          tpos      <= tpos + LW'(tb_text_used);
          ppos      <= ppos + LW'(tb_pat_used);
          n_windows <= n_windows + 1'b1;
          state     <= S_WINDOW;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
