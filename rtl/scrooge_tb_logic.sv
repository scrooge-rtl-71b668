// scrooge_tb_logic: SENE traceback unit of one window.
//
// Traceback follows a path of zeros from the entry that gives the window's
// edit distance, bit j=0 of R[0][win_dist], towards the north-east corner of
// the table, and reports one edit operation per edge it crosses. Under SENE
// the edges are not stored: for each step the unit reads the three
// neighbour entries R[i+1][d], R[i+1][d-1] and R[i][d-1] from the
// traceback memory and regenerates the four edges with one DC processing
// element (scrooge_dc_pe), working on the W-O+1 stored leading bits.
// At position (i, j, d) a 0 at pattern bit j of an edge means:
//   M  match         (R[i+1][d] << 1) | PM[text[i]]  -> (i+1, j+1, d)
//   S  substitution   R[i+1][d-1] << 1               -> (i+1, j+1, d-1)
//   D  deletion       R[i+1][d-1]                    -> (i+1, j,   d-1)
//   I  insertion      R[i][d-1] << 1                 -> (i,   j+1, d-1)
// The first edge with a 0 is taken in the order M, S, D, I (this order is
// this design's choice). In row d = 0 only M exists. When the window's
// text is used up (i = n_len, only in the last text window) the remaining
// pattern bases are insertions.
//
// The windowing heuristic keeps only the first W-O edges of a window, so
// traceback stops after W-O operations, or earlier when the pattern of the
// window is used up (j = m_len). This bound is what lets DENT drop all but
// W-O+1 columns and leading bits: i and j never exceed W-O.
//
// Timing: two cycles per operation (memory read, then decision). op_valid
// and op are registered: they pulse in the cycle after the decision. done
// pulses two cycles after the last operation (the read cycle that finds
// the stop condition, then the register), with
// text_used / pat_used the bases consumed; they stay valid until the
// next start. Inputs must be stable while busy.
module scrooge_tb_logic
  import scrooge_pkg::*;
#(
  parameter int unsigned W = 64,
  parameter int unsigned O = 33,
  localparam int unsigned CW    = $clog2(W+1),
  localparam int unsigned SCOLS = W - O + 1,
  localparam int unsigned SBITS = W - O + 1,
  localparam int unsigned COLW  = $clog2(SCOLS+1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [CW-1:0]          win_dist,      // edit distance of the window (start row)
  input  base_t [W-1:0]          text,
  input  logic [CW-1:0]          n_len,
  input  logic [CW-1:0]          m_len,
  input  logic [3:0][W-1:0]      pm,
  // traceback memory read ports (1-cycle latency)
  output logic [2:0][COLW-1:0]   rd_col,
  output logic [2:0][CW-1:0]     rd_row,
  input  logic [2:0][SBITS-1:0]  rd_data,
  // edit operations
  output logic                   busy,
  output logic                   op_valid,
  output op_t                    op,
  output logic                   done,
  output logic [CW-1:0]          text_used,
  output logic [CW-1:0]          pat_used
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_DECIDE} state_t;
  state_t state;

  logic [CW-1:0] ti, pj, dd;   // text column i, pattern bit j, row d
  logic [CW-1:0] nsteps;

  localparam int unsigned LIMIT = W - O;

  // Read addresses for the current position.
  always_comb begin
    rd_col[0] = COLW'(ti + 1'b1);  rd_row[0] = dd;          // R[i+1][d]
    rd_col[1] = COLW'(ti + 1'b1);  rd_row[1] = dd - 1'b1;   // R[i+1][d-1]
    rd_col[2] = COLW'(ti);         rd_row[2] = dd - 1'b1;   // R[i][d-1]
    if (dd == '0) begin
      rd_row[1] = '1;  // out of range: reads as all ones
      rd_row[2] = '1;
    end
  end

  // SENE: regenerate the edges of R[i][d].
  logic [SBITS-1:0] e_ins, e_del, e_sub, e_mat, unused_r;
  scrooge_dc_pe #(.WIDTH(SBITS)) u_sene_pe (
    .first_row (dd == '0),
    .r_n       (rd_data[2]),
    .r_ne      (rd_data[1]),
    .r_e       (rd_data[0]),
    .cur_pm    (pm[text[ti]][W-1 -: SBITS]),
    .r         (unused_r),
    .e_ins     (e_ins),
    .e_del     (e_del),
    .e_sub     (e_sub),
    .e_mat     (e_mat)
  );

  logic finish_now;
  assign finish_now = (nsteps == CW'(LIMIT)) || (pj >= m_len);

  // Decision for the current position.
  op_t dec_op;
  logic dec_ok;
  logic [CW-1:0] b;
  assign b = CW'(SBITS - 1) - pj;
  always_comb begin
    dec_ok = 1'b1;
    if (ti >= n_len)            dec_op = OP_I;
    else if (!e_mat[b])         dec_op = OP_M;
    else if (dd == '0) begin    dec_op = OP_M; dec_ok = 1'b0; end
    else if (!e_sub[b])         dec_op = OP_S;
    else if (!e_del[b])         dec_op = OP_D;
    else if (!e_ins[b])         dec_op = OP_I;
    else begin                  dec_op = OP_I; dec_ok = 1'b0; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ti        <= '0;
      pj        <= '0;
      dd        <= '0;
      nsteps    <= '0;
      op_valid  <= 1'b0;
      op        <= OP_M;
      done      <= 1'b0;
      text_used <= '0;
      pat_used  <= '0;
    end else begin
      op_valid <= 1'b0;
      done     <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          ti     <= '0;
          pj     <= '0;
          dd     <= win_dist;
          nsteps <= '0;
          state  <= S_READ;
        end
        S_READ: begin
          if (finish_now) begin
            text_used <= ti;
            pat_used  <= pj;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else begin
            state <= S_DECIDE;
          end
        end
        S_DECIDE: begin
          op_valid <= 1'b1;
          op       <= dec_op;
          nsteps   <= nsteps + 1'b1;
          unique case (dec_op)
            OP_M: begin ti <= ti + 1'b1; pj <= pj + 1'b1; end
            OP_S: begin ti <= ti + 1'b1; pj <= pj + 1'b1; dd <= dd - 1'b1; end
            OP_D: begin ti <= ti + 1'b1; dd <= dd - 1'b1; end
            OP_I: begin pj <= pj + 1'b1; if (dd != '0) dd <= dd - 1'b1; end
          endcase
          state <= S_READ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // A zero entry always has at least one zero edge.
  always_ff @(posedge clk)
    if (state == S_DECIDE)
      assert (dec_ok) else $error("traceback found no zero edge at i=%0d j=%0d d=%0d", ti, pj, dd);

endmodule
