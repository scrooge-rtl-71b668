// scrooge_dc_array: diagonal-wise GenASM-DC array with Early Termination.
//
// Builds the DP table R of one window: W+1 columns (text positions
// i = 0..W, column W being the empty-text start column) and up to W+1 rows
// (edit counts d = 0..W), each entry a W-bit pattern bitvector.
//
// Organisation. There is one processing element (PE) per text column,
// i = 0..W-1, plus a start-column slot at i = W. Entries on one
// north-west to south-east diagonal do not depend on each other, so slot i
// computes row d at step s = d + (W - i): the start column leads, and the
// leftmost PE (i = 0) computes row d at step W + d. At step s PE i reads
// from PE i+1 the entries that PE finished in the two previous steps,
// R[i+1][d] and R[i+1][d-1], and its own previous result R[i][d-1].
// Columns at or beyond the window's text length n_len hold the start
// column R[n][d], whose pattern bits j are 1 exactly when j + d < m_len
// (zero in the padding beyond m_len, see scrooge_pm_gen).
//
// Early Termination. With et_en set, construction stops in the step in
// which the leftmost PE produces an entry whose MSB is 0; that row is the
// window's edit distance. Rows beyond it cannot be reached by traceback.
// With et_en clear all W+1 rows are built and the distance is still the
// first such row. The edit distance always exists because R[0][m_len]
// has a 0 MSB.
//
// DENT. Only columns 0..W-O are written out, and of each entry only its
// W-O+1 leading bits (wr_* ports, one write per stored column per step).
//
// Timing. start is taken in IDLE. Step s runs in the s-th cycle after
// start; with Early Termination and distance d the last step is W + d and
// done pulses in the cycle after it, so start-to-done is W + d + 2 cycles
// (2W + 2 without Early Termination). win_dist and et_hit stay valid until
// the next start. text, n_len, pm and m_len must be held stable while busy.
//
// Follows the paper: the update rule, the diagonal-wise order with one PE
// per column, stopping on the leftmost PE's MSB, and the DENT trimming.
// This design's choices: the step schedule, the start-column slot, the
// et_en mode input and the padding of short windows.
module scrooge_dc_array
  import scrooge_pkg::*;
#(
  parameter int unsigned W = 64,
  parameter int unsigned O = 33,
  localparam int unsigned CW    = $clog2(W+1),   // width of a 0..W count
  localparam int unsigned SCOLS = W - O + 1,      // stored columns
  localparam int unsigned SBITS = W - O + 1       // stored bits per entry
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         et_en,
  input  base_t [W-1:0]                text,    // text[i] = text base i of the window
  input  logic  [CW-1:0]               n_len,   // valid text bases, 0..W
  input  logic  [CW-1:0]               m_len,   // valid pattern bases, 1..W
  input  logic  [3:0][W-1:0]           pm,      // pattern masks (scrooge_pm_gen)
  output logic                         busy,
  output logic                         done,    // one-cycle pulse
  output logic  [CW-1:0]               win_dist,    // edit distance of the window
  output logic                         et_hit,  // construction ended before row W
  output logic  [SCOLS-1:0]            wr_en,
  output logic  [SCOLS-1:0][CW-1:0]    wr_row,
  output logic  [SCOLS-1:0][SBITS-1:0] wr_data
);

  localparam int unsigned SW = $clog2(2*W+2);  // step counter width

  logic [SW-1:0]  step;
  logic [W:0][W-1:0] cur_q;   // last entry computed by each slot (row d-1 for the next step)
  logic [W:0][W-1:0] prev_q;  // the entry before that (row d-2)
  logic [W:0][W-1:0] nxt;     // entry each slot computes in this step
  logic [W:0]        act;     // slot computes a row in this step
  logic [W:0][CW-1:0] row;    // row each slot computes in this step

  // Start column entry: pattern bit j is 1 iff j + d < m_len.
  function automatic logic [W-1:0] start_col(input int d, input int m);
    logic [W-1:0] v;
    for (int b = 0; b < W; b++)
      v[b] = ((W - 1 - b) + d < m);
    return v;
  endfunction

  always_comb begin
    for (int i = 0; i <= W; i++) begin
      int di;
      di     = int'(step) - (W - i);
      act[i] = busy && (di >= 0) && (di <= W);
      row[i] = CW'(di);
    end
  end

  for (genvar gi = 0; gi < W; gi++) begin : g_pe
    logic [W-1:0] pe_r;
    logic [W-1:0] unused_i, unused_d, unused_s, unused_m;
    scrooge_dc_pe #(.WIDTH(W)) u_pe (
      .first_row (row[gi] == '0),
      .r_n       (cur_q[gi]),
      .r_ne      (prev_q[gi+1]),
      .r_e       (cur_q[gi+1]),
      .cur_pm    (pm[text[gi]]),
      .r         (pe_r),
      .e_ins     (unused_i),
      .e_del     (unused_d),
      .e_sub     (unused_s),
      .e_mat     (unused_m)
    );
    assign nxt[gi] = (gi >= int'(n_len)) ? start_col(int'(row[gi]), int'(m_len)) : pe_r;
  end
  assign nxt[W] = start_col(int'(row[W]), int'(m_len));

  // Leftmost PE finds the edit distance in this step.
  logic found;
  assign found = act[0] && !nxt[0][W-1];

  logic found_q;  // distance already found in this window

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      step    <= '0;
      win_dist    <= '0;
      et_hit  <= 1'b0;
      found_q <= 1'b0;
      cur_q   <= '0;
      prev_q  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy    <= 1'b1;
          step    <= '0;
          found_q <= 1'b0;
          et_hit  <= 1'b0;
        end
      end else begin
        for (int i = 0; i <= W; i++) begin
          if (act[i]) begin
            cur_q[i]  <= nxt[i];
            prev_q[i] <= cur_q[i];
          end
        end
        if (found && !found_q) begin
          win_dist    <= row[0];
          found_q <= 1'b1;
        end
        if ((found && et_en) || int'(step) == 2 * W) begin
          busy   <= 1'b0;
          done   <= 1'b1;
          et_hit <= found && et_en && (int'(row[0]) < W);
        end
        step <= step + 1'b1;
      end
    end
  end

  // DENT: write only the leading SBITS bits of columns 0..W-O.
  always_comb begin
    for (int c = 0; c < SCOLS; c++) begin
      wr_en[c]   = act[c] && !(found_q && et_en);
      wr_row[c]  = row[c];
      wr_data[c] = nxt[c][W-1 -: SBITS];
    end
  end

endmodule
