// scrooge_pm_gen: pattern-mask generator of one window.
//
// GenASM-DC first turns the pattern into four pattern masks, one per base.
// The mask of base X has a 0 at pattern position j exactly when
// pattern[j] == X. Position j sits at bit W-1-j, so the first pattern base
// is the most significant bit, as in the bitvectors of the DP table.
//
// A window pattern may be shorter than W (the last window of a read):
// m_len gives its length. Positions j >= m_len are padding and get a 0 in
// every mask. Together with the matching start column built by the DC
// array (zeros in the padding) this keeps the padding bits at 0 throughout
// the table, so the real bits behave exactly as an m_len-bit table whose
// shifts bring in zeros. The padding scheme is this design's choice.
//
// Purely combinational; the masks follow pat/m_len in the same cycle.
module scrooge_pm_gen
  import scrooge_pkg::*;
#(
  parameter int unsigned W = 64
) (
  input  base_t [W-1:0]                  pat,    // pat[j] = pattern base j of the window
  input  logic  [$clog2(W+1)-1:0]        m_len,  // valid pattern bases in the window, 0..W
  output logic  [3:0][W-1:0]             pm      // pm[X] = mask of base X
);

  always_comb begin
    for (int x = 0; x < 4; x++) begin
      for (int j = 0; j < W; j++) begin
        if (j < int'(m_len))
          pm[x][W-1-j] = (pat[j] != base_t'(x));
        else
          pm[x][W-1-j] = 1'b0;
      end
    end
  end

endmodule
