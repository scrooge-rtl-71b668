// scrooge_ref_pkg: software reference model used by the testbenches.
//
// A plain, sequential rendering of the GenASM-DC update rule, the
// GenASM-TB traceback and the windowing heuristic. It works on m-bit
// bitvectors aligned to bit 0 (pattern position j at bit m-1-j, zeros
// shifted in at bit 0) and keeps the whole table: no diagonal schedule,
// no padding, no DENT trimming and no edge regeneration from trimmed
// entries, so it is independent of the way the hardware computes.
// Traceback takes the first zero edge in the order M, S, D, I.
package scrooge_ref_pkg;

  typedef logic [127:0] bv_t;

  class scrooge_ref;
    int W, O;
    int n, m;
    bv_t mask;
    bv_t pmask [4];
    bv_t R [129][129];   // R[i][d]
    byte unsigned tw [128];
    int edist;

    function new(int w, int o);
      W = w; O = o;
    endfunction

    // Builds the table of one window; t/p hold the window bases.
    function void build(byte unsigned t[], byte unsigned p[], int nn, int mm);
      n = nn; m = mm;
      mask = (bv_t'(1) << m) - 1;
      for (int x = 0; x < 4; x++) begin
        pmask[x] = '0;
        for (int j = 0; j < m; j++)
          pmask[x][m-1-j] = (p[j] != byte'(x));
      end
      for (int i = 0; i < n; i++) tw[i] = t[i];
      for (int d = 0; d <= W; d++) R[n][d] = (mask << d) & mask;
      for (int i = n - 1; i >= 0; i--) begin
        bv_t cpm;
        cpm = pmask[tw[i]];
        R[i][0] = ((R[i+1][0] << 1) | cpm) & mask;
        for (int d = 1; d <= W; d++) begin
          bv_t ii, dd, ss, mm2;
          ii  = R[i][d-1] << 1;
          dd  = R[i+1][d-1];
          ss  = R[i+1][d-1] << 1;
          mm2 = (R[i+1][d] << 1) | cpm;
          R[i][d] = ii & dd & ss & mm2 & mask;
        end
      end
      edist = -1;
      for (int d = W; d >= 0; d--)
        if (!R[0][d][m-1]) edist = d;
    endfunction

    // Entry R[i][d] as the hardware holds it: W bits, first pattern base at the MSB.
    function bv_t hw_entry(int i, int d);
      return R[i][d] << (W - m);
    endfunction

    // Traceback of W-O steps; ops: 0 M, 1 S, 2 D, 3 I.
    function void traceback(ref int ops[$], output int tused, output int pused);
      int i, j, d, steps;
      i = 0; j = 0; d = edist; steps = 0;
      while (steps < W - O && j < m) begin
        int b;
        bv_t em, es, ed, ei;
        b = m - 1 - j;
        em = ((R[i+1][d] << 1) | pmask[tw[i]]) & mask;
        es = (d > 0) ? ((R[i+1][d-1] << 1) & mask) : '1;
        ed = (d > 0) ? R[i+1][d-1] : '1;
        ei = (d > 0) ? ((R[i][d-1] << 1) & mask) : '1;
        if (i >= n) begin
          ops.push_back(3); j++; d--;
        end else if (!em[b]) begin
          ops.push_back(0); i++; j++;
        end else if (!es[b]) begin
          ops.push_back(1); i++; j++; d--;
        end else if (!ed[b]) begin
          ops.push_back(2); i++; d--;
        end else if (!ei[b]) begin
          ops.push_back(3); j++; d--;
        end else begin
          $error("reference traceback stuck");
          break;
        end
        steps++;
      end
      tused = i; pused = j;
    endfunction

    // Whole alignment with the windowing heuristic.
    function void align(byte unsigned text[$], byte unsigned pat[$], ref int ops[$],
                        output int nwin);
      int tpos, ppos;
      byte unsigned t [], p [];
      t = new[128]; p = new[128];
      tpos = 0; ppos = 0; nwin = 0;
      while (ppos < pat.size()) begin
        int nn, mm, tu, pu;
        nn = (text.size() - tpos >= W) ? W : text.size() - tpos;
        mm = (pat.size() - ppos >= W) ? W : pat.size() - ppos;
        for (int k = 0; k < nn; k++) t[k] = text[tpos + k];
        for (int k = 0; k < mm; k++) p[k] = pat[ppos + k];
        build(t, p, nn, mm);
        traceback(ops, tu, pu);
        tpos += tu; ppos += pu; nwin++;
      end
    endfunction
  endclass

  // Checks that ops turn a prefix of text into pat: 0 means valid.
  function automatic int check_ops(byte unsigned text[$], byte unsigned pat[$], int ops[$]);
    int i, j, bad;
    i = 0; j = 0; bad = 0;
    foreach (ops[k]) begin
      case (ops[k])
        0: begin if (i >= text.size() || j >= pat.size() || text[i] != pat[j]) bad++; i++; j++; end
        1: begin if (i >= text.size() || j >= pat.size() || text[i] == pat[j]) bad++; i++; j++; end
        2: begin if (i >= text.size()) bad++; i++; end
        default: begin if (j >= pat.size()) bad++; j++; end
      endcase
    end
    if (j != pat.size()) bad++;
    return bad;
  endfunction

  // Random pair: pattern derived from a text prefix with the given
  // per-base error rate (percent), mixing substitutions, insertions and
  // deletions; the text runs on by extra bases.
  function automatic void make_pair(int plen, int err_pct, int extra,
                                    ref byte unsigned text[$], ref byte unsigned pat[$]);
    int i;
    text.delete(); pat.delete();
    for (int k = 0; k < plen + plen / 4 + extra + 8; k++) text.push_back(byte'($urandom_range(0, 3)));
    i = 0;
    while (pat.size() < plen) begin
      if (int'($urandom_range(0, 99)) < err_pct) begin
        case ($urandom_range(0, 2))
          0: begin pat.push_back(byte'((text[i] + $urandom_range(1, 3)) % 4)); i++; end
          1: pat.push_back(byte'($urandom_range(0, 3)));
          default: i++;
        endcase
      end else begin
        pat.push_back(text[i]); i++;
      end
    end
    while (text.size() > i + extra) void'(text.pop_back());
  endfunction

endpackage
