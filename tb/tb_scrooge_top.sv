// tb_scrooge_top: end-to-end test of the alignment core at W=16, O=9.
// Random read/reference pairs with 0-20% errors, of 1 to 400 bases, are
// written into the core and aligned with and without Early Termination.
// For every pair the operation stream must equal the reference
// alignment, must turn a prefix of the text into the pattern (checked
// directly on the bases), and the edit and window counts must match.
// Mechanisms counted, each of which must occur: multi-window alignments,
// windows whose construction ended early, runs with full construction,
// each of the four operation kinds, windows with a short text (the text
// ends inside the window) and insertions after the text is used up.
module tb_scrooge_top;
  import scrooge_pkg::*;
  import scrooge_ref_pkg::*;
  localparam int unsigned W = 16, O = 9, MAX_LEN = 1024, AW = 10, LW = 11;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_sel, start, et_en, busy, done, op_valid, et_hit;
  logic [AW-1:0] wr_addr;
  base_t wr_data;
  logic [LW-1:0] text_len, pat_len, edits, n_windows;
  logic [LW:0] n_ops;
  op_t op;

  scrooge_top #(.W(W), .O(O), .MAX_LEN(MAX_LEN)) dut (.*);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int got_ops [$];
  always @(posedge clk) if (rst_n && op_valid) got_ops.push_back(int'(op));

  // mechanism counters
  int n_multi = 0, n_et = 0, n_full = 0, n_short_text = 0, n_text_end_ins = 0;
  int kind_cnt [4] = '{0, 0, 0, 0};
  always @(posedge clk) if (rst_n) begin
    if (dut.u_dc.done && dut.u_dc.et_hit) n_et++;
    if (dut.u_dc.done && !et_en) n_full++;
    if (dut.u_dc.done && int'(dut.n_len) < int'(W)) n_short_text++;
    if (dut.u_tb.state == 2'd2 && dut.u_tb.ti >= dut.n_len) n_text_end_ins++;
  end

  scrooge_ref r = new(W, O);
  byte unsigned text [$], pat [$];

  initial begin
    wr_en = 0; wr_sel = 0; wr_addr = '0; wr_data = '0; start = 0; et_en = 1;
    text_len = '0; pat_len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      int exp_ops [$];
      int nw, ed, cyc;
      make_pair($urandom_range(1, 400), $urandom_range(0, 20), (k % 4 == 0) ? 0 : 12, text, pat);
      if (k % 5 == 3) repeat ($urandom_range(3, 30)) pat.push_back(byte'($urandom_range(0, 3)));
      foreach (text[a]) begin @(negedge clk); wr_en = 1; wr_sel = 0; wr_addr = AW'(a); wr_data = base_t'(text[a]); end
      foreach (pat[a])  begin @(negedge clk); wr_en = 1; wr_sel = 1; wr_addr = AW'(a); wr_data = base_t'(pat[a]); end
      @(negedge clk); wr_en = 0;
      exp_ops.delete();
      r.align(text, pat, exp_ops, nw);
      ed = 0; foreach (exp_ops[q]) if (exp_ops[q] != 0) ed++;
      got_ops.delete();
      et_en = (k % 3 != 2);
      text_len = LW'(text.size()); pat_len = LW'(pat.size());
      start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
      chk("operation count", got_ops.size(), exp_ops.size());
      for (int q = 0; q < got_ops.size() && q < exp_ops.size(); q++)
        if (got_ops[q] != exp_ops[q]) begin
          chk($sformatf("pair %0d op %0d", k, q), got_ops[q], exp_ops[q]);
          break;
        end
      chk("operations form a valid alignment", check_ops(text, pat, got_ops), 0);
      chk("edits", edits, ed);
      chk("windows", n_windows, nw);
      chk("reported operations", n_ops, got_ops.size());
      if (nw > 1) n_multi++;
      foreach (got_ops[q]) kind_cnt[got_ops[q]]++;
    end
    $display("multi-window=%0d early-terminated windows=%0d full-construction windows=%0d short-text windows=%0d text-end insertions=%0d",
             n_multi, n_et, n_full, n_short_text, n_text_end_ins);
    $display("M=%0d S=%0d D=%0d I=%0d", kind_cnt[0], kind_cnt[1], kind_cnt[2], kind_cnt[3]);
    chk("multi-window alignments seen", n_multi > 0, 1);
    chk("early termination seen", n_et > 0, 1);
    chk("full construction seen", n_full > 0, 1);
    chk("short-text windows seen", n_short_text > 0, 1);
    chk("text-end insertions seen", n_text_end_ins > 0, 1);
    for (int x = 0; x < 4; x++) chk($sformatf("operation kind %0d seen", x), kind_cnt[x] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
