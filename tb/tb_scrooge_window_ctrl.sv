// tb_scrooge_window_ctrl: windowing controller with the sequence buffer.
// The DC array and traceback unit are replaced by a responder built on the
// reference model: at each DC start it checks the window the controller
// loaded (bases and lengths) against the reference windowing, answers after
// a random delay, and at each traceback start plays back the reference
// operations and consumed lengths. At the end the edit count, operation
// count and window count are compared with the reference alignment.
// Pairs include patterns longer than the text, so windows with a short or
// empty text occur, and an empty pattern.
module tb_scrooge_window_ctrl;
  import scrooge_pkg::*;
  import scrooge_ref_pkg::*;
  localparam int unsigned W = 16, O = 9, MAX_LEN = 1024, AW = 10, LW = 11, CW = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_sel;
  logic [AW-1:0] wr_addr;
  base_t wr_data;
  logic [AW:0] t_rd_addr, p_rd_addr;
  base_t t_rd_data, p_rd_data;
  logic start, busy, done, dc_start, dc_done, tb_start, tb_done, op_valid;
  logic [LW-1:0] text_len, pat_len, edits, n_windows;
  logic [LW:0] n_ops;
  base_t [W-1:0] win_text, win_pat;
  logic [CW-1:0] n_len, m_len, tb_text_used, tb_pat_used;
  op_t op;

  scrooge_seq_buffer #(.MAX_LEN(MAX_LEN)) u_buf (.*);
  scrooge_window_ctrl #(.W(W), .MAX_LEN(MAX_LEN)) dut (.*);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  byte unsigned text [$], pat [$];
  scrooge_ref r = new(W, O);
  int tpos, ppos, short_text_windows;

  // responder standing in for the DC array and traceback unit
  initial begin
    byte unsigned t [], p [];
    t = new[W]; p = new[W];
    dc_done = 0; tb_done = 0; op_valid = 0; op = OP_M; tb_text_used = '0; tb_pat_used = '0;
    forever begin
      @(posedge clk);
      if (dc_start) begin
        int nn, mm, tu, pu;
        int ops [$];
        nn = (text.size() - tpos >= W) ? W : text.size() - tpos;
        mm = (pat.size() - ppos >= W) ? W : pat.size() - ppos;
        if (nn < int'(W)) short_text_windows++;
        chk("n_len", n_len, nn);
        chk("m_len", m_len, mm);
        for (int k = 0; k < nn; k++) begin t[k] = text[tpos + k]; chk("window text", win_text[k], t[k]); end
        for (int k = 0; k < mm; k++) begin p[k] = pat[ppos + k];  chk("window pattern", win_pat[k], p[k]); end
        r.build(t, p, nn, mm);
        ops.delete();
        r.traceback(ops, tu, pu);
        repeat ($urandom_range(2, 8)) @(posedge clk);
        dc_done <= 1; @(posedge clk); dc_done <= 0;
        while (!tb_start) @(posedge clk);
        foreach (ops[q]) begin
          @(posedge clk); op_valid <= 1; op <= op_t'(ops[q]);
          @(posedge clk); op_valid <= 0;
        end
        tb_text_used <= CW'(tu); tb_pat_used <= CW'(pu);
        tb_done <= 1; @(posedge clk); tb_done <= 0;
        tpos += tu; ppos += pu;
      end
    end
  end

  initial begin
    wr_en = 0; wr_sel = 0; wr_addr = '0; wr_data = '0; start = 0; text_len = '0; pat_len = '0;
    short_text_windows = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      int exp_ops [$];
      int nw, ed, cyc;
      if (k == 0) begin text.delete(); pat.delete(); text.push_back(1); end
      else make_pair($urandom_range(10, 300), $urandom_range(0, 15), (k % 3 == 0) ? 0 : 10, text, pat);
      if (k % 4 == 2) repeat ($urandom_range(5, 20)) pat.push_back(byte'($urandom_range(0, 3)));
      foreach (text[a]) begin @(negedge clk); wr_en = 1; wr_sel = 0; wr_addr = AW'(a); wr_data = base_t'(text[a]); end
      foreach (pat[a])  begin @(negedge clk); wr_en = 1; wr_sel = 1; wr_addr = AW'(a); wr_data = base_t'(pat[a]); end
      @(negedge clk); wr_en = 0;
      exp_ops.delete();
      r.align(text, pat, exp_ops, nw);
      ed = 0; foreach (exp_ops[q]) if (exp_ops[q] != 0) ed++;
      tpos = 0; ppos = 0;
      text_len = LW'(text.size()); pat_len = LW'(pat.size());
      start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 50000) begin @(negedge clk); cyc++; end
      chk("edits", edits, ed);
      chk("operations", n_ops, exp_ops.size());
      chk("windows", n_windows, nw);
      chk("pattern fully consumed", ppos, pat.size());
    end
    chk("windows with short text seen", short_text_windows > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
