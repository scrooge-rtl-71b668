// tb_scrooge_tb_logic: traceback unit with its traceback memory. For random
// windows (W=16, O=9; full and short, close and unrelated sequences) the
// memory is loaded with the DENT-trimmed entries of the reference table,
// traceback is started at the reference distance, and the emitted
// operations, the bases consumed and the cycle count (two per operation
// plus two) are compared with the reference traceback. Counts each kind of
// operation and the forced insertions after the window's text ends.
module tb_scrooge_tb_logic;
  import scrooge_pkg::*;
  import scrooge_ref_pkg::*;
  localparam int unsigned W = 16, O = 9, CW = 5, SC = W - O + 1, COLW = $clog2(SC + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, op_valid, done;
  op_t  op;
  logic [CW-1:0] d_in, n_len, m_len, t_used, p_used;
  base_t [W-1:0] text, pat;
  logic [3:0][W-1:0] pm;
  logic [SC-1:0] wr_en;
  logic [SC-1:0][CW-1:0] wr_row;
  logic [SC-1:0][SC-1:0] wr_data;
  logic [2:0][COLW-1:0] rd_col;
  logic [2:0][CW-1:0] rd_row;
  logic [2:0][SC-1:0] rd_data;

  scrooge_pm_gen #(.W(W)) u_pm (.pat, .m_len, .pm);
  scrooge_tb_sram #(.W(W), .O(O)) u_mem (.clk, .wr_en, .wr_row, .wr_data, .rd_col, .rd_row, .rd_data);
  scrooge_tb_logic #(.W(W), .O(O)) dut (
    .clk, .rst_n, .start, .win_dist(d_in), .text, .n_len, .m_len, .pm,
    .rd_col, .rd_row, .rd_data, .busy, .op_valid, .op, .done, .text_used(t_used), .pat_used(p_used));

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int got_ops [$];
  always @(posedge clk) if (rst_n && op_valid) got_ops.push_back(int'(op));

  int kind_cnt [4] = '{0, 0, 0, 0};
  int text_end_ins = 0;
  scrooge_ref r = new(W, O);

  initial begin
    byte unsigned t [], p [];
    start = 0; wr_en = '0; wr_row = '0; wr_data = '0; d_in = '0; n_len = '0; m_len = '0;
    text = '0; pat = '0;
    t = new[W]; p = new[W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      int nn, mm, errs, cyc, tu, pu;
      int exp_ops [$];
      nn = (k % 5 == 2) ? $urandom_range(0, W) : W;
      mm = (k % 7 == 3) ? $urandom_range(1, W) : W;
      errs = $urandom_range(0, 6);
      for (int j = 0; j < W; j++) t[j] = byte'($urandom_range(0, 3));
      for (int j = 0; j < W; j++) p[j] = ($urandom_range(0, W - 1) < errs) ? byte'($urandom_range(0, 3)) : t[j];
      if (k % 3 == 1) for (int j = 0; j < W; j++) p[j] = byte'($urandom_range(0, 3));
      if (k % 4 == 0) begin   // shifted copy: forces gaps
        int sh;
        sh = $urandom_range(1, 3);
        for (int j = 0; j < W; j++) p[j] = (j + sh < W) ? t[j + sh] : byte'($urandom_range(0, 3));
        if (k % 8 == 0) for (int j = W - 1; j >= 0; j--) p[j] = (j >= sh) ? t[j - sh] : byte'($urandom_range(0, 3));
      end
      r.build(t, p, nn, mm);
      exp_ops.delete();
      r.traceback(exp_ops, tu, pu);
      if (nn <= int'(W - O) && tu == nn && pu > 0) text_end_ins++;
      // load the trimmed table
      for (int d = 0; d <= W; d++) begin
        @(negedge clk);
        for (int c = 0; c < SC; c++) begin
          bv_t e;
          e = r.hw_entry(c, d);
          wr_en[c] = 1; wr_row[c] = CW'(d);
          wr_data[c] = (c <= nn) ? e[W-1 -: SC] : '1;
        end
      end
      @(negedge clk);
      wr_en = '0;
      for (int j = 0; j < W; j++) begin text[j] = base_t'(t[j]); pat[j] = base_t'(p[j]); end
      n_len = CW'(nn); m_len = CW'(mm); d_in = CW'(r.edist);
      got_ops.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      chk("operation count", got_ops.size(), exp_ops.size());
      for (int q = 0; q < exp_ops.size() && q < got_ops.size(); q++)
        chk($sformatf("window %0d op %0d", k, q), got_ops[q], exp_ops[q]);
      foreach (got_ops[q]) kind_cnt[got_ops[q]]++;
      chk("text used", t_used, tu);
      chk("pattern used", p_used, pu);
      chk("cycles", cyc, 2 * exp_ops.size() + 2);
    end
    $display("M=%0d S=%0d D=%0d I=%0d text-end insertions=%0d", kind_cnt[0], kind_cnt[1], kind_cnt[2], kind_cnt[3], text_end_ins);
    checks++;
    if (kind_cnt[0] == 0 || kind_cnt[1] == 0 || kind_cnt[2] == 0 || kind_cnt[3] == 0 || text_end_ins == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
