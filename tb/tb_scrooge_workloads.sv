// tb_scrooge_workloads: the two read classes the aligner is meant for.
//  * Long reads: 10,000-base reads with 5% errors against their reference
//    region, on a core with the default W=64, O=33.
//  * Short reads: 150-base reads, on a core with W=32, O=17 (the setting
//    recommended for short reads). Most candidates are close (0-5% errors);
//    every fifth is an unrelated region, as candidate lists contain.
// Each pair is aligned with Early Termination and again without it. Both
// runs must reproduce the reference alignment, and Early Termination must
// never take more cycles. Cycles per alignment are reported per class.
// Timing: sequences are written one base per cycle through the sequence
// buffer port; cycles are counted from the start pulse to done.
// The 10,000-base length, the 5% error rate and W=32, O=17 for short reads
// follow the evaluated data sets. The 150-base short-read length and the
// share of unrelated candidates are this testbench's own choices.
module tb_scrooge_workloads;
  import scrooge_pkg::*;
  import scrooge_ref_pkg::*;

  localparam int unsigned N_LONG = 3, N_SHORT = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---- long-read core: defaults ----
  logic l_wr_en, l_wr_sel, l_start, l_et, l_busy, l_done, l_opv, l_hit;
  logic [13:0] l_addr;
  base_t l_data;
  logic [14:0] l_tlen, l_plen, l_edits, l_nwin;
  logic [15:0] l_nops;
  op_t l_op;
  scrooge_top u_long (
    .clk, .rst_n, .wr_en(l_wr_en), .wr_sel(l_wr_sel), .wr_addr(l_addr), .wr_data(l_data),
    .start(l_start), .et_en(l_et), .text_len(l_tlen), .pat_len(l_plen), .busy(l_busy), .done(l_done),
    .op_valid(l_opv), .op(l_op), .edits(l_edits), .n_ops(l_nops), .n_windows(l_nwin), .et_hit(l_hit));

  // ---- short-read core: W=32, O=17 ----
  logic s_wr_en, s_wr_sel, s_start, s_et, s_busy, s_done, s_opv, s_hit;
  logic [9:0] s_addr;
  base_t s_data;
  logic [10:0] s_tlen, s_plen, s_edits, s_nwin;
  logic [11:0] s_nops;
  op_t s_op;
  scrooge_top #(.W(32), .O(17), .MAX_LEN(1024)) u_short (
    .clk, .rst_n, .wr_en(s_wr_en), .wr_sel(s_wr_sel), .wr_addr(s_addr), .wr_data(s_data),
    .start(s_start), .et_en(s_et), .text_len(s_tlen), .pat_len(s_plen), .busy(s_busy), .done(s_done),
    .op_valid(s_opv), .op(s_op), .edits(s_edits), .n_ops(s_nops), .n_windows(s_nwin), .et_hit(s_hit));

  int l_ops [$], s_ops [$];
  always @(posedge clk) if (rst_n && l_opv) l_ops.push_back(int'(l_op));
  always @(posedge clk) if (rst_n && s_opv) s_ops.push_back(int'(s_op));

  scrooge_ref r_long = new(64, 33);
  scrooge_ref r_short = new(32, 17);
  byte unsigned text [$], pat [$];
  longint cyc_long [2], cyc_short [2];
  int et_slower = 0;

  task automatic compare(string cls, int k, int mode, ref int got [$], ref int exp [$], input int ed, input int got_ed);
    int diff;
    diff = -1;
    for (int q = 0; q < got.size() && q < exp.size(); q++)
      if (got[q] != exp[q] && diff < 0) diff = q;
    chk($sformatf("%s pair %0d mode %0d operation count", cls, k, mode), got.size(), exp.size());
    chk($sformatf("%s pair %0d mode %0d first difference", cls, k, mode), diff, -1);
    chk($sformatf("%s pair %0d mode %0d edits", cls, k, mode), got_ed, ed);
  endtask

  initial begin
    l_wr_en = 0; l_wr_sel = 0; l_addr = '0; l_data = '0; l_start = 0; l_et = 1; l_tlen = '0; l_plen = '0;
    s_wr_en = 0; s_wr_sel = 0; s_addr = '0; s_data = '0; s_start = 0; s_et = 1; s_tlen = '0; s_plen = '0;
    cyc_long = '{0, 0}; cyc_short = '{0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int k = 0; k < N_LONG; k++) begin
      int exp [$];
      int nw, ed;
      longint c [2];
      make_pair(10000, 5, 100, text, pat);
      foreach (text[a]) begin @(negedge clk); l_wr_en = 1; l_wr_sel = 0; l_addr = 14'(a); l_data = base_t'(text[a]); end
      foreach (pat[a])  begin @(negedge clk); l_wr_en = 1; l_wr_sel = 1; l_addr = 14'(a); l_data = base_t'(pat[a]); end
      @(negedge clk); l_wr_en = 0;
      exp.delete();
      r_long.align(text, pat, exp, nw);
      ed = 0; foreach (exp[q]) if (exp[q] != 0) ed++;
      for (int mode = 1; mode >= 0; mode--) begin
        l_ops.delete();
        l_et = mode[0]; l_tlen = 15'(text.size()); l_plen = 15'(pat.size());
        l_start = 1; @(negedge clk); l_start = 0;
        c[mode] = 1;
        while (!l_done) begin @(negedge clk); c[mode]++; end
        cyc_long[mode] += c[mode];
        compare("long", k, mode, l_ops, exp, ed, int'(l_edits));
      end
      if (c[1] > c[0]) et_slower++;
    end

    for (int k = 0; k < N_SHORT; k++) begin
      int exp [$];
      int nw, ed;
      longint c [2];
      make_pair(150, $urandom_range(0, 5), 20, text, pat);
      if (k % 5 == 4) foreach (text[a]) text[a] = byte'($urandom_range(0, 3));
      foreach (text[a]) begin @(negedge clk); s_wr_en = 1; s_wr_sel = 0; s_addr = 10'(a); s_data = base_t'(text[a]); end
      foreach (pat[a])  begin @(negedge clk); s_wr_en = 1; s_wr_sel = 1; s_addr = 10'(a); s_data = base_t'(pat[a]); end
      @(negedge clk); s_wr_en = 0;
      exp.delete();
      r_short.align(text, pat, exp, nw);
      ed = 0; foreach (exp[q]) if (exp[q] != 0) ed++;
      for (int mode = 1; mode >= 0; mode--) begin
        s_ops.delete();
        s_et = mode[0]; s_tlen = 11'(text.size()); s_plen = 11'(pat.size());
        s_start = 1; @(negedge clk); s_start = 0;
        c[mode] = 1;
        while (!s_done) begin @(negedge clk); c[mode]++; end
        cyc_short[mode] += c[mode];
        compare("short", k, mode, s_ops, exp, ed, int'(s_edits));
        chk("short: operations valid", check_ops(text, pat, s_ops), 0);
      end
      if (c[1] > c[0]) et_slower++;
    end

    chk("Early Termination never slower", et_slower, 0);
    $display("long reads (W=64,O=33): %0d cycles/alignment with ET, %0d without",
             cyc_long[1] / N_LONG, cyc_long[0] / N_LONG);
    $display("short reads (W=32,O=17): %0d cycles/alignment with ET, %0d without",
             cyc_short[1] / N_SHORT, cyc_short[0] / N_SHORT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
