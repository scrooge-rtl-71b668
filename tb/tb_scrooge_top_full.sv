// tb_scrooge_top_full: the core at its default size (W=64, O=33, buffers
// of 16384 bases) aligns one long-read pair: a 10,000-base read with 5%
// errors against its reference region. The operation stream, edit count
// and window count are compared with the reference alignment, the stream
// is checked to be a valid alignment of the bases, and the cycle count of
// the alignment is reported.
module tb_scrooge_top_full;
  import scrooge_pkg::*;
  import scrooge_ref_pkg::*;
  localparam int unsigned W = 64, O = 33, AW = 14, LW = 15;
  localparam int unsigned READ_LEN = 10000, ERR_PCT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en, wr_sel, start, et_en, busy, done, op_valid, et_hit;
  logic [AW-1:0] wr_addr;
  base_t wr_data;
  logic [LW-1:0] text_len, pat_len, edits, n_windows;
  logic [LW:0] n_ops;
  op_t op;

  scrooge_top dut (.*);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int got_ops [$];
  always @(posedge clk) if (rst_n && op_valid) got_ops.push_back(int'(op));

  scrooge_ref r = new(W, O);
  byte unsigned text [$], pat [$];

  initial begin
    int exp_ops [$];
    int nw, ed, cyc, first_diff;
    wr_en = 0; wr_sel = 0; wr_addr = '0; wr_data = '0; start = 0; et_en = 1;
    text_len = '0; pat_len = '0;
    make_pair(READ_LEN, ERR_PCT, 100, text, pat);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (text[a]) begin @(negedge clk); wr_en = 1; wr_sel = 0; wr_addr = AW'(a); wr_data = base_t'(text[a]); end
    foreach (pat[a])  begin @(negedge clk); wr_en = 1; wr_sel = 1; wr_addr = AW'(a); wr_data = base_t'(pat[a]); end
    @(negedge clk); wr_en = 0;
    r.align(text, pat, exp_ops, nw);
    ed = 0; foreach (exp_ops[q]) if (exp_ops[q] != 0) ed++;
    text_len = LW'(text.size()); pat_len = LW'(pat.size());
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk("operation count", got_ops.size(), exp_ops.size());
    first_diff = -1;
    for (int q = 0; q < got_ops.size() && q < exp_ops.size(); q++)
      if (got_ops[q] != exp_ops[q] && first_diff < 0) first_diff = q;
    chk("first differing operation", first_diff, -1);
    chk("operations form a valid alignment", check_ops(text, pat, got_ops), 0);
    chk("edits", edits, ed);
    chk("windows", n_windows, nw);
    $display("read %0d bases, text %0d bases: %0d windows, %0d operations, %0d edits, %0d cycles",
             pat.size(), text.size(), n_windows, got_ops.size(), edits, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
