// tb_scrooge_dc_array: drives the DC array with the worked example of the
// paper (W=4, O=3, text ACGT, pattern ACGA: distance 1, stored columns A and
// C holding 11,01,00,00,00 and 11,10,00,00,00 in their two leading bits)
// and with random windows at W=16, O=9, full and short, with and without
// Early Termination. Every entry written to the traceback memory is
// compared with the reference table, the window distance with the
// reference distance, and the start-to-done latency with W+d+2 cycles
// (2W+2 without Early Termination). Under Early Termination column c may
// run c rows past the distance (diagonal order), never further. Counts how often Early Termination
// cut construction short.
module tb_scrooge_dc_array;
  import scrooge_pkg::*;
  import scrooge_ref_pkg::*;

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

  // ---------------- W=4, O=3 worked example ----------------
  localparam int unsigned W1 = 4, O1 = 3, CW1 = 3, SC1 = 2;
  logic          s1, et1, busy1, done1, hit1;
  base_t [W1-1:0] text1, pat1;
  logic [CW1-1:0] n1, m1, d1;
  logic [3:0][W1-1:0] pm1;
  logic [SC1-1:0] we1;
  logic [SC1-1:0][CW1-1:0] wr1;
  logic [SC1-1:0][SC1-1:0] wd1;
  scrooge_pm_gen #(.W(W1)) u_pm1 (.pat(pat1), .m_len(m1), .pm(pm1));
  scrooge_dc_array #(.W(W1), .O(O1)) u1 (
    .clk, .rst_n, .start(s1), .et_en(et1), .text(text1), .n_len(n1), .m_len(m1), .pm(pm1),
    .busy(busy1), .done(done1), .win_dist(d1), .et_hit(hit1), .wr_en(we1), .wr_row(wr1), .wr_data(wd1));

  logic [1:0] fig_tab [2][5];   // [column][row], leading two bits
  int seen1;
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < SC1; c++) if (we1[c]) begin
      chk($sformatf("example col %0d row %0d", c, wr1[c]), wd1[c], fig_tab[c][wr1[c]]);
      seen1++;
    end

  // ---------------- W=16, O=9 random ----------------
  localparam int unsigned W = 16, O = 9, CW = 5, SC = W - O + 1;
  logic          s2, et2, busy2, done2, hit2;
  base_t [W-1:0] text2, pat2;
  logic [CW-1:0] n2, m2, d2;
  logic [3:0][W-1:0] pm2;
  logic [SC-1:0] we2;
  logic [SC-1:0][CW-1:0] wr2;
  logic [SC-1:0][SC-1:0] wd2;
  scrooge_pm_gen #(.W(W)) u_pm2 (.pat(pat2), .m_len(m2), .pm(pm2));
  scrooge_dc_array #(.W(W), .O(O)) u2 (
    .clk, .rst_n, .start(s2), .et_en(et2), .text(text2), .n_len(n2), .m_len(m2), .pm(pm2),
    .busy(busy2), .done(done2), .win_dist(d2), .et_hit(hit2), .wr_en(we2), .wr_row(wr2), .wr_data(wd2));

  scrooge_ref ref2 = new(W, O);
  int writes2, late_rows;
  always @(posedge clk) if (rst_n)
    for (int c = 0; c < SC; c++) if (we2[c] && c <= ref2.n) begin
      bv_t e;
      e = ref2.hw_entry(c, wr2[c]);
      chk($sformatf("entry col %0d row %0d", c, wr2[c]), wd2[c], e[W-1 -: SC]);
      writes2++;
      if (et2 && int'(wr2[c]) > ref2.edist + c) late_rows++;
    end

  int et_hits = 0, full_runs = 0, short_windows = 0;

  initial begin
    byte unsigned t [], p [];
    s1 = 0; s2 = 0; et1 = 1; et2 = 1; seen1 = 0; writes2 = 0; late_rows = 0;
    text1 = '0; pat1 = '0; n1 = 0; m1 = 0; text2 = '0; pat2 = '0; n2 = 0; m2 = 0;
    fig_tab[0][0] = 2'b11; fig_tab[0][1] = 2'b01; fig_tab[0][2] = 2'b00; fig_tab[0][3] = 2'b00; fig_tab[0][4] = 2'b00;
    fig_tab[1][0] = 2'b11; fig_tab[1][1] = 2'b10; fig_tab[1][2] = 2'b00; fig_tab[1][3] = 2'b00; fig_tab[1][4] = 2'b00;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // worked example, with and without Early Termination
    text1[0] = BASE_A; text1[1] = BASE_C; text1[2] = BASE_G; text1[3] = BASE_T;
    pat1[0] = BASE_A; pat1[1] = BASE_C; pat1[2] = BASE_G; pat1[3] = BASE_A;
    n1 = 4; m1 = 4;
    for (int mode = 1; mode >= 0; mode--) begin
      int cyc;
      et1 = mode[0]; seen1 = 0;
      @(negedge clk); s1 = 1; @(negedge clk); s1 = 0;
      cyc = 1;
      while (!done1) begin @(negedge clk); cyc++; end
      chk("example distance", d1, 1);
      chk("example latency", cyc, mode ? W1 + 1 + 2 : 2 * W1 + 2);
      chk("example stored entries", seen1, mode ? 2 + 3 : 2 * 5);  // diagonal order: column 1 is one row ahead
    end
    // random windows
    t = new[W]; p = new[W];
    for (int k = 0; k < 300; k++) begin
      int nn, mm, cyc, errs;
      et2 = (k % 5 != 4);
      nn = (k % 7 == 3) ? $urandom_range(0, W) : W;
      mm = (k % 6 == 2) ? $urandom_range(1, W) : W;
      if (nn < W || mm < W) short_windows++;
      errs = $urandom_range(0, W / 2);
      for (int j = 0; j < W; j++) t[j] = byte'($urandom_range(0, 3));
      for (int j = 0; j < W; j++) p[j] = ($urandom_range(0, W - 1) < errs) ? byte'($urandom_range(0, 3)) : t[j];
      if (k % 4 == 1) for (int j = 0; j < W; j++) p[j] = byte'($urandom_range(0, 3));
      ref2.build(t, p, nn, mm);
      for (int j = 0; j < W; j++) begin text2[j] = base_t'(t[j]); pat2[j] = base_t'(p[j]); end
      n2 = CW'(nn); m2 = CW'(mm);
      @(negedge clk); s2 = 1; @(negedge clk); s2 = 0;
      cyc = 1;
      while (!done2) begin @(negedge clk); cyc++; end
      chk("distance", d2, ref2.edist);
      chk("latency", cyc, et2 ? W + ref2.edist + 2 : 2 * W + 2);
      chk("et_hit", hit2, et2 && ref2.edist < int'(W));
      if (hit2) et_hits++;
      if (!et2) full_runs++;
    end
    chk("column c stores no row beyond distance + c under Early Termination", late_rows, 0);
    checks++;
    if (et_hits == 0 || full_runs == 0 || short_windows == 0 || writes2 == 0) begin
      failures++;
      $display("FAIL coverage: et_hits=%0d full=%0d short=%0d", et_hits, full_runs, short_windows);
    end
    $display("early terminations=%0d full constructions=%0d short windows=%0d", et_hits, full_runs, short_windows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
