// tb_scrooge_dc_pe: checks the GenASM-DC update rule of one processing
// element against entries of the worked example (text ACGT, pattern ACGA)
// and against the rule evaluated bit by bit for random inputs.
module tb_scrooge_dc_pe;
  localparam int unsigned WD = 8;
  logic          first_row;
  logic [WD-1:0] r_n, r_ne, r_e, cur_pm, r, e_ins, e_del, e_sub, e_mat;
  int checks = 0, failures = 0;

  scrooge_dc_pe #(.WIDTH(WD)) dut (.*);

  task automatic chk(string what, logic [WD-1:0] got, logic [WD-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    // Worked example on 4-bit vectors (upper nibble zero): the entry at
    // column G, row 1 is 1100 from north 1111, north-east 1111, east 1110
    // and PM[G] = 1101; the exact-match entry of column T is 1111.
    first_row = 0; r_n = 8'h0F; r_ne = 8'h0F; r_e = 8'h0E; cur_pm = 8'h0D; #1;
    chk("R[G][1]", r & 8'h0F, 8'b0000_1100);
    chk("match edge", e_mat & 8'h0F, 8'b0000_1101);
    first_row = 1; r_e = 8'h0F; cur_pm = 8'h0F; #1;
    chk("R[T][0]", r & 8'h0F, 8'b0000_1111);
    for (int k = 0; k < 2000; k++) begin
      logic [WD-1:0] exp;
      first_row = ($urandom_range(0, 3) == 0);
      r_n = WD'($urandom); r_ne = WD'($urandom); r_e = WD'($urandom); cur_pm = WD'($urandom);
      #1;
      for (int b = 0; b < WD; b++) begin
        logic bi, bd, bs, bm;
        bi = (b == 0) ? 1'b0 : r_n[b-1];
        bd = r_ne[b];
        bs = (b == 0) ? 1'b0 : r_ne[b-1];
        bm = ((b == 0) ? 1'b0 : r_e[b-1]) | cur_pm[b];
        exp[b] = first_row ? bm : (bi & bd & bs & bm);
      end
      chk("random entry", r, exp);
      chk("random sub edge", e_sub, {r_ne[WD-2:0], 1'b0});
      chk("random del edge", e_del, r_ne);
      chk("random ins edge", e_ins, {r_n[WD-2:0], 1'b0});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
