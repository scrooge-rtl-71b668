// tb_scrooge_tb_sram: random writes on all banks at once and reads on the
// three ports, compared with a model array; checks the one-cycle read
// latency and the all-ones value of out-of-range reads.
module tb_scrooge_tb_sram;
  localparam int unsigned W = 16, O = 9;
  localparam int unsigned CW = $clog2(W+1), SCOLS = W - O + 1, SBITS = W - O + 1;
  localparam int unsigned COLW = $clog2(SCOLS+1);
  logic clk = 0;
  logic [SCOLS-1:0]            wr_en;
  logic [SCOLS-1:0][CW-1:0]    wr_row;
  logic [SCOLS-1:0][SBITS-1:0] wr_data;
  logic [2:0][COLW-1:0]        rd_col;
  logic [2:0][CW-1:0]          rd_row;
  logic [2:0][SBITS-1:0]       rd_data;
  logic [SBITS-1:0] model [SCOLS][W+1];
  int checks = 0, failures = 0;

  scrooge_tb_sram #(.W(W), .O(O)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    wr_en = '0; rd_col = '0; rd_row = '0; wr_row = '0; wr_data = '0;
    // fill everything
    for (int r = 0; r <= W; r++) begin
      @(negedge clk);
      for (int c = 0; c < SCOLS; c++) begin
        wr_en[c] = 1; wr_row[c] = CW'(r); wr_data[c] = SBITS'($urandom);
        model[c][r] = wr_data[c];
      end
    end
    @(negedge clk); wr_en = '0;
    for (int k = 0; k < 2000; k++) begin
      logic [SBITS-1:0] exp [3];
      @(negedge clk);
      for (int c = 0; c < SCOLS; c++) begin
        wr_en[c] = ($urandom_range(0, 1) == 1);
        wr_row[c] = CW'($urandom_range(0, W));
        wr_data[c] = SBITS'($urandom);
      end
      for (int p = 0; p < 3; p++) begin
        rd_col[p] = COLW'($urandom_range(0, SCOLS));   // SCOLS itself is out of range
        rd_row[p] = CW'($urandom_range(0, W));
        exp[p] = (int'(rd_col[p]) < SCOLS) ? model[rd_col[p]][rd_row[p]] : '1;
      end
      @(posedge clk);
      for (int c = 0; c < SCOLS; c++) if (wr_en[c]) model[c][wr_row[c]] = wr_data[c];
      @(negedge clk);
      wr_en = '0;
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (rd_data[p] !== exp[p]) begin
          failures++;
          $display("FAIL port %0d col %0d row %0d: %h vs %h", p, rd_col[p], rd_row[p], rd_data[p], exp[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
