// tb_scrooge_seq_buffer: writes random text and pattern bases, reads them
// back on both ports (one-cycle latency) and checks out-of-range reads.
module tb_scrooge_seq_buffer;
  import scrooge_pkg::*;
  localparam int unsigned MAX_LEN = 256, AW = 8;
  logic clk = 0;
  logic wr_en, wr_sel;
  logic [AW-1:0] wr_addr;
  base_t wr_data;
  logic [AW:0] t_rd_addr, p_rd_addr;
  base_t t_rd_data, p_rd_data;
  base_t tm [MAX_LEN], pmod [MAX_LEN];
  int checks = 0, failures = 0;

  scrooge_seq_buffer #(.MAX_LEN(MAX_LEN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    wr_en = 0; wr_sel = 0; wr_addr = '0; wr_data = '0; t_rd_addr = '0; p_rd_addr = '0;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < MAX_LEN; a++) begin
        @(negedge clk);
        wr_en = 1; wr_sel = s[0]; wr_addr = AW'(a); wr_data = base_t'($urandom_range(0, 3));
        if (s == 0) tm[a] = wr_data; else pmod[a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 1000; k++) begin
      base_t et, ep;
      t_rd_addr = (AW+1)'($urandom_range(0, MAX_LEN + 20));
      p_rd_addr = (AW+1)'($urandom_range(0, MAX_LEN + 20));
      et = (int'(t_rd_addr) < MAX_LEN) ? tm[t_rd_addr[AW-1:0]] : BASE_A;
      ep = (int'(p_rd_addr) < MAX_LEN) ? pmod[p_rd_addr[AW-1:0]] : BASE_A;
      @(negedge clk);
      checks += 2;
      if (t_rd_data !== et) begin failures++; $display("FAIL text %0d", t_rd_addr); end
      if (p_rd_data !== ep) begin failures++; $display("FAIL pattern %0d", p_rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
