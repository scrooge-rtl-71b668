// tb_scrooge_pm_gen: checks the pattern masks against the worked example
// (pattern ACGA: PM[A]=0110, PM[C]=1011, PM[G]=1101, PM[T]=1111) and
// against random patterns and lengths, including the zero padding beyond
// the window's pattern length.
module tb_scrooge_pm_gen;
  import scrooge_pkg::*;
  localparam int unsigned W = 16;
  base_t [W-1:0]   pat;
  logic [4:0]      m_len;
  logic [3:0][W-1:0] pm;
  int checks = 0, failures = 0;

  scrooge_pm_gen #(.W(W)) dut (.*);

  initial begin
    logic [3:0] fig [4];
    fig[0] = 4'b0110; fig[1] = 4'b1011; fig[2] = 4'b1101; fig[3] = 4'b1111;
    pat = '0;
    pat[0] = BASE_A; pat[1] = BASE_C; pat[2] = BASE_G; pat[3] = BASE_A;
    m_len = 4; #1;
    for (int x = 0; x < 4; x++) begin
      checks++;
      if (pm[x][W-1 -: 4] !== fig[x] || pm[x][W-5:0] !== '0) begin
        failures++;
        $display("FAIL example mask %0d: %b", x, pm[x]);
      end
    end
    for (int k = 0; k < 500; k++) begin
      for (int j = 0; j < W; j++) pat[j] = base_t'($urandom_range(0, 3));
      m_len = 5'($urandom_range(0, W));
      #1;
      for (int x = 0; x < 4; x++)
        for (int j = 0; j < W; j++) begin
          logic e;
          e = (j < int'(m_len)) && (int'(pat[j]) != x);
          checks++;
          if (pm[x][W-1-j] !== e) begin
            failures++;
            $display("FAIL mask %0d pos %0d", x, j);
          end
        end
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
