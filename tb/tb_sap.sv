// tb_sap: self-checking test of the sparse array pre-processing at its default
// size (4 antennas at slots 0,1,2,5, 200 samples, 6 x 6 output).  Random
// samples are loaded; the testbench recomputes R = Y*Y^H, picks for every lag
// d = m - i the R[a][b] of the first antenna pair (b outer, a inner) whose
// slot difference is d, and compares each Y-hat[m][i] written by the block.
// Also checked: each of the 36 elements is written once, Y-hat is Toeplitz and
// Hermitian, and start-to-done takes the ACF time plus 36 + 3 cycles.
module tb_sap;
  import ss_pkg::*;

  localparam int L  = 4;
  localparam int K  = 200;
  localparam int LP = 6;
  localparam int P [L] = '{0, 1, 2, 5};
  localparam int AW = $clog2(L*K);
  localparam int PW = $clog2(LP);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_we = 1'b0, start = 1'b0;
  logic [AW-1:0] ld_addr = '0;
  cplx_t ld_data = '0;
  logic busy, done, yh_we;
  logic [PW-1:0] yh_row, yh_col;
  cplx_t yh_data;

  sap dut (.*);

  int checks = 0, failures = 0;
  longint yr [L][K], yi [L][K];
  longint rr [L][L], ri [L][L];
  cplx_t  got [LP][LP];
  int     seen [LP][LP];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) if (yh_we) begin
    got[yh_row][yh_col] <= yh_data;
    seen[yh_row][yh_col]++;
  end

  initial begin
    int cyc, amp;
    amp = 1 << (FRAC - 2);
    foreach (seen[a, b]) seen[a][b] = 0;
    for (int r = 0; r < L; r++)
      for (int c = 0; c < K; c++) begin
        yr[r][c] = longint'($urandom_range(2*amp)) - longint'(amp);
        yi[r][c] = longint'($urandom_range(2*amp)) - longint'(amp);
      end
    for (int i = 0; i < L; i++)
      for (int k = 0; k < L; k++) begin
        rr[i][k] = 0;
        ri[i][k] = 0;
        for (int j = 0; j < K; j++) begin
          rr[i][k] += ((yr[i][j]*yr[k][j]) >>> FRAC) + ((yi[i][j]*yi[k][j]) >>> FRAC);
          ri[i][k] += ((yi[i][j]*yr[k][j]) >>> FRAC) - ((yr[i][j]*yi[k][j]) >>> FRAC);
        end
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < L; r++)
      for (int c = 0; c < K; c++) begin
        @(negedge clk);
        ld_we = 1'b1;
        ld_addr = AW'(r*K + c);
        ld_data.re = fx_t'(yr[r][c]);
        ld_data.im = fx_t'(yi[r][c]);
      end
    @(negedge clk);
    ld_we = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == K*(1 + L*(1 + 6*L)) + 1 + LP*LP + 3,
          $sformatf("latency %0d, expected %0d", cyc, K*(1 + L*(1 + 6*L)) + 1 + LP*LP + 3));
    @(negedge clk);
    for (int m = 0; m < LP; m++)
      for (int i = 0; i < LP; i++) begin
        bit found;
        longint er, ei;
        found = 0;
        er = 0;
        ei = 0;
        for (int b = 0; b < L; b++)
          for (int a = 0; a < L; a++)
            if (!found && P[a] - P[b] == m - i) begin
              found = 1;
              er = rr[a][b];
              ei = ri[a][b];
            end
        check(seen[m][i] == 1, $sformatf("Y-hat[%0d][%0d] written %0d times", m, i, seen[m][i]));
        check(longint'(got[m][i].re) == er && longint'(got[m][i].im) == ei,
              $sformatf("Y-hat[%0d][%0d] = (%0d,%0d), expected (%0d,%0d)", m, i,
                        got[m][i].re, got[m][i].im, er, ei));
        if (m > 0 && i > 0) check(got[m][i] == got[m-1][i-1], "Y-hat not Toeplitz");
        check(got[m][i].re == got[i][m].re && got[m][i].im == -got[i][m].im,
              $sformatf("Y-hat not Hermitian at %0d,%0d", m, i));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
