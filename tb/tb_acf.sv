// tb_acf: self-checking test of the auto-correlation block at its default size
// (4 x 200).  Random complex samples are loaded, R = Y*Y^H is recomputed here
// with the same truncation rule (each real product shifted right by FRAC) and
// compared element by element.  Also checked: every element comes out exactly
// once, R is Hermitian, and start-to-done takes
// COLS*(1 + ROWS*(1 + 6*ROWS)) + 1 cycles.  A second run with a different matrix
// checks that the SUM memory is re-initialised by the first pass.
module tb_acf;
  import ss_pkg::*;

  localparam int ROWS = 4;
  localparam int COLS = 200;
  localparam int AW   = $clog2(ROWS*COLS);
  localparam int RW   = $clog2(ROWS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_we = 1'b0, start = 1'b0;
  logic [AW-1:0] ld_addr = '0;
  cplx_t ld_data = '0;
  logic busy, done, out_we;
  logic [RW-1:0] out_row, out_col;
  cplx_t out_data;

  acf dut (.*);

  int checks = 0, failures = 0;
  longint yr [ROWS][COLS], yi [ROWS][COLS];
  cplx_t  got [ROWS][ROWS];
  int     seen [ROWS][ROWS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic longint tmul(input longint a, input longint b);
    return (a * b) >>> FRAC;
  endfunction

  always @(posedge clk) if (out_we) begin
    got[out_row][out_col] <= out_data;
    seen[out_row][out_col]++;
  end

  task automatic run_once(input int amp);
    int cyc;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        yr[r][c] = longint'($urandom_range(2*amp)) - longint'(amp);
        yi[r][c] = longint'($urandom_range(2*amp)) - longint'(amp);
      end
    foreach (seen[a, b]) seen[a][b] = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        ld_we = 1'b1;
        ld_addr = AW'(r*COLS + c);
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
    check(cyc == COLS*(1 + ROWS*(1 + 6*ROWS)) + 1,
          $sformatf("latency %0d, expected %0d", cyc, COLS*(1 + ROWS*(1 + 6*ROWS)) + 1));
    @(negedge clk);
    for (int i = 0; i < ROWS; i++)
      for (int k = 0; k < ROWS; k++) begin
        longint er = 0, ei = 0;
        for (int j = 0; j < COLS; j++) begin
          er += tmul(yr[i][j], yr[k][j]) + tmul(yi[i][j], yi[k][j]);
          ei += tmul(yi[i][j], yr[k][j]) - tmul(yr[i][j], yi[k][j]);
        end
        check(seen[i][k] == 1, $sformatf("R[%0d][%0d] written %0d times", i, k, seen[i][k]));
        check(longint'(got[i][k].re) == er && longint'(got[i][k].im) == ei,
              $sformatf("R[%0d][%0d] = (%0d,%0d), expected (%0d,%0d)", i, k,
                        got[i][k].re, got[i][k].im, er, ei));
        check(got[i][k].re == got[k][i].re, $sformatf("R not Hermitian at %0d,%0d", i, k));
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_once(1 << (FRAC - 2));     // |y| < 0.25
    run_once(1 << (FRAC - 3));     // second matrix, SUM must start from zero again
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
