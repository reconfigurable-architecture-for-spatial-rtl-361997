// tb_extract_vn: self-checking test of noise-subspace extraction (N = 6,
// M = 2).  Twenty random eigen-systems are applied, some with repeated
// eigenvalues; the testbench sorts the eigenvalues itself (stable selection
// sort) and checks that column v of Vn is the eigenvector of the v-th smallest
// eigenvalue, and that vn_valid follows eig_valid by exactly one cycle.
module tb_extract_vn;
  import ss_pkg::*;

  localparam int N  = 6;
  localparam int M  = 2;
  localparam int NV = N - M;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  eig_valid = 1'b0;
  fx_t   eigval [N];
  cplx_t eigvec [N][N];
  logic  vn_valid;
  cplx_t vn [N][NV];

  extract_vn dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int order [N];
    bit used [N];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        // values from a small set so that ties occur, signed
        eigval[c] = fx_t'(int'($urandom_range(8)) - 2) <<< (FRAC - 3);
        for (int r = 0; r < N; r++) begin
          eigvec[r][c].re = fx_t'($urandom);
          eigvec[r][c].im = fx_t'($urandom);
        end
      end
      // reference: stable selection sort of the indices by eigenvalue
      for (int c = 0; c < N; c++) used[c] = 0;
      for (int v = 0; v < N; v++) begin
        int best;
        best = -1;
        for (int c = 0; c < N; c++)
          if (!used[c] && (best < 0 || eigval[c] < eigval[best])) best = c;
        used[best] = 1;
        order[v] = best;
      end
      eig_valid = 1'b1;
      @(negedge clk);
      eig_valid = 1'b0;
      check(vn_valid == 1'b1, "vn_valid not one cycle after eig_valid");
      for (int v = 0; v < NV; v++)
        for (int r = 0; r < N; r++)
          check(vn[r][v] == eigvec[r][order[v]],
                $sformatf("test %0d: Vn[%0d][%0d] is not eigenvector %0d", t, r, v, order[v]));
      @(negedge clk);
      check(vn_valid == 1'b0, "vn_valid longer than one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
