// tb_top_modes: end-to-end runs of the other builds of the accelerator, side
// by side: the uniform linear array (SAP removed) with M = 1 and M = 2, and the
// sparse array with M = 1, 3, 4 and 5 (with the default M = 2 build tested
// elsewhere, the sparse builds cover M = 1..5).  M = 4 and 5 are more sources
// than physical antennas, which only the sparse-array pre-processing makes
// possible.  Every build must
// find each of its sources within 2 degrees.  Counted and required at least
// once: a run without the SAP, a run with it, and each M.
module tb_top_modes;
  logic clk = 1'b0, rst_n = 1'b0, go = 1'b0;
  always #5 clk = ~clk;

  logic fin [6];
  int   c [6], f [6];

  top_harness #(.USE_SAP(1'b0), .M(1), .THETA('{75, 0, 0, 0, 0})) h_ula1 (
    .clk, .rst_n, .go, .finished(fin[0]), .checks(c[0]), .failures(f[0]));
  top_harness #(.USE_SAP(1'b0), .M(2), .THETA('{50, 120, 0, 0, 0})) h_ula2 (
    .clk, .rst_n, .go, .finished(fin[1]), .checks(c[1]), .failures(f[1]));
  top_harness #(.USE_SAP(1'b1), .M(4), .THETA('{41, 76, 104, 139, 0})) h_saa4 (
    .clk, .rst_n, .go, .finished(fin[2]), .checks(c[2]), .failures(f[2]));
  top_harness #(.USE_SAP(1'b1), .M(5), .THETA('{37, 66, 90, 114, 143})) h_saa5 (
    .clk, .rst_n, .go, .finished(fin[3]), .checks(c[3]), .failures(f[3]));
  top_harness #(.USE_SAP(1'b1), .M(1), .THETA('{128, 0, 0, 0, 0})) h_saa1 (
    .clk, .rst_n, .go, .finished(fin[4]), .checks(c[4]), .failures(f[4]));
  top_harness #(.USE_SAP(1'b1), .M(3), .THETA('{45, 95, 150, 0, 0})) h_saa3 (
    .clk, .rst_n, .go, .finished(fin[5]), .checks(c[5]), .failures(f[5]));

  int checks = 0, failures = 0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    go = 1'b1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    for (int i = 0; i < 6; i++) begin
      checks += c[i];
      failures += f[i];
    end
    // mechanisms: SAP bypassed, SAP used, and six different builds
    checks += 2;
    if (h_ula1.dut.USE_SAP != 1'b0) failures++;
    if (h_saa5.dut.USE_SAP != 1'b1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
