// tb_ndee_sweep: accuracy sweeps of the whole accelerator, for the sparse
// array (default build) and for the uniform array, both with 4 antennas and
// M = 2 sources.
//   - NDEE against the number of baseband samples K = 20, 40, ..., 200
//     (100 to 1000 RF samples in steps of 100, at a 5x sub-sampling ratio),
//     SNR 20 dB;
//   - NDEE against SNR = 0, 10, 20, 30, 40 dB with K = 200.
// NDEE (normalised DoA estimation error) is the mean absolute angle error
// divided by 180 degrees.  Checks: NDEE below 0.03 (5.4 degrees) at every
// point with SNR >= 10 dB, and NDEE at 20 dB, K = 200 no worse than at
// 0 dB (within 0.003, half a degree, for the scatter of 20 scenes).
// The sweep points and the 0.03 bound (stated as the worst case of the
// original sample-count and SNR sweeps) follow the original evaluation; the
// number of scenes per point, the scenes themselves and the SNR >= 10 dB
// cut-off are this testbench's own.  Both builds run side by side in simulation.
module tb_ndee_sweep;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  ndee_runner #(.USE_SAP(1'b1)) r_saa (.clk, .rst_n);
  ndee_runner #(.USE_SAP(1'b0)) r_ula (.clk, .rst_n);

  localparam int TRIALS = 20;
  int  checks = 0, failures = 0;
  int  kv [10] = '{20, 40, 60, 80, 100, 120, 140, 160, 180, 200};
  real sv [5]  = '{0.0, 10.0, 20.0, 30.0, 40.0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    real ns, nu, ns0, nu0, ns20, nu20;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    $display("K     SAA NDEE   ULA NDEE   (SNR 20 dB, %0d scenes each)", TRIALS);
    for (int i = 0; i < 10; i++) begin
      fork
        r_saa.run_point(kv[i], 20.0, TRIALS, ns);
        r_ula.run_point(kv[i], 20.0, TRIALS, nu);
      join
      $display("%-5d %8.4f   %8.4f", kv[i], ns, nu);
      check(ns < 0.03, $sformatf("SAA NDEE %f at K=%0d", ns, kv[i]));
      check(nu < 0.03, $sformatf("ULA NDEE %f at K=%0d", nu, kv[i]));
    end
    $display("SNR   SAA NDEE   ULA NDEE   (K = 200)");
    for (int i = 0; i < 5; i++) begin
      fork
        r_saa.run_point(200, sv[i], TRIALS, ns);
        r_ula.run_point(200, sv[i], TRIALS, nu);
      join
      $display("%-5.0f %8.4f   %8.4f", sv[i], ns, nu);
      if (i == 0) begin
        ns0 = ns;
        nu0 = nu;
      end
      if (i == 4) begin
        ns20 = ns;
        nu20 = nu;
      end
      if (sv[i] >= 10.0) begin
        check(ns < 0.03, $sformatf("SAA NDEE %f at %0.0f dB", ns, sv[i]));
        check(nu < 0.03, $sformatf("ULA NDEE %f at %0.0f dB", nu, sv[i]));
      end
    end
    check(ns20 <= ns0 + 0.003, "SAA error does not fall with SNR");
    check(nu20 <= nu0 + 0.003, "ULA error does not fall with SNR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
