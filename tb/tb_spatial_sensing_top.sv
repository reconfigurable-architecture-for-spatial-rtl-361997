// tb_spatial_sensing_top: end-to-end test of the accelerator at its default
// configuration (sparse array of 4 antennas at slots 0,1,2,5, 6 virtual slots,
// 200 samples per antenna, M = 2 sources, {24,8} fixed point).
//
// Two scenes are run back to back.  For each, two uncorrelated sources with
// random-phase symbols at the given angles plus complex Gaussian noise at
// 20 dB SNR are sampled by the 4 antennas (Y[l][k] = sum_m s_m[k] *
// exp(j*pi*pos_l*cos(theta_m)) + n), scaled so that R stays in range, and
// streamed in with random gaps in tvalid, followed by the 6 x 181 extended
// steering matrix of the virtual array.  The EVD is supplied by the
// behavioural model.  The result stream is read with random back-pressure.
// Checked: two result beats with tlast on the second, both slots valid, each
// estimated angle within 2 degrees of a true one (one per source), 181
// spectrum values streamed, and the AXI rules.  Counted, and a failure if never
// seen: input stalls, output back-pressure, SAP runs, EVD waits, and scenes in
// which more peaks than M competed for the best-M buffer.
module tb_spatial_sensing_top;
  import ss_pkg::*;

  localparam int  L   = 4;
  localparam int  K   = 200;
  localparam int  N   = 6;
  localparam int  M   = 2;
  localparam int  P [L] = '{0, 1, 2, 5};
  localparam int  NA  = N_ANGLES;
  localparam real PI  = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [2*WL-1:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 1'b0, s_axis_tready, s_axis_tlast = 1'b0;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;
  logic spec_valid;
  logic [ANG_W-1:0] spec_idx, n_peaks;
  logic [3*FRAC:0] spec_val;
  logic evd_req, evd_done;
  cplx_t evd_r [N][N];
  fx_t   evd_eigval [N];
  cplx_t evd_eigvec [N][N];

  spatial_sensing_top dut (.*);

  evd_model #(.N(N), .LATENCY(200)) u_evd (
    .clk, .rst_n, .req(evd_req), .r(evd_r),
    .done(evd_done), .eigval(evd_eigval), .eigvec(evd_eigvec)
  );

  int checks = 0, failures = 0;
  int n_in_stall = 0, n_out_stall = 0, n_sap = 0, n_evd_wait = 0, n_many_peaks = 0, n_spec = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic fx_t q(input real x);
    return fx_t'($rtoi(x * real'(1 << FRAC) + (x >= 0.0 ? 0.5 : -0.5)));
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000001.0;
    u2 = real'($urandom_range(1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (dut.s_axis_tready && !s_axis_tvalid) n_in_stall++;
    if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
    if (dut.g_sap.u_sap.done) n_sap++;
    if (evd_req && !evd_done) n_evd_wait++;
    if (spec_valid) n_spec++;
  end

  task automatic send(input cplx_t d);
    s_axis_tdata = d;
    s_axis_tvalid = 1'b0;
    while ($urandom_range(7) == 0) @(negedge clk);     // random gaps
    s_axis_tvalid = 1'b1;
    do @(posedge clk); while (!s_axis_tready);
    @(negedge clk);
    s_axis_tvalid = 1'b0;
  endtask

  task automatic run_scene(input int th1, input int th2);
    real amp, sig;
    int  got [M];
    bit  matched [M];
    int  cyc, spec0;
    cplx_t d;
    amp = 0.035;                      // keeps R = Y*Y^H inside the 8 integer bits
    sig = amp / 10.0 / $sqrt(2.0);    // 20 dB SNR
    spec0 = n_spec;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    fork
      begin : count
        forever begin
          @(posedge clk);
          cyc++;
        end
      end
    join_none
    // Y, antenna by antenna
    begin
      real sr [2][K], si [2][K];
      for (int m = 0; m < 2; m++)
        for (int k = 0; k < K; k++) begin
          real ph;
          ph = 2.0 * PI * real'($urandom_range(1000000)) / 1000000.0;
          sr[m][k] = amp * $cos(ph);
          si[m][k] = amp * $sin(ph);
        end
      for (int l = 0; l < L; l++)
        for (int k = 0; k < K; k++) begin
          real yr, yi;
          yr = sig * gauss();
          yi = sig * gauss();
          for (int m = 0; m < 2; m++) begin
            real a;
            a = PI * real'(P[l]) * $cos(real'(m == 0 ? th1 : th2) * PI / 180.0);
            yr += sr[m][k] * $cos(a) - si[m][k] * $sin(a);
            yi += sr[m][k] * $sin(a) + si[m][k] * $cos(a);
          end
          d.re = q(yr);
          d.im = q(yi);
          send(d);
        end
    end
    // extended steering matrix of the virtual array, angle by angle
    for (int i = 0; i < NA; i++)
      for (int l = 0; l < N; l++) begin
        real a;
        a = PI * real'(l) * $cos(real'(i) * PI / 180.0);
        d.re = q($cos(a));
        d.im = q($sin(a));
        send(d);
      end
    // results with random back-pressure
    for (int j = 0; j < M; j++) begin
      m_axis_tready = 1'b0;
      do begin
        @(negedge clk);
        m_axis_tready = ($urandom_range(2) == 0);
      end while (!(m_axis_tready && m_axis_tvalid));
      @(posedge clk);
      got[j] = int'(m_axis_tdata[7:0]);
      check(m_axis_tdata[8] == 1'b1, $sformatf("result %0d has no peak", j));
      check(m_axis_tlast == (j == M - 1), $sformatf("tlast wrong on result %0d", j));
      @(negedge clk);
      m_axis_tready = 1'b0;
    end
    disable count;
    matched[0] = 0;
    matched[1] = 0;
    for (int j = 0; j < M; j++) begin
      if (!matched[0] && got[j] >= th1 - 2 && got[j] <= th1 + 2) matched[0] = 1;
      else if (!matched[1] && got[j] >= th2 - 2 && got[j] <= th2 + 2) matched[1] = 1;
    end
    check(matched[0] && matched[1],
          $sformatf("DoA %0d, %0d for sources at %0d, %0d", got[0], got[1], th1, th2));
    check(n_spec - spec0 == NA, $sformatf("%0d spectrum values", n_spec - spec0));
    if (int'(n_peaks) > M) n_many_peaks++;
    repeat (2) @(negedge clk);
    check(!busy, "still busy after the last result");
    $display("scene %0d/%0d deg: DoA %0d %0d, %0d peaks, %0d cycles start to last result",
             th1, th2, got[0], got[1], n_peaks, cyc);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_scene(60, 110);
    run_scene(35, 140);
    check(n_in_stall > 0,   "input stream never stalled");
    check(n_out_stall > 0,  "output stream never back-pressured");
    check(n_sap == 2,       $sformatf("SAP ran %0d times", n_sap));
    check(n_evd_wait > 0,   "never waited for the EVD");
    check(n_many_peaks > 0, "best-M search never had more than M peaks");
    $display("events: in stalls %0d, out stalls %0d, SAP runs %0d, EVD wait cycles %0d, scenes with >M peaks %0d",
             n_in_stall, n_out_stall, n_sap, n_evd_wait, n_many_peaks);
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
