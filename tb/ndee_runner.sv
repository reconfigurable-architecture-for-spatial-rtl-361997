// ndee_runner: runs one spatial_sensing_top build through random scenes and
// measures the normalised DoA estimation error, NDEE = mean |estimate - truth|
// / 180 over all sources, estimates paired with true angles in sorted order.
//
// run_point(k_used, snr_db, trials, ndee) streams `trials` scenes.  Each scene
// has M uncorrelated random-phase sources at random angles in 20..160 degrees,
// at least 25 degrees apart.  Only the first k_used of the K sample slots carry
// data; the rest are zero, which leaves R = Y*Y^H exactly as for a k_used-sample
// build.  The input is scaled with k_used so that R stays in range.  The EVD is
// the behavioural model.  The NDEE measure, 4 antennas and the 5x ratio
// between RF and baseband samples follow the original evaluation; the scene
// generator, angle range, separation and pairing rule are this testbench's
// own.  Timing: about 34 000 cycles per scene, with no stalls.
module ndee_runner
  import ss_pkg::*;
#(
  parameter bit USE_SAP = 1'b1,
  parameter int M       = 2,
  parameter int L       = 4,
  parameter int K       = 200,
  parameter int POS [L] = '{0, 1, 2, 5}
) (
  input logic clk,
  input logic rst_n
);

  localparam int  N  = USE_SAP ? 6 : L;
  localparam int  NA = N_ANGLES;
  localparam real PI = 3.14159265358979323846;

  logic start = 1'b0, busy, done;
  logic [2*WL-1:0] s_axis_tdata = '0;
  logic s_axis_tvalid = 1'b0, s_axis_tready;
  logic [31:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;
  logic spec_valid;
  logic [ANG_W-1:0] spec_idx, n_peaks;
  logic [3*FRAC:0] spec_val;
  logic evd_req, evd_done;
  cplx_t evd_r [N][N];
  fx_t   evd_eigval [N];
  cplx_t evd_eigvec [N][N];

  spatial_sensing_top #(.L(L), .K(K), .LP(6), .POS(POS), .M(M), .USE_SAP(USE_SAP)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast(1'b0),
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .spec_valid, .spec_idx, .spec_val, .n_peaks,
    .evd_req, .evd_r, .evd_done, .evd_eigval, .evd_eigvec
  );

  evd_model #(.N(N), .LATENCY(20)) u_evd (
    .clk, .rst_n, .req(evd_req), .r(evd_r),
    .done(evd_done), .eigval(evd_eigval), .eigvec(evd_eigvec)
  );

  function automatic fx_t q(input real x);
    return fx_t'($rtoi(x * real'(1 << FRAC) + (x >= 0.0 ? 0.5 : -0.5)));
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000001.0;
    u2 = real'($urandom_range(1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  task automatic send(input cplx_t d);
    s_axis_tdata = d;
    s_axis_tvalid = 1'b1;
    do @(posedge clk); while (!s_axis_tready);
    @(negedge clk);
    s_axis_tvalid = 1'b0;
  endtask

  task automatic run_point(input int k_used, input real snr_db, input int trials, output real ndee);
    real err_sum;
    err_sum = 0.0;
    for (int t = 0; t < trials; t++) begin
      int    th [M], est [M];
      real   amp, sig;
      real   sr [M][K], si [M][K];
      cplx_t d;
      // random, separated source angles, sorted
      for (int m = 0; m < M; m++) begin
        bit ok;
        do begin
          th[m] = 20 + int'($urandom_range(140));
          ok = 1;
          for (int o = 0; o < m; o++) if (th[m] - th[o] < 25 && th[o] - th[m] < 25) ok = 0;
        end while (!ok);
      end
      th.sort();
      amp = $sqrt(0.6 / (real'(k_used) * real'(M)));
      sig = amp * $pow(10.0, -snr_db / 20.0) / $sqrt(2.0);
      for (int m = 0; m < M; m++)
        for (int k = 0; k < K; k++) begin
          real ph;
          ph = 2.0 * PI * real'($urandom_range(1000000)) / 1000000.0;
          sr[m][k] = amp * $cos(ph);
          si[m][k] = amp * $sin(ph);
        end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int l = 0; l < L; l++)
        for (int k = 0; k < K; k++) begin
          real yr, yi, pl;
          yr = 0.0;
          yi = 0.0;
          if (k < k_used) begin
            pl = USE_SAP ? real'(POS[l]) : real'(l);
            yr = sig * gauss();
            yi = sig * gauss();
            for (int m = 0; m < M; m++) begin
              real a;
              a = PI * pl * $cos(real'(th[m]) * PI / 180.0);
              yr += sr[m][k] * $cos(a) - si[m][k] * $sin(a);
              yi += sr[m][k] * $sin(a) + si[m][k] * $cos(a);
            end
          end
          d.re = q(yr);
          d.im = q(yi);
          send(d);
        end
      for (int i = 0; i < NA; i++)
        for (int l = 0; l < N; l++) begin
          real a;
          a = PI * real'(l) * $cos(real'(i) * PI / 180.0);
          d.re = q($cos(a));
          d.im = q($sin(a));
          send(d);
        end
      for (int j = 0; j < M; j++) begin
        @(negedge clk);
        m_axis_tready = 1'b1;
        do @(posedge clk); while (!m_axis_tvalid);
        // a slot without a peak counts as the worst possible estimate
        est[j] = m_axis_tdata[8] ? int'(m_axis_tdata[7:0]) : 1000;
        @(negedge clk);
        m_axis_tready = 1'b0;
      end
      est.sort();
      for (int m = 0; m < M; m++)
        err_sum += (est[m] == 1000) ? 1.0 : real'((est[m] > th[m]) ? est[m] - th[m] : th[m] - est[m]) / 180.0;
    end
    ndee = err_sum / real'(trials * M);
  endtask

endmodule
