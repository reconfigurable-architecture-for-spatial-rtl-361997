// top_harness: drives one spatial_sensing_top build through one scene and
// checks its DoA estimates.  Used by tb_top_modes to exercise the uniform-array
// build (SAP removed) and builds for several numbers of sources M, each of which
// corresponds to one partial bitstream of Extract Vn and MSG.
//
// On go the harness streams Y for NSRC = M uncorrelated random-phase sources
// at THETA[] degrees (20 dB SNR, antennas at POS, or 0..L-1 without the SAP),
// then the steering matrix of the N contiguous slots, serves the EVD through
// the behavioural model and reads the M result beats.  Each true angle must be
// matched by one estimate within 2 degrees.  finished rises at the end; checks
// and failures count what was checked.
module top_harness
  import ss_pkg::*;
#(
  parameter bit USE_SAP = 1'b1,
  parameter int M       = 2,
  parameter int THETA [5] = '{60, 110, 0, 0, 0},   // first M used
  parameter int L       = 4,
  parameter int K       = 200,
  parameter int POS [L] = '{0, 1, 2, 5}
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
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

  evd_model #(.N(N), .LATENCY(50)) u_evd (
    .clk, .rst_n, .req(evd_req), .r(evd_r),
    .done(evd_done), .eigval(evd_eigval), .eigvec(evd_eigvec)
  );

  initial begin
    finished = 1'b0;
    checks = 0;
    failures = 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (%m): %s", what);
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

  task automatic send(input cplx_t d);
    s_axis_tdata = d;
    s_axis_tvalid = 1'b1;
    do @(posedge clk); while (!s_axis_tready);
    @(negedge clk);
    s_axis_tvalid = 1'b0;
  endtask

  initial begin
    real amp, sig;
    real sr [M][K], si [M][K];
    int  got [M];
    bit  used [M];
    cplx_t d;
    wait (go);
    amp = 0.05 / $sqrt(real'(M));
    sig = amp / 10.0 / $sqrt(2.0);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int m = 0; m < M; m++)
      for (int k = 0; k < K; k++) begin
        real ph;
        ph = 2.0 * PI * real'($urandom_range(1000000)) / 1000000.0;
        sr[m][k] = amp * $cos(ph);
        si[m][k] = amp * $sin(ph);
      end
    for (int l = 0; l < L; l++)
      for (int k = 0; k < K; k++) begin
        real yr, yi, pl;
        pl = USE_SAP ? real'(POS[l]) : real'(l);
        yr = sig * gauss();
        yi = sig * gauss();
        for (int m = 0; m < M; m++) begin
          real a;
          a = PI * pl * $cos(real'(THETA[m]) * PI / 180.0);
          yr += sr[m][k] * $cos(a) - si[m][k] * $sin(a);
          yi += sr[m][k] * $sin(a) + si[m][k] * $cos(a);
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
      got[j] = int'(m_axis_tdata[7:0]);
      check(m_axis_tdata[8], $sformatf("result %0d has no peak", j));
      check(m_axis_tlast == (j == M - 1), $sformatf("tlast wrong on result %0d", j));
      @(negedge clk);
      m_axis_tready = 1'b0;
    end
    for (int j = 0; j < M; j++) used[j] = 0;
    for (int m = 0; m < M; m++) begin
      bit ok;
      ok = 0;
      for (int j = 0; j < M; j++)
        if (!ok && !used[j] && got[j] >= THETA[m] - 2 && got[j] <= THETA[m] + 2) begin
          used[j] = 1;
          ok = 1;
        end
      check(ok, $sformatf("source at %0d deg not found", THETA[m]));
    end
    $write("%s M=%0d: sources", USE_SAP ? "sparse " : "uniform", M);
    for (int m = 0; m < M; m++) $write(" %0d", THETA[m]);
    $write(", estimates");
    for (int j = 0; j < M; j++) $write(" %0d", got[j]);
    $display("");
    finished = 1'b1;
  end

endmodule
