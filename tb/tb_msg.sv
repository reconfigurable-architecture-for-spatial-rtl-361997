// tb_msg: self-checking test of MUSIC spectrum generation (N = 6, M = 2).
//
// Se is the steering matrix of a 6-slot half-wavelength array,
// Se[l][i] = exp(j*pi*l*cos(i deg)).  Vn is built here as an orthonormal basis
// of the complement of the steering vectors of two sources at 50 and 120
// degrees (Gram-Schmidt in real arithmetic, then quantised).  The testbench
// recomputes every p(i) with the same fixed-point rules (products truncated to
// FRAC bits, saturation to WL bits, p = 2^(3*FRAC) / (Re^2 + Im^2)), its own
// list of local maxima and the two largest, and checks: all 181 spectrum values
// bit-exactly, the peak count, the two DoAs (and that they are 50 and 120), and
// start-to-done = 181*(NV + 4 + 3*FRAC + 1) + 2 cycles, less 3*FRAC for
// every angle where the squared modulus is zero.  A second scene with
// sources at 20 and 75 degrees is run with a different Vn.
module tb_msg;
  import ss_pkg::*;

  localparam int N   = 6;
  localparam int M   = 2;
  localparam int NV  = N - M;
  localparam int NA  = N_ANGLES;
  localparam int PW  = $clog2(N);
  localparam int PVW = 3*FRAC + 1;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic se_we = 1'b0, start = 1'b0;
  logic [ANG_W-1:0] se_col = '0;
  logic [PW-1:0] se_row = '0;
  cplx_t se_data = '0;
  cplx_t vn [N][NV];
  logic busy, done, p_valid;
  logic [ANG_W-1:0] p_idx, n_peaks;
  logic [PVW-1:0] p_val;
  logic [ANG_W-1:0] doa [M];
  logic doa_found [M];

  msg dut (.*);

  int checks = 0, failures = 0;
  longint ser [N][NA], sei [N][NA];
  longint spec [NA];
  int     spec_seen [NA];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic longint q(input real x);
    return longint'($rtoi(x * real'(1 << FRAC) + (x >= 0.0 ? 0.5 : -0.5)));
  endfunction

  function automatic longint sat(input longint v);
    longint hi;
    hi = (longint'(1) << (WL-1)) - 1;
    return (v > hi) ? hi : (v < -hi-1) ? -hi-1 : v;
  endfunction

  function automatic longint tm(input longint a, input longint b);
    return (a * b) >>> FRAC;
  endfunction

  always @(posedge clk) if (p_valid) begin
    spec[p_idx] = longint'(p_val);
    spec_seen[p_idx]++;
  end

  task automatic run_scene(input int th1, input int th2);
    real  br [N][N], bi [N][N];   // basis vectors, columns
    int   nb;
    longint vr [N][NV], vi [N][NV];
    longint ref_p [NA];
    int   pk_idx [NA];
    longint pk_val [NA];
    int   npk, cyc, nzero;
    // Gram-Schmidt: two steering vectors, then unit vectors
    nb = 0;
    for (int c = 0; c < N + 2 && nb < N; c++) begin
      real ur [N], ui [N], nrm;
      for (int l = 0; l < N; l++) begin
        if (c < 2) begin
          real th;
          th = PI * real'(l) * $cos(real'(c == 0 ? th1 : th2) * PI / 180.0);
          ur[l] = $cos(th);
          ui[l] = $sin(th);
        end else begin
          ur[l] = (l == c - 2) ? 1.0 : 0.0;
          ui[l] = 0.0;
        end
      end
      for (int b = 0; b < nb; b++) begin
        real dr, di;   // <basis_b, u> = sum conj(b) u
        dr = 0.0;
        di = 0.0;
        for (int l = 0; l < N; l++) begin
          dr += br[l][b]*ur[l] + bi[l][b]*ui[l];
          di += br[l][b]*ui[l] - bi[l][b]*ur[l];
        end
        for (int l = 0; l < N; l++) begin
          ur[l] -= dr*br[l][b] - di*bi[l][b];
          ui[l] -= dr*bi[l][b] + di*br[l][b];
        end
      end
      nrm = 0.0;
      for (int l = 0; l < N; l++) nrm += ur[l]*ur[l] + ui[l]*ui[l];
      if (nrm > 1e-6) begin
        for (int l = 0; l < N; l++) begin
          br[l][nb] = ur[l] / $sqrt(nrm);
          bi[l][nb] = ui[l] / $sqrt(nrm);
        end
        nb++;
      end
    end
    for (int l = 0; l < N; l++)
      for (int v = 0; v < NV; v++) begin
        vr[l][v] = q(br[l][v+2]);
        vi[l][v] = q(bi[l][v+2]);
        vn[l][v].re = fx_t'(vr[l][v]);
        vn[l][v].im = fx_t'(vi[l][v]);
      end
    // reference spectrum
    nzero = 0;
    for (int i = 0; i < NA; i++) begin
      longint cr, ci, pr, pim, mg;
      pr = 0;
      pim = 0;
      for (int k = 0; k < NV; k++) begin
        cr = 0;
        ci = 0;
        for (int l = 0; l < N; l++) begin
          cr += tm(ser[l][i], vr[l][k]) + tm(sei[l][i], vi[l][k]);
          ci += tm(ser[l][i], vi[l][k]) - tm(sei[l][i], vr[l][k]);
        end
        cr = sat(cr);
        ci = sat(ci);
        pr += tm(cr, cr) + tm(ci, ci);
        pim += tm(ci, cr) - tm(cr, ci);
      end
      pr = sat(pr);
      pim = sat(pim);
      mg = pr*pr + pim*pim;
      if (mg == 0) nzero++;
      ref_p[i] = (mg == 0) ? (longint'(1) << PVW) - 1 : (longint'(1) << (3*FRAC)) / mg;
    end
    // reference peaks, sorted by value (stable)
    npk = 0;
    for (int i = 1; i < NA - 1; i++)
      if (ref_p[i] > ref_p[i-1] && ref_p[i] > ref_p[i+1]) begin
        pk_idx[npk] = i;
        pk_val[npk] = ref_p[i];
        npk++;
      end
    for (int a = 0; a < npk; a++)
      for (int b = npk - 1; b > a; b--)
        if (pk_val[b] > pk_val[b-1]) begin
          longint tv;
          int ti;
          tv = pk_val[b]; pk_val[b] = pk_val[b-1]; pk_val[b-1] = tv;
          ti = pk_idx[b]; pk_idx[b] = pk_idx[b-1]; pk_idx[b-1] = ti;
        end
    for (int i = 0; i < NA; i++) spec_seen[i] = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == NA*(NV + 4 + PVW) + 2 - nzero*(PVW - 1),
          $sformatf("latency %0d, expected %0d", cyc, NA*(NV + 4 + PVW) + 2 - nzero*(PVW - 1)));
    for (int i = 0; i < NA; i++)
      check(spec_seen[i] == 1 && spec[i] == ref_p[i],
            $sformatf("p(%0d) = %0d (seen %0d), expected %0d", i, spec[i], spec_seen[i], ref_p[i]));
    check(int'(n_peaks) == npk, $sformatf("peaks %0d, expected %0d", n_peaks, npk));
    for (int j = 0; j < M; j++)
      check(j < npk && doa_found[j] && int'(doa[j]) == pk_idx[j],
            $sformatf("DoA %0d = %0d, expected %0d", j, doa[j], pk_idx[j]));
    check((doa[0] == ANG_W'(th1) && doa[1] == ANG_W'(th2)) || (doa[0] == ANG_W'(th2) && doa[1] == ANG_W'(th1)),
          $sformatf("DoAs %0d,%0d, sources at %0d,%0d", doa[0], doa[1], th1, th2));
    $display("scene %0d/%0d: DoA %0d %0d, %0d peaks, %0d cycles", th1, th2, doa[0], doa[1], n_peaks, cyc);
  endtask

  initial begin
    for (int i = 0; i < NA; i++)
      for (int l = 0; l < N; l++) begin
        real th;
        th = PI * real'(l) * $cos(real'(i) * PI / 180.0);
        ser[l][i] = q($cos(th));
        sei[l][i] = q($sin(th));
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NA; i++)
      for (int l = 0; l < N; l++) begin
        @(negedge clk);
        se_we = 1'b1;
        se_col = ANG_W'(i);
        se_row = PW'(l);
        se_data.re = fx_t'(ser[l][i]);
        se_data.im = fx_t'(sei[l][i]);
      end
    @(negedge clk);
    se_we = 1'b0;
    run_scene(50, 120);
    run_scene(20, 75);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
