// evd_model: behavioural model (not synthesizable) of the eigenvalue
// decomposition that sits between the ACF and Extract Vn.  The accelerator
// relies on a vendor QR-decomposition core for this step; this model only
// stands in for it in simulation.
//
// When req rises, R (N x N, complex Hermitian, fixed point) is converted to
// real numbers and diagonalised with the cyclic complex Jacobi method: for each
// pair (p,q) the phase of R[p][q] is removed and a real plane rotation zeroes
// it, the product of all rotations accumulating the eigenvectors.  After
// LATENCY cycles done pulses for one cycle with eigval[c] (real part of the
// diagonal, fixed point) and column c of eigvec (unit norm, fixed point).  The
// outputs keep their values until the next request.
module evd_model
  import ss_pkg::*;
#(
  parameter int N       = 6,
  parameter int LATENCY = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req,
  input  cplx_t r      [N][N],
  output logic  done,
  output fx_t   eigval [N],
  output cplx_t eigvec [N][N]
);

  localparam real SCALE = real'(1 << FRAC);

  function automatic fx_t to_fx(input real x);
    return fx_t'($rtoi(x * SCALE + (x >= 0.0 ? 0.5 : -0.5)));
  endfunction

  logic req_q;
  int   wait_cnt;

  initial begin
    done = 1'b0;
    foreach (eigval[c]) eigval[c] = '0;
    foreach (eigvec[a, b]) eigvec[a][b] = '0;
  end

  always @(posedge clk) begin
    req_q <= req;
    done  <= 1'b0;
    if (!rst_n) begin
      wait_cnt <= 0;
    end else if (req && !req_q) begin
      decompose();
      wait_cnt <= LATENCY;
    end else if (wait_cnt > 0) begin
      wait_cnt <= wait_cnt - 1;
      if (wait_cnt == 1) done <= 1'b1;
    end
  end

  task automatic decompose();
    real ar [N][N], ai [N][N], vr [N][N], vi [N][N];
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        ar[a][b] = real'(r[a][b].re) / SCALE;
        ai[a][b] = real'(r[a][b].im) / SCALE;
        vr[a][b] = (a == b) ? 1.0 : 0.0;
        vi[a][b] = 0.0;
      end
    for (int sweep = 0; sweep < 60; sweep++)
      for (int p = 0; p < N - 1; p++)
        for (int q = p + 1; q < N; q++) begin
          real mag, phi, th, c, s, er, ei;
          mag = $sqrt(ar[p][q]*ar[p][q] + ai[p][q]*ai[p][q]);
          if (mag > 1e-15) begin
            phi = $atan2(ai[p][q], ar[p][q]);
            th  = 0.5 * $atan2(2.0*mag, ar[p][p] - ar[q][q]);
            c   = $cos(th);
            s   = $sin(th);
            er  = $cos(phi);          // e^{-j phi} = er - j ei
            ei  = $sin(phi);
            // columns: A <- A U, V <- V U
            for (int k = 0; k < N; k++) begin
              real xpr, xpi, xqr, xqi, wr, wi;
              xpr = ar[k][p]; xpi = ai[k][p]; xqr = ar[k][q]; xqi = ai[k][q];
              wr  = xqr*er + xqi*ei;  wi = xqi*er - xqr*ei;   // x_q e^{-j phi}
              ar[k][p] = c*xpr + s*wr;  ai[k][p] = c*xpi + s*wi;
              ar[k][q] = -s*xpr + c*wr; ai[k][q] = -s*xpi + c*wi;
              xpr = vr[k][p]; xpi = vi[k][p]; xqr = vr[k][q]; xqi = vi[k][q];
              wr  = xqr*er + xqi*ei;  wi = xqi*er - xqr*ei;
              vr[k][p] = c*xpr + s*wr;  vi[k][p] = c*xpi + s*wi;
              vr[k][q] = -s*xpr + c*wr; vi[k][q] = -s*xpi + c*wi;
            end
            // rows: A <- U^H A
            for (int k = 0; k < N; k++) begin
              real xpr, xpi, xqr, xqi, wr, wi;
              xpr = ar[p][k]; xpi = ai[p][k]; xqr = ar[q][k]; xqi = ai[q][k];
              wr  = xqr*er - xqi*ei;  wi = xqi*er + xqr*ei;   // x_q e^{+j phi}
              ar[p][k] = c*xpr + s*wr;  ai[p][k] = c*xpi + s*wi;
              ar[q][k] = -s*xpr + c*wr; ai[q][k] = -s*xpi + c*wi;
            end
          end
        end
    for (int c = 0; c < N; c++) begin
      eigval[c] = to_fx(ar[c][c]);
      for (int a = 0; a < N; a++) begin
        eigvec[a][c].re = to_fx(vr[a][c]);
        eigvec[a][c].im = to_fx(vi[a][c]);
      end
    end
  endtask

endmodule
