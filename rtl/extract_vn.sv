// extract_vn: noise-subspace extraction for a fixed number of sources M.
//
// Takes the N eigenvalues and the N x N eigenvector matrix produced by the
// eigenvalue decomposition of R and keeps the N-M eigenvectors belonging to the
// smallest eigenvalues: they span the noise subspace Vn (N x (N-M)) used by the
// MUSIC spectrum.  Each eigenvalue is ranked against all others in parallel
// (rank = number of eigenvalues that are smaller, ties broken by index), and
// the eigenvector of rank r becomes column r of Vn, so Vn is ordered from the
// smallest eigenvalue upwards.
//
// Interface: eig_valid qualifies eigval[c] and column c of eigvec (eigvec[row]
// [c]); one cycle later vn_valid pulses and vn holds Vn until the next
// eig_valid.  Latency 1 cycle.
//
// M is a parameter, not an input: in the architecture this block is a
// reconfigurable partition that is loaded with the bitstream for the current M
// by partial reconfiguration, so each M is a separate build of this module.
// The ranking circuit itself is this design's choice; the architecture only
// states what the block selects.
module extract_vn
  import ss_pkg::*;
#(
  parameter int N = 6,   // size of R: L' for the sparse array, L for the ULA
  parameter int M = 2    // number of active sources
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  eig_valid,
  input  fx_t   eigval [N],
  input  cplx_t eigvec [N][N],
  output logic  vn_valid,
  output cplx_t vn     [N][N-M]
);

  localparam int NV = N - M;

  int rank [N];

  always_comb begin
    for (int c = 0; c < N; c++) begin
      rank[c] = 0;
      for (int o = 0; o < N; o++)
        if (eigval[o] < eigval[c] || (eigval[o] == eigval[c] && o < c)) rank[c] = rank[c] + 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vn_valid <= 1'b0;
      for (int r = 0; r < N; r++)
        for (int v = 0; v < NV; v++) vn[r][v] <= '0;
    end else begin
      vn_valid <= eig_valid;
      if (eig_valid)
        for (int c = 0; c < N; c++)
          for (int v = 0; v < NV; v++)
            if (rank[c] == v)
              for (int r = 0; r < N; r++) vn[r][v] <= eigvec[r][c];
    end
  end

  initial assert (M >= 1 && M < N) else $error("extract_vn: M must be in 1..N-1");

endmodule
