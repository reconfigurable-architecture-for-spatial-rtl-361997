// msg: MUSIC spectrum generation and DoA selection for a fixed number of
// sources M.
//
// For every angle i = 0..180 degrees the block takes column i of the extended
// steering matrix Se (N x 181, loaded beforehand through the se_* port) and the
// noise subspace Vn (N x NV, NV = N-M) and computes
//   Correlation : C(i)    = Se[:,i]^H * Vn                 (1 x NV, complex)
//   ACF         : pinv(i) = C(i) * C(i)^H                  (complex scalar)
//   Modulus     : |pinv|^2 = Re^2 + Im^2                   (square root skipped)
//   1/X         : p(i)    = 1 / |pinv|^2
// Peak detect compares p(i-1) with p(i-2) and p(i) once i > 1; a value above
// both neighbours is a peak and is offered to the best-M search, a buffer of M
// (value, angle) pairs kept sorted in descending order.  After angle 180 the
// buffer's angles are the DoA estimates, strongest first.
//
// Arithmetic: Se and Vn entries are WL-bit fixed point, the correlation uses N
// complex multipliers in parallel (one C_k per cycle), |pinv|^2 is kept at full
// precision (2*FRAC fractional bits) and the reciprocal p = 2^(3*FRAC) / |pinv|^2
// (p with FRAC fractional bits, PVW bits, all ones when |pinv|^2 = 0) is formed
// by a restoring divider, one quotient bit per cycle.
//
// Interface: start (with Vn valid, captured on start); done pulses after the
// last angle.  p_valid/p_idx/p_val stream the spectrum out, one angle at a time;
// doa[j]/doa_found[j] are the j-th best peak; n_peaks counts the peaks seen.
// Timing: 181 * (NV + 4 + PVW) + 2 cycles from start to done, less PVW-1 for
// each angle whose |pinv|^2 is zero (the divider is skipped there).
//
// Follows the architecture: the 181-column Se, the chain correlation -> ACF ->
// modulus (two squarers and an adder) -> 1/X, the three-point peak test enabled
// for i > 1 and the best-M buffer.  This design's own choices: the
// sequential per-angle schedule, the widths, the divider and the tie rule (an
// equal later peak does not displace an earlier one).
module msg
  import ss_pkg::*;
#(
  parameter int N  = 6,            // rows of Se and Vn
  parameter int M  = 2,            // number of sources (DoAs reported)
  localparam int NV   = N - M,
  localparam int NA   = N_ANGLES,
  localparam int PW   = $clog2(N),
  localparam int MAGW = 2*WL,
  localparam int PVW  = 3*FRAC + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // steering matrix load: Se[se_row][se_col]
  input  logic             se_we,
  input  logic [ANG_W-1:0] se_col,
  input  logic [PW-1:0]    se_row,
  input  cplx_t            se_data,
  // control
  input  logic             start,
  input  cplx_t            vn [N][NV],
  output logic             busy,
  output logic             done,
  // spectrum stream
  output logic             p_valid,
  output logic [ANG_W-1:0] p_idx,
  output logic [PVW-1:0]   p_val,
  // results
  output logic [ANG_W-1:0] doa       [M],
  output logic             doa_found [M],
  output logic [ANG_W-1:0] n_peaks
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_CORR, S_ACC, S_MOD, S_DIV, S_PEAK, S_DONE} state_t;
  state_t state;

  cplx_t se_mem [NA][N];
  cplx_t col_q  [N];
  cplx_t vn_q   [N][NV];

  logic [ANG_W-1:0] ang;
  int               kk;
  cplx_t            c_q;
  logic             c_v;
  cacc_t            pinv;
  logic [MAGW-1:0]  mag;
  logic [MAGW-1:0]  rem;
  logic [PVW-1:0]   quo;
  int               dbit;
  logic [PVW-1:0]   p1, p2;        // p(i-1), p(i-2)
  logic [PVW-1:0]   bval [M];      // Buffer M: values, descending
  logic [ANG_W-1:0] bidx [M];      //           their angles

  // ---- Correlation: one element of Se[:,ang]^H * Vn -------------------------
  function automatic cplx_t corr(input cplx_t s [N], input cplx_t v [N][NV], input int k);
    cacc_t a;
    a = '0;
    for (int l = 0; l < N; l++) begin
      a.re = a.re + fx_mul(s[l].re, v[l][k].re) + fx_mul(s[l].im, v[l][k].im);
      a.im = a.im + fx_mul(s[l].re, v[l][k].im) - fx_mul(s[l].im, v[l][k].re);
    end
    return '{re: sat_fx(a.re), im: sat_fx(a.im)};
  endfunction

  // ---- Steering matrix memory (one column per read) -------------------------
  always_ff @(posedge clk) begin
    if (se_we) se_mem[se_col][se_row] <= se_data;
  end

  always_ff @(posedge clk) begin
    if (state == S_READ) col_q <= se_mem[ang];
  end

  // ---- Peak detect and best-M insertion -------------------------------------
  logic peak_en;
  assign peak_en = (state == S_PEAK) && (ang > ANG_W'(1)) && (p2 < p1) && (p1 > quo);

  // ---- Control unit -----------------------------------------------------------
  // partial remainder with the next dividend bit (the dividend is 2^(3*FRAC))
  logic [MAGW:0] div_t;
  assign div_t = {rem, (dbit == 3*FRAC) ? 1'b1 : 1'b0};

  fx_t pr, pi;
  assign pr = sat_fx(pinv.re);
  assign pi = sat_fx(pinv.im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ang     <= '0;
      kk      <= 0;
      c_q     <= '0;
      c_v     <= 1'b0;
      pinv    <= '0;
      mag     <= '0;
      rem     <= '0;
      quo     <= '0;
      dbit    <= 0;
      p1      <= '0;
      p2      <= '0;
      done    <= 1'b0;
      p_valid <= 1'b0;
      p_idx   <= '0;
      p_val   <= '0;
      n_peaks <= '0;
      for (int j = 0; j < M; j++) begin
        bval[j] <= '0;
        bidx[j] <= '0;
      end
      for (int r = 0; r < N; r++)
        for (int v = 0; v < NV; v++) vn_q[r][v] <= '0;
    end else begin
      done    <= 1'b0;
      p_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          vn_q    <= vn;
          ang     <= '0;
          p1      <= '0;
          p2      <= '0;
          n_peaks <= '0;
          for (int j = 0; j < M; j++) begin
            bval[j] <= '0;
            bidx[j] <= '0;
          end
          state <= S_READ;
        end
        S_READ: begin
          kk    <= 0;
          c_v   <= 1'b0;
          pinv  <= '0;
          state <= S_CORR;
        end
        S_CORR: begin
          c_q <= corr(col_q, vn_q, kk);
          c_v <= 1'b1;
          if (c_v) begin
            pinv.re <= pinv.re + fx_mul(c_q.re, c_q.re) + fx_mul(c_q.im, c_q.im);
            pinv.im <= pinv.im + fx_mul(c_q.im, c_q.re) - fx_mul(c_q.re, c_q.im);
          end
          if (kk == NV - 1) state <= S_ACC;
          else kk <= kk + 1;
        end
        S_ACC: begin
          pinv.re <= pinv.re + fx_mul(c_q.re, c_q.re) + fx_mul(c_q.im, c_q.im);
          pinv.im <= pinv.im + fx_mul(c_q.im, c_q.re) - fx_mul(c_q.re, c_q.im);
          c_v     <= 1'b0;
          state   <= S_MOD;
        end
        S_MOD: begin
          mag   <= MAGW'(pr * pr) + MAGW'(pi * pi);
          rem   <= '0;
          quo   <= '0;
          dbit  <= PVW - 1;
          state <= S_DIV;
        end
        S_DIV: begin
          // restoring division of 2^(3*FRAC) by mag, quotient bit dbit
          if (mag == '0) begin
            quo   <= '1;
            state <= S_PEAK;
          end else begin
            if (div_t >= {1'b0, mag}) begin
              rem       <= MAGW'(div_t - {1'b0, mag});
              quo[dbit] <= 1'b1;
            end else begin
              rem <= MAGW'(div_t);
            end
            if (dbit == 0) state <= S_PEAK;
            else dbit <= dbit - 1;
          end
        end
        S_PEAK: begin
          p_valid <= 1'b1;
          p_idx   <= ang;
          p_val   <= quo;
          if (peak_en) begin
            n_peaks <= n_peaks + 1'b1;
            for (int j = 0; j < M; j++)
              if (p1 > bval[j]) begin
                if (j > 0 && p1 > bval[j > 0 ? j-1 : 0]) begin
                  bval[j] <= bval[j > 0 ? j-1 : 0];
                  bidx[j] <= bidx[j > 0 ? j-1 : 0];
                end else begin
                  bval[j] <= p1;
                  bidx[j] <= ang - 1'b1;
                end
              end
          end
          p2 <= p1;
          p1 <= quo;
          if (int'(ang) == NA - 1) state <= S_DONE;
          else begin
            ang   <= ang + 1'b1;
            state <= S_READ;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int j = 0; j < M; j++) begin
      doa[j]       = bidx[j];
      doa_found[j] = (bval[j] != '0);
    end
  end

  assign busy = (state != S_IDLE);

  initial assert (M >= 1 && M < N) else $error("msg: M must be in 1..N-1");

endmodule
