// sap: sparse array pre-processing.
//
// Turns the L x K sub-Nyquist sample matrix Y of a sparse array into the
// LP x LP spatially smoothed matrix Y-hat of its virtual uniform array of LP
// antenna slots (LP = position of the last antenna), so that MUSIC can resolve
// up to LP-1 sources with L physical antennas.  Four steps:
//   1. ACF: R = Y * Y^H (L x L), computed by an acf instance.
//   2. Vectorisation: each R[i][k] leaving the ACF is stored column-wise,
//      r[k*L + i], in a dual-port memory.
//   3. Redundancy removal: of all entries of r whose antenna pair has the same
//      position difference (lag) only one is kept.  The reduced vector has
//      2*LP-1 entries, r-hat[LP-1+d] for lag d = -(LP-1)..LP-1.  The table that
//      maps each lag to its r address (first pair found, in r order) is computed
//      at elaboration from the antenna positions POS.
//   4. Matrix rearrangement: column i of Y-hat is r-hat[LP-1-i .. 2*LP-2-i], so
//      Y-hat[m][i] = r-hat at lag m-i.  One element is loaded from r and stored
//      at its Y-hat address per cycle.
//
// Interface: load port and start as for acf (Y element (l,k) at l*K + k).
// Y-hat leaves on a write port (yh_we, yh_row, yh_col, yh_data), LP*LP writes on
// consecutive cycles after the ACF has finished, then done pulses.  Timing:
// ACF time + LP*LP + 3 cycles.
//
// Follows the architecture: the four steps, column-wise vectorisation into a
// dual-port memory, reduced-vector length and rearrangement formula.  This
// design's own choices: the antenna positions (nested array 1,2,3,6, so LP = 6,
// which matches the largest number of sources evaluated for the sparse array,
// M = 5 = LP-1), keeping the first redundant entry rather than averaging, and a
// lag that no antenna pair produces reading as zero.
module sap
  import ss_pkg::*;
#(
  parameter int L  = 4,                        // physical antennas
  parameter int K  = 200,                      // baseband samples per antenna
  parameter int LP = 6,                        // antenna slots L' (last position)
  parameter int POS [L] = '{0, 1, 2, 5},       // antenna slots, 0-based
  localparam int AW  = $clog2(L*K),
  localparam int RW  = (L > 1) ? $clog2(L) : 1,
  localparam int PW  = $clog2(LP),
  localparam int VAW = $clog2(L*L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_we,
  input  logic [AW-1:0] ld_addr,
  input  cplx_t         ld_data,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          yh_we,
  output logic [PW-1:0] yh_row,
  output logic [PW-1:0] yh_col,
  output cplx_t         yh_data
);

  // lag d (index d+LP-1) -> address in r of the first pair (a,b) with
  // POS[a]-POS[b] = d; -1 when no pair has that lag
  typedef int lag_map_t [2*LP-1];

  function automatic lag_map_t make_lag_map();
    lag_map_t m;
    for (int d = 0; d < 2*LP-1; d++) m[d] = -1;
    for (int b = 0; b < L; b++)
      for (int a = 0; a < L; a++)
        if (m[POS[a] - POS[b] + LP - 1] < 0) m[POS[a] - POS[b] + LP - 1] = b*L + a;
    return m;
  endfunction

  localparam lag_map_t LAG_MAP = make_lag_map();

  // ---- step 1: ACF ---------------------------------------------------------
  logic          acf_busy, acf_done, acf_we;
  logic [RW-1:0] acf_row, acf_col;
  cplx_t         acf_data;

  acf #(.ROWS(L), .COLS(K)) u_acf (
    .clk, .rst_n,
    .ld_we, .ld_addr, .ld_data,
    .start, .busy(acf_busy), .done(acf_done),
    .out_we(acf_we), .out_row(acf_row), .out_col(acf_col), .out_data(acf_data)
  );

  // ---- step 2: vectorisation into r (column-wise) ----------------------------
  cplx_t          rmem [L*L];
  logic [VAW-1:0] r_wa;
  assign r_wa = VAW'(int'(acf_col) * L + int'(acf_row));

  always_ff @(posedge clk) begin
    if (acf_we) rmem[r_wa] <= acf_data;
  end

  // ---- steps 3 and 4: redundancy removal and rearrangement -----------------
  logic          remap;                 // walking the LP x LP elements of Y-hat
  logic [PW-1:0] m_idx, i_idx;          // Y-hat row m, column i being loaded
  logic          rd_v;                  // a read of r is in flight
  logic          rd_hole;               // that lag has no antenna pair
  logic [PW-1:0] rd_m, rd_i;
  cplx_t         rd_q;
  int            lag_addr;

  assign lag_addr = LAG_MAP[int'(m_idx) - int'(i_idx) + LP - 1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remap   <= 1'b0;
      m_idx   <= '0;
      i_idx   <= '0;
      rd_v    <= 1'b0;
      rd_hole <= 1'b0;
      rd_m    <= '0;
      rd_i    <= '0;
      rd_q    <= '0;
      yh_we   <= 1'b0;
      yh_row  <= '0;
      yh_col  <= '0;
      yh_data <= '0;
      done    <= 1'b0;
    end else begin
      done  <= 1'b0;
      // load from r
      rd_v  <= remap;
      if (remap) begin
        rd_hole <= (lag_addr < 0);
        rd_q    <= rmem[VAW'((lag_addr < 0) ? 0 : lag_addr)];
        rd_m    <= m_idx;
        rd_i    <= i_idx;
        if (int'(m_idx) == LP - 1) begin
          m_idx <= '0;
          if (int'(i_idx) == LP - 1) begin
            i_idx <= '0;
            remap <= 1'b0;
          end else begin
            i_idx <= i_idx + 1'b1;
          end
        end else begin
          m_idx <= m_idx + 1'b1;
        end
      end else if (acf_done) begin
        remap <= 1'b1;
        m_idx <= '0;
        i_idx <= '0;
      end
      // store at the Y-hat address
      yh_we   <= rd_v;
      yh_row  <= rd_m;
      yh_col  <= rd_i;
      yh_data <= rd_hole ? '0 : rd_q;
      if (yh_we && !rd_v) done <= 1'b1;
    end
  end

  assign busy = acf_busy | remap | rd_v | yh_we;

endmodule
