// spatial_sensing_top: programmable-logic part of the spatial sensing
// accelerator, SAP -> ACF -> EVD -> Extract Vn -> MSG.
//
// The block receives the digitised sample matrix Y and the extended steering
// matrix Se on one AXI-Stream slave (fed by a DMA reading memory), estimates
// the directions of arrival of M sources with the MUSIC method and returns the
// M angles on an AXI-Stream master (towards the DMA's write channel).
//
//   1. start (a processor-controlled GPIO bit) arms the block.
//   2. Stream in L*K samples of Y, antenna by antenna (beat l*K + k = Y[l][k]),
//      then N*181 entries of Se, angle by angle (beat i*N + l = Se[l][i]).
//   3. USE_SAP = 1 (sparse array): the SAP turns Y into the N x N matrix Y-hat
//      (N = LP) and writes it into the MUSIC ACF.  USE_SAP = 0 (uniform array):
//      Y goes straight into the MUSIC ACF, N = L.
//   4. The ACF computes R (N x N).  R is presented on evd_r with evd_req high.
//   5. The eigenvalue decomposition sits outside this module (it is a vendor
//      QR core): it answers with a one-cycle evd_done and eigenvalues/
//      eigenvectors that must be valid in that cycle.
//   6. Extract Vn keeps the N-M noise eigenvectors, MSG scans 0..180 degrees.
//   7. M beats leave on the master: tdata[7:0] = angle in degrees, tdata[8] =
//      a peak was found for this slot; strongest first, tlast on the last.
//      tdata[31:9] are reserved and always zero; the 32-bit beat matches a
//      word-wide DMA write channel.
//
// Flow control is plain AXI-Stream: a beat moves when tvalid and tready are
// both high.  s_axis_tlast is accepted but not needed (counts define the
// matrices).  busy is high from start until the last result beat has gone;
// done pulses then.
//
// Follows the architecture: the order of the blocks, streaming in and out
// through a DMA, the removal of the SAP for a uniform array and M being fixed
// per build of Extract Vn and MSG (partial reconfiguration swaps them).  This
// design's own choices: the stream formats and beat order, the EVD handshake,
// and the result beat layout.
module spatial_sensing_top
  import ss_pkg::*;
#(
  parameter int L       = 4,                   // physical antennas
  parameter int K       = 200,                 // baseband samples per antenna
  parameter int LP      = 6,                   // antenna slots of the sparse array
  parameter int POS [L] = '{0, 1, 2, 5},       // sparse antenna slots, 0-based
  parameter int M       = 2,                   // active sources (per DPR build)
  parameter bit USE_SAP = 1'b1,                // 1: sparse array, 0: uniform array
  localparam int N      = USE_SAP ? LP : L,    // size of R
  localparam int NV     = N - M
) (
  input  logic          clk,
  input  logic          rst_n,
  // GPIO control
  input  logic          start,
  output logic          busy,
  output logic          done,
  // AXI-Stream in (memory to stream)
  input  logic [2*WL-1:0] s_axis_tdata,
  input  logic            s_axis_tvalid,
  output logic            s_axis_tready,
  input  logic            s_axis_tlast,
  // AXI-Stream out (stream to memory)
  output logic [31:0]     m_axis_tdata,
  output logic            m_axis_tvalid,
  input  logic            m_axis_tready,
  output logic            m_axis_tlast,
  // MUSIC spectrum as it is generated (p(i) for i = 0..180) and peak count
  output logic             spec_valid,
  output logic [ANG_W-1:0] spec_idx,
  output logic [3*FRAC:0]  spec_val,
  output logic [ANG_W-1:0] n_peaks,
  // eigenvalue decomposition (external QR core)
  output logic            evd_req,
  output cplx_t           evd_r [N][N],
  input  logic            evd_done,
  input  fx_t             evd_eigval [N],
  input  cplx_t           evd_eigvec [N][N]
);

  localparam int NA   = N_ANGLES;
  localparam int YW   = $clog2(L*K);
  localparam int PWN  = $clog2(N);
  localparam int AW2  = $clog2(N * (USE_SAP ? N : K));
  localparam int NSE  = N * NA;
  localparam int CNTW = $clog2((L*K > NSE) ? L*K + 1 : NSE + 1);

  typedef enum logic [2:0] {T_IDLE, T_LOAD_Y, T_LOAD_SE, T_SAP, T_ACF, T_EVD, T_MSG, T_OUT} tstate_t;
  tstate_t state;

  cplx_t            in_data;
  logic             beat;
  logic [CNTW-1:0]  cnt;
  logic [PWN-1:0]   se_row;
  logic [ANG_W-1:0] se_col;
  logic             run_start;      // one-cycle start of SAP (or ACF when no SAP)

  assign in_data       = s_axis_tdata;
  assign s_axis_tready = (state == T_LOAD_Y) || (state == T_LOAD_SE);
  assign beat          = s_axis_tvalid && s_axis_tready;

  // ---- MUSIC ACF and, for the sparse array, the SAP in front of it ----------
  logic           acf_ld_we;
  logic [AW2-1:0] acf_ld_addr;
  cplx_t          acf_ld_data;
  logic           acf_start, acf_busy, acf_done, acf_we;
  logic [PWN-1:0] acf_row, acf_col;
  cplx_t          acf_data;
  logic           sap_done, sap_busy;

  if (USE_SAP) begin : g_sap
    logic           yh_we;
    logic [PWN-1:0] yh_row, yh_col;
    cplx_t          yh_data;

    sap #(.L(L), .K(K), .LP(LP), .POS(POS)) u_sap (
      .clk, .rst_n,
      .ld_we   (beat && state == T_LOAD_Y),
      .ld_addr (YW'(cnt)),
      .ld_data (in_data),
      .start   (run_start),
      .busy    (sap_busy),
      .done    (sap_done),
      .yh_we, .yh_row, .yh_col, .yh_data
    );

    assign acf_ld_we   = yh_we;
    assign acf_ld_addr = AW2'(int'(yh_row) * N + int'(yh_col));
    assign acf_ld_data = yh_data;
    assign acf_start   = sap_done;
  end else begin : g_ula
    assign acf_ld_we   = beat && state == T_LOAD_Y;
    assign acf_ld_addr = AW2'(cnt);
    assign acf_ld_data = in_data;
    assign acf_start   = run_start;
    assign sap_done    = 1'b0;
    assign sap_busy    = 1'b0;
  end

  acf #(.ROWS(N), .COLS(USE_SAP ? N : K)) u_acf (
    .clk, .rst_n,
    .ld_we (acf_ld_we), .ld_addr (acf_ld_addr), .ld_data (acf_ld_data),
    .start (acf_start), .busy (acf_busy), .done (acf_done),
    .out_we (acf_we), .out_row (acf_row), .out_col (acf_col), .out_data (acf_data)
  );

  // R collects the ACF output for the eigenvalue decomposition
  always_ff @(posedge clk) begin
    if (acf_we) evd_r[acf_row][acf_col] <= acf_data;
  end

  // ---- Extract Vn and MSG ---------------------------------------------------
  logic             vn_valid;
  cplx_t            vn [N][NV];
  logic             msg_busy, msg_done;
  logic [ANG_W-1:0] doa [M];
  logic             doa_found [M];

  extract_vn #(.N(N), .M(M)) u_extract_vn (
    .clk, .rst_n,
    .eig_valid (evd_done && state == T_EVD),
    .eigval    (evd_eigval),
    .eigvec    (evd_eigvec),
    .vn_valid, .vn
  );

  msg #(.N(N), .M(M)) u_msg (
    .clk, .rst_n,
    .se_we   (beat && state == T_LOAD_SE),
    .se_col, .se_row,
    .se_data (in_data),
    .start   (vn_valid),
    .vn,
    .busy    (msg_busy),
    .done    (msg_done),
    .p_valid (spec_valid), .p_idx (spec_idx), .p_val (spec_val),
    .doa, .doa_found, .n_peaks
  );

  // ---- Sequencer ------------------------------------------------------------
  int out_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      cnt       <= '0;
      se_row    <= '0;
      se_col    <= '0;
      run_start <= 1'b0;
      evd_req   <= 1'b0;
      out_i     <= 0;
      done      <= 1'b0;
    end else begin
      run_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        T_IDLE: if (start) begin
          cnt   <= '0;
          state <= T_LOAD_Y;
        end
        T_LOAD_Y: if (beat) begin
          if (int'(cnt) == L*K - 1) begin
            cnt    <= '0;
            se_row <= '0;
            se_col <= '0;
            state  <= T_LOAD_SE;
          end else cnt <= cnt + 1'b1;
        end
        T_LOAD_SE: if (beat) begin
          if (int'(se_row) == N - 1) begin
            se_row <= '0;
            se_col <= se_col + 1'b1;
          end else se_row <= se_row + 1'b1;
          if (int'(cnt) == NSE - 1) begin
            run_start <= 1'b1;
            state     <= USE_SAP ? T_SAP : T_ACF;
          end else cnt <= cnt + 1'b1;
        end
        T_SAP: if (sap_done) state <= T_ACF;
        T_ACF: if (acf_done) begin
          evd_req <= 1'b1;
          state   <= T_EVD;
        end
        T_EVD: if (evd_done) begin
          evd_req <= 1'b0;
          state   <= T_MSG;
        end
        T_MSG: if (msg_done) begin
          out_i <= 0;
          state <= T_OUT;
        end
        T_OUT: if (m_axis_tready) begin
          if (out_i == M - 1) begin
            done  <= 1'b1;
            state <= T_IDLE;
          end else out_i <= out_i + 1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign m_axis_tvalid = (state == T_OUT);
  assign m_axis_tlast  = (state == T_OUT) && (out_i == M - 1);
  assign m_axis_tdata  = {23'd0, doa_found[out_i], doa[out_i]};
  assign busy          = (state != T_IDLE) || acf_busy || msg_busy || sap_busy;

  // ---- Stream protocol rules ------------------------------------------------
  // a result beat, once offered, stays offered with the same data until taken
  property p_m_axis_hold;
    @(posedge clk) disable iff (!rst_n)
      m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata);
  endproperty
  a_m_axis_hold: assert property (p_m_axis_hold);

endmodule
