// acf: auto-correlation R = Y * Y^H of a ROWS x COLS complex matrix.
//
// Y is first copied into a local memory through the load port (element (r,c) at
// address r*COLS + c).  A pulse on start then runs the nine-state controller
// C0..C8 of the architecture: C0 idle/initialise, C1 steps the sample index j
// (0..COLS-1), C2 the row index i, C3 the column index k and forms the two read
// addresses, C4 reads X = Y[i][j] and Y[k][j] from the two read ports, C5 forms
// the complex product with four real multipliers, re = a*c + b*d and
// im = b*c - a*d (that is Y[i][j] * conj(Y[k][j])), C6 reads the running sum of
// R[i][k] from the SUM memory, C7 adds, and C8 writes the sum back to SUM or, in
// the last pass over j, sends it out.  C8 returns to C3 for the next k, to C2
// after the last k and to C1 after the last i, so R is finished after COLS
// passes.  In the first pass the sum read in C6 is taken as zero, which is how
// the SUM matrix gets initialised.
//
// Interface: the result leaves on a write port (out_we, out_row, out_col,
// out_data), one element R[i][k] per 6 cycles during the last pass; the
// consumer stores it where it needs it (the vectorised r memory inside the SAP,
// or a register matrix for the EVD).  done pulses for one cycle after the last
// element.  Timing: start to done takes COLS * (1 + ROWS * (1 + 6*ROWS)) + 1
// cycles.
//
// Follows the architecture: the state sequence, the loop order j/i/k and the
// complex multiply of the ACF figure.  This design's own choices: one memory
// with two read ports stands for the partitioned X/Y BRAMs, the sum is kept with
// ACC_W bits and saturated to WL bits only at the output, and the output is a
// write port rather than an OUT memory inside the block.
module acf
  import ss_pkg::*;
#(
  parameter int ROWS = 4,     // L: antennas (rows of Y)
  parameter int COLS = 200,   // K: baseband samples per antenna
  localparam int AW  = $clog2(ROWS*COLS),
  localparam int RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // load port: copy Y into the local memory
  input  logic          ld_we,
  input  logic [AW-1:0] ld_addr,
  input  cplx_t         ld_data,
  // control
  input  logic          start,
  output logic          busy,
  output logic          done,
  // result port: R[out_row][out_col]
  output logic          out_we,
  output logic [RW-1:0] out_row,
  output logic [RW-1:0] out_col,
  output cplx_t         out_data
);

  typedef enum logic [3:0] {C0, C1, C2, C3, C4, C5, C6, C7, C8} state_t;
  state_t state;

  localparam int JW = (COLS > 1) ? $clog2(COLS) : 1;

  cplx_t ymem [ROWS*COLS];      // local copy of Y (two read ports)
  cacc_t summem [ROWS*ROWS];    // Re SUM / Im SUM

  logic [JW-1:0] j;
  logic [RW-1:0] i, k;
  logic [AW-1:0] addr_x, addr_y;
  cplx_t         xd, yd;        // a + jb , c + jd
  cacc_t         prod, acc_rd, acc_new;

  always_ff @(posedge clk) begin
    if (ld_we) ymem[ld_addr] <= ld_data;
  end

  // C8 writes the running sum back to SUM in every pass but the last
  always_ff @(posedge clk) begin
    if (state == C8 && int'(j) != COLS - 1) summem[int'(i) * ROWS + int'(k)] <= acc_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C0;
      j        <= '0;
      i        <= '0;
      k        <= '0;
      addr_x   <= '0;
      addr_y   <= '0;
      xd       <= '0;
      yd       <= '0;
      prod     <= '0;
      acc_rd   <= '0;
      acc_new  <= '0;
      done     <= 1'b0;
      out_we   <= 1'b0;
      out_row  <= '0;
      out_col  <= '0;
      out_data <= '0;
    end else begin
      done   <= 1'b0;
      out_we <= 1'b0;
      unique case (state)
        C0: if (start) begin
          j     <= '0;
          state <= C1;
        end
        C1: begin
          i     <= '0;
          state <= C2;
        end
        C2: begin
          k     <= '0;
          state <= C3;
        end
        C3: begin
          addr_x <= AW'(int'(i) * COLS + int'(j));
          addr_y <= AW'(int'(k) * COLS + int'(j));
          state  <= C4;
        end
        C4: begin
          xd    <= ymem[addr_x];
          yd    <= ymem[addr_y];
          state <= C5;
        end
        C5: begin
          prod.re <= fx_mul(xd.re, yd.re) + fx_mul(xd.im, yd.im);
          prod.im <= fx_mul(xd.im, yd.re) - fx_mul(xd.re, yd.im);
          state   <= C6;
        end
        C6: begin
          acc_rd <= (j == '0) ? '0 : summem[int'(i) * ROWS + int'(k)];
          state  <= C7;
        end
        C7: begin
          acc_new.re <= acc_rd.re + prod.re;
          acc_new.im <= acc_rd.im + prod.im;
          state      <= C8;
        end
        C8: begin
          if (int'(j) == COLS - 1) begin
            out_we      <= 1'b1;
            out_row     <= i;
            out_col     <= k;
            out_data.re <= sat_fx(acc_new.re);
            out_data.im <= sat_fx(acc_new.im);
          end
          if (int'(k) != ROWS - 1) begin
            k     <= k + 1'b1;
            state <= C3;
          end else if (int'(i) != ROWS - 1) begin
            i     <= i + 1'b1;
            state <= C2;
          end else if (int'(j) != COLS - 1) begin
            j     <= j + 1'b1;
            state <= C1;
          end else begin
            done  <= 1'b1;
            state <= C0;
          end
        end
        default: state <= C0;
      endcase
    end
  end

  assign busy = (state != C0);

endmodule
