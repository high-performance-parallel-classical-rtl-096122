// cla_gf2: the CLA (classical linear-algebra) module. From a symmetric binary
// matrix A it finds everything the parallel circuit needs: the pivot set P
// of a maximal set of linearly independent columns, the binary rank r, and
// one solution z^a of 2 z^T x = q(x) (mod 4) for all x in Ker(A), where
// q(x) = x^T A x (mod 4).
//
// How it works. Phase ELIM runs Gauss-Jordan elimination over GF(2) on a copy
// of A, one column per clock: the first row at or below the current rank
// with a 1 in the column is swapped up and XORed into every other row that
// has a 1 there. Columns that get a pivot form P. Phase NULL then visits one
// column per clock. For a free (non-pivot) column f the reduced matrix gives
// the null-space basis vector x_f (x_f[f] = 1, x_f[p_k] = row k's entry in
// column f); q(x_f) is summed as x_i * popcount(A_i AND x_f) mod 4. q is even
// on Ker(A), and because each x_f is the only basis vector with a 1 at f,
// z^a[f] = q(x_f)/2 mod 2 with z^a = 0 on P solves the whole system.
// The four steps and their results follow the paper; the paper leaves the
// algorithm to parallel O(log^2 n) methods from the literature, and this
// sequential one taking 2n + 1 clocks is this design's choice.
//
// Interface: a start pulse (while idle) latches a_mat (row i in a_mat[i],
// bit j = A_ij). done pulses for one clock 2*N*N + 1 clocks after start;
// pivot_mask, rank and za then hold until the next start. busy is high in
// between. During the NULL phase the n - r basis vectors of Ker(A) and their
// q values come out on ker_x/ker_q, one per clock where ker_valid is high,
// in ascending order of their free column. Synchronous active-high reset.
module cla_gf2 #(
  parameter int unsigned N = hlf_pkg::N_DEFAULT
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         start,
  input  logic [N*N-1:0][N*N-1:0]      a_mat,
  output logic                         busy,
  output logic                         done,
  output logic [N*N-1:0]               pivot_mask,
  output logic [$clog2(N*N+1)-1:0]     rank,
  output logic [N*N-1:0]               za,
  output logic                         ker_valid,  // ker_x/ker_q hold a basis vector
  output logic [N*N-1:0]               ker_x,      // null-space basis vector x_f
  output logic [1:0]                   ker_q       // q(x_f) = x^T A x mod 4
);
  localparam int unsigned NN = N * N;
  localparam int unsigned IW = (NN > 1) ? $clog2(NN) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ELIM, S_NULL, S_DONE} state_e;

  state_e                   state;
  logic [NN-1:0][NN-1:0]    a_q;      // latched A
  logic [NN-1:0][NN-1:0]    m;        // matrix under reduction, row k = m[k]
  logic [NN-1:0][IW-1:0]    piv_col;  // pivot column of reduced row k
  logic [IW-1:0]            col;      // column being visited

  // ---- ELIM: one Gauss-Jordan column step -------------------------------
  logic                     found;
  logic [IW-1:0]            sel;      // row holding the new pivot
  logic [NN-1:0][NN-1:0]    m_next;

  always_comb begin
    logic [NN-1:0] prow, row;
    row   = '0;
    found = 1'b0;
    sel   = '0;
    for (int k = NN - 1; k >= 0; k--) begin
      if (k >= int'(rank) && m[k][col]) begin
        found = 1'b1;
        sel   = IW'(k);
      end
    end
    prow   = m[sel];
    m_next = m;
    if (found) begin
      for (int k = 0; k < NN; k++) begin
        row = m[k];
        if (k == int'(rank))     row = prow;
        else if (k == int'(sel)) row = m[rank];
        if (k != int'(rank) && row[col]) row = row ^ prow;
        m_next[k] = row;
      end
    end
  end

  // ---- NULL: basis vector of a free column and q(x) mod 4 ----------------
  logic [NN-1:0] xvec;
  logic [1:0]    qx;

  always_comb begin
    xvec      = '0;
    xvec[col] = 1'b1;
    for (int k = 0; k < NN; k++)
      if (k < int'(rank)) xvec[piv_col[k]] = m[k][col];
    qx = 2'd0;
    for (int i = 0; i < NN; i++)
      if (xvec[i]) qx = qx + 2'($countones(a_q[i] & xvec));
  end

  assign busy = (state == S_ELIM) || (state == S_NULL);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      a_q        <= '0;
      m          <= '0;
      piv_col    <= '0;
      col        <= '0;
      pivot_mask <= '0;
      rank       <= '0;
      za         <= '0;
      done       <= 1'b0;
      ker_valid  <= 1'b0;
      ker_x      <= '0;
      ker_q      <= '0;
    end else begin
      done      <= 1'b0;
      ker_valid <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            a_q        <= a_mat;
            m          <= a_mat;
            piv_col    <= '0;
            col        <= '0;
            pivot_mask <= '0;
            rank       <= '0;
            za         <= '0;
            state      <= S_ELIM;
          end
        end
        S_ELIM: begin
          if (found) begin
            m                <= m_next;
            piv_col[rank]    <= col;
            pivot_mask[col]  <= 1'b1;
            rank             <= rank + 1'b1;
          end
          if (col == IW'(NN - 1)) begin
            col   <= '0;
            state <= S_NULL;
          end else begin
            col <= col + 1'b1;
          end
        end
        S_NULL: begin
          if (!pivot_mask[col]) begin
            za[col]   <= qx[1];
            ker_valid <= 1'b1;
            ker_x     <= xvec;
            ker_q     <= qx;
          end
          if (col == IW'(NN - 1)) begin
            state <= S_DONE;
            done  <= 1'b1;
          end else begin
            col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // q(x) is even for every x in Ker(A).
  a_q_even: assert property (@(posedge clk) disable iff (rst)
                             (state == S_NULL && !pivot_mask[col]) |-> !qx[0]);

endmodule
