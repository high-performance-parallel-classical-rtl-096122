// hlf_solver: the two-stage classical solver of the full-sampling 2D hidden
// linear function (FS2D HLF) problem on an N x N all-connected grid. Given
// the diagonal string b of the grid's matrix A, it streams every one of the
// 2^r solutions z, one per clock, where r is the binary rank of A.
//
// Stage 1 is the CLA module (cla_gf2), which finds the pivot set P, the rank
// r and one particular solution z^a. Stage 2 is the pattern generator, which
// walks the pivot bits of R over {0,1}^r, feeding the pipelined parallel
// circuit, which outputs z = (A R) XOR z^a. The off-diagonal part of A is
// the fixed grid; only b is an input. Building the CLA stage on the same
// chip, and the start/done control around it, are this design's choices:
// the paper's FPGA build took P and z^a from an offline computation.
//
// Interface: pulse start (while not busy) with b steady; b must stay steady
// until done. The CLA takes 2*N*N + 1 clocks and ends with a cla_done pulse;
// rank, pivot_mask and za are valid from then on, and during its run the
// null-space basis of A and the q value of each basis vector appear on
// ker_valid/ker_x/ker_q. The solutions then appear on z, z_valid high for
// 2^rank consecutive clocks, the first one LATENCY + 2 clocks after cla_done
// (8 for N >= 3, 6 for N = 2; LATENCY is the parallel circuit's). done
// pulses together with the last solution. Synchronous active-high reset
// (I_rst in the paper's FPGA build).
module hlf_solver #(
  parameter int unsigned N = hlf_pkg::N_DEFAULT
) (
  input  logic                       clk,          // I_sysclk
  input  logic                       rst,          // I_rst
  input  logic                       start,
  input  logic [N*N-1:0]             b,            // diagonal of A: the instance
  output logic                       busy,
  output logic                       cla_done,
  output logic [$clog2(N*N+1)-1:0]   rank,
  output logic [N*N-1:0]             pivot_mask,
  output logic [N*N-1:0]             za,
  output logic                       ker_valid,    // CLA: null-space basis vector valid
  output logic [N*N-1:0]             ker_x,        // CLA: basis vector of Ker(A)
  output logic [1:0]                 ker_q,        // CLA: q(x) = x^T A x mod 4
  output logic                       z_valid,
  output logic [N*N-1:0]             z,
  output logic                       done
);
  localparam int unsigned NN = N * N;

  // Grid adjacency with b on the diagonal.
  logic [NN-1:0][NN-1:0] a_mat;
  always_comb begin
    for (int i = 0; i < NN; i++)
      for (int j = 0; j < NN; j++)
        a_mat[i][j] = (i == j) ? b[i] : hlf_pkg::grid_adjacent(N, i, j);
  end

  logic cla_busy, pg_busy, pg_valid;
  logic [NN-1:0] pg_r;

  cla_gf2 #(.N(N)) u_cla (
    .clk       (clk),
    .rst       (rst),
    .start     (start && !busy),
    .a_mat     (a_mat),
    .busy      (cla_busy),
    .done      (cla_done),
    .pivot_mask(pivot_mask),
    .rank      (rank),
    .za        (za),
    .ker_valid (ker_valid),
    .ker_x     (ker_x),
    .ker_q     (ker_q)
  );

  pattern_gen #(.N(N)) u_pattern (
    .clk       (clk),
    .rst       (rst),
    .start     (cla_done),
    .pivot_mask(pivot_mask),
    .rank      (rank),
    .busy      (pg_busy),
    .r_valid   (pg_valid),
    .r_out     (pg_r)
  );

  parallel_circuit #(.N(N)) u_cpc (
    .clk     (clk),
    .rst     (rst),
    .b       (b),
    .za      (za),
    .in_valid(pg_valid),
    .in_r    (pg_r),
    .z_valid (z_valid),
    .z       (z)
  );

  // Count the solutions leaving the circuit; the last one ends the run.
  logic          running;
  logic [NN-1:0] out_cnt;
  logic [NN:0]   out_last;

  assign out_last = ({{NN{1'b0}}, 1'b1} << rank) - 1'b1;
  assign done     = z_valid && ({1'b0, out_cnt} == out_last);
  assign busy     = running;

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      out_cnt <= '0;
    end else begin
      if (start && !running) begin
        running <= 1'b1;
        out_cnt <= '0;
      end else if (done) begin
        running <= 1'b0;
      end else if (z_valid) begin
        out_cnt <= out_cnt + 1'b1;
      end
    end
  end

  a_valid_in_run: assert property (@(posedge clk) disable iff (rst) z_valid |-> running);
  a_cla_busy_in_run: assert property (@(posedge clk) disable iff (rst) cla_busy |-> running);
  a_pg_busy_in_run: assert property (@(posedge clk) disable iff (rst) pg_busy |-> running);

endmodule
