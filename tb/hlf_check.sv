// hlf_check: end-to-end checker for one hlf_solver of grid side N. It drives
// start and b and watches every output. Instances: the paper's three of size
// N (N = 2: b = 0000, 1011, 1111; otherwise b = 0...0, 0...01, 0...011) when
// PAPER is set, then NRAND random diagonals. For every instance it checks:
//  - the rank (reference model, and the value the paper prints), the pivot
//    columns being independent, and z^a being a solution;
//  - the first solution leaving LATENCY + 2 clocks after cla_done and then
//    one solution per clock for 2^r clocks, done with the last one only;
//  - the k-th solution equal to z^a XOR A (k spread over the pivots);
//  - for N = 2, the set of solutions equal to the sets the paper lists;
//  - for n <= 16, that no solution repeats.
// It also counts how often each mechanism was exercised (see the outputs).
module hlf_check #(
  parameter int N     = 2,
  parameter int NRAND = 3,
  parameter bit PAPER = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst,
  output logic                       start,
  output logic [N*N-1:0]             b,
  input  logic                       busy,
  input  logic                       cla_done,
  input  logic [$clog2(N*N+1)-1:0]   rank,
  input  logic [N*N-1:0]             pivot_mask,
  input  logic [N*N-1:0]             za,
  input  logic                       z_valid,
  input  logic [N*N-1:0]             z,
  input  logic                       done,
  output logic                       finished,
  output int                         checks,
  output int                         failures,
  output int                         n_rank_deficient,  // instances with r < n (null space used)
  output int                         n_full_rank,       // instances with r = n
  output int                         n_toffoli,         // solutions where some b_i R_i = 1
  output int                         n_za_flip,         // solutions where the CNOT layer flipped bits
  output int                         n_solutions        // solutions streamed
);
  import hlf_ref_pkg::*;
  localparam int NN = N * N;
  localparam int LAT = (N == 2) ? 4 : 6;

  vec_t rows [NN];
  localparam int SEEN = (NN <= 16) ? (1 << NN) : 1;
  bit   seen [SEEN];

  task automatic one(logic [NN-1:0] bv, int paper_rank, string sols[$]);
    int rr, wait_cyc;
    longint unsigned k, total;
    vec_t rvec, exp_z;
    logic [NN-1:0] got[$];
    b = bv;
    for (int i = 0; i < NN; i++) rows[i] = adj_row(N, vec_t'(bv), i);
    start = 1;
    @(negedge clk);
    start = 0;
    wait_cyc = 0;
    while (!cla_done && wait_cyc < 4 * NN + 10) begin @(negedge clk); wait_cyc++; end
    rr = grid_rank(N, vec_t'(bv));
    checks++;
    if (!cla_done || int'(rank) != rr) begin
      failures++; $display("FAIL N=%0d b=%h rank %0d exp %0d", N, bv, rank, rr);
    end
    if (paper_rank >= 0) begin
      checks++;
      if (int'(rank) != paper_rank) begin failures++; $display("FAIL N=%0d rank %0d, paper %0d", N, rank, paper_rank); end
    end
    checks++;
    if ($countones(pivot_mask) != rr || masked_rank(N, vec_t'(bv), vec_t'(pivot_mask)) != rr) begin
      failures++; $display("FAIL N=%0d pivots %h", N, pivot_mask);
    end
    checks++;
    if (!is_solution(N, vec_t'(bv), vec_t'(za))) begin failures++; $display("FAIL N=%0d za %h", N, za); end
    if (rr < NN) n_rank_deficient++; else n_full_rank++;
    // pipeline delay
    wait_cyc = 0;
    @(negedge clk);
    wait_cyc++;
    while (!z_valid && wait_cyc < 20) begin @(negedge clk); wait_cyc++; end
    checks++;
    if (wait_cyc != LAT + 2) begin failures++; $display("FAIL N=%0d pipeline delay %0d", N, wait_cyc); end
    total = 64'd1 << rr;
    if (NN <= 16) begin
      for (int i = 0; i < SEEN; i++) seen[i] = 0;
    end
    for (k = 0; k < total; k++) begin
      rvec = scatter(k, vec_t'(pivot_mask));
      exp_z = '0;
      for (int i = 0; i < NN; i++) exp_z[i] = ^(rows[i] & rvec);
      exp_z = exp_z ^ vec_t'(za);
      checks++;
      if (!z_valid || z !== NN'(exp_z) || done !== (k == total - 1)) begin
        failures++;
        if (failures < 20) $display("FAIL N=%0d k=%0d valid=%0b z=%h exp=%h done=%0b", N, k, z_valid, z, exp_z[NN-1:0], done);
      end
      if ((vec_t'(bv) & rvec) != '0) n_toffoli++;
      if (za != '0) n_za_flip++;
      n_solutions++;
      if (NN <= 16) begin
        int zi;
        zi = int'(z) % SEEN;
        checks++;
        if (seen[zi]) begin failures++; $display("FAIL N=%0d repeated z %h", N, z); end
        seen[zi] = 1;
      end
      if (sols.size() > 0) got.push_back(z);
      @(negedge clk);
    end
    checks++;
    if (z_valid || busy) begin failures++; $display("FAIL N=%0d stream did not stop", N); end
    if (sols.size() > 0) begin
      checks++;
      if (got.size() != sols.size()) begin failures++; $display("FAIL N=%0d solution count", N); end
      foreach (sols[i]) begin
        int hit;
        hit = 0;
        foreach (got[j]) if (got[j] == NN'(from_str(sols[i]))) hit = 1;
        checks++;
        if (!hit) begin failures++; $display("FAIL N=%0d missing paper solution %s", N, sols[i]); end
      end
    end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [NN-1:0] bv;
    string none[$];
    checks = 0; failures = 0; finished = 0; start = 0; b = '0;
    n_rank_deficient = 0; n_full_rank = 0; n_toffoli = 0; n_za_flip = 0; n_solutions = 0;
    @(negedge clk);
    while (rst) @(negedge clk);
    if (PAPER) begin
      if (N == 2) begin
        one(NN'(from_str("0000")), 2, '{"0000", "0110", "1001", "1111"});
        one(NN'(from_str("1011")), 3, '{"0001", "0011", "0100", "0110",
                                        "1000", "1010", "1101", "1111"});
        one(NN'(from_str("1111")), 4, none);
      end else begin
        bv = '0;          one(bv, NN - N, none);
        bv[NN-1] = 1'b1;  one(bv, NN - N + 1, none);
        bv[NN-2] = 1'b1;  one(bv, NN - N + 2, none);
      end
    end
    for (int i = 0; i < NRAND; i++) one(NN'({$urandom, $urandom}), -1, none);
    finished = 1;
  end
endmodule
