// cla_check: drives one CLA module of grid side N through the paper's three
// instances of that size (b = 0...0, 0...01, 0...011; for N = 2 the printed
// strings 0000, 1011, 1111) and NRAND random diagonals. For each it checks,
// against the reference model: the rank, and the rank printed in the paper;
// that the pivot columns are r linearly independent columns; that z^a
// solves 2 z.x = q(x) mod 4 on Ker(A); that the n - r vectors on ker_x
// lie in Ker(A), are independent and carry the right q(x); and that done comes 2*N*N + 1 clocks
// after start. Results are summed in checks/failures; finished goes high at
// the end.
module cla_check #(
  parameter int N     = 2,
  parameter int NRAND = 4
) (
  input  logic clk,
  input  logic rst,
  output logic finished,
  output int   checks,
  output int   failures
);
  import hlf_ref_pkg::*;
  localparam int NN = N * N;

  logic start, busy, done;
  logic [NN-1:0][NN-1:0] a_mat;
  logic [NN-1:0] b, mask, za;
  logic [$clog2(NN+1)-1:0] rank;
  logic ker_valid;
  logic [NN-1:0] ker_x;
  logic [1:0] ker_q;

  cla_gf2 #(.N(N)) dut (.clk(clk), .rst(rst), .start(start), .a_mat(a_mat), .busy(busy),
    .done(done), .pivot_mask(mask), .rank(rank), .za(za), .ker_valid(ker_valid),
    .ker_x(ker_x), .ker_q(ker_q));

  // Null-space basis vectors seen during the current run.
  vec_t kers[$];
  always @(negedge clk)
    if (ker_valid) begin
      kers.push_back(vec_t'(ker_x));
      checks++;
      if (matvec(N, vec_t'(b), vec_t'(ker_x)) != '0 ||
          int'(ker_q) != qform(N, vec_t'(b), vec_t'(ker_x))) begin
        failures++;
        $display("FAIL N=%0d kernel vector %h q=%0d", N, ker_x, ker_q);
      end
    end

  always_comb
    for (int i = 0; i < NN; i++) a_mat[i] = NN'(adj_row(N, vec_t'(b), i));

  task automatic one(logic [NN-1:0] bv, int paper_rank);
    int lat, rr;
    b = bv;
    kers.delete();
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done && lat < 4 * NN + 10) begin @(negedge clk); lat++; end
    rr = grid_rank(N, vec_t'(bv));
    checks++;
    if (lat != 2 * NN + 1) begin failures++; $display("FAIL N=%0d latency %0d", N, lat); end
    checks++;
    if (int'(rank) != rr) begin failures++; $display("FAIL N=%0d b=%h rank %0d exp %0d", N, bv, rank, rr); end
    if (paper_rank >= 0) begin
      checks++;
      if (int'(rank) != paper_rank) begin failures++; $display("FAIL N=%0d b=%h rank %0d paper %0d", N, bv, rank, paper_rank); end
    end
    checks++;
    if ($countones(mask) != rr || masked_rank(N, vec_t'(bv), vec_t'(mask)) != rr) begin
      failures++; $display("FAIL N=%0d b=%h pivot mask %h", N, bv, mask);
    end
    @(negedge clk);   // the last kernel vector leaves together with done
    checks++;
    if (kers.size() != NN - rr || rank_of(kers) != NN - rr) begin
      failures++; $display("FAIL N=%0d b=%h %0d kernel vectors, rank %0d", N, bv, kers.size(), rank_of(kers));
    end
    checks++;
    if (!is_solution(N, vec_t'(bv), vec_t'(za))) begin
      failures++; $display("FAIL N=%0d b=%h za=%h not a solution", N, bv, za);
    end
    @(negedge clk);
  endtask

  initial begin
    logic [NN-1:0] bv;
    checks = 0; failures = 0; finished = 0; start = 0; b = '0;
    @(negedge clk);
    while (rst) @(negedge clk);
    if (N == 2) begin
      one(NN'(from_str("0000")), 2);
      one(NN'(from_str("1011")), 3);
      one(NN'(from_str("1111")), 4);
    end else begin
      bv = '0;            one(bv, NN - N);
      bv[NN-1] = 1'b1;    one(bv, NN - N + 1);
      bv[NN-2] = 1'b1;    one(bv, NN - N + 2);
    end
    for (int i = 0; i < NRAND; i++) one(NN'({$urandom, $urandom}), -1);
    finished = 1;
  end
endmodule
