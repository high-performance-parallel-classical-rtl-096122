// tb_hlf_solver: end-to-end test of the two-stage solver at grid sides 2, 3
// and 4 (the 3 x 3 and 4 x 4 instances stream up to 2^16 solutions each).
// Each size runs the paper's three instances of that size and random ones;
// hlf_check does the checking. At the end every mechanism must have been
// exercised at least once: rank-deficient instances (null space and z^a
// computed), full-rank instances, Toffoli gates firing, the final CNOT layer
// flipping bits, and back-to-back streaming of solutions.
module tb_hlf_solver;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int K = 3;
  logic fin [K];
  int c [K], f [K], nd [K], nf [K], nt [K], nz [K], ns [K];
  int checks, failures;

  for (genvar g = 0; g < K; g++) begin : g_size
    localparam int N = g + 2;
    localparam int NN = N * N;
    logic start, busy, cla_done, z_valid, done;
    logic [NN-1:0] b, pivot_mask, za, z;
    logic [$clog2(NN+1)-1:0] rank;
    hlf_solver #(.N(N)) dut (.clk(clk), .rst(rst), .start(start), .b(b), .busy(busy),
      .cla_done(cla_done), .rank(rank), .pivot_mask(pivot_mask), .za(za),
      .z_valid(z_valid), .z(z), .done(done));
    hlf_check #(.N(N), .NRAND(g == 2 ? 2 : 6), .PAPER(1'b1)) chk (.clk(clk), .rst(rst),
      .start(start), .b(b), .busy(busy), .cla_done(cla_done), .rank(rank),
      .pivot_mask(pivot_mask), .za(za), .z_valid(z_valid), .z(z), .done(done),
      .finished(fin[g]), .checks(c[g]), .failures(f[g]), .n_rank_deficient(nd[g]),
      .n_full_rank(nf[g]), .n_toffoli(nt[g]), .n_za_flip(nz[g]), .n_solutions(ns[g]));
  end

  task automatic finish_run(int extra_fail);
    int sd, sf, st, sz, ss;
    checks = 0; failures = extra_fail; sd = 0; sf = 0; st = 0; sz = 0; ss = 0;
    for (int i = 0; i < K; i++) begin
      checks += c[i]; failures += f[i];
      sd += nd[i]; sf += nf[i]; st += nt[i]; sz += nz[i]; ss += ns[i];
    end
    $display("mechanisms: rank-deficient=%0d full-rank=%0d toffoli=%0d cnot-flip=%0d solutions=%0d",
             sd, sf, st, sz, ss);
    checks += 5;
    if (sd == 0) failures++;
    if (sf == 0) failures++;
    if (st == 0) failures++;
    if (sz == 0) failures++;
    if (ss == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    while (!(fin[0] && fin[1] && fin[2])) @(negedge clk);
    finish_run(0);
  end
  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    finish_run(1);
  end
endmodule
