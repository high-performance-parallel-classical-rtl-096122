// tb_hlf_full: the solver at its default size, a 5 x 5 grid (25 channels),
// run on the paper's three 5 x 5 instances b = 0^(25), 0^(24)1 and 0^(23)11,
// whose ranks the paper gives as 20, 21 and 22. All 2^20 + 2^21 + 2^22
// solutions are streamed and each is checked against the reference model
// (hlf_check); the stream of each instance must take 2^r clocks after the
// pipeline delay, i.e. about 10.5, 21 and 42 ms at a 100 MHz clock.
module tb_hlf_full;
  localparam int N = hlf_pkg::N_DEFAULT;
  localparam int NN = N * N;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic start, busy, cla_done, z_valid, done, fin;
  logic [NN-1:0] b, pivot_mask, za, z;
  logic [$clog2(NN+1)-1:0] rank;
  int checks, failures, nd, nf, nt, nz, ns;

  hlf_solver dut (.clk(clk), .rst(rst), .start(start), .b(b), .busy(busy),
    .cla_done(cla_done), .rank(rank), .pivot_mask(pivot_mask), .za(za),
    .z_valid(z_valid), .z(z), .done(done));

  hlf_check #(.N(N), .NRAND(0), .PAPER(1'b1)) chk (.clk(clk), .rst(rst),
    .start(start), .b(b), .busy(busy), .cla_done(cla_done), .rank(rank),
    .pivot_mask(pivot_mask), .za(za), .z_valid(z_valid), .z(z), .done(done),
    .finished(fin), .checks(checks), .failures(failures), .n_rank_deficient(nd),
    .n_full_rank(nf), .n_toffoli(nt), .n_za_flip(nz), .n_solutions(ns));

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    while (!fin) @(negedge clk);
    $display("solutions streamed: %0d (expected %0d)", ns, (1 << 20) + (1 << 21) + (1 << 22));
    if (ns != (1 << 20) + (1 << 21) + (1 << 22)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures);
    $finish;
  end
  initial begin
    repeat (8000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
