// tb_pattern_gen: self-checking test of the input-string generator at the
// default grid size (25 positions). For random pivot masks of up to 12 bits
// (plus the empty mask and a contiguous one) it checks: the first string
// comes 2 clocks after start, then exactly 2^rank strings on consecutive
// clocks, the k-th string is k spread over the pivot positions with all
// other positions 0, and busy falls after the last string.
module tb_pattern_gen;
  import hlf_ref_pkg::*;
  localparam int N = 5, NN = N * N;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, r_valid;
  logic [NN-1:0] mask, r_out;
  logic [$clog2(NN+1)-1:0] rank;

  pattern_gen #(.N(N)) dut (.clk(clk), .rst(rst), .start(start), .pivot_mask(mask),
    .rank(rank), .busy(busy), .r_valid(r_valid), .r_out(r_out));

  task automatic run(logic [NN-1:0] m);
    int r, wait_cyc;
    longint unsigned k;
    r = $countones(m);
    mask = m; rank = ($clog2(NN+1))'(r);
    start = 1;
    @(negedge clk);
    start = 0;
    wait_cyc = 1;
    while (!r_valid && wait_cyc < 10) begin @(negedge clk); wait_cyc++; end
    checks++;
    if (wait_cyc != 2) begin failures++; $display("FAIL first string after %0d clocks", wait_cyc); end
    k = 0;
    while (r_valid) begin
      checks++;
      if (r_out !== NN'(scatter(k, vec_t'(m)))) begin
        failures++;
        if (failures < 10) $display("FAIL k=%0d r=%h", k, r_out);
      end
      k++;
      @(negedge clk);
    end
    checks++;
    if (k != (64'd1 << r)) begin failures++; $display("FAIL count %0d for rank %0d", k, r); end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after run"); end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    start = 0; mask = '0; rank = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    run('0);
    run(NN'(25'h000_0003));
    run(NN'(25'h1f0_0000));
    for (int i = 0; i < 12; i++) begin
      logic [NN-1:0] m;
      m = '0;
      for (int j = 0; j < 1 + ($urandom % 12); j++) m[$urandom % NN] = 1'b1;
      run(m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
