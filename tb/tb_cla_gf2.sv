// tb_cla_gf2: self-checking test of the CLA module at grid sides 2, 3, 4 and
// the default 5, each on the paper's instances of that size (whose ranks the
// paper prints) and on random diagonals. See cla_check for what is checked.
module tb_cla_gf2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic fin [4];
  int   c [4], f [4];
  int   checks, failures;

  cla_check #(.N(2), .NRAND(6)) u2 (.clk(clk), .rst(rst), .finished(fin[0]), .checks(c[0]), .failures(f[0]));
  cla_check #(.N(3), .NRAND(6)) u3 (.clk(clk), .rst(rst), .finished(fin[1]), .checks(c[1]), .failures(f[1]));
  cla_check #(.N(4), .NRAND(4)) u4 (.clk(clk), .rst(rst), .finished(fin[2]), .checks(c[2]), .failures(f[2]));
  cla_check #(.N(5), .NRAND(6)) u5 (.clk(clk), .rst(rst), .finished(fin[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    while (!(fin[0] && fin[1] && fin[2] && fin[3])) @(negedge clk);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3],
             f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end
endmodule
