// tb_toffoli_layer: self-checking test of the Toffoli layer (N = 5). Random
// b, R and y; after one clock y must be y XOR (b AND R), computed bit by bit
// here, and valid must follow in_valid by one clock.
module tb_toffoli_layer;
  localparam int N = 5, NN = N * N;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NN-1:0] b, in_r, in_y, out_y, e_y;
  logic in_valid, out_valid, e_v;
  int checks = 0, failures = 0;

  toffoli_layer #(.N(N)) dut (.clk(clk), .rst(rst), .b(b), .in_valid(in_valid),
    .in_r(in_r), .in_y(in_y), .out_valid(out_valid), .out_y(out_y));

  initial begin
    b = '0; in_r = '0; in_y = '0; in_valid = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 500; t++) begin
      b = NN'({$urandom, $urandom}); in_r = NN'({$urandom, $urandom});
      in_y = NN'({$urandom, $urandom}); in_valid = $urandom % 2;
      for (int i = 0; i < NN; i++) e_y[i] = (b[i] && in_r[i]) ? !in_y[i] : in_y[i];
      e_v = in_valid;
      @(negedge clk);
      checks++;
      if (out_y !== e_y || out_valid !== e_v) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d y=%h exp=%h", t, out_y, e_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
