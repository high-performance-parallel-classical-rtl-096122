// tb_cnot_layer: self-checking test of the final CNOT layer (N = 5). Random
// z^a and y; after one clock z must be y with every bit flipped where z^a is
// 1, and z_valid must follow in_valid by one clock.
module tb_cnot_layer;
  localparam int N = 5, NN = N * N;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [NN-1:0] za, in_y, z, e_z;
  logic in_valid, z_valid, e_v;
  int checks = 0, failures = 0;

  cnot_layer #(.N(N)) dut (.clk(clk), .rst(rst), .za(za), .in_valid(in_valid),
    .in_y(in_y), .z_valid(z_valid), .z(z));

  initial begin
    za = '0; in_y = '0; in_valid = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 500; t++) begin
      za = NN'({$urandom, $urandom}); in_y = NN'({$urandom, $urandom});
      in_valid = $urandom % 2;
      for (int i = 0; i < NN; i++) e_z[i] = za[i] ? !in_y[i] : in_y[i];
      e_v = in_valid;
      @(negedge clk);
      checks++;
      if (z !== e_z || z_valid !== e_v) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d z=%h exp=%h", t, z, e_z);
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
