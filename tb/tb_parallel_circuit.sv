// tb_parallel_circuit: self-checking test of the parallel circuit at N = 5
// (five layers) and N = 2 (three layers, no green or blue edges). Random
// instances b, z^a and a stream of random input strings R, one per clock
// with gaps; every output must equal (A R) XOR z^a from the reference
// matrix-vector product and must leave exactly LATENCY clocks (6 for N = 5,
// 4 for N = 2) after its input entered.
module tb_parallel_circuit;
  import hlf_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- N = 5 ----
  localparam int NA = 5, NNA = NA * NA, LA = 6;
  logic [NNA-1:0] b5, za5, r5, z5;
  logic v5, zv5;
  parallel_circuit #(.N(NA)) dut5 (.clk(clk), .rst(rst), .b(b5), .za(za5),
    .in_valid(v5), .in_r(r5), .z_valid(zv5), .z(z5));

  // ---- N = 2 ----
  localparam int NB = 2, NNB = NB * NB, LB = 4;
  logic [NNB-1:0] b2, za2, r2, z2;
  logic v2, zv2;
  parallel_circuit #(.N(NB)) dut2 (.clk(clk), .rst(rst), .b(b2), .za(za2),
    .in_valid(v2), .in_r(r2), .z_valid(zv2), .z(z2));

  logic [NNA-1:0] h5 [16];
  logic           hv5 [16];
  logic [NNB-1:0] h2 [16];
  logic           hv2 [16];
  int nvalid = 0;

  initial begin
    b5 = '0; za5 = '0; r5 = '0; v5 = 0; b2 = '0; za2 = '0; r2 = '0; v2 = 0;
    for (int i = 0; i < 16; i++) begin h5[i] = '0; hv5[i] = 0; h2[i] = '0; hv2[i] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int inst = 0; inst < 8; inst++) begin
      // new instance: pipeline drained (invalid samples) before b/za change
      v5 = 0; v2 = 0;
      repeat (8) begin
        @(negedge clk);
        for (int i = 15; i > 0; i--) begin h5[i] = h5[i-1]; hv5[i] = hv5[i-1];
                                           h2[i] = h2[i-1]; hv2[i] = hv2[i-1]; end
        hv5[0] = 0; hv2[0] = 0;
      end
      b5 = NNA'({$urandom, $urandom}); za5 = NNA'({$urandom, $urandom});
      b2 = NNB'($urandom); za2 = NNB'($urandom);
      for (int t = 0; t < 200; t++) begin
        v5 = ($urandom % 5) != 0; r5 = NNA'({$urandom, $urandom});
        v2 = ($urandom % 5) != 0; r2 = NNB'($urandom);
        for (int i = 15; i > 0; i--) begin h5[i] = h5[i-1]; hv5[i] = hv5[i-1];
                                           h2[i] = h2[i-1]; hv2[i] = hv2[i-1]; end
        h5[0] = r5; hv5[0] = v5; h2[0] = r2; hv2[0] = v2;
        @(negedge clk);
        // output now belongs to the sample driven LATENCY-1 iterations ago
        checks++;
        if (zv5 !== hv5[LA-1] ||
            (zv5 && z5 !== (NNA'(matvec(NA, vec_t'(b5), vec_t'(h5[LA-1]))) ^ za5))) begin
          failures++;
          if (failures < 10) $display("FAIL N=5 t=%0d z=%h", t, z5);
        end
        checks++;
        if (zv2 !== hv2[LB-1] ||
            (zv2 && z2 !== (NNB'(matvec(NB, vec_t'(b2), vec_t'(h2[LB-1]))) ^ za2))) begin
          failures++;
          if (failures < 10) $display("FAIL N=2 t=%0d z=%h", t, z2);
        end
        if (zv5) nvalid++;
      end
    end
    checks++;
    if (nvalid < 500) begin failures++; $display("too few valid outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
