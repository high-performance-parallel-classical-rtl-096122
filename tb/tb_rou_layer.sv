// tb_rou_layer: self-checking test of the ROU layer on a 5 x 5 grid.
// All four edge layers are instantiated side by side and fed the same random
// samples; each output is compared with y XOR R(partner), where the partner
// is worked out here from the edge colouring (pink/green: horizontal pairs
// from an even/odd column, orange/blue: vertical pairs from an even/odd row).
// A second check chains the four layers and compares with the XOR of R over
// all grid neighbours. Latency of one clock per layer is checked via valid.
module tb_rou_layer;
  import hlf_ref_pkg::*;
  localparam int N = 5, NN = N * N;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          in_valid;
  logic [NN-1:0] in_r, in_y;
  logic          ov [4];
  logic [NN-1:0] orr [4], oy [4];
  // chained layers
  logic          cv [5];
  logic [NN-1:0] cr [5], cy [5];

  for (genvar l = 0; l < 4; l++) begin : g_par
    rou_layer #(.N(N), .LAYER(l)) u_par (
      .clk(clk), .rst(rst), .in_valid(in_valid), .in_r(in_r), .in_y(in_y),
      .out_valid(ov[l]), .out_r(orr[l]), .out_y(oy[l]));
    rou_layer #(.N(N), .LAYER(l)) u_chain (
      .clk(clk), .rst(rst), .in_valid(cv[l]), .in_r(cr[l]), .in_y(cy[l]),
      .out_valid(cv[l+1]), .out_r(cr[l+1]), .out_y(cy[l+1]));
  end
  assign cv[0] = in_valid;
  assign cr[0] = in_r;
  assign cy[0] = '0;

  int checks = 0, failures = 0;

  function automatic int ref_partner(int layer, int v);
    int r, c;
    r = v / N; c = v % N;
    case (layer)
      0: if (c % 2 == 0 && c + 1 < N) return v + 1; else if (c % 2 == 1) return v - 1;
      1: if (c % 2 == 1 && c + 1 < N) return v + 1; else if (c % 2 == 0 && c > 0) return v - 1;
      2: if (r % 2 == 0 && r + 1 < N) return v + N; else if (r % 2 == 1) return v - N;
      default: if (r % 2 == 1 && r + 1 < N) return v + N; else if (r % 2 == 0 && r > 0) return v - N;
    endcase
    return -1;
  endfunction

  function automatic logic [NN-1:0] ref_layer(int layer, logic [NN-1:0] r, logic [NN-1:0] y);
    logic [NN-1:0] o;
    o = y;
    for (int v = 0; v < NN; v++)
      if (ref_partner(layer, v) >= 0) o[v] = y[v] ^ r[ref_partner(layer, v)];
    return o;
  endfunction

  logic [NN-1:0] hist_r [8], hist_y [8];
  logic          hist_v [8];

  initial begin
    in_valid = 0; in_r = '0; in_y = '0;
    for (int i = 0; i < 8; i++) begin hist_v[i] = 0; hist_r[i] = '0; hist_y[i] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 400; t++) begin
      // drive a new sample
      in_valid = ($urandom % 4) != 0;
      in_r = NN'({$urandom, $urandom});
      in_y = NN'({$urandom, $urandom});
      for (int i = 7; i > 0; i--) begin
        hist_v[i] = hist_v[i-1]; hist_r[i] = hist_r[i-1]; hist_y[i] = hist_y[i-1];
      end
      hist_v[0] = in_valid; hist_r[0] = in_r; hist_y[0] = in_y;
      @(negedge clk);
      // one-layer results belong to the sample driven one clock ago
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (ov[l] !== hist_v[0] || orr[l] !== hist_r[0] ||
            oy[l] !== ref_layer(l, hist_r[0], hist_y[0])) begin
          failures++;
          if (failures < 10) $display("FAIL layer %0d t=%0d y=%h exp=%h", l, t, oy[l],
                                      ref_layer(l, hist_r[0], hist_y[0]));
        end
      end
      // chained result: sample from 4 clocks ago, y = neighbour XOR of R
      if (t >= 4) begin
        logic [NN-1:0] e;
        e = NN'(matvec(N, '0, vec_t'(hist_r[3])));
        checks++;
        if (cv[4] !== hist_v[3] || cy[4] !== e || cr[4] !== hist_r[3]) begin
          failures++;
          if (failures < 10) $display("FAIL chain t=%0d y=%h exp=%h", t, cy[4], e);
        end
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
