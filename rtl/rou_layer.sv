// rou_layer: one layer of rectangle operation units (ROUs) of the classical
// parallel circuit, followed by its pipeline register.
//
// An ROU sits on one grid edge (i, j) and is a pair of classical CNOT gates:
// y_i <= y_i XOR R_j and y_j <= y_j XOR R_i, while R_i and R_j pass on
// unchanged. A CNOT on one bit is a one-bit adder (sum output), as in the
// FPGA build. LAYER selects which of the four edge colours this layer holds
// (see hlf_pkg); a vertex with no edge in the layer passes its y unchanged.
// After the four edge layers every y_i is the XOR of R over the neighbours of
// vertex i.
//
// Interface: in_valid/in_r/in_y are one sample; out_* are the same sample one
// clock later. Latency 1 cycle, one sample per cycle. Reset (synchronous,
// active high) clears the registers; the reset value is this design's choice.
module rou_layer #(
  parameter int unsigned N     = hlf_pkg::N_DEFAULT,  // grid side
  parameter int unsigned LAYER = 0                    // 0 pink, 1 green, 2 orange, 3 blue
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           in_valid,
  input  logic [N*N-1:0] in_r,   // black wires R
  input  logic [N*N-1:0] in_y,   // red wires y
  output logic           out_valid,
  output logic [N*N-1:0] out_r,
  output logic [N*N-1:0] out_y
);
  localparam int unsigned NN = N * N;

  logic [NN-1:0] y_next;

  for (genvar v = 0; v < NN; v++) begin : g_vertex
    localparam int P = hlf_pkg::partner(N, LAYER, v);
    if (P >= 0) begin : g_rou
      assign y_next[v] = in_y[v] ^ in_r[P];
    end else begin : g_idle
      assign y_next[v] = in_y[v];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_r     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      out_r     <= in_r;
      out_y     <= y_next;
    end
  end

endmodule
