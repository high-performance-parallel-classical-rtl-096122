// parallel_circuit: the constant-depth classical parallel circuit (CPC) that
// maps an input string R to a solution z = (A R) XOR z^a of the FS2D HLF
// problem on an N x N grid.
//
// The red y wires start at 0. Four layers of ROUs (pink, green, orange, blue
// edges; see rou_layer) leave y_i = XOR of R_j over the grid neighbours j of
// i, the Toffoli layer adds b_i AND R_i, so y = A R, and the CNOT layer adds
// z^a. Every layer is one pipeline level with a register behind it, as in the
// paper's FPGA build. An edge layer with no edges (green and blue for N = 2)
// is left out, so the circuit has 3 levels for a 2 x 2 grid and 5 for larger
// grids, plus the output register Z.
//
// Interface: in_valid/in_r one input string per clock; z_valid/z the result
// LATENCY clocks later (LATENCY = 4 for N = 2, 6 for N >= 3). b and za must
// stay steady while samples are in flight. Synchronous active-high reset.
module parallel_circuit #(
  parameter int unsigned N = hlf_pkg::N_DEFAULT
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [N*N-1:0] b,        // diagonal of A, the instance
  input  logic [N*N-1:0] za,       // particular solution from the CLA module
  input  logic           in_valid,
  input  logic [N*N-1:0] in_r,     // input string R (R^0)
  output logic           z_valid,
  output logic [N*N-1:0] z
);
  localparam int unsigned NN      = N * N;
  localparam int unsigned LATENCY = hlf_pkg::edge_layers(N) + 2;

  // Stage s holds the sample after s edge layers; stage 0 is the input with
  // the y wires at zero.
  logic          st_valid [5];
  logic [NN-1:0] st_r     [5];
  logic [NN-1:0] st_y     [5];

  assign st_valid[0] = in_valid;
  assign st_r[0]     = in_r;
  assign st_y[0]     = '0;

  for (genvar l = 0; l < 4; l++) begin : g_layer
    if (hlf_pkg::layer_used(N, l)) begin : g_used
      rou_layer #(.N(N), .LAYER(l)) u_rou (
        .clk      (clk),
        .rst      (rst),
        .in_valid (st_valid[l]),
        .in_r     (st_r[l]),
        .in_y     (st_y[l]),
        .out_valid(st_valid[l+1]),
        .out_r    (st_r[l+1]),
        .out_y    (st_y[l+1])
      );
    end else begin : g_empty
      assign st_valid[l+1] = st_valid[l];
      assign st_r[l+1]     = st_r[l];
      assign st_y[l+1]     = st_y[l];
    end
  end

  logic          tof_valid;
  logic [NN-1:0] tof_y;

  toffoli_layer #(.N(N)) u_toffoli (
    .clk      (clk),
    .rst      (rst),
    .b        (b),
    .in_valid (st_valid[4]),
    .in_r     (st_r[4]),
    .in_y     (st_y[4]),
    .out_valid(tof_valid),
    .out_y    (tof_y)
  );

  cnot_layer #(.N(N)) u_cnot (
    .clk     (clk),
    .rst     (rst),
    .za      (za),
    .in_valid(tof_valid),
    .in_y    (tof_y),
    .z_valid (z_valid),
    .z       (z)
  );

  initial begin
    assert (N >= 2) else $error("parallel_circuit: N must be at least 2");
    assert (LATENCY >= 4) else $error("parallel_circuit: unexpected latency");
  end

endmodule
