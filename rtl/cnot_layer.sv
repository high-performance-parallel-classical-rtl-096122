// cnot_layer: the last layer of the parallel circuit, n CNOT gates
// controlled by the bits of the particular solution z^a, registered as Z.
//
// z_i <= y_i XOR z^a_i. Since every y is a vector of the column space of A
// and z^a is one solution, z runs over all solutions as y runs over Col(A).
//
// Interface: in_valid/in_y one sample, z_valid/z the solution one clock
// later. za is held steady for a whole run. Latency 1 cycle, one sample per
// cycle. Synchronous active-high reset clears the register (this design's
// choice).
module cnot_layer #(
  parameter int unsigned N = hlf_pkg::N_DEFAULT
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [N*N-1:0] za,     // particular solution z^a, the CNOT controls
  input  logic           in_valid,
  input  logic [N*N-1:0] in_y,
  output logic           z_valid,
  output logic [N*N-1:0] z
);
  always_ff @(posedge clk) begin
    if (rst) begin
      z_valid <= 1'b0;
      z       <= '0;
    end else begin
      z_valid <= in_valid;
      z       <= in_y ^ za;
    end
  end
endmodule
