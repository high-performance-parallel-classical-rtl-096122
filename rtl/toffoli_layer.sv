// toffoli_layer: the classical Toffoli layer (layer 5) of the parallel
// circuit, followed by its pipeline register.
//
// For every vertex i one Toffoli gate with controls b_i and R_i and target
// y_i: y_i <= y_i XOR (b_i AND R_i), built as an AND gate feeding a one-bit
// adder as in the FPGA build. b is the diagonal of A (b_i = A_ii) and is held
// steady for a whole run. With the y coming out of the four ROU layers this
// gives y = A R over GF(2).
//
// Interface: in_valid/in_r/in_y one sample, out_valid/out_y the updated y one
// clock later (R is not needed after this layer). Latency 1 cycle, one sample
// per cycle. Synchronous active-high reset clears the registers (this
// design's choice).
module toffoli_layer #(
  parameter int unsigned N = hlf_pkg::N_DEFAULT
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [N*N-1:0] b,      // diagonal bits of A
  input  logic           in_valid,
  input  logic [N*N-1:0] in_r,
  input  logic [N*N-1:0] in_y,
  output logic           out_valid,
  output logic [N*N-1:0] out_y
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      out_y     <= in_y ^ (b & in_r);
    end
  end
endmodule
