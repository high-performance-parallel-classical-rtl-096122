// pattern_gen: input-string generator of the parallel circuit. It walks the
// substring R^(r) = R_p1 ... R_pr over all 2^r values while every R_i outside
// the pivot set P stays 0.
//
// As in the FPGA build, an adder adds 1 to the counter register R_C^0 every
// clock, and the counter bits are wired to the pivot positions of the
// register R^0; the other positions of R^0 are tied to ground. Counter bit k
// goes to the k-th pivot position in ascending vertex order. Here P arrives
// at run time as a mask (pivot_mask[p] = 1 for p in P) instead of being wired
// for one instance, and the walk stops by itself after 2^rank strings; both
// are this design's choices, made so one circuit serves every instance.
//
// Interface: a start pulse (while idle) begins a walk; pivot_mask and rank must
// stay steady until busy falls. r_valid/r_out give one string per clock,
// starting 2 clocks after start, 2^rank strings in all. busy is high from the
// clock after start until the last string has been issued. Synchronous
// active-high reset.
module pattern_gen #(
  parameter int unsigned N = hlf_pkg::N_DEFAULT
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       start,
  input  logic [N*N-1:0]             pivot_mask,  // P as a mask
  input  logic [$clog2(N*N+1)-1:0]   rank,        // r = popcount(pivot_mask)
  output logic                       busy,
  output logic                       r_valid,
  output logic [N*N-1:0]             r_out        // register R^0
);
  localparam int unsigned NN = N * N;

  logic          running;
  logic [NN-1:0] cnt;        // R_C^0
  logic [NN:0]   cnt_last;   // 2^rank - 1
  logic [NN-1:0] scattered;

  assign cnt_last = ({{NN{1'b0}}, 1'b1} << rank) - 1'b1;
  assign busy     = running;

  // Place counter bit k at the k-th set position of pivot_mask.
  always_comb begin
    int k;
    k = 0;
    scattered = '0;
    for (int v = 0; v < NN; v++) begin
      if (pivot_mask[v]) begin
        scattered[v] = cnt[k];
        k++;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      running <= 1'b0;
      cnt     <= '0;
      r_valid <= 1'b0;
      r_out   <= '0;
    end else begin
      r_valid <= running;
      if (running) begin
        r_out <= scattered;
        cnt   <= cnt + 1'b1;                       // ADD with constant 1
        if ({1'b0, cnt} == cnt_last) running <= 1'b0;
      end else if (start) begin
        running <= 1'b1;
        cnt     <= '0;
      end
    end
  end

  a_rank_fits: assert property (@(posedge clk) disable iff (rst)
                                start |-> 32'(rank) <= NN);

endmodule
