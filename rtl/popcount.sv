// popcount -- number of asserted bits of an N-bit vector.
//
// Built as a balanced binary adder tree, the structure the area model of the
// design assumes for a popcount unit: the N input bits are the leaves, each
// level adds neighbouring partial sums pairwise (distance 1, 2, 4, ...), and
// the root holds the count.  Every partial sum is carried at the full output
// width; synthesis trims the unused upper bits of the lower levels.
//
// Interface: bits_i (N bits) in, count_o (floor(log2 N)+1 bits) out.
// Timing: purely combinational, about ceil(log2 N) adder levels deep.
module popcount #(
  parameter int unsigned N = 9,
  localparam int unsigned W = bnn_pkg::cnt_width(N)
) (
  input  logic [N-1:0] bits_i,
  output logic [W-1:0] count_o
);

  logic [W-1:0] partial [N];

  always_comb begin
    for (int unsigned i = 0; i < N; i++) partial[i] = W'(bits_i[i]);
    // Level with distance 'step': node i (a multiple of 2*step) absorbs node
    // i+step.  After the last level node 0 holds the sum of all leaves.
    for (int unsigned step = 1; step < N; step = step * 2) begin
      for (int unsigned i = 0; i + step < N; i = i + 2 * step) begin
        partial[i] = partial[i] + partial[i + step];
      end
    end
    count_o = partial[0];
  end

endmodule
