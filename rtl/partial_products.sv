// partial_products: the N shifted partial products of an N x N unsigned
// multiplication.
//
// Row i is a AND b_i, placed i places to the left, as a 2N-bit integer. The
// N rows form the parallelogram staircase whose sum is a*b; the consolidation
// stages after this block reduce them to two integers for the final adder.
// The block is combinational (N*N AND gates); its delay is counted inside
// the first clock tick of the quantizer stage that follows.
//
// Forming the rows as a staircase follows the paper; doing it with plain AND
// gates and without a register of its own is this design's choice.
module partial_products #(
  parameter int unsigned N = fpa_pkg::DEFAULT_N
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] rows [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rows[i] = {{N{1'b0}}, (a & {N{b[i]}})} << i;
    end
  end

endmodule
