// csa_stage: reduces three WIDTH-bit integers to two with the same sum, in
// one clock tick.
//
// Every place p has a consolidator_3to2 that replaces the three bits at p by
// their 2-bit count; the low bit goes to place p of the sum row and the high
// bit to place p+1 of the carry row. The carry out of place WIDTH-1 is
// dropped, so the sum is kept modulo 2^WIDTH.
//
// Interface: rows_in is sampled with in_valid at a rising edge; rows_out
// (row 0: sum row, row 1: carry row) and out_valid hold the result one edge
// later. rst_n (synchronous, active low) clears out_valid.
//
// The single-tick 3-to-2 stage made of 128 column circuits follows the
// paper; the row order and the truncation are this design's choices.
module csa_stage #(
  parameter int unsigned WIDTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] rows_in  [3],
  output logic             out_valid,
  output logic [WIDTH-1:0] rows_out [2]
);

  logic [WIDTH-1:0] s_row, c_row;

  for (genvar p = 0; p < WIDTH; p++) begin : g_col
    logic [1:0] y;
    consolidator_3to2 u_c (
      .x({rows_in[2][p], rows_in[1][p], rows_in[0][p]}),
      .y(y)
    );
    assign s_row[p] = y[0];
    if (p + 1 < WIDTH) begin : g_c
      assign c_row[p+1] = y[1];
    end
  end
  assign c_row[0] = 1'b0;

  always_ff @(posedge clk) begin
    rows_out[0] <= s_row;
    rows_out[1] <= c_row;
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
