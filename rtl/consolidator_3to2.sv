// consolidator_3to2: the 3-bit to 2-bit consolidation circuit of one column.
//
// Three bits of equal weight are replaced by the 2-bit binary count of their
// 1s: y[0] keeps the weight of the inputs and y[1] has twice that weight
// (a full adder). The circuit is an associative memory of 8 entries of 2
// bits addressed by the three bits, written here as a constant table.
// Combinational; the register that makes a one-tick stage is in csa_stage.
//
// The 8-entry, 2-bit table form follows the paper; the contents are the
// plain full-adder truth table.
module consolidator_3to2 (
  input  logic [2:0] x,
  output logic [1:0] y
);

  // Entry k holds the number of 1s in k.
  localparam logic [1:0] TABLE [8] = '{
    2'd0, 2'd1, 2'd1, 2'd2, 2'd1, 2'd2, 2'd2, 2'd3
  };

  assign y = TABLE[x];

endmodule
