// fpa_multiplier: N x N unsigned multiplier that delivers a product every
// cycle, eight cycles after its operands.
//
// The N shifted partial products (partial_products) are consolidated in
// three stages and then added:
//   ticks 1-2  quantizer_stage: N-1 rows are counted column by column by
//              (N-1)-bit quantizers into log2(N) rows; the last row is
//              left out, giving log2(N)+1 rows (64 -> 7 for N = 64);
//   ticks 3-4  quantizer_stage: all log2(N)+1 rows are counted again into
//              3 rows (7 -> 3);
//   tick  5    csa_stage: 3 rows -> 2 rows by 3-bit to 2-bit circuits;
//   ticks 6-8  wide_adder: the two 2N-bit rows are added by two N-bit
//              SC_AND adders and a final increment by the low half's carry.
// Every stage keeps the sum modulo 2^(2N), and the product of two N-bit
// numbers is below 2^(2N), so the result is exact.
//
// Interface: a, b are sampled with in_valid at a rising clock edge; after
// eight edges out_valid is high and product holds a*b. rst_n (synchronous,
// active low) clears the valid pipeline; data registers are not reset.
//
// The stage sequence, their sizes for N = 64 and the 2 + 2 + 1 + 3 tick
// budget follow the paper. The same construction is used for other N, which
// is legal when the second stage ends with three rows (N = 8, 16, 32, 64).
module fpa_multiplier #(
  parameter int unsigned N = fpa_pkg::DEFAULT_N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic           out_valid,
  output logic [2*N-1:0] product
);

  localparam int unsigned W    = 2 * N;
  localparam int unsigned Q1   = N - 1;                              // rows counted in stage 1
  localparam int unsigned R1   = fpa_pkg::count_width(Q1) + N - Q1;  // rows after stage 1
  localparam int unsigned R2   = fpa_pkg::count_width(R1);           // rows after stage 2

  if (R2 != 3) begin : g_bad_size
    $error("fpa_multiplier: N = %0d does not end stage 2 with three rows", N);
  end

  logic [W-1:0] pp [N];
  logic [W-1:0] s1 [R1];
  logic [W-1:0] s2 [R2];
  logic [W-1:0] s3 [2];
  logic         v1, v2, v3;
  logic         add_carry, add_low_carry;

  partial_products #(.N(N)) u_pp (.a, .b, .rows(pp));

  quantizer_stage #(.ROWS_IN(N), .ROWS_Q(Q1), .WIDTH(W)) u_stage1 (
    .clk, .rst_n, .in_valid,
    .rows_in(pp), .out_valid(v1), .rows_out(s1)
  );

  quantizer_stage #(.ROWS_IN(R1), .ROWS_Q(R1), .WIDTH(W)) u_stage2 (
    .clk, .rst_n, .in_valid(v1),
    .rows_in(s1), .out_valid(v2), .rows_out(s2)
  );

  csa_stage #(.WIDTH(W)) u_stage3 (
    .clk, .rst_n, .in_valid(v2),
    .rows_in(s2), .out_valid(v3), .rows_out(s3)
  );

  wide_adder #(.N(N)) u_add (
    .clk, .rst_n, .in_valid(v3),
    .a(s3[0]), .b(s3[1]),
    .out_valid, .sum(product), .carry(add_carry), .low_carry(add_low_carry)
  );

  // The final adder's carry and low-half carry are not needed for the
  // product (it fits in 2N bits); they remain visible for observation.
  logic unused_status;
  assign unused_status = add_carry ^ add_low_carry;

endmodule
