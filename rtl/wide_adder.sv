// wide_adder: adds two 2N-bit integers in three clock ticks.
//
// The low and high N-bit halves are added at the same time by two
// sc_and_adder instances (two ticks). In the third tick the low half's
// carry is added to the high half's sum by a pow2_incrementer set to 2^0,
// while the low half's sum waits in a register. If the high adder already
// produced a carry, its sum is at most 2^N - 2, so adding one more cannot
// carry again; the final carry is therefore the OR of the two.
//
// Interface: a, b are sampled with in_valid at a rising edge; three edges
// later out_valid, sum, carry and low_carry (the carry that crossed from the
// low half into the high half) hold the result. A new pair may enter every
// cycle. rst_n (synchronous, active low) clears the valid bits.
//
// The two-half split, the increment step and the three-tick timing follow
// the paper; the valid handshake and the low_carry status output are this
// design's choices.
module wide_adder #(
  parameter int unsigned N = fpa_pkg::DEFAULT_N
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [2*N-1:0] a,
  input  logic [2*N-1:0] b,
  output logic           out_valid,
  output logic [2*N-1:0] sum,
  output logic           carry,
  output logic           low_carry
);

  logic         lo_valid, hi_valid;
  logic [N-1:0] lo_sum, hi_sum;
  logic         lo_carry, hi_carry;

  sc_and_adder #(.N(N)) u_lo (
    .clk, .rst_n, .in_valid,
    .a(a[N-1:0]), .b(b[N-1:0]),
    .out_valid(lo_valid), .sum(lo_sum), .carry(lo_carry)
  );

  sc_and_adder #(.N(N)) u_hi (
    .clk, .rst_n, .in_valid,
    .a(a[2*N-1:N]), .b(b[2*N-1:N]),
    .out_valid(hi_valid), .sum(hi_sum), .carry(hi_carry)
  );

  // Tick 3: high half plus the low carry; the low half and the high carry
  // are delayed to match.
  logic [N-1:0] inc_sum;
  logic         inc_carry;
  logic         inc_valid;
  logic [N-1:0] lo_sum_q;
  logic         hi_carry_q, lo_carry_q;

  pow2_incrementer #(.N(N)) u_inc (
    .clk, .rst_n,
    .in_valid(hi_valid),
    .x(hi_sum), .pos('0), .en(lo_carry), .dec(1'b0),
    .out_valid(inc_valid), .y(inc_sum), .carry(inc_carry)
  );

  always_ff @(posedge clk) begin
    lo_sum_q   <= lo_sum;
    lo_carry_q <= lo_carry;
    hi_carry_q <= hi_carry;
  end

  assign sum       = {inc_sum, lo_sum_q};
  assign carry     = hi_carry_q | inc_carry;
  assign low_carry = lo_carry_q;
  assign out_valid = inc_valid;

  // The two adders run in lock step, and the increment never carries when
  // the high half already did.
  a_lock_step: assert property (@(posedge clk) disable iff (!rst_n)
    lo_valid == hi_valid);
  a_single_carry: assert property (@(posedge clk) disable iff (!rst_n)
    inc_valid |-> !(hi_carry_q && inc_carry));

endmodule
