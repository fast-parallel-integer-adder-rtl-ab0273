// tb_fpa_multiplier: end-to-end test of the multiplier at its default size
// (64 x 64 -> 128 bits), with no parameter overridden.
//
// Operand pairs stream in at one per cycle, with occasional idle cycles and
// one synchronous reset in the middle of the stream that must flush the
// products then in flight. Every product is compared with the simulator's
// own 128-bit multiplication and must arrive exactly eight cycles after its
// operands (2 + 2 ticks of quantizer stages, 1 tick of 3-to-2 stage, 3
// ticks of wide adder).
//
// The run counts how often each mechanism of the design was used and fails
// if one never was: a row left out of the first quantizer stage (b's top
// bit set), a first-stage column count of 32 or more (the top count bit),
// a second-stage column count of 4 or more, a carry from the low half to
// the high half of the final adder, back-to-back products, and the reset
// flush. The final adder's carry out must stay 0: the two final rows add up
// to the product exactly, because every stage drops only bits of weight
// 2^128 and above and the product is below 2^128.
module tb_fpa_multiplier;
  localparam int unsigned N = 64;
  localparam int unsigned W = 2 * N;
  localparam int LATENCY = 8;

  logic clk = 1'b0;
  logic rst_n, in_valid;
  logic [N-1:0] a, b;
  logic out_valid;
  logic [W-1:0] product;

  int checks = 0, failures = 0, cycle = 0;
  int n_left = 0, n_q1_top = 0, n_q2_top = 0, n_low_carry = 0;
  int n_back_to_back = 0, n_flushed = 0;

  fpa_multiplier dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [W-1:0] expected;
    int           start;
  } item_t;
  item_t queue [$];

  // Scoreboard.
  logic prev_valid = 1'b0;
  always @(posedge clk) begin
    prev_valid <= rst_n && out_valid;
    if (rst_n && out_valid) begin
      item_t it;
      checks++;
      if (prev_valid) n_back_to_back++;
      if (dut.u_add.low_carry) n_low_carry++;
      checks++;
      if (dut.u_add.carry) begin failures++; $display("FAIL: final adder carried out"); end
      if (queue.size() == 0) begin
        failures++; $display("FAIL: product with no operands pending");
      end else begin
        it = queue.pop_front();
        if (product !== it.expected || cycle - it.start != LATENCY) begin
          failures++;
          $display("FAIL: product %0h expected %0h latency %0d", product, it.expected,
                   cycle - it.start);
        end
      end
    end
  end

  // Mechanism counters inside the stages.
  always @(posedge clk) begin
    if (rst_n && dut.v1) begin
      if (dut.s1[6] != '0) n_left++;
      if (dut.s1[5] != '0) n_q1_top++;
    end
    if (rst_n && dut.v2 && dut.s2[2] != '0) n_q2_top++;
  end

  function automatic logic [N-1:0] operand(input int unsigned kind);
    logic [N-1:0] w;
    w = {$urandom, $urandom};
    case (kind)
      0: w = '1;
      1: w = w | {$urandom, $urandom} | {$urandom, $urandom};   // dense
      2: w = w & {$urandom, $urandom};                           // sparse
      default: ;
    endcase
    return w;
  endfunction

  task automatic drive(input logic v, input logic [N-1:0] x, input logic [N-1:0] y);
    in_valid <= v; a <= x; b <= y;
    @(posedge clk);
    if (v) queue.push_back('{expected: {{N{1'b0}}, x} * {{N{1'b0}}, y}, start: cycle});
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    drive(1, '1, '1);
    drive(1, '0, '1);
    drive(1, 1, 1);
    drive(1, {1'b1, {(N-1){1'b0}}}, {1'b1, {(N-1){1'b0}}});
    for (int k = 0; k < 1500; k++) begin
      int unsigned ka, kb;
      ka = $urandom % 4;
      kb = $urandom % 4;
      drive(($urandom % 10) != 0, operand(ka), operand(kb));
    end
    // Reset while products are in flight: they must be discarded.
    drive(1, '1, '1);
    drive(1, 3, 5);
    rst_n <= 1'b0;
    #1;
    n_flushed = queue.size();
    queue.delete();
    drive(0, '0, '0);
    rst_n <= 1'b1;
    drive(0, '0, '0);
    for (int k = 0; k < 500; k++) drive(1, operand($urandom % 4), operand($urandom % 4));
    drive(0, '0, '0);
    repeat (LATENCY + 2) @(posedge clk);
    if (queue.size() != 0) begin failures++; $display("FAIL: %0d products lost", queue.size()); end
    $display("left-out row %0d, stage-1 top count bit %0d, stage-2 top count bit %0d",
             n_left, n_q1_top, n_q2_top);
    $display("low-half carry %0d, back-to-back %0d, flushed by reset %0d",
             n_low_carry, n_back_to_back, n_flushed);
    if (n_left == 0 || n_q1_top == 0 || n_q2_top == 0 || n_low_carry == 0 ||
        n_back_to_back == 0 || n_flushed == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
