// tb_wide_adder: self-checking test of the three-tick 2N-bit adder at its
// default size (two 64-bit halves, 128-bit operands).
//
// Operand pairs stream in one per cycle with random gaps. Expected sums,
// final carries and the carry crossing from the low half to the high half
// come from the simulator's own 129-bit addition. Each result must arrive
// exactly three cycles after its operands. The run also counts the cases
// that matter to the construction (low carry into the high half, final
// carry from the high adder, final carry from the increment) and fails if
// any never occurred.
module tb_wide_adder;
  localparam int unsigned N = 64;
  localparam int unsigned W = 2 * N;
  localparam int LATENCY = 3;

  logic clk = 1'b0;
  logic rst_n, in_valid;
  logic [W-1:0] a, b;
  logic out_valid, carry, low_carry;
  logic [W-1:0] sum;

  int checks = 0, failures = 0, cycle = 0;
  int n_low = 0, n_hi_carry = 0, n_inc_carry = 0;

  wide_adder dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [W:0] expected;
    logic       low;
    int         start;
  } item_t;
  item_t queue [$];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      item_t it;
      checks++;
      if (queue.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result");
      end else begin
        it = queue.pop_front();
        if ({carry, sum} !== it.expected || low_carry !== it.low ||
            cycle - it.start != LATENCY) begin
          failures++;
          $display("FAIL: got %0h_%0h low %0b exp %0h low %0b lat %0d", carry, sum,
                   low_carry, it.expected, it.low, cycle - it.start);
        end
      end
    end
  end

  task automatic drive(input logic v, input logic [W-1:0] x, input logic [W-1:0] y);
    logic [W:0] full;
    logic [N:0] lo, hi;
    in_valid <= v; a <= x; b <= y;
    @(posedge clk);
    if (v) begin
      full = {1'b0, x} + {1'b0, y};
      lo   = {1'b0, x[N-1:0]} + {1'b0, y[N-1:0]};
      hi   = {1'b0, x[W-1:N]} + {1'b0, y[W-1:N]};
      queue.push_back('{expected: full, low: lo[N], start: cycle});
      if (lo[N]) n_low++;
      if (hi[N]) n_hi_carry++;
      if (!hi[N] && full[W]) n_inc_carry++;
    end
  endtask

  function automatic logic [W-1:0] rand_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    drive(1, '1, 1);                                   // carry ripples through both halves
    drive(1, {{N{1'b0}}, {N{1'b1}}}, 1);               // low carry only
    drive(1, '1, '1);
    drive(1, '0, '0);
    drive(1, {1'b1, {(W-1){1'b0}}}, {1'b1, {(W-1){1'b0}}});
    for (int k = 0; k < 3000; k++) begin
      logic [W-1:0] x, y;
      x = rand_word();
      y = rand_word();
      if (($urandom % 4) == 0) y = ~x + W'($urandom % 3);
      drive(($urandom % 8) != 0, x, y);
    end
    drive(0, '0, '0);
    repeat (LATENCY + 2) @(posedge clk);
    if (queue.size() != 0) begin failures++; $display("FAIL: lost results"); end
    if (n_low == 0 || n_hi_carry == 0 || n_inc_carry == 0) begin
      failures++;
      $display("FAIL: case not exercised low=%0d hi=%0d inc=%0d", n_low, n_hi_carry, n_inc_carry);
    end
    $display("low-half carries %0d, high adder carries %0d, increment carries %0d",
             n_low, n_hi_carry, n_inc_carry);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
