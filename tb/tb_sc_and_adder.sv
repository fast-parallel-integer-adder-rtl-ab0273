// tb_sc_and_adder: self-checking test of the two-tick SC_AND adder at its
// default width (N = 64).
//
// A stream of operand pairs (corner cases first, then random values with
// random gaps in in_valid) is driven one per cycle. Each accepted pair is
// queued with its expected sum, computed with the simulator's own wide
// addition, and the cycle it entered. Every out_valid must match the oldest
// queued entry and arrive exactly two cycles after it. A watchdog ends the
// run with a failure if it hangs.
module tb_sc_and_adder;
  localparam int unsigned N = 64;
  localparam int LATENCY = 2;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  logic [N-1:0] a, b;
  logic out_valid;
  logic [N-1:0] sum;
  logic carry;

  int checks = 0, failures = 0;
  int cycle = 0;

  sc_and_adder dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [N:0] expected;
    int         start;
  } item_t;
  item_t queue [$];

  function automatic logic [N-1:0] rand_word();
    return {$urandom, $urandom};
  endfunction

  // Scoreboard.
  int long_chains = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      item_t it;
      checks++;
      if (queue.size() == 0) begin
        failures++;
        $display("FAIL: result with no pending operands");
      end else begin
        it = queue.pop_front();
        if ({carry, sum} !== it.expected || cycle - it.start != LATENCY) begin
          failures++;
          $display("FAIL: got %0h_%0h exp %0h latency %0d", carry, sum, it.expected,
                   cycle - it.start);
        end
      end
    end
  end

  task automatic drive(input logic v, input logic [N-1:0] x, input logic [N-1:0] y);
    in_valid <= v;
    a <= x;
    b <= y;
    @(posedge clk);
    if (v) queue.push_back('{expected: {1'b0, x} + {1'b0, y}, start: cycle});
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // Corner cases: longest carry strings, carry out, no carries.
    drive(1, '1, 1);
    drive(1, '1, '1);
    drive(1, '0, '0);
    drive(1, {1'b0, {(N-1){1'b1}}}, 1);
    drive(1, {(N/2){2'b01}}, {(N/2){2'b11}});
    drive(1, {(N/2){2'b10}}, {(N/2){2'b10}});
    drive(1, 64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000);
    for (int k = 0; k < N; k++) drive(1, ~(N'(1) << k), N'(1));
    // Random stream.
    for (int k = 0; k < 3000; k++) begin
      logic [N-1:0] x, y;
      x = rand_word();
      y = rand_word();
      // Sometimes make y close to the complement of x for long strings.
      if (($urandom % 4) == 0) y = ~x + N'($urandom % 3);
      drive(($urandom % 8) != 0, x, y);
    end
    drive(0, '0, '0);
    repeat (LATENCY + 2) @(posedge clk);
    if (queue.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never appeared", queue.size());
    end
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
