// tb_pow2_incrementer: self-checking test of the one-tick add/subtract
// 2^pos unit at its default width (N = 64).
//
// Every cycle a random word (often with long runs of 1s or 0s above pos, so
// the complemented string is long) is sent with a random pos, enable and
// direction. The expected word and carry/borrow come from the simulator's
// own (N+1)-bit arithmetic. Results must appear exactly one cycle later.
// Counts of increments, decrements, carries and borrows are checked to be
// non-zero so every case is exercised.
module tb_pow2_incrementer;
  localparam int unsigned N = 64;
  localparam int unsigned PW = $clog2(N);
  localparam int LATENCY = 1;

  logic clk = 1'b0;
  logic rst_n, in_valid, en, dec;
  logic [N-1:0] x;
  logic [PW-1:0] pos;
  logic out_valid, carry;
  logic [N-1:0] y;

  int checks = 0, failures = 0, cycle = 0;
  int n_inc = 0, n_dec = 0, n_carry = 0, n_borrow = 0, n_pass = 0;

  pow2_incrementer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [N:0] expected;
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
        if ({carry, y} !== it.expected || cycle - it.start != LATENCY) begin
          failures++;
          $display("FAIL: got %0h_%0h exp %0h", carry, y, it.expected);
        end
      end
    end
  end

  task automatic drive(input logic [N-1:0] xv, input int p, input logic e, input logic d);
    logic [N:0] wide, step;
    in_valid <= 1'b1; x <= xv; pos <= PW'(p); en <= e; dec <= d;
    @(posedge clk);
    step = (N+1)'(e) << p;
    // Carry/borrow is bit N of the (N+1)-bit result.
    wide = d ? ({1'b0, xv} - step) : ({1'b0, xv} + step);
    queue.push_back('{expected: wide, start: cycle});
    if (!e) n_pass++;
    else if (d) begin n_dec++; if (wide[N]) n_borrow++; end
    else begin n_inc++; if (wide[N]) n_carry++; end
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; x = '0; pos = '0; en = 1'b0; dec = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    drive('1, 0, 1, 0);
    drive('0, 0, 1, 1);
    drive('1, N-1, 1, 0);
    drive('0, N-1, 1, 1);
    drive(64'h00ff_0000_0000_0000, 10, 0, 0);
    for (int k = 0; k < 4000; k++) begin
      logic [N-1:0] xv;
      int p;
      p  = $urandom % N;
      xv = {$urandom, $urandom};
      case ($urandom % 4)
        0: xv = xv | (~N'(0) << p);                  // 1s from pos up: long increment
        1: xv = xv & ~(~N'(0) << (p + ($urandom % (N - p))));  // run of 0s
        default: ;
      endcase
      drive(xv, p, ($urandom % 8) != 0, $urandom % 2);
    end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    if (queue.size() != 0) begin failures++; $display("FAIL: lost results"); end
    if (n_inc == 0 || n_dec == 0 || n_carry == 0 || n_borrow == 0 || n_pass == 0) begin
      failures++;
      $display("FAIL: case not exercised inc=%0d dec=%0d carry=%0d borrow=%0d pass=%0d",
               n_inc, n_dec, n_carry, n_borrow, n_pass);
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
