// tb_csa_stage: self-checking test of the one-tick 3-to-2 stage at its
// default width (128 bits).
//
// Three random rows are driven each cycle. One cycle later the sum row must
// be the bitwise XOR of the three rows, the carry row the bitwise majority
// shifted one place left, and the two rows must add up to the three inputs
// modulo 2^128. All sums are computed by the simulator's own arithmetic.
module tb_csa_stage;
  localparam int unsigned W = 128;
  localparam int LATENCY = 1;

  logic clk = 1'b0;
  logic rst_n, in_valid, out_valid;
  logic [W-1:0] rows_in [3];
  logic [W-1:0] rows_out [2];

  int checks = 0, failures = 0, cycle = 0;

  csa_stage dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [W-1:0] x, y, z;
    int           start;
  } item_t;
  item_t queue [$];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      item_t it;
      checks++;
      if (queue.size() == 0) begin
        failures++; $display("FAIL: unexpected result");
      end else begin
        it = queue.pop_front();
        if (rows_out[0] !== (it.x ^ it.y ^ it.z) ||
            rows_out[1] !== (((it.x & it.y) | (it.x & it.z) | (it.y & it.z)) << 1) ||
            W'(rows_out[0] + rows_out[1]) !== W'(it.x + it.y + it.z) ||
            cycle - it.start != LATENCY) begin
          failures++;
          $display("FAIL: rows %0h %0h for %0h %0h %0h", rows_out[0], rows_out[1], it.x, it.y, it.z);
        end
      end
    end
  end

  function automatic logic [W-1:0] rand_word();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    for (int r = 0; r < 3; r++) rows_in[r] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int k = 0; k < 2000; k++) begin
      logic [W-1:0] x, y, z;
      logic v;
      x = (k == 0) ? '1 : rand_word();
      y = (k == 0) ? '1 : rand_word();
      z = (k == 0) ? '1 : rand_word();
      v = ($urandom % 8) != 0;
      in_valid <= v; rows_in[0] <= x; rows_in[1] <= y; rows_in[2] <= z;
      @(posedge clk);
      if (v) queue.push_back('{x: x, y: y, z: z, start: cycle});
    end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    if (queue.size() != 0) begin failures++; $display("FAIL: lost results"); end
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
