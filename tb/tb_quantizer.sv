// tb_quantizer: self-checking test of the column quantizer in both sizes the
// multiplier uses: 63 inputs to a 6-bit count and 7 inputs to a 3-bit count.
//
// Each cycle both quantizers get a fresh random column whose density of 1s
// is itself random, so every count from 0 to M is reached (each one is
// counted and a count never seen is a failure). The expected count comes
// from $countones and must appear exactly two cycles later.
module tb_quantizer;
  localparam int LATENCY = 2;
  localparam int unsigned M1 = 63, C1 = 6;
  localparam int unsigned M2 = 7, C2 = 3;

  logic clk = 1'b0;
  logic [M1-1:0] bits1;
  logic [M2-1:0] bits2;
  logic [C1-1:0] count1;
  logic [C2-1:0] count2;

  int checks = 0, failures = 0, cycle = 0;
  int seen1 [M1+1];
  int seen2 [M2+1];

  quantizer u_big (.clk, .bits(bits1), .count(count1));
  quantizer #(.M(M2)) u_small (.clk, .bits(bits2), .count(count2));

  always #5 clk = ~clk;

  logic [C1-1:0] exp1 [$];
  logic [C2-1:0] exp2 [$];

  function automatic logic [63:0] dense_word(input int unsigned ones);
    // A 64-bit word with about `ones` of its bits set at random places.
    logic [63:0] w;
    w = '0;
    for (int k = 0; k < 64; k++) begin
      int unsigned r;
      r = $urandom;
      if ((r % 64) < ones) w[k] = 1'b1;
    end
    return w;
  endfunction

  initial begin
    logic [63:0] w1, w2;
    bits1 = '0; bits2 = '0;
    for (int i = 0; i <= int'(M1); i++) seen1[i] = 0;
    for (int i = 0; i <= int'(M2); i++) seen2[i] = 0;
    for (int k = 0; k < 5000; k++) begin
      w1 = (k == 0) ? '1 : (k == 1) ? '0 : dense_word($urandom % 65);
      w2 = dense_word($urandom % 65);
      bits1 <= w1[M1-1:0];
      bits2 <= w2[M2-1:0];
      @(posedge clk);
      exp1.push_back(C1'($countones(w1[M1-1:0])));
      exp2.push_back(C2'($countones(w2[M2-1:0])));
      cycle++;
      if (cycle >= LATENCY) begin
        logic [C1-1:0] e1;
        logic [C2-1:0] e2;
        #1;
        e1 = exp1.pop_front();
        e2 = exp2.pop_front();
        checks += 2;
        if (count1 !== e1) begin failures++; $display("FAIL: M=63 got %0d exp %0d", count1, e1); end
        if (count2 !== e2) begin failures++; $display("FAIL: M=7 got %0d exp %0d", count2, e2); end
        seen1[e1]++;
        seen2[e2]++;
      end
    end
    for (int i = 0; i <= int'(M1); i++) if (seen1[i] == 0) begin
      failures++; $display("FAIL: count %0d of 63 never produced", i);
    end
    for (int i = 0; i <= int'(M2); i++) if (seen2[i] == 0) begin
      failures++; $display("FAIL: count %0d of 7 never produced", i);
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
