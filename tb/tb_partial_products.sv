// tb_partial_products: self-checking test of the partial-product staircase
// at its default size (64 x 64).
//
// For random and corner-case operands every row i must equal a shifted left
// by i when b_i is 1 and zero otherwise, and the rows must add up to a*b
// (the simulator's own 128-bit product).
module tb_partial_products;
  localparam int unsigned N = 64;
  localparam int unsigned W = 2 * N;

  logic [N-1:0] a, b;
  logic [W-1:0] rows [N];
  int checks = 0, failures = 0;

  partial_products dut (.*);

  task automatic check(input logic [N-1:0] x, input logic [N-1:0] y);
    logic [W-1:0] total;
    a = x; b = y;
    #1;
    total = '0;
    for (int i = 0; i < int'(N); i++) begin
      logic [W-1:0] e;
      e = y[i] ? ({{N{1'b0}}, x} << i) : '0;
      checks++;
      if (rows[i] !== e) begin failures++; $display("FAIL: row %0d", i); end
      total = total + rows[i];
    end
    checks++;
    if (total !== {{N{1'b0}}, x} * {{N{1'b0}}, y}) begin
      failures++; $display("FAIL: rows do not add up to the product");
    end
  endtask

  initial begin
    check('1, '1);
    check('0, '1);
    check('1, 64'h8000_0000_0000_0001);
    for (int k = 0; k < 300; k++) check({$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
