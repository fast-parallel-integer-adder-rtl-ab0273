// tb_consolidator_3to2: exhaustive test of the 3-bit to 2-bit column
// circuit. All eight inputs are applied and the output must equal the
// number of 1s among them (sum bit = parity, carry bit = majority).
module tb_consolidator_3to2;
  logic [2:0] x;
  logic [1:0] y;
  int checks = 0, failures = 0;

  consolidator_3to2 dut (.*);

  initial begin
    for (int k = 0; k < 8; k++) begin
      logic [1:0] e;
      x = 3'(k);
      #1;
      e = {(x[0] & x[1]) | (x[0] & x[2]) | (x[1] & x[2]), ^x};
      checks++;
      if (y !== e) begin
        failures++;
        $display("FAIL: x=%b got %b exp %b", x, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
