// tb_quantizer_stage: self-checking test of the two quantizer stages of the
// multiplier: 64 rows (63 counted, 1 left out) to 7 rows, and 7 rows to 3
// rows, both 128 bits wide (the default sizes and the second-stage sizes).
//
// Random rows with random density are driven each cycle. Two cycles later,
// for every place p, bit q of the count of 1s among the counted rows at p
// must sit at place p+q of output row q; the left-out row must come out
// unchanged; and the output rows must add up to the input rows modulo
// 2^128. Expected values come from $countones and the simulator's own
// additions.
module tb_quantizer_stage;
  localparam int unsigned W = 128;
  localparam int LATENCY = 2;

  logic clk = 1'b0;
  logic rst_n, in_valid;
  logic [W-1:0] big_in [64];
  logic [W-1:0] big_out [7];
  logic [W-1:0] small_in [7];
  logic [W-1:0] small_out [3];
  logic big_valid, small_valid;

  int checks = 0, failures = 0, cycle = 0;

  quantizer_stage u_big (
    .clk, .rst_n, .in_valid, .rows_in(big_in), .out_valid(big_valid), .rows_out(big_out)
  );
  quantizer_stage #(.ROWS_IN(7), .ROWS_Q(7), .WIDTH(W)) u_small (
    .clk, .rst_n, .in_valid, .rows_in(small_in), .out_valid(small_valid), .rows_out(small_out)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [W-1:0] rows1 [64];
    logic [W-1:0] rows2 [7];
    int           start;
  } item_t;
  item_t queue [$];

  function automatic logic [W-1:0] rand_row(input int unsigned density);
    logic [W-1:0] w;
    for (int k = 0; k < int'(W); k++) begin
      int unsigned r;
      r = $urandom;
      w[k] = (r % 16) < density;
    end
    return w;
  endfunction

  task automatic check_stage(input string name, input int rin, input int rq, input int cw,
                             input logic [W-1:0] rows_in [], input logic [W-1:0] rows_out []);
    logic [W-1:0] total_in, total_out;
    total_in = '0;
    total_out = '0;
    for (int r = 0; r < rin; r++) total_in = total_in + rows_in[r];
    for (int r = 0; r < rows_out.size(); r++) total_out = total_out + rows_out[r];
    checks++;
    if (total_in !== total_out) begin failures++; $display("FAIL: %s sums differ", name); end
    for (int p = 0; p < int'(W); p++) begin
      int n;
      n = 0;
      for (int r = 0; r < rq; r++) n += int'(rows_in[r][p]);
      for (int q = 0; q < cw && p + q < int'(W); q++) begin
        checks++;
        if (rows_out[q][p+q] !== 1'(n >> q)) begin
          failures++;
          $display("FAIL: %s place %0d count bit %0d", name, p, q);
        end
      end
    end
    for (int r = rq; r < rin; r++) begin
      checks++;
      if (rows_out[cw + r - rq] !== rows_in[r]) begin
        failures++; $display("FAIL: %s left-out row %0d", name, r);
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && (big_valid || small_valid)) begin
      item_t it;
      logic [W-1:0] bo [], so [], bi [], si [];
      if (queue.size() == 0 || big_valid !== small_valid) begin
        failures++; $display("FAIL: unexpected result");
      end else begin
        it = queue.pop_front();
        checks++;
        if (cycle - it.start != LATENCY) begin failures++; $display("FAIL: latency"); end
        bi = new[64]; si = new[7]; bo = new[7]; so = new[3];
        foreach (bi[r]) bi[r] = it.rows1[r];
        foreach (si[r]) si[r] = it.rows2[r];
        foreach (bo[r]) bo[r] = big_out[r];
        foreach (so[r]) so[r] = small_out[r];
        check_stage("64->7", 64, 63, 6, bi, bo);
        check_stage("7->3", 7, 7, 3, si, so);
      end
    end
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0;
    foreach (big_in[r]) big_in[r] = '0;
    foreach (small_in[r]) small_in[r] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int k = 0; k < 200; k++) begin
      item_t it;
      int unsigned d;
      logic v;
      d = (k == 0) ? 16 : $urandom % 17;
      foreach (it.rows1[r]) it.rows1[r] = rand_row(d);
      foreach (it.rows2[r]) it.rows2[r] = rand_row(d);
      v = ($urandom % 6) != 0;
      in_valid <= v;
      foreach (big_in[r]) big_in[r] <= it.rows1[r];
      foreach (small_in[r]) small_in[r] <= it.rows2[r];
      @(posedge clk);
      it.start = cycle;
      if (v) queue.push_back(it);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    if (queue.size() != 0) begin failures++; $display("FAIL: lost results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
