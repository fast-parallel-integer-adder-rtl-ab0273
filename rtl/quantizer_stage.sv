// quantizer_stage: consolidates ROWS_IN integers of WIDTH bits into fewer
// integers with the same sum, in two clock ticks.
//
// The first ROWS_Q rows are reduced column by column: one quantizer per
// place p counts the 1s of those rows at place p, and bit q of that count is
// written at place p+q of output row q, so the CW = clog2(ROWS_Q+1) output
// rows again form a staircase. The remaining ROWS_IN-ROWS_Q rows are left
// out of the count and delayed two cycles to stay aligned. Count bits that
// land at place WIDTH or above are dropped: the stage keeps the sum modulo
// 2^WIDTH, which is exact whenever the true sum is below 2^WIDTH.
//
// Interface: rows_in is sampled with in_valid; two edges later rows_out and
// out_valid hold the ROWS_OUT = CW + ROWS_IN - ROWS_Q rows, count rows first
// (row q carries weight 2^q per column), then the rows left out. rst_n
// (synchronous, active low) clears the valid bits.
//
// Defaults are the paper's first multiplier stage (64 rows, 63 counted by
// 63-bit to 6-bit quantizers, one left out, 128 places). The placement of
// the rows left out and the modulo-2^WIDTH truncation are this design's
// choices.
module quantizer_stage #(
  parameter int unsigned ROWS_IN = 64,
  parameter int unsigned ROWS_Q  = 63,
  parameter int unsigned WIDTH   = 128,
  localparam int unsigned CW       = fpa_pkg::count_width(ROWS_Q),
  localparam int unsigned ROWS_OUT = CW + ROWS_IN - ROWS_Q
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] rows_in  [ROWS_IN],
  output logic             out_valid,
  output logic [WIDTH-1:0] rows_out [ROWS_OUT]
);

  // One quantizer per place.
  logic [ROWS_Q-1:0] column [WIDTH];
  logic [CW-1:0]     cnt    [WIDTH];

  for (genvar p = 0; p < WIDTH; p++) begin : g_col
    for (genvar r = 0; r < ROWS_Q; r++) begin : g_bit
      assign column[p][r] = rows_in[r][p];
    end
    quantizer #(.M(ROWS_Q)) u_q (.clk, .bits(column[p]), .count(cnt[p]));
  end

  // Staircase placement of the counts.
  always_comb begin
    for (int q = 0; q < CW; q++) begin
      rows_out[q] = '0;
      for (int p = 0; p + q < WIDTH; p++) rows_out[q][p+q] = cnt[p][q];
    end
  end

  // Rows left out wait two cycles.
  if (ROWS_IN > ROWS_Q) begin : g_left
    logic [WIDTH-1:0] left_q  [ROWS_IN-ROWS_Q];
    logic [WIDTH-1:0] left_qq [ROWS_IN-ROWS_Q];
    always_ff @(posedge clk) begin
      for (int r = 0; r < ROWS_IN - ROWS_Q; r++) begin
        left_q[r]  <= rows_in[ROWS_Q + r];
        left_qq[r] <= left_q[r];
      end
    end
    always_comb begin
      for (int r = 0; r < ROWS_IN - ROWS_Q; r++) rows_out[CW + r] = left_qq[r];
    end
  end

  logic v_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_q       <= in_valid;
      out_valid <= v_q;
    end
  end

endmodule
