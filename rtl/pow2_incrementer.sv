// pow2_incrementer: adds or subtracts 2^pos to an N-bit integer in one
// clock tick.
//
// Adding 2^pos only changes bits pos and above: the circuit finds the least
// place j >= pos whose bit is 0 and complements bits j..pos (the 1s below j
// become 0 and bit j becomes 1). It does this with one AND gate per place:
// gate m is true when every bit from pos up to m-1 is 1, and bit m is
// complemented when gate m is true and m >= pos. Subtraction is the mirror
// image: it stops at the least place j >= pos holding a 1. When no stopping
// place exists below N, bits pos..N-1 are all complemented and carry (or
// borrow) is raised.
//
// Interface: x, pos, en, dec are sampled at a rising edge with in_valid; y
// and carry appear at the next edge with out_valid. en = 0 passes x through
// unchanged, so the unit also adds a single carry bit (en * 2^pos). rst_n
// (synchronous, active low) clears out_valid only.
//
// The increment-by-2^i operation, its single tick and the stop-at-first-0
// complementing gates follow the paper; the decrement rule, the enable, the
// carry/borrow output and the valid bit are this design's choices.
module pow2_incrementer #(
  parameter int unsigned N = fpa_pkg::DEFAULT_N,
  localparam int unsigned PW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [N-1:0]  x,
  input  logic [PW-1:0] pos,
  input  logic          en,
  input  logic          dec,
  output logic          out_valid,
  output logic [N-1:0]  y,
  output logic          carry
);

  logic [N-1:0] flip;
  logic         run_out;

  // run: all bits from pos to m-1 are 1 (increment) or 0 (decrement).
  always_comb begin
    logic run;
    run = en;
    for (int m = 0; m < N; m++) begin
      if (m >= int'(pos)) begin
        flip[m] = run;
        run     = run & (x[m] ^ dec);
      end else begin
        flip[m] = 1'b0;
      end
    end
    run_out = run;
  end

  always_ff @(posedge clk) begin
    y     <= x ^ flip;
    carry <= run_out;
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
