// quantizer: counts the 1s among M bits of one column, in two clock ticks.
//
// The column's bits are summed into a level between 0 and M. A ladder of
// comparators tests the level against every threshold t = 0..M+1; the level
// lies in interval t exactly when it reaches threshold t but not t+1, and
// the AND of those two comparisons gives a one-hot interval code. At the
// first clock edge the one-hot code is latched (it plays the part of the
// switching circuit). In the second tick the active interval line selects
// one entry of an (M+1)-entry associative memory whose entry t holds t in
// binary, and that word is latched as the count.
//
// Interface: bits is sampled at a rising edge; count is valid two edges
// later. A new column may enter every cycle. There is no reset: the block
// holds no control state.
//
// The comparator ladder, the interval detection by two adjacent levels, the
// memory of binary codes and the two ticks follow the paper. The paper forms
// the level as an analog sum of voltages or currents; here it is a digital
// count of the 1s, which is this design's substitute for that analog front
// end.
module quantizer #(
  parameter int unsigned M = 63,
  localparam int unsigned CW = fpa_pkg::count_width(M)
) (
  input  logic          clk,
  input  logic [M-1:0]  bits,
  output logic [CW-1:0] count
);

  // Associative memory contents: entry t holds t in binary.
  typedef logic [CW-1:0] word_t;
  localparam word_t [M:0] MEMORY = build_memory();
  function automatic word_t [M:0] build_memory();
    for (int t = 0; t <= M; t++) build_memory[t] = word_t'(t);
  endfunction

  // Level of the column (stands for the summed voltage).
  logic [CW-1:0] level;
  always_comb begin
    level = '0;
    for (int r = 0; r < M; r++) level = level + CW'(bits[r]);
  end

  // Comparator ladder and interval detection.
  logic [M+1:0] above;             // above[t]: level >= t
  logic [M:0]   interval;          // one-hot: level == t
  always_comb begin
    for (int t = 0; t <= M + 1; t++) above[t] = ({1'b0, level} >= (CW+1)'(t));
    for (int t = 0; t <= M; t++)     interval[t] = above[t] & ~above[t+1];
  end

  // Tick 1: latch the selected interval.
  logic [M:0] sel_q;
  always_ff @(posedge clk) sel_q <= interval;

  // Tick 2: the selected line reads its memory entry.
  logic [CW-1:0] word;
  always_comb begin
    word = '0;
    for (int t = 0; t <= M; t++) word = word | (sel_q[t] ? MEMORY[t] : '0);
  end

  always_ff @(posedge clk) count <= word;

  a_one_interval: assert property (@(posedge clk) $onehot(interval));

endmodule
