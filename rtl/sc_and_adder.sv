// sc_and_adder: N-bit two-operand adder that finishes in two clock ticks.
//
// Tick 1 forms, for every place i, the half-adder pair s_i = a_i ^ b_i and
// c_i = a_i & b_i, and s_N = 0. Tick 2 adds all carries at once. For every
// pair i < j <= N a special AND gate
//     SC_AND(i,j) = ~s_j & s_{j-1} & ... & s_{i+1} & c_i
// fires when carry c_i runs through a string of 1s and stops at the 0 in
// place j. A firing SC_AND(i,j) complements s_j..s_{i+1}, which is the same
// as adding 1 at place i+1. At most one SC_AND(i,*) fires per carry (s_N = 0
// gives every carry a stopping place) and the strings of different carries
// never overlap, because a place with c = 1 has s = 0 and so ends the string
// of the carry below it. The complemented s_N..s_0 is the sum; s_N is the
// carry out. The two properties are checked by assertions.
//
// Interface: in_valid/a/b are sampled at a rising clock edge; two edges
// later out_valid, sum and carry hold the result. A new pair may enter every
// cycle. rst_n (synchronous, active low) clears only the valid bits.
//
// The gate equations and the two-tick split follow the paper. The valid
// bits, reset, the register positions and the pipelining are this design's
// own choices.
module sc_and_adder #(
  parameter int unsigned N = fpa_pkg::DEFAULT_N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic         out_valid,
  output logic [N-1:0] sum,
  output logic         carry
);

  // Tick 1: half-adder sums and carries.
  logic [N-1:0] s_q, c_q;
  logic         v_q;

  always_ff @(posedge clk) begin
    s_q <= a ^ b;
    c_q <= a & b;
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= in_valid;
  end

  // Tick 2: SC_AND gate matrix, one row per carry c_i.
  //   run[i][j] = c_i & s_{i+1} & ... & s_j          (run[i][i] = c_i)
  //   sc[i][j]  = SC_AND(i,j) = run[i][j-1] & ~s_j   (i < j <= N)
  //   span[i][m] = OR of sc[i][j] over j >= m        (i < m <= N)
  // span[i] marks the places complemented on behalf of carry i; flip is the
  // OR of all rows. overlap records a place claimed by two carries, which
  // the construction rules out (checked by an assertion below).
  logic [N:0] s_ext;               // s_N .. s_0 with s_N = 0
  logic [N:0] run  [N];
  logic [N:0] sc   [N];
  logic [N:0] span [N];
  logic [N:0] flip_acc [N];        // OR of span[0..i]
  logic       ovl_acc  [N];        // overlap among rows 0..i
  logic [N:0] flip;
  logic       overlap;
  logic [N:0] result;

  assign s_ext = {1'b0, s_q};

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j <= N; j++) begin : g_col
      if (j < i) begin : g_none
        assign run[i][j]  = 1'b0;
        assign sc[i][j]   = 1'b0;
        assign span[i][j] = 1'b0;
      end else if (j == i) begin : g_start
        assign run[i][j]  = c_q[i];
        assign sc[i][j]   = 1'b0;
        assign span[i][j] = 1'b0;
      end else begin : g_gate
        assign run[i][j] = run[i][j-1] & s_ext[j];
        assign sc[i][j]  = run[i][j-1] & ~s_ext[j];
        if (j == N) begin : g_top
          assign span[i][j] = sc[i][j];
        end else begin : g_mid
          assign span[i][j] = span[i][j+1] | sc[i][j];
        end
      end
    end
    if (i == 0) begin : g_first
      assign flip_acc[i] = span[i];
      assign ovl_acc[i]  = 1'b0;
    end else begin : g_next
      assign flip_acc[i] = flip_acc[i-1] | span[i];
      assign ovl_acc[i]  = ovl_acc[i-1] | ((flip_acc[i-1] & span[i]) != '0);
    end
  end

  assign flip    = flip_acc[N-1];
  assign overlap = ovl_acc[N-1];

  assign result = s_ext ^ flip;

  always_ff @(posedge clk) begin
    sum   <= result[N-1:0];
    carry <= result[N];
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_q;
  end

  // Each carry finds exactly one stopping place, and no place is
  // complemented by two carries.
  for (genvar gi = 0; gi < N; gi++) begin : g_chk
    a_unique_stop: assert property (@(posedge clk) disable iff (!rst_n)
      v_q |-> (c_q[gi] ? $onehot(sc[gi]) : (sc[gi] == '0)));
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    v_q |-> !overlap);

endmodule
