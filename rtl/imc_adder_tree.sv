// imc_adder_tree: adder tree of IM-CALC.
//
// Adds the M decoded products of one weight row in parallel into one output
// node value. The terms are padded with zeros to the next power of two and
// reduced by a balanced binary tree of log2 levels; each level's adders are
// one bit wider than the level below, so the sum never overflows
// (OUT_W = IN_W + log2 M). Purely combinational: the caller registers the
// result. The paper takes its adder tree from an earlier digital
// compute-in-memory macro without giving its structure; the plain binary
// tree here is this design's stand-in.
module imc_adder_tree #(
  parameter int unsigned M     = 64,
  parameter int unsigned IN_W  = 7,
  localparam int unsigned LVL  = (M > 1) ? $clog2(M) : 0,
  localparam int unsigned P2   = 1 << LVL,
  localparam int unsigned OUT_W = IN_W + LVL
) (
  input  logic [IN_W-1:0]  terms [M],
  output logic [OUT_W-1:0] sum
);

  // Level by level, in place: after level l, v[n] holds the sum of terms
  // n*2^l .. (n+1)*2^l-1. Each level reads entries 2n and 2n+1 before entry
  // n is overwritten, so the loop describes a balanced tree of P2-1 adders.
  always_comb begin
    logic [OUT_W-1:0] v [P2];
    for (int n = 0; n < P2; n++) v[n] = (n < M) ? OUT_W'(terms[n]) : '0;
    for (int l = 1; l <= LVL; l++) begin
      for (int n = 0; n < (P2 >> l); n++) v[n] = v[2*n] + v[2*n+1];
    end
    sum = v[0];
  end

endmodule
