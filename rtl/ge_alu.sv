// ge_alu: the graph engine's lightweight ALU (reduce and apply).
//
// The crossbar computes the edge part of a vertex program; what an in-situ
// multiply-accumulate cannot do is done here, one ADC code at a time, into the
// accumulator of one destination vertex (lane):
//   OP_MIN  code != 0 means the active source `src` has an edge to this
//           destination: acc_out = min(acc_in, src + 1), saturating at INF.
//           This is the BFS level / unweighted SSSP distance update.
//   OP_SUM  code is the bitline sum of bit-plane `plane` of the sources:
//           acc_out = acc_in + (code << plane), saturating. After all planes
//           the lane holds sum_i G[i][j] * src_i (PageRank-style gather).
// Combinational; the engine registers acc_out when the ADC result is valid.
// Following the paper: reduce-and-apply in a lightweight ALU after the ADC.
// This design's choice: the two operations and saturation.
module ge_alu
  import graph_pkg::*;
#(
  parameter int unsigned RES = 8
) (
  input  alu_op_e                    op,
  input  logic [RES-1:0]             code,
  input  logic [DATA_W-1:0]          src,
  input  logic [$clog2(DATA_W)-1:0]  plane,
  input  logic [DATA_W-1:0]          acc_in,
  output logic [DATA_W-1:0]          acc_out
);

  logic [DATA_W-1:0]       cand;
  logic [DATA_W+RES+7:0]   shifted;
  logic [DATA_W+RES+8:0]   total;

  always_comb begin
    cand    = (src == INF || src == INF - 1) ? INF : src + 1'b1;
    shifted = (DATA_W+RES+8)'(code) << plane;
    total   = (DATA_W+RES+9)'(acc_in) + (DATA_W+RES+9)'(shifted);
    if (op == OP_MIN)
      acc_out = (code != '0) ? reduce2(OP_MIN, acc_in, cand) : acc_in;
    else
      acc_out = (total > (DATA_W+RES+9)'(INF)) ? INF : total[DATA_W-1:0];
  end

endmodule
