// xne_popcount: combinational popcount of an N-bit vector.
//
// Counts the ones of the masked XNOR product with a combinational reduction
// tree, as the engine needs one count per cycle. The tree is a balanced
// binary adder tree laid out as a heap: the input is zero-extended to the
// next power of two P, leaf P+b holds bit b, and node k (1 <= k < P) holds
// the sum of nodes 2k and 2k+1, so node 1 is the count. Node k at depth d
// only needs $clog2(P)-d+1 bits; synthesis trims the constant upper bits of
// the uniform-width nodes. Purely combinational, no latency. The output is
// $clog2(N)+1 bits wide so that the all-ones case (count N) fits.
//
// The reduction-tree idea is the paper's; the heap layout is this design's.
module xne_popcount #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0]       in_i,
  output logic [$clog2(N):0] count_o
);
  localparam int unsigned CW = $clog2(N) + 1;
  localparam int unsigned P  = 1 << $clog2(N);

  logic [CW-1:0] node [1:2*P-1];

  for (genvar b = 0; b < P; b++) begin : g_leaf
    if (b < N) begin : g_bit
      assign node[P+b] = CW'(in_i[b]);
    end else begin : g_pad
      assign node[P+b] = '0;
    end
  end

  for (genvar k = 1; k < P; k++) begin : g_add
    assign node[k] = node[2*k] + node[2*k+1];
  end

  assign count_o = node[1];
endmodule
