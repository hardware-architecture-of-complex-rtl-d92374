// kb_sorter: feed-forward minimum tree over the candidate registers.
//
// N inputs (In1..In8 in the paper) enter a binary tree of Min cells; the root
// gives the candidate with the smallest PED and its input index. An invalid
// candidate never wins against a valid one. On equal PEDs the lower-numbered
// input wins. The tree structure follows the paper's sorter figure; the
// tie rule is this design's choice. Purely combinational (log2 N cell
// levels); a register can be put between cell levels to pipeline it.
module kb_sorter
  import kb_pkg::*;
#(
  parameter int unsigned N = 2 * K_DEF  // inputs, a power of two
) (
  input  cand_t         in  [N],
  output cand_t         min,
  output logic [IW:0]   idx   // input index of the minimum
);
  localparam int unsigned L = $clog2(N);

  // Node n of the tree (heap order, root = 1, leaves N..2N-1).
  cand_t       node_c [2*N];
  logic [IW:0] node_i [2*N];

  always_comb begin
    node_c[0] = '0;
    node_i[0] = '0;
    for (int n = 0; n < int'(N); n++) begin
      node_c[N+n] = in[n];
      node_i[N+n] = (IW+1)'(n);
    end
    for (int n = int'(N) - 1; n >= 1; n--) begin
      // Min cell: take the right input only if it is strictly better.
      if (node_c[2*n+1].valid &&
          (!node_c[2*n].valid || node_c[2*n+1].ped < node_c[2*n].ped)) begin
        node_c[n] = node_c[2*n+1];
        node_i[n] = node_i[2*n+1];
      end else begin
        node_c[n] = node_c[2*n];
        node_i[n] = node_i[2*n];
      end
    end
    min = node_c[1];
    idx = node_i[1];
  end

  initial assert (N == (1 << L)) else $error("kb_sorter: N must be a power of two");
endmodule
