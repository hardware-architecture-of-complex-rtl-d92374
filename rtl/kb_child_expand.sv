// kb_child_expand: on-demand child expansion along the real axis.
//
// Holds the 2:1 multiplexer in front of the expansion unit. With first = 1
// the source is the rounding stage: the child is the rounded centre x0 of a
// new parent (SE index 0 on both axes). With first = 0 the source is the node
// just selected by the sorter: the child is that node's next real-axis
// neighbour in Schnorr-Euchner zig-zag order, with the same imaginary part.
// A parent yields at most RLIMIT children along the real axis; a request for
// more returns an invalid candidate. The PED of the child is computed here.
// The mux, the real-axis SE order and the Rlimit bound follow the paper; the
// encoding of a node by its zig-zag indices is this design's choice.
// Purely combinational.
module kb_child_expand
  import kb_pkg::*;
#(
  parameter int unsigned RLIMIT = RLIMIT_DEF  // real-axis children per parent
) (
  input  logic                first,   // mux select: 1 rounding, 0 feedback
  input  parent_t             par,     // parent of the child
  input  logic [IW-1:0]       pidx,    // parent index
  input  cand_t               prev,    // selected node (feedback path)
  input  logic signed [W-1:0] rii,     // R_ii
  output cand_t               child
);
  logic [NW-1:0] nr;
  logic [NW-1:0] ni;
  sym_t          sym;
  ped_t          ped;

  always_comb begin
    nr = first ? '0 : prev.nr + NW'(1);
    ni = first ? '0 : prev.ni;
    sym.re = se_point(par.x0.re, par.sr, nr);
    sym.im = se_point(par.x0.im, par.si, ni);
  end

  kb_ped_calc u_ped (.par(par), .rii(rii), .sym(sym), .ped(ped));

  always_comb begin
    child.valid  = par.valid && (first || prev.valid) && (32'(nr) < RLIMIT);
    child.ped    = ped;
    child.parent = pidx;
    child.nr     = nr;
    child.ni     = ni;
    child.sym    = sym;
  end
endmodule
