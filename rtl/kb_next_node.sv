// kb_next_node: next-node calculation along the imaginary axis.
//
// After the sorter has picked a node, this block produces the node's next
// sibling in Schnorr-Euchner zig-zag order along the imaginary axis: the same
// real part, the imaginary SE index advanced by one. Its PED is computed from
// the parent's residual. The imaginary axis is not bounded by Rlimit. The
// paper gives the function (imaginary-domain SE enumeration of the selected
// node); the index encoding is this design's choice. Purely combinational.
module kb_next_node
  import kb_pkg::*;
(
  input  parent_t             par,   // parent of the selected node
  input  cand_t               sel,   // node just selected
  input  logic signed [W-1:0] rii,   // R_ii
  output cand_t               next
);
  sym_t sym;
  ped_t ped;

  always_comb begin
    sym.re = se_point(par.x0.re, par.sr, sel.nr);
    sym.im = se_point(par.x0.im, par.si, sel.ni + NW'(1));
  end

  kb_ped_calc u_ped (.par(par), .rii(rii), .sym(sym), .ped(ped));

  always_comb begin
    next.valid  = par.valid && sel.valid;
    next.ped    = ped;
    next.parent = sel.parent;
    next.nr     = sel.nr;
    next.ni     = sel.ni + NW'(1);
    next.sym    = sym;
  end
endmodule
