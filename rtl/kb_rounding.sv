// kb_rounding: interference cancellation, centre and rounding for one parent.
//
// At tree row i (ROW) a parent carries the symbols z_j already decided for the
// rows below it (j > i). This block forms the residual
//     e = y_i - sum_{j>i} R_ij z_j            (complex multiply-accumulate)
// scales it by the supplied inverse diagonal to get the unconstrained centre
// c = e / R_ii, rounds c to the nearest Gaussian integer x0 and records, per
// axis, whether the centre lies below x0 (the first Schnorr-Euchner step then
// goes down). The paper's "Rounding" box only names the rounding; the
// interference cancellation and the use of a precomputed 1/R_ii instead of a
// divider are this design's choices. Purely combinational: the level applies
// it to one parent per cycle during the fill phase.
module kb_rounding
  import kb_pkg::*;
#(
  parameter int unsigned NT  = NT_DEF,  // antennas = tree levels
  parameter int unsigned ROW = 0        // row of R handled (0 = top row)
) (
  input  cplx_t               y,             // y-breve_i
  input  cplx_t               rrow [NT],     // row i of R
  input  logic signed [W-1:0] inv,           // 1 / R_ii, FB fraction bits
  input  logic                par_valid,
  input  ped_t                par_ped,
  input  sym_t                par_path [NT], // decided symbols (rows > i used)
  output parent_t             par            // residual, x0, zig-zag direction
);
  localparam int unsigned CW = EW + W;       // centre product width

  logic signed [EW-1:0] er, ei;
  logic signed [CW-1:0] cr, ci;               // centre, FB fraction bits
  logic signed [CW-1:0] xr, xi;               // rounded centre (integer)

  always_comb begin
    er = EW'(y.re);
    ei = EW'(y.im);
    for (int j = 0; j < int'(NT); j++) begin
      if (j > int'(ROW)) begin
        er = er - EW'(rrow[j].re) * EW'(par_path[j].re) + EW'(rrow[j].im) * EW'(par_path[j].im);
        ei = ei - EW'(rrow[j].re) * EW'(par_path[j].im) - EW'(rrow[j].im) * EW'(par_path[j].re);
      end
    end
    cr = (CW'(er) * CW'(inv)) >>> FB;
    ci = (CW'(ei) * CW'(inv)) >>> FB;
    xr = (cr + CW'(1 << (FB - 1))) >>> FB;
    xi = (ci + CW'(1 << (FB - 1))) >>> FB;

    par.valid = par_valid;
    par.ped   = par_ped;
    par.er    = er;
    par.ei    = ei;
    par.x0.re = sat_sym((EW+2)'(xr));
    par.x0.im = sat_sym((EW+2)'(xi));
    par.sr    = cr < (xr <<< FB);
    par.si    = ci < (xi <<< FB);
  end
endmodule
