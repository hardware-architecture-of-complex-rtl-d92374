// kb_ped_calc: accumulated partial Euclidean distance of one child node.
//
// For a parent with residual e = y_i - sum_{j>i} R_ij z_j and a candidate
// symbol z at row i, the new PED is  ped_parent + |e - R_ii z|^2  (R_ii is the
// real diagonal of the QR factor). The distance terms are clamped to DMAX
// before squaring: any term that large already saturates the 16-bit PED, so
// the clamp changes no result but keeps the squarers at 13x13 bits. The sum is
// rescaled by FB and saturated to 16 bits. The squared-distance metric is the
// one the detector minimises; the fixed-point scaling, clamp and saturation
// are this design's choices. Purely combinational.
module kb_ped_calc
  import kb_pkg::*;
(
  input  parent_t             par,  // parent residual and PED
  input  logic signed [W-1:0] rii,  // real diagonal element R_ii
  input  sym_t                sym,  // candidate symbol
  output ped_t                ped   // saturated accumulated PED
);
  localparam logic signed [EW+1:0] DLIM = (EW+2)'(DMAX);

  logic signed [EW+1:0] dr, di;        // e - R_ii z per axis
  logic [W/2+FB:0]      ar, ai;        // clamped magnitudes
  logic [2*(W/2+FB)+3:0] sq;           // |d|^2, FB*2 fraction bits
  logic [2*(W/2+FB)+3:0] acc;

  function automatic logic [W/2+FB:0] clamp_abs(input logic signed [EW+1:0] d);
    logic signed [EW+1:0] a;
    a = (d < 0) ? -d : d;
    if (a > DLIM) return DLIM[W/2+FB:0];
    return a[W/2+FB:0];
  endfunction

  always_comb begin
    dr  = (EW+2)'(par.er) - (EW+2)'(rii) * (EW+2)'(sym.re);
    di  = (EW+2)'(par.ei) - (EW+2)'(rii) * (EW+2)'(sym.im);
    ar  = clamp_abs(dr);
    ai  = clamp_abs(di);
    sq  = (2*(W/2+FB)+4)'(ar) * (2*(W/2+FB)+4)'(ar) + (2*(W/2+FB)+4)'(ai) * (2*(W/2+FB)+4)'(ai);
    acc = (sq >> FB) + (2*(W/2+FB)+4)'(par.ped);
    ped = (acc > (2*(W/2+FB)+4)'({W{1'b1}})) ? {W{1'b1}} : acc[W-1:0];
  end
endmodule
