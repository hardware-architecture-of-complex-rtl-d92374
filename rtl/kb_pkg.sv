// kb_pkg: shared widths, types and arithmetic of the complex K-best detector.
//
// Number format: the received vector y, the triangular matrix R, the inverse
// diagonal 1/R_ii and every partial Euclidean distance (PED) are 16-bit words
// (the 16-bit total word length follows the paper). The 8 fraction bits
// (FB) are this design's choice. Symbols are Gaussian integers in the
// lattice-reduced domain, held as two signed ZW-bit parts. The residual after
// interference cancellation is kept at EW bits so that it never overflows.
//
// A tree node is enumerated in Schnorr-Euchner (SE) zig-zag order around the
// rounded centre x0: index n = 0,1,2,3,4,... gives x0, x0+s, x0-s, x0+2s,
// x0-2s, ... where s is +1 when the centre lies at or above x0 and -1 below.
package kb_pkg;

  localparam int unsigned W   = 16;  // word length of y, R, 1/R_ii and PED
  localparam int unsigned FB  = 8;   // fraction bits of the 16-bit words
  localparam int unsigned ZW  = 8;   // bits of each symbol part
  localparam int unsigned EW  = 28;  // residual width (W + ZW + 4 guard bits)
  localparam int unsigned IW  = 4;   // parent / counter index width (K <= 16)
  localparam int unsigned NW  = 6;   // SE enumeration index width

  // Defaults of the design (8x8 MIMO, K = Rlimit = 4).
  localparam int unsigned NT_DEF     = 8;
  localparam int unsigned K_DEF      = 4;
  localparam int unsigned RLIMIT_DEF = 4;

  // A PED difference at or above DMAX (in FB-scaled units) squares to at
  // least 2^(W-FB), the saturation point of the 16-bit PED.
  localparam int unsigned DMAX = 1 << ((W - FB) / 2 + FB);

  typedef logic [W-1:0] ped_t;

  typedef struct packed {
    logic signed [W-1:0] re;
    logic signed [W-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [ZW-1:0] re;
    logic signed [ZW-1:0] im;
  } sym_t;

  // One candidate child in the shift registers and the sorter.
  typedef struct packed {
    logic          valid;
    ped_t          ped;     // accumulated PED including this node
    logic [IW-1:0] parent;  // index of the parent in the level's input list
    logic [NW-1:0] nr;      // SE index along the real axis
    logic [NW-1:0] ni;      // SE index along the imaginary axis
    sym_t          sym;     // the node's symbol at this level
  } cand_t;

  // What the rounding stage keeps about one parent for the whole level.
  typedef struct packed {
    logic                 valid;
    ped_t                 ped;  // parent's accumulated PED
    logic signed [EW-1:0] er;   // residual y_i - sum_{j>i} R_ij z_j, real
    logic signed [EW-1:0] ei;   // same, imaginary
    sym_t                 x0;   // rounded centre
    logic                 sr;   // 1: real zig-zag starts downwards
    logic                 si;   // 1: imaginary zig-zag starts downwards
  } parent_t;

  // Control-path outputs shared by all levels.
  typedef enum logic [1:0] {ST_RESET = 2'd0, ST_FILL = 2'd1, ST_SELECT = 2'd2} state_e;

  typedef struct packed {
    logic          fill;    // fill phase: one parent rounded and expanded per cycle
    logic          select;  // select phase: one node chosen per cycle
    logic [IW-1:0] kcnt;    // parent index during fill
    logic [IW-1:0] scnt;    // selection index during select
    logic          last;    // last cycle of the level period
  } ctl_t;

  // Saturate a wide signed value to ZW bits.
  function automatic logic signed [ZW-1:0] sat_sym(input logic signed [EW+1:0] v);
    localparam logic signed [EW+1:0] HI = (1 <<< (ZW - 1)) - 1;
    localparam logic signed [EW+1:0] LO = -(1 <<< (ZW - 1));
    if (v > HI) return HI[ZW-1:0];
    if (v < LO) return LO[ZW-1:0];
    return v[ZW-1:0];
  endfunction

  // n-th point of the SE zig-zag around x0 (down = 1: first step is -1).
  function automatic logic signed [ZW-1:0] se_point(input logic signed [ZW-1:0] x0,
                                                    input logic down,
                                                    input logic [NW-1:0] n);
    logic signed [EW+1:0] mag;
    logic signed [EW+1:0] off;
    mag = (EW+2)'((NW+1)'(n) + (NW+1)'(1)) >>> 1;
    // odd n steps in the direction of the centre, even n the other way
    if (n[0] ^ down) off = mag;
    else             off = -mag;
    return sat_sym((EW+2)'(x0) + off);
  endfunction

endpackage
