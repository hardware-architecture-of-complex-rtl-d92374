// kb_level: the detection hardware of one tree level (one transmit antenna).
//
// The level takes the K surviving paths of the level above (or the root at
// the first level) and selects the K best children at its row of R in
// 2K cycles, driven by the shared control path:
//   fill phase, cycles 0..K-1: parent p = kcnt is rounded (interference
//     cancellation, centre, nearest Gaussian integer); its best child, the
//     rounded point, is computed by the child-expansion unit and shifted into
//     the real-axis shift register through SI. The parent's residual and
//     rounding are kept in a small parent table.
//   select phase, cycles K..2K-1: the sorter picks the minimum-PED candidate
//     among the real-axis register (one frontier node per parent) and the
//     imaginary-axis register (one frontier node per selection); it goes to
//     the final list. Its replacements are computed in the same cycle:
//     if it came from the real-axis register, its next real-axis sibling
//     (none after Rlimit per parent) replaces it there and its next
//     imaginary-axis sibling takes imaginary slot scnt; if it came from the
//     imaginary-axis register, its next imaginary sibling replaces it.
// This yields exactly the candidates of the improved complex SE enumeration
// (Rlimit real-axis children per parent, then imaginary-axis expansion of
// each selected node), each produced only when it can be the next minimum.
// The blocks (rounding, 2:1 mux, on-demand child expansion, shift register,
// sorter, next node calculation, final list) follow the paper's data-path
// figure; the second, imaginary-axis register bank, which fills the sorter's
// eight inputs, and the parent table are this design's reading of it.
// The complete list is on d_* in the last cycle of the period.
module kb_level
  import kb_pkg::*;
#(
  parameter int unsigned NT     = NT_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned RLIMIT = RLIMIT_DEF,
  parameter int unsigned LEVEL  = 1            // 1 = first level (row NT-1)
) (
  input  logic                clk,
  input  logic                rst,
  input  ctl_t                ctl,
  // parents and the vector's data, stable during the period
  input  logic                par_valid [K],
  input  ped_t                par_ped   [K],
  input  sym_t                par_path  [K][NT],
  input  cplx_t               y   [NT],
  input  cplx_t               r   [NT][NT],
  input  logic signed [W-1:0] inv [NT],
  // the level's K-best list (write-through view of the final list)
  output logic                d_valid [K],
  output ped_t                d_ped   [K],
  output sym_t                d_path  [K][NT],
  // events, one pulse per occurrence
  output logic                ev_real,    // a real-axis node was selected
  output logic                ev_imag,    // an imaginary-axis node was selected
  output logic                ev_rlimit   // a parent's real axis hit Rlimit
);
  localparam int unsigned ROW = NT - LEVEL;
  localparam int unsigned NS  = 1 << $clog2(2 * K);   // sorter inputs
  localparam int unsigned AW  = (K > 1) ? $clog2(K) : 1;

  logic signed [W-1:0] rii;
  parent_t             rnd_par;
  parent_t             ptab [K];
  parent_t             sel_par;
  cand_t               real_q [K];
  cand_t               imag_q [K];
  cand_t               sort_in [NS];
  cand_t               min;
  logic [IW:0]         min_idx;
  logic                from_real;
  cand_t               exp_child;
  cand_t               nxt;
  logic                real_en [K];
  logic                imag_en [K];
  sym_t                w_path [NT];
  logic [IW-1:0]       kc;
  logic [AW-1:0]       ka;    // parent index in fill
  logic [AW-1:0]       pa;    // parent of the selected node

  assign rii = r[ROW][ROW].re;
  assign kc  = (32'(ctl.kcnt) < K) ? ctl.kcnt : '0;
  assign ka  = kc[AW-1:0];
  assign pa  = min.parent[AW-1:0];

  // Rounding of parent kcnt (fill phase).
  kb_rounding #(.NT(NT), .ROW(ROW)) u_round (
    .y(y[ROW]), .rrow(r[ROW]), .inv(inv[ROW]),
    .par_valid(par_valid[ka]), .par_ped(par_ped[ka]), .par_path(par_path[ka]),
    .par(rnd_par));

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < int'(K); k++) ptab[k] <= '0;
    end else if (ctl.fill) begin
      ptab[ka] <= rnd_par;
    end
  end

  // Sorter over both banks.
  always_comb begin
    for (int n = 0; n < int'(NS); n++) sort_in[n] = '0;
    for (int k = 0; k < int'(K); k++) begin
      sort_in[k]     = real_q[k];
      sort_in[K + k] = imag_q[k];
    end
  end

  kb_sorter #(.N(NS)) u_sort (.in(sort_in), .min(min), .idx(min_idx));

  assign from_real = 32'(min_idx) < K;
  assign sel_par   = ptab[pa];

  // 2:1 mux + on-demand child expansion along the real axis.
  kb_child_expand #(.RLIMIT(RLIMIT)) u_exp (
    .first(ctl.fill),
    .par(ctl.fill ? rnd_par : sel_par),
    .pidx(ctl.fill ? kc : min.parent),
    .prev(min), .rii(rii), .child(exp_child));

  // Next node along the imaginary axis.
  kb_next_node u_next (.par(sel_par), .sel(min), .rii(rii), .next(nxt));

  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      real_en[k] = ctl.select && from_real && 32'(min_idx) == k;
      imag_en[k] = ctl.select && (from_real ? (ctl.scnt == IW'(k))
                                            : (32'(min_idx) == K + k));
    end
  end

  kb_shift_reg #(.N(K)) u_real (
    .clk(clk), .rst(rst), .clr(1'b0), .shift(ctl.fill),
    .si(exp_child), .upd(exp_child), .en(real_en), .q(real_q));

  kb_shift_reg #(.N(K)) u_imag (
    .clk(clk), .rst(rst), .clr(ctl.fill), .shift(1'b0),
    .si('0), .upd(nxt), .en(imag_en), .q(imag_q));

  // Final list: parent's path with this row's symbol.
  always_comb begin
    w_path      = par_path[pa];
    w_path[ROW] = min.sym;
  end

  kb_final_list #(.NT(NT), .K(K)) u_list (
    .clk(clk), .rst(rst), .we(ctl.select), .widx(ctl.scnt),
    .w_valid(min.valid), .w_ped(min.ped), .w_path(w_path),
    .q_valid(), .q_ped(), .q_path(),
    .d_valid(d_valid), .d_ped(d_ped), .d_path(d_path));

  assign ev_real   = ctl.select && min.valid && from_real;
  assign ev_imag   = ctl.select && min.valid && !from_real;
  assign ev_rlimit = ctl.select && min.valid && from_real && !exp_child.valid;
endmodule
