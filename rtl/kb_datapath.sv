// kb_datapath: the data-path block, NT levels in a pipeline.
//
// An input register (stage 0) takes a vector (y-breve, R and 1/R_ii) at the
// end of a period when in_valid is high, and presents the tree root (one
// parent, PED 0) to level 1. Level l works on row NT-l of R and writes its
// K-best list into level register l at the end of its period; level l+1
// works on it during the next period while level l starts the next vector.
// After NT periods the last register holds the final K-best list (symbols
// of all NT rows and the accumulated distances). The level chain and the
// level registers follow the paper's pipeline figure; the input register is
// this design's choice. Event outputs report, per level, which mechanism
// ran in the current cycle.
module kb_datapath
  import kb_pkg::*;
#(
  parameter int unsigned NT     = NT_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned RLIMIT = RLIMIT_DEF
) (
  input  logic                clk,
  input  logic                rst,
  input  ctl_t                ctl,
  input  logic                in_valid,
  input  cplx_t               in_y   [NT],
  input  cplx_t               in_r   [NT][NT],
  input  logic signed [W-1:0] in_inv [NT],
  output logic                out_vvalid,
  output logic                out_valid [K],
  output ped_t                out_ped   [K],
  output sym_t                out_path  [K][NT],
  output logic [NT-1:0]       ev_real,
  output logic [NT-1:0]       ev_imag,
  output logic [NT-1:0]       ev_rlimit
);
  // stage s = register in front of level s+1 (s = 0: input register)
  logic                s_vvalid [NT+1];
  logic                s_valid  [NT+1][K];
  ped_t                s_ped    [NT+1][K];
  sym_t                s_path   [NT+1][K][NT];
  cplx_t               s_y      [NT+1][NT];
  cplx_t               s_r      [NT+1][NT][NT];
  logic signed [W-1:0] s_inv    [NT+1][NT];

  logic                root_valid [K];
  ped_t                root_ped   [K];
  sym_t                root_path  [K][NT];

  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      root_valid[k] = (k == 0);
      root_ped[k]   = '0;
      for (int j = 0; j < int'(NT); j++) root_path[k][j] = '0;
    end
  end

  kb_stage_reg #(.NT(NT), .K(K)) u_in (
    .clk(clk), .rst(rst), .load(ctl.last),
    .d_vvalid(in_valid), .d_valid(root_valid), .d_ped(root_ped), .d_path(root_path),
    .d_y(in_y), .d_r(in_r), .d_inv(in_inv),
    .q_vvalid(s_vvalid[0]), .q_valid(s_valid[0]), .q_ped(s_ped[0]), .q_path(s_path[0]),
    .q_y(s_y[0]), .q_r(s_r[0]), .q_inv(s_inv[0]));

  for (genvar l = 1; l <= NT; l++) begin : g_lvl
    logic d_valid [K];
    ped_t d_ped   [K];
    sym_t d_path  [K][NT];
    logic e_real, e_imag, e_rlim;

    kb_level #(.NT(NT), .K(K), .RLIMIT(RLIMIT), .LEVEL(l)) u_level (
      .clk(clk), .rst(rst), .ctl(ctl),
      .par_valid(s_valid[l-1]), .par_ped(s_ped[l-1]), .par_path(s_path[l-1]),
      .y(s_y[l-1]), .r(s_r[l-1]), .inv(s_inv[l-1]),
      .d_valid(d_valid), .d_ped(d_ped), .d_path(d_path),
      .ev_real(e_real), .ev_imag(e_imag), .ev_rlimit(e_rlim));

    // events count only for real vectors, not for idle periods
    assign ev_real[l-1]   = e_real && s_vvalid[l-1];
    assign ev_imag[l-1]   = e_imag && s_vvalid[l-1];
    assign ev_rlimit[l-1] = e_rlim && s_vvalid[l-1];

    kb_stage_reg #(.NT(NT), .K(K)) u_reg (
      .clk(clk), .rst(rst), .load(ctl.last),
      .d_vvalid(s_vvalid[l-1]), .d_valid(d_valid), .d_ped(d_ped), .d_path(d_path),
      .d_y(s_y[l-1]), .d_r(s_r[l-1]), .d_inv(s_inv[l-1]),
      .q_vvalid(s_vvalid[l]), .q_valid(s_valid[l]), .q_ped(s_ped[l]), .q_path(s_path[l]),
      .q_y(s_y[l]), .q_r(s_r[l]), .q_inv(s_inv[l]));
  end

  assign out_vvalid = s_vvalid[NT];
  assign out_valid  = s_valid[NT];
  assign out_ped    = s_ped[NT];
  assign out_path   = s_path[NT];
endmodule
