// kbest_decoder: complex K-best MIMO detector, top level.
//
// Data-path block (NT pipelined levels) plus control-path block (the level
// schedule), as in the paper's block diagram. Inputs are the vector y-breve
// (= Q^H y-tilde) and the upper-triangular R of the lattice-reduced,
// MMSE-extended channel, plus 1/R_ii (this design's addition, replacing a
// divider); outputs are the K-best list of lattice symbols z and their
// accumulated distances. The lattice back-transform s = T z + (1+j) is done
// outside.
// Timing: in_ready is high in the last cycle of every 2K-cycle period; a vector
// presented with in_valid at that edge is taken. Its list appears NT periods
// later: out_valid pulses for one cycle, in the first cycle of the period in
// which out_* hold it (outputs stay stable for the whole period). One vector
// per 2K = 8 cycles; a level needs 8 cycles, NT*8 = 64 cycles end to end.
// rst is synchronous and active high (the paper's Rst).
module kbest_decoder
  import kb_pkg::*;
#(
  parameter int unsigned NT     = NT_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned RLIMIT = RLIMIT_DEF
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  output logic                in_ready,
  input  cplx_t               in_y   [NT],
  input  cplx_t               in_r   [NT][NT],
  input  logic signed [W-1:0] in_inv [NT],
  output logic                out_valid,
  output logic                out_list_valid [K],
  output ped_t                out_dist       [K],
  output sym_t                out_list       [K][NT],
  output logic [NT-1:0]       ev_real,
  output logic [NT-1:0]       ev_imag,
  output logic [NT-1:0]       ev_rlimit
);
  ctl_t ctl;
  logic vvalid;
  logic new_period;

  kb_control #(.K(K)) u_ctl (.clk(clk), .rst(rst), .ctl(ctl));

  kb_datapath #(.NT(NT), .K(K), .RLIMIT(RLIMIT)) u_dp (
    .clk(clk), .rst(rst), .ctl(ctl),
    .in_valid(in_valid), .in_y(in_y), .in_r(in_r), .in_inv(in_inv),
    .out_vvalid(vvalid), .out_valid(out_list_valid), .out_ped(out_dist),
    .out_path(out_list),
    .ev_real(ev_real), .ev_imag(ev_imag), .ev_rlimit(ev_rlimit));

  always_ff @(posedge clk) begin
    if (rst) new_period <= 1'b0;
    else     new_period <= ctl.last;
  end

  assign in_ready  = ctl.last;
  assign out_valid = new_period && vvalid;
endmodule
