// kb_stage_reg: pipeline register between two levels (Reg1..Reg8).
//
// At the end of every level period (load = 1) it captures the K-best list of
// the level before it together with the vector's y, R and 1/R_ii, so that the
// next level works on that vector during the following period while the
// level before it starts on the next vector. vvalid marks a real vector.
// Carrying y and R along with the list is this design's choice; the paper
// only says each level fetches its data from the register before it.
// Synchronous, active-high reset.
module kb_stage_reg
  import kb_pkg::*;
#(
  parameter int unsigned NT = NT_DEF,
  parameter int unsigned K  = K_DEF
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                load,
  input  logic                d_vvalid,
  input  logic                d_valid [K],
  input  ped_t                d_ped   [K],
  input  sym_t                d_path  [K][NT],
  input  cplx_t               d_y     [NT],
  input  cplx_t               d_r     [NT][NT],
  input  logic signed [W-1:0] d_inv   [NT],
  output logic                q_vvalid,
  output logic                q_valid [K],
  output ped_t                q_ped   [K],
  output sym_t                q_path  [K][NT],
  output cplx_t               q_y     [NT],
  output cplx_t               q_r     [NT][NT],
  output logic signed [W-1:0] q_inv   [NT]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      q_vvalid <= 1'b0;
      for (int k = 0; k < int'(K); k++) begin
        q_valid[k] <= 1'b0;
        q_ped[k]   <= '0;
        for (int j = 0; j < int'(NT); j++) q_path[k][j] <= '0;
      end
      for (int i = 0; i < int'(NT); i++) begin
        q_y[i]   <= '0;
        q_inv[i] <= '0;
        for (int j = 0; j < int'(NT); j++) q_r[i][j] <= '0;
      end
    end else if (load) begin
      q_vvalid <= d_vvalid;
      q_valid  <= d_valid;
      q_ped    <= d_ped;
      q_path   <= d_path;
      q_y      <= d_y;
      q_r      <= d_r;
      q_inv    <= d_inv;
    end
  end
endmodule
