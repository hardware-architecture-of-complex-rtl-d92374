// kb_final_list: the K nodes a level has selected, in selection order.
//
// Each selection cycle writes one entry (path of symbols and PED) at index
// widx. The registered entries are on q_*; d_* shows the same list with the
// write of the current cycle already applied, so that the level register can
// capture the complete list at the edge that also writes the last entry.
// The list itself is the paper's "Final List"; the write-through view is this
// design's choice. Synchronous, active-high reset.
module kb_final_list
  import kb_pkg::*;
#(
  parameter int unsigned NT = NT_DEF,
  parameter int unsigned K  = K_DEF
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  logic          w_valid,
  input  ped_t          w_ped,
  input  sym_t          w_path [NT],
  output logic          q_valid [K],
  output ped_t          q_ped   [K],
  output sym_t          q_path  [K][NT],
  output logic          d_valid [K],
  output ped_t          d_ped   [K],
  output sym_t          d_path  [K][NT]
);
  localparam int unsigned AW = (K > 1) ? $clog2(K) : 1;
  logic [AW-1:0] wi;
  assign wi = widx[AW-1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < int'(K); k++) begin
        q_valid[k] <= 1'b0;
        q_ped[k]   <= '0;
        for (int j = 0; j < int'(NT); j++) q_path[k][j] <= '0;
      end
    end else if (we) begin
      q_valid[wi] <= w_valid;
      q_ped[wi]   <= w_ped;
      q_path[wi]  <= w_path;
    end
  end

  always_comb begin
    for (int k = 0; k < int'(K); k++) begin
      if (we && widx == IW'(k)) begin
        d_valid[k] = w_valid;
        d_ped[k]   = w_ped;
        d_path[k]  = w_path;
      end else begin
        d_valid[k] = q_valid[k];
        d_ped[k]   = q_ped[k];
        d_path[k]  = q_path[k];
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) we |-> 32'(widx) < K);
endmodule
