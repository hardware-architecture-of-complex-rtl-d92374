// kb_shift_reg: the candidate shift register of one level (Reg1..RegN).
//
// Two operations, as in the paper's shift-register figure: with shift = 1 the
// serial input SI enters Reg1 and every register takes its left neighbour's
// value (used N times in a row to load the N initial children); otherwise a
// register whose enable En_i is set loads the shared "Updated" value (the
// replacement computed for the node just taken), and all others hold. clr
// invalidates all entries (this design's addition, used for the second bank of
// a level). Synchronous, active-high reset; one operation per clock.
module kb_shift_reg
  import kb_pkg::*;
#(
  parameter int unsigned N = K_DEF    // registers (Reg1..Reg4 in the paper)
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  clr,          // invalidate all entries
  input  logic  shift,        // serial load
  input  cand_t si,           // serial input
  input  cand_t upd,          // "Updated" value
  input  logic  en [N],       // En1..EnN
  output cand_t q  [N]        // Out1..OutN
);
  always_ff @(posedge clk) begin
    if (rst || clr) begin
      for (int i = 0; i < int'(N); i++) q[i] <= '0;
    end else if (shift) begin
      q[0] <= si;
      for (int i = 1; i < int'(N); i++) q[i] <= q[i-1];
    end else begin
      for (int i = 0; i < int'(N); i++)
        if (en[i]) q[i] <= upd;
    end
  end

  // At most one register is replaced per cycle.
  logic [IW:0] en_cnt;
  always_comb begin
    en_cnt = '0;
    for (int i = 0; i < int'(N); i++) en_cnt = en_cnt + (IW+1)'(en[i]);
  end
  assert property (@(posedge clk) disable iff (rst) !shift |-> en_cnt <= 1);
endmodule
