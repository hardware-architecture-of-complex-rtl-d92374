// kb_control: control path shared by all levels.
//
// A finite-state machine with two counters produces the schedule of one level
// period, which all levels follow in lockstep:
//   FILL   for K cycles  (K counter kcnt = 0..K-1): one parent per cycle is
//          rounded and its first child shifted into the shift register;
//   SELECT for K cycles  (selection counter scnt = 0..K-1): one node per cycle
//          is sorted out, written to the final list, and replaced.
// `last` marks the final cycle of the period, at whose clock edge every level
// register loads and a new input vector is accepted. After reset the machine
// spends one cycle in RESET and then runs without stopping, so a vector is
// accepted every 2K cycles (8 cycles at K = Rlimit = 4).
// The paper counts the second phase with an Rlimit counter ("sorting and next
// best child calculation ... will be done Rlimit times") but also says the
// final list holds K nodes; this design counts K selections, which is the same
// at the paper's K = Rlimit = 4. Synchronous, active-high reset.
module kb_control
  import kb_pkg::*;
#(
  parameter int unsigned K = K_DEF
) (
  input  logic clk,
  input  logic rst,
  output ctl_t ctl
);
  state_e        state;
  logic [IW-1:0] kcnt;
  logic [IW-1:0] scnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ST_RESET;
      kcnt  <= '0;
      scnt  <= '0;
    end else begin
      unique case (state)
        ST_RESET: begin
          state <= ST_FILL;
          kcnt  <= '0;
          scnt  <= '0;
        end
        ST_FILL: begin
          if (32'(kcnt) == K - 1) begin
            state <= ST_SELECT;
            kcnt  <= '0;
          end else begin
            kcnt <= kcnt + IW'(1);
          end
        end
        ST_SELECT: begin
          if (32'(scnt) == K - 1) begin
            state <= ST_FILL;
            scnt  <= '0;
          end else begin
            scnt <= scnt + IW'(1);
          end
        end
        default: state <= ST_RESET;
      endcase
    end
  end

  always_comb begin
    ctl.fill   = state == ST_FILL;
    ctl.select = state == ST_SELECT;
    ctl.kcnt   = kcnt;
    ctl.scnt   = scnt;
    ctl.last   = state == ST_SELECT && 32'(scnt) == K - 1;
  end

  assert property (@(posedge clk) disable iff (rst) !(ctl.fill && ctl.select));
endmodule
