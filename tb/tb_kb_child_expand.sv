// tb_kb_child_expand: random parents; the rounding input (first child) and
// the feedback input (next real-axis sibling, including the Rlimit bound)
// are compared with the reference zig-zag and PED.
module tb_kb_child_expand;
  import kb_pkg::*;
  import kb_ref_pkg::*;
  localparam int RLIMIT = 4;
  logic first;
  parent_t par;
  logic [IW-1:0] pidx;
  cand_t prev, child;
  logic signed [W-1:0] rii;
  int checks = 0, failures = 0;
  int seen_bound = 0;

  kb_child_expand #(.RLIMIT(RLIMIT)) dut (.*);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      rpar_t q;
      int nr, ni, zr, zi, pp, pd;
      bit ev;
      q.er = longint'($urandom_range(20000)) - 10000;
      q.ei = longint'($urandom_range(20000)) - 10000;
      q.x0r = int'($urandom_range(40)) - 20;
      q.x0i = int'($urandom_range(40)) - 20;
      q.dr = $urandom_range(1); q.di = $urandom_range(1);
      pp = $urandom_range(3000);
      par.valid = ($urandom_range(7) != 0);
      par.ped = ped_t'(pp);
      par.er = EW'(q.er); par.ei = EW'(q.ei);
      par.x0.re = ZW'(q.x0r); par.x0.im = ZW'(q.x0i);
      par.sr = q.dr; par.si = q.di;
      rii = W'(256 + $urandom_range(255));
      pidx = IW'($urandom_range(3));
      first = $urandom_range(1);
      prev = cand_t'({$urandom, $urandom, $urandom});
      prev.valid = ($urandom_range(7) != 0);
      prev.nr = NW'($urandom_range(RLIMIT - 1));
      prev.ni = NW'($urandom_range(5));
      nr = first ? 0 : int'(prev.nr) + 1;
      ni = first ? 0 : int'(prev.ni);
      zr = zig(q.x0r, q.dr, nr);
      zi = zig(q.x0i, q.di, ni);
      pd = node_ped(pp, q, int'(rii), zr, zi);
      ev = par.valid && (first || prev.valid) && nr < RLIMIT;
      if (!first && nr >= RLIMIT) seen_bound++;
      #1;
      checks++;
      if (child.valid != ev || (ev && (int'(child.ped) != pd || int'(child.sym.re) != zr ||
          int'(child.sym.im) != zi || int'(child.nr) != nr || int'(child.ni) != ni ||
          child.parent != pidx))) begin
        failures++;
        if (failures < 5) $display("FAIL: t=%0d first %0b nr %0d: ped %0d expected %0d",
                                   t, first, nr, child.ped, pd);
      end
    end
    checks++;
    if (seen_bound == 0) begin failures++; $display("FAIL: Rlimit bound not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
