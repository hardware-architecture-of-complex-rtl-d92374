// tb_kb_next_node: random selected nodes; the next imaginary-axis sibling
// (same real part, imaginary zig-zag index + 1) and its PED are compared with
// the reference model.
module tb_kb_next_node;
  import kb_pkg::*;
  import kb_ref_pkg::*;
  parent_t par;
  cand_t sel, next;
  logic signed [W-1:0] rii;
  int checks = 0, failures = 0;

  kb_next_node dut (.*);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      rpar_t q;
      int zr, zi, pp, pd;
      q.er = longint'($urandom_range(20000)) - 10000;
      q.ei = longint'($urandom_range(20000)) - 10000;
      q.x0r = int'($urandom_range(40)) - 20;
      q.x0i = int'($urandom_range(40)) - 20;
      q.dr = $urandom_range(1); q.di = $urandom_range(1);
      pp = (t % 3 == 0) ? 65000 : $urandom_range(3000);
      par.valid = ($urandom_range(7) != 0);
      par.ped = ped_t'(pp);
      par.er = EW'(q.er); par.ei = EW'(q.ei);
      par.x0.re = ZW'(q.x0r); par.x0.im = ZW'(q.x0i);
      par.sr = q.dr; par.si = q.di;
      rii = W'(256 + $urandom_range(255));
      sel = cand_t'({$urandom, $urandom, $urandom});
      sel.valid = ($urandom_range(7) != 0);
      sel.nr = NW'($urandom_range(4));
      sel.ni = NW'($urandom_range(6));
      zr = zig(q.x0r, q.dr, int'(sel.nr));
      zi = zig(q.x0i, q.di, int'(sel.ni) + 1);
      pd = node_ped(pp, q, int'(rii), zr, zi);
      #1;
      checks++;
      if (next.valid != (par.valid && sel.valid) || int'(next.ped) != pd ||
          int'(next.sym.re) != zr || int'(next.sym.im) != zi ||
          next.ni != sel.ni + 1 || next.nr != sel.nr || next.parent != sel.parent) begin
        failures++;
        if (failures < 5) $display("FAIL: t=%0d ped %0d expected %0d sym %0d,%0d expected %0d,%0d",
                                   t, next.ped, pd, next.sym.re, next.sym.im, zr, zi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
