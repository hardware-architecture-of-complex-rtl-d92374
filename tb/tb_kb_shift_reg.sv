// tb_kb_shift_reg: random shift / update / hold / clear operations on the
// candidate shift register, compared with a queue model after every clock.
module tb_kb_shift_reg;
  import kb_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst = 1, clr = 0, shift = 0;
  cand_t si, upd;
  logic en [N];
  cand_t q [N];
  cand_t m [N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  kb_shift_reg #(.N(N)) dut (.*);

  function automatic cand_t rnd();
    cand_t c;
    c = cand_t'({$urandom, $urandom, $urandom});
    return c;
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin en[i] = 0; m[i] = '0; end
    si = '0; upd = '0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int t = 0; t < 400; t++) begin
      int op;
      op = $urandom_range(9);
      si = rnd(); upd = rnd();
      clr = (op == 0); shift = (op >= 1 && op <= 4);
      for (int i = 0; i < N; i++) en[i] = 0;
      if (op >= 5 && op <= 8) en[$urandom_range(N - 1)] = 1;
      // model
      if (clr) for (int i = 0; i < N; i++) m[i] = '0;
      else if (shift) begin
        for (int i = N - 1; i > 0; i--) m[i] = m[i-1];
        m[0] = si;
      end else for (int i = 0; i < N; i++) if (en[i]) m[i] = upd;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (q[i] !== m[i]) begin
          failures++;
          if (failures < 5) $display("FAIL: t=%0d reg%0d", t, i + 1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
