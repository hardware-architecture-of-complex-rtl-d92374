// tb_kb_sorter: random candidate sets (with invalid entries and forced ties)
// against a linear search for the first valid entry of smallest PED.
module tb_kb_sorter;
  import kb_pkg::*;
  localparam int N = 8;
  cand_t in [N];
  cand_t min;
  logic [IW:0] idx;
  int checks = 0, failures = 0;

  kb_sorter #(.N(N)) dut (.*);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int bi, bp;
      bit any;
      for (int i = 0; i < N; i++) begin
        in[i] = cand_t'({$urandom, $urandom, $urandom});
        in[i].valid = ($urandom_range(3) != 0);
        in[i].ped = (t % 2) ? ped_t'($urandom_range(7)) : ped_t'($urandom);
      end
      if (t % 50 == 0) for (int i = 0; i < N; i++) in[i].valid = 0;
      bi = 0; bp = 1 << 20; any = 0;
      for (int i = 0; i < N; i++)
        if (in[i].valid && int'(in[i].ped) < bp) begin bp = in[i].ped; bi = i; any = 1; end
      #1;
      checks++;
      if (any) begin
        if (int'(idx) != bi || min !== in[bi]) begin
          failures++;
          if (failures < 5) $display("FAIL: t=%0d idx %0d expected %0d", t, idx, bi);
        end
      end else if (min.valid) begin
        failures++;
        $display("FAIL: t=%0d valid minimum from invalid inputs", t);
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
