// tb_kb_datapath: the data path alone (4 levels, K = 4, Rlimit = 3) driven
// by a testbench-generated level schedule; vectors enter every period and
// the list leaving the last level register is compared with the reference
// detector, NT periods after the vector entered.
module tb_kb_datapath;
  import kb_pkg::*;
  import kb_ref_pkg::*;
  localparam int NT = 4, K = 4, RLIMIT = 3, NVEC = 80;
  logic clk = 0, rst = 1;
  ctl_t ctl;
  logic in_valid;
  cplx_t in_y [NT];
  cplx_t in_r [NT][NT];
  logic signed [W-1:0] in_inv [NT];
  logic out_vvalid;
  logic out_valid [K];
  ped_t out_ped [K];
  sym_t out_path [K][NT];
  logic [NT-1:0] ev_real, ev_imag, ev_rlimit;
  rvec_t q [$];
  int checks = 0, failures = 0, n_out = 0, period = 0;

  always #5 clk = ~clk;
  kb_datapath #(.NT(NT), .K(K), .RLIMIT(RLIMIT)) dut (.*);

  initial begin
    ctl = '0; in_valid = 0;
    for (int i = 0; i < NT; i++) begin
      in_y[i] = '0; in_inv[i] = '0;
      for (int j = 0; j < NT; j++) in_r[i][j] = '0;
    end
    @(negedge clk); @(negedge clk); rst = 0;
    while (n_out < NVEC) begin
      for (int cyc = 0; cyc < 2 * K; cyc++) begin
        ctl.fill = cyc < K; ctl.select = cyc >= K;
        ctl.kcnt = IW'(cyc < K ? cyc : 0);
        ctl.scnt = IW'(cyc >= K ? cyc - K : 0);
        ctl.last = cyc == 2 * K - 1;
        if (cyc == 0 && out_vvalid) begin
          rvec_t v;
          rnode_t out [KMAX];
          int a, b, c;
          v = q.pop_front();
          ref_detect(v, K, RLIMIT, out, a, b, c);
          for (int k = 0; k < K; k++) begin
            bit ok;
            ok = out_valid[k] == out[k].valid && int'(out_ped[k]) == out[k].ped;
            for (int j = 0; j < NT; j++)
              ok &= int'(out_path[k][j].re) == out[k].zr[j] && int'(out_path[k][j].im) == out[k].zi[j];
            checks++;
            if (!ok) begin
              failures++;
              if (failures < 6) $display("FAIL: vector %0d entry %0d", n_out, k);
            end
          end
          n_out++;
        end
        if (cyc == 2 * K - 1) begin
          rvec_t v;
          v = gen_vec(NT, 400);
          in_valid = (period < NVEC);
          for (int i = 0; i < NT; i++) begin
            in_y[i].re = W'(v.yr[i]); in_y[i].im = W'(v.yi[i]); in_inv[i] = W'(v.inv[i]);
            for (int j = 0; j < NT; j++) begin
              in_r[i][j].re = W'(v.rr[i][j]); in_r[i][j].im = W'(v.ri[i][j]);
            end
          end
          if (in_valid) q.push_back(v);
          period++;
        end
        @(negedge clk);
        in_valid = 0;
      end
    end
    // latency: the first vector entered at the end of period 1 and left at
    // the end of period 1 + NT, so NT + 1 periods ran before the first check
    checks++;
    if (period != NVEC + NT + 1) begin
      failures++;
      $display("FAIL: %0d periods for %0d vectors", period, NVEC);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NVEC + NT + 10) * 2 * K) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
