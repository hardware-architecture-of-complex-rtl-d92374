// tb_kb_level: two levels (level 1 from the root, level 3 from random
// parents) run from a testbench-generated fill/select schedule. At the last
// select cycle (cycle 2K = 8 of the period) the K-best list must equal the
// reference level, and the event pulses must match its counts.
module tb_kb_level;
  import kb_pkg::*;
  import kb_ref_pkg::*;
  localparam int NT = 8, K = 4, RLIMIT = 2;
  logic clk = 0, rst = 1;
  ctl_t ctl;
  logic par_valid [2][K];
  ped_t par_ped [2][K];
  sym_t par_path [2][K][NT];
  cplx_t y [NT];
  cplx_t r [NT][NT];
  logic signed [W-1:0] inv [NT];
  logic d_valid [2][K];
  ped_t d_ped [2][K];
  sym_t d_path [2][K][NT];
  logic ev_real [2], ev_imag [2], ev_rlimit [2];
  int checks = 0, failures = 0;
  int cnt_real [2], cnt_imag [2], cnt_rlim [2];

  always #5 clk = ~clk;

  kb_level #(.NT(NT), .K(K), .RLIMIT(RLIMIT), .LEVEL(1)) dut1 (
    .clk, .rst, .ctl, .par_valid(par_valid[0]), .par_ped(par_ped[0]), .par_path(par_path[0]),
    .y, .r, .inv, .d_valid(d_valid[0]), .d_ped(d_ped[0]), .d_path(d_path[0]),
    .ev_real(ev_real[0]), .ev_imag(ev_imag[0]), .ev_rlimit(ev_rlimit[0]));
  kb_level #(.NT(NT), .K(K), .RLIMIT(RLIMIT), .LEVEL(3)) dut3 (
    .clk, .rst, .ctl, .par_valid(par_valid[1]), .par_ped(par_ped[1]), .par_path(par_path[1]),
    .y, .r, .inv, .d_valid(d_valid[1]), .d_ped(d_ped[1]), .d_path(d_path[1]),
    .ev_real(ev_real[1]), .ev_imag(ev_imag[1]), .ev_rlimit(ev_rlimit[1]));

  always @(posedge clk)
    for (int u = 0; u < 2; u++) begin
      cnt_real[u] += int'(ev_real[u]);
      cnt_imag[u] += int'(ev_imag[u]);
      cnt_rlim[u] += int'(ev_rlimit[u]);
    end

  initial begin
    ctl = '0;
    for (int u = 0; u < 2; u++) begin cnt_real[u] = 0; cnt_imag[u] = 0; cnt_rlim[u] = 0; end
    @(negedge clk); @(negedge clk); rst = 0;
    for (int t = 0; t < 300; t++) begin
      rvec_t  v;
      rnode_t par [2][KMAX];
      rnode_t out [KMAX];
      int     a, b, c;
      v = gen_vec(NT, (t % 3 == 0) ? 1500 : 300);
      root(K, par[0]);
      for (int p = 0; p < KMAX; p++) begin
        par[1][p].valid = (p < K) && ($urandom_range(5) != 0);
        par[1][p].ped = $urandom_range(400);
        for (int j = 0; j < NTMAX; j++) begin
          par[1][p].zr[j] = (j > NT - 3) ? int'($urandom_range(6)) - 3 : 0;
          par[1][p].zi[j] = (j > NT - 3) ? int'($urandom_range(6)) - 3 : 0;
        end
      end
      if (t % 7 == 0) par[1][0].valid = 1;
      for (int i = 0; i < NT; i++) begin
        y[i].re = W'(v.yr[i]); y[i].im = W'(v.yi[i]); inv[i] = W'(v.inv[i]);
        for (int j = 0; j < NT; j++) begin r[i][j].re = W'(v.rr[i][j]); r[i][j].im = W'(v.ri[i][j]); end
      end
      for (int u = 0; u < 2; u++)
        for (int p = 0; p < K; p++) begin
          par_valid[u][p] = par[u][p].valid;
          par_ped[u][p] = ped_t'(par[u][p].ped);
          for (int j = 0; j < NT; j++) begin
            par_path[u][p][j].re = ZW'(par[u][p].zr[j]);
            par_path[u][p][j].im = ZW'(par[u][p].zi[j]);
          end
          cnt_real[u] = 0; cnt_imag[u] = 0; cnt_rlim[u] = 0;
        end
      // one period: K fill cycles, K select cycles
      for (int cyc = 0; cyc < 2 * K; cyc++) begin
        ctl.fill = cyc < K; ctl.select = cyc >= K;
        ctl.kcnt = IW'(cyc < K ? cyc : 0);
        ctl.scnt = IW'(cyc >= K ? cyc - K : 0);
        ctl.last = cyc == 2 * K - 1;
        if (cyc == 2 * K - 1) begin
          #1;
          for (int u = 0; u < 2; u++) begin
            int row;
            row = (u == 0) ? NT - 1 : NT - 3;
            ref_level(v, K, RLIMIT, row, par[u], out, a, b, c);
            for (int k = 0; k < K; k++) begin
              bit ok;
              ok = d_valid[u][k] == out[k].valid && int'(d_ped[u][k]) == out[k].ped;
              for (int j = 0; j < NT; j++)
                ok &= int'(d_path[u][k][j].re) == out[k].zr[j] &&
                      int'(d_path[u][k][j].im) == out[k].zi[j];
              checks++;
              if (!ok) begin
                failures++;
                if (failures < 6) $display("FAIL: t=%0d level %0d entry %0d ped %0d expected %0d",
                                           t, u ? 3 : 1, k, d_ped[u][k], out[k].ped);
              end
            end
            // events of the first K-1 select cycles were counted at the
            // clock edges; add the current cycle's pulse
            checks++;
            if (cnt_real[u] + int'(ev_real[u]) != a || cnt_imag[u] + int'(ev_imag[u]) != b ||
                cnt_rlim[u] + int'(ev_rlimit[u]) != c) begin
              failures++;
              if (failures < 6) $display("FAIL: t=%0d events", t);
            end
          end
        end
        @(negedge clk);
      end
    end
    ctl = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300 * 2 * K + 100) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
