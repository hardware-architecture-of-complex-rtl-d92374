// tb_kb_rounding: random channels and parent paths at every row; residual,
// rounded centre and zig-zag directions are compared with the reference
// model, including centres that fall exactly on a half-integer.
module tb_kb_rounding;
  import kb_pkg::*;
  import kb_ref_pkg::*;
  localparam int NT = 8;
  int checks = 0, failures = 0;

  cplx_t y [NT];
  cplx_t rrow [NT][NT];
  logic signed [W-1:0] inv [NT];
  logic par_valid;
  ped_t par_ped;
  sym_t par_path [NT];
  parent_t par [NT];

  for (genvar row = 0; row < NT; row++) begin : g_row
    kb_rounding #(.NT(NT), .ROW(row)) dut (
      .y(y[row]), .rrow(rrow[row]), .inv(inv[row]), .par_valid(par_valid),
      .par_ped(par_ped), .par_path(par_path), .par(par[row]));
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      rvec_t  v;
      rnode_t p;
      v = gen_vec(NT, 1000);
      if (t % 10 == 0) begin
        // centre on a half-integer: inv = 256 (R_ii = 1), y = odd * 128
        for (int i = 0; i < NT; i++) begin
          v.rr[i][i] = 256; v.inv[i] = 256;
          v.yr[i] = (2 * int'($urandom_range(8)) - 7) * 128;
          v.yi[i] = (2 * int'($urandom_range(8)) - 7) * 128;
          for (int j = i + 1; j < NT; j++) begin v.rr[i][j] = 0; v.ri[i][j] = 0; end
        end
      end
      p.valid = 1; p.ped = $urandom_range(65535);
      for (int j = 0; j < NT; j++) begin
        p.zr[j] = int'($urandom_range(14)) - 7;
        p.zi[j] = int'($urandom_range(14)) - 7;
      end
      par_valid = $urandom_range(1);
      par_ped = ped_t'(p.ped);
      for (int i = 0; i < NT; i++) begin
        y[i].re = W'(v.yr[i]); y[i].im = W'(v.yi[i]); inv[i] = W'(v.inv[i]);
        for (int j = 0; j < NT; j++) begin
          rrow[i][j].re = W'(v.rr[i][j]); rrow[i][j].im = W'(v.ri[i][j]);
        end
        par_path[i].re = ZW'(p.zr[i]); par_path[i].im = ZW'(p.zi[i]);
      end
      #1;
      for (int row = 0; row < NT; row++) begin
        rpar_t q;
        q = round_parent(v, row, p);
        checks++;
        if (longint'(par[row].er) != q.er || longint'(par[row].ei) != q.ei ||
            int'(par[row].x0.re) != q.x0r || int'(par[row].x0.im) != q.x0i ||
            par[row].sr != q.dr || par[row].si != q.di ||
            par[row].valid != par_valid || par[row].ped != par_ped) begin
          failures++;
          if (failures < 5)
            $display("FAIL: t=%0d row %0d x0 %0d,%0d expected %0d,%0d", t, row,
                     par[row].x0.re, par[row].x0.im, q.x0r, q.x0i);
        end
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
