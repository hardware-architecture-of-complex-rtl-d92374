// tb_kbest_64qam: the decoder at its default size on 64-QAM lattice points.
// 64-QAM symbols s in {+-1,+-3,+-5,+-7}^2 become z = (s - (1+j)) / 2 with
// parts in [-4,3]. 300 vectors through random triangular channels with light
// noise (at most 0.12 of a lattice step per part, while the smallest R_ii is
// 1.0): every list is checked against the reference model and, in addition,
// the best path must be the transmitted vector.
module tb_kbest_64qam;
  import kb_pkg::*;

  localparam int NT = NT_DEF;
  localparam int K  = K_DEF;

  logic clk = 0, rst = 1;
  logic in_valid, in_ready, out_valid;
  cplx_t in_y [NT];
  cplx_t in_r [NT][NT];
  logic signed [W-1:0] in_inv [NT];
  logic out_list_valid [K];
  ped_t out_dist [K];
  sym_t out_list [K][NT];
  logic [NT-1:0] ev_real, ev_imag, ev_rlimit;
  logic done;
  int checks, failures, n_out, n_real, n_imag, n_rlim, n_bubble, n_b2b, max_inflight, n_symerr;

  always #5 clk = ~clk;

  kbest_decoder dut (.*);

  kb_dec_harness #(.NT(NT), .K(K), .RLIMIT(RLIMIT_DEF), .NVEC(300), .NOISE(30),
                   .BUBBLES(0), .ZLO(-4), .ZHI(3), .CHECK_TX(1)) u_h (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done);
    $display("64-QAM: %0d vectors, %0d symbol errors on the best path", n_out, n_symerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300 * 2 * K + 2000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
