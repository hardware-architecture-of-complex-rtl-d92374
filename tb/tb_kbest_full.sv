// tb_kbest_full: the decoder at its default size (8x8, K = Rlimit = 4),
// 200 random vectors back to back with occasional idle periods, every list
// checked against the reference model, plus latency and throughput.
module tb_kbest_full;
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

  kb_dec_harness #(.NT(NT), .K(K), .RLIMIT(RLIMIT_DEF), .NVEC(200)) u_h (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (done);
    $display("full size: %0d vectors, %0d back-to-back, %0d idle periods, %0d in flight at most",
             n_out, n_b2b, n_bubble, max_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200 * 2 * 2 * K + 2000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
