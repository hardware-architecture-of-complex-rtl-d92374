// tb_kbest_decoder: end-to-end test of the decoder in three configurations:
//   A: default (8x8, K = Rlimit = 4)
//   B: 8x8, K = 4, Rlimit = 2, where a parent's real axis runs out
//   C: 4x4, K = 8, Rlimit = 3 (wider sorter, padded to 16 inputs)
// Each is driven back to back with idle periods and checked against the
// reference model (lists, distances, latency, spacing, event counts). The
// mechanisms are counted and each must occur: real-axis selection,
// imaginary-axis selection, Rlimit bound, idle period, back-to-back outputs
// and a full pipeline (NT vectors in flight).
module tb_kbest_decoder;
  import kb_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  // ---- configuration A
  localparam int NA = 8, KA = 4, RA = 4;
  logic a_in_valid, a_in_ready, a_out_valid, a_done;
  cplx_t a_y [NA]; cplx_t a_r [NA][NA]; logic signed [W-1:0] a_inv [NA];
  logic a_lv [KA]; ped_t a_d [KA]; sym_t a_l [KA][NA];
  logic [NA-1:0] a_er, a_ei, a_el;
  int a_c, a_f, a_o, a_nr, a_ni, a_nl, a_nb, a_bb, a_mi;

  kbest_decoder #(.NT(NA), .K(KA), .RLIMIT(RA)) dut_a (
    .clk, .rst, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_y(a_y), .in_r(a_r),
    .in_inv(a_inv), .out_valid(a_out_valid), .out_list_valid(a_lv), .out_dist(a_d),
    .out_list(a_l), .ev_real(a_er), .ev_imag(a_ei), .ev_rlimit(a_el));
  kb_dec_harness #(.NT(NA), .K(KA), .RLIMIT(RA), .NVEC(60)) h_a (
    .clk, .rst, .in_valid(a_in_valid), .in_ready(a_in_ready), .in_y(a_y), .in_r(a_r),
    .in_inv(a_inv), .out_valid(a_out_valid), .out_list_valid(a_lv), .out_dist(a_d),
    .out_list(a_l), .ev_real(a_er), .ev_imag(a_ei), .ev_rlimit(a_el), .done(a_done),
    .checks(a_c), .failures(a_f), .n_out(a_o), .n_real(a_nr), .n_imag(a_ni),
    .n_rlim(a_nl), .n_bubble(a_nb), .n_b2b(a_bb), .max_inflight(a_mi), .n_symerr());

  // ---- configuration B
  localparam int NB = 8, KB = 4, RB = 2;
  logic b_in_valid, b_in_ready, b_out_valid, b_done;
  cplx_t b_y [NB]; cplx_t b_r [NB][NB]; logic signed [W-1:0] b_inv [NB];
  logic b_lv [KB]; ped_t b_d [KB]; sym_t b_l [KB][NB];
  logic [NB-1:0] b_er, b_ei, b_el;
  int b_c, b_f, b_o, b_nr, b_ni, b_nl, b_nb, b_bb, b_mi;

  kbest_decoder #(.NT(NB), .K(KB), .RLIMIT(RB)) dut_b (
    .clk, .rst, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_y(b_y), .in_r(b_r),
    .in_inv(b_inv), .out_valid(b_out_valid), .out_list_valid(b_lv), .out_dist(b_d),
    .out_list(b_l), .ev_real(b_er), .ev_imag(b_ei), .ev_rlimit(b_el));
  kb_dec_harness #(.NT(NB), .K(KB), .RLIMIT(RB), .NVEC(60)) h_b (
    .clk, .rst, .in_valid(b_in_valid), .in_ready(b_in_ready), .in_y(b_y), .in_r(b_r),
    .in_inv(b_inv), .out_valid(b_out_valid), .out_list_valid(b_lv), .out_dist(b_d),
    .out_list(b_l), .ev_real(b_er), .ev_imag(b_ei), .ev_rlimit(b_el), .done(b_done),
    .checks(b_c), .failures(b_f), .n_out(b_o), .n_real(b_nr), .n_imag(b_ni),
    .n_rlim(b_nl), .n_bubble(b_nb), .n_b2b(b_bb), .max_inflight(b_mi), .n_symerr());

  // ---- configuration C
  localparam int NC = 4, KC = 8, RC = 3;
  logic c_in_valid, c_in_ready, c_out_valid, c_done;
  cplx_t c_y [NC]; cplx_t c_r [NC][NC]; logic signed [W-1:0] c_inv [NC];
  logic c_lv [KC]; ped_t c_d [KC]; sym_t c_l [KC][NC];
  logic [NC-1:0] c_er, c_ei, c_el;
  int c_c, c_f, c_o, c_nr, c_ni, c_nl, c_nb, c_bb, c_mi;

  kbest_decoder #(.NT(NC), .K(KC), .RLIMIT(RC)) dut_c (
    .clk, .rst, .in_valid(c_in_valid), .in_ready(c_in_ready), .in_y(c_y), .in_r(c_r),
    .in_inv(c_inv), .out_valid(c_out_valid), .out_list_valid(c_lv), .out_dist(c_d),
    .out_list(c_l), .ev_real(c_er), .ev_imag(c_ei), .ev_rlimit(c_el));
  kb_dec_harness #(.NT(NC), .K(KC), .RLIMIT(RC), .NVEC(60)) h_c (
    .clk, .rst, .in_valid(c_in_valid), .in_ready(c_in_ready), .in_y(c_y), .in_r(c_r),
    .in_inv(c_inv), .out_valid(c_out_valid), .out_list_valid(c_lv), .out_dist(c_d),
    .out_list(c_l), .ev_real(c_er), .ev_imag(c_ei), .ev_rlimit(c_el), .done(c_done),
    .checks(c_c), .failures(c_f), .n_out(c_o), .n_real(c_nr), .n_imag(c_ni),
    .n_rlim(c_nl), .n_bubble(c_nb), .n_b2b(c_bb), .max_inflight(c_mi), .n_symerr());

  int checks, failures;

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism never happened: %s", what);
    end
  endtask

  initial begin
    checks = 0; failures = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    wait (a_done && b_done && c_done);
    checks   = a_c + b_c + c_c;
    failures = a_f + b_f + c_f;
    need("real-axis selection", a_nr + b_nr + c_nr);
    need("imaginary-axis selection", a_ni + b_ni + c_ni);
    need("Rlimit bound reached", a_nl + b_nl + c_nl);
    need("idle input period", a_nb + b_nb + c_nb);
    need("back-to-back outputs", a_bb + b_bb + c_bb);
    need("full pipeline (8 in flight)", (a_mi >= NA) ? 1 : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60 * 2 * 2 * KC + 2000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", a_c + b_c + c_c, a_f + b_f + c_f + 1);
    $finish;
  end
endmodule
