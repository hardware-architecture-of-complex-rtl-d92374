// kb_dec_harness: stimulus and checker for one kbest_decoder.
//
// Feeds NVEC random vectors (with an idle period now and then when BUBBLES
// is set), and for each output compares the K-best list, the distances, the
// latency (NT level periods of 2K cycles) and the spacing of back-to-back
// outputs (2K cycles) against the reference model. At the end it compares
// the number of real-axis selections, imaginary-axis selections and Rlimit
// bound hits reported by the decoder with the model's counts.
module kb_dec_harness
  import kb_pkg::*;
  import kb_ref_pkg::*;
#(
  parameter int NT      = 8,
  parameter int K       = 4,
  parameter int RLIMIT  = 4,
  parameter int NVEC    = 50,
  parameter int NOISE   = 300,
  parameter bit BUBBLES = 1,
  parameter int ZLO     = -3,   // range of transmitted symbol parts
  parameter int ZHI     = 3,
  parameter bit CHECK_TX = 0    // the best path must equal the sent vector
) (
  input  logic                clk,
  input  logic                rst,
  output logic                in_valid,
  input  logic                in_ready,
  output cplx_t               in_y   [NT],
  output cplx_t               in_r   [NT][NT],
  output logic signed [W-1:0] in_inv [NT],
  input  logic                out_valid,
  input  logic                out_list_valid [K],
  input  ped_t                out_dist       [K],
  input  sym_t                out_list       [K][NT],
  input  logic [NT-1:0]       ev_real,
  input  logic [NT-1:0]       ev_imag,
  input  logic [NT-1:0]       ev_rlimit,
  output logic                done,
  output int                  checks,
  output int                  failures,
  output int                  n_out,
  output int                  n_real,
  output int                  n_imag,
  output int                  n_rlim,
  output int                  n_bubble,
  output int                  n_b2b,
  output int                  max_inflight,
  output int                  n_symerr
);
  rvec_t  sent_q [$];
  longint acc_q  [$];
  rvec_t  cur;
  longint cycle;
  longint last_out;
  int     m_real, m_imag, m_rlim;
  int     n_sent;

  initial begin
    done = 0; checks = 0; failures = 0; n_out = 0; n_real = 0; n_imag = 0;
    n_rlim = 0; n_bubble = 0; n_b2b = 0; max_inflight = 0; n_symerr = 0;
    m_real = 0; m_imag = 0; m_rlim = 0; n_sent = 0; cycle = 0; last_out = -1;
    in_valid = 0;
    for (int i = 0; i < NT; i++) begin
      in_y[i] = '0; in_inv[i] = '0;
      for (int j = 0; j < NT; j++) in_r[i][j] = '0;
    end
  end

  always @(posedge clk) cycle <= cycle + 1;

  // Driver: present a vector in every cycle in which in_ready is high.
  initial begin
    @(negedge clk);
    while (rst) @(negedge clk);
    while (n_sent < NVEC) begin
      if (in_ready) begin
        if (BUBBLES && ($urandom_range(7) == 0)) begin
          in_valid = 0;
          n_bubble++;
        end else begin
          cur = gen_vec(NT, (!CHECK_TX && n_sent % 5 == 4) ? 4 * NOISE : NOISE, ZLO, ZHI);
          for (int i = 0; i < NT; i++) begin
            in_y[i].re = W'(cur.yr[i]);
            in_y[i].im = W'(cur.yi[i]);
            in_inv[i]  = W'(cur.inv[i]);
            for (int j = 0; j < NT; j++) begin
              in_r[i][j].re = W'(cur.rr[i][j]);
              in_r[i][j].im = W'(cur.ri[i][j]);
            end
          end
          in_valid = 1;
          sent_q.push_back(cur);
          n_sent++;
        end
      end else begin
        in_valid = 0;
      end
      @(negedge clk);
    end
    in_valid = 0;
  end

  // Checker.
  always @(posedge clk) begin
    if (!rst) begin
      if (in_valid && in_ready) begin
        acc_q.push_back(cycle);
        if (acc_q.size() > max_inflight) max_inflight = acc_q.size();
      end
      n_real += $countones(ev_real);
      n_imag += $countones(ev_imag);
      n_rlim += $countones(ev_rlimit);
      if (out_valid) begin
        rvec_t  v;
        rnode_t ref_out [KMAX];
        int     a, b, c;
        longint t_acc;
        if (sent_q.size() == 0 || acc_q.size() == 0) begin
          failures++;
          $display("FAIL: output without a pending vector at cycle %0d", cycle);
        end else begin
          v     = sent_q.pop_front();
          t_acc = acc_q.pop_front();
          ref_detect(v, K, RLIMIT, ref_out, a, b, c);
          m_real += a; m_imag += b; m_rlim += c;
          checks++;
          if (cycle - t_acc != longint'(NT * 2 * K + 1)) begin
            failures++;
            $display("FAIL: latency %0d, expected %0d", cycle - t_acc, NT * 2 * K + 1);
          end
          if (last_out >= 0 && cycle - last_out == longint'(2 * K)) n_b2b++;
          if (last_out >= 0 && cycle - last_out < longint'(2 * K)) begin
            failures++;
            $display("FAIL: outputs %0d cycles apart", cycle - last_out);
          end
          last_out = cycle;
          for (int k = 0; k < K; k++) begin
            bit ok;
            ok = (out_list_valid[k] == ref_out[k].valid) &&
                 (int'(out_dist[k]) == ref_out[k].ped);
            for (int j = 0; j < NT; j++)
              ok &= (int'(out_list[k][j].re) == ref_out[k].zr[j]) &&
                    (int'(out_list[k][j].im) == ref_out[k].zi[j]);
            checks++;
            if (!ok) begin
              failures++;
              if (failures < 10)
                $display("FAIL: vector %0d entry %0d: dist %0d expected %0d", n_out, k,
                         out_dist[k], ref_out[k].ped);
            end
          end
          for (int j = 0; j < NT; j++)
            if (int'(out_list[0][j].re) != v.ztr[j] || int'(out_list[0][j].im) != v.zti[j])
              n_symerr++;
          if (CHECK_TX) begin
            checks++;
            for (int j = 0; j < NT; j++)
              if (int'(out_list[0][j].re) != v.ztr[j] || int'(out_list[0][j].im) != v.zti[j]) begin
                failures++;
                $display("FAIL: vector %0d: best path differs from the sent vector at row %0d", n_out, j);
                break;
              end
          end
          n_out++;
          if (n_out == NVEC) begin
            checks++;
            if (m_real != n_real || m_imag != n_imag || m_rlim != n_rlim) begin
              failures++;
              $display("FAIL: events real %0d/%0d imag %0d/%0d rlimit %0d/%0d",
                       n_real, m_real, n_imag, m_imag, n_rlim, m_rlim);
            end
            done = 1;
          end
        end
      end
    end
  end
endmodule
