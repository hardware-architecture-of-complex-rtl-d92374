// tb_kb_final_list: random writes; the registered and write-through views are
// compared with a model array.
module tb_kb_final_list;
  import kb_pkg::*;
  localparam int NT = 8, K = 4;
  logic clk = 0, rst = 1, we = 0, w_valid;
  logic [IW-1:0] widx;
  ped_t w_ped;
  sym_t w_path [NT];
  logic q_valid [K], d_valid [K];
  ped_t q_ped [K], d_ped [K];
  sym_t q_path [K][NT], d_path [K][NT];
  logic m_valid [K];
  ped_t m_ped [K];
  sym_t m_path [K][NT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  kb_final_list #(.NT(NT), .K(K)) dut (.*);

  initial begin
    widx = 0; w_valid = 0; w_ped = 0;
    for (int j = 0; j < NT; j++) w_path[j] = '0;
    for (int k = 0; k < K; k++) begin
      m_valid[k] = 0; m_ped[k] = 0;
      for (int j = 0; j < NT; j++) m_path[k][j] = '0;
    end
    @(negedge clk); @(negedge clk); rst = 0;
    for (int t = 0; t < 300; t++) begin
      we = $urandom_range(1);
      widx = IW'($urandom_range(K - 1));
      w_valid = $urandom_range(1);
      w_ped = ped_t'($urandom);
      for (int j = 0; j < NT; j++) w_path[j] = sym_t'($urandom);
      #1;
      for (int k = 0; k < K; k++) begin
        bit hit;
        bit bad;
        hit = we && int'(widx) == k;
        bad = d_valid[k] != (hit ? w_valid : m_valid[k]) ||
              d_ped[k] != (hit ? w_ped : m_ped[k]);
        for (int j = 0; j < NT; j++)
          bad |= d_path[k][j] != (hit ? w_path[j] : m_path[k][j]);
        checks++;
        if (bad) begin
          failures++;
          if (failures < 5) $display("FAIL: write-through t=%0d k=%0d", t, k);
        end
      end
      if (we) begin
        m_valid[widx] = w_valid; m_ped[widx] = w_ped; m_path[widx] = w_path;
      end
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        checks++;
        if (q_valid[k] != m_valid[k] || q_ped[k] != m_ped[k] || q_path[k] != m_path[k]) begin
          failures++;
          if (failures < 5) $display("FAIL: register t=%0d k=%0d", t, k);
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
