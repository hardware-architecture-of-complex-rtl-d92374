// tb_kb_stage_reg: random data with random load pulses; outputs must follow
// the last loaded data and hold otherwise; reset clears the vector valid.
module tb_kb_stage_reg;
  import kb_pkg::*;
  localparam int NT = 8, K = 4;
  logic clk = 0, rst = 1, load = 0, d_vvalid, q_vvalid;
  logic d_valid [K], q_valid [K];
  ped_t d_ped [K], q_ped [K];
  sym_t d_path [K][NT], q_path [K][NT];
  cplx_t d_y [NT], q_y [NT];
  cplx_t d_r [NT][NT], q_r [NT][NT];
  logic signed [W-1:0] d_inv [NT], q_inv [NT];
  logic m_vvalid;
  logic m_valid [K]; ped_t m_ped [K]; sym_t m_path [K][NT];
  cplx_t m_y [NT]; cplx_t m_r [NT][NT]; logic signed [W-1:0] m_inv [NT];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  kb_stage_reg #(.NT(NT), .K(K)) dut (.*);

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    checks++;
    if (q_vvalid !== 1'b0) begin failures++; $display("FAIL: valid after reset"); end
    m_vvalid = 0;
    for (int k = 0; k < K; k++) begin
      m_valid[k] = 0; m_ped[k] = 0;
      for (int j = 0; j < NT; j++) m_path[k][j] = '0;
    end
    for (int i = 0; i < NT; i++) begin
      m_y[i] = '0; m_inv[i] = '0;
      for (int j = 0; j < NT; j++) m_r[i][j] = '0;
    end
    for (int t = 0; t < 200; t++) begin
      load = ($urandom_range(2) == 0);
      d_vvalid = $urandom_range(1);
      for (int k = 0; k < K; k++) begin
        d_valid[k] = $urandom_range(1); d_ped[k] = ped_t'($urandom);
        for (int j = 0; j < NT; j++) d_path[k][j] = sym_t'($urandom);
      end
      for (int i = 0; i < NT; i++) begin
        d_y[i] = cplx_t'($urandom); d_inv[i] = W'($urandom);
        for (int j = 0; j < NT; j++) d_r[i][j] = cplx_t'($urandom);
      end
      if (load) begin
        m_vvalid = d_vvalid; m_valid = d_valid; m_ped = d_ped; m_path = d_path;
        m_y = d_y; m_r = d_r; m_inv = d_inv;
      end
      @(negedge clk);
      begin
        checks++;
        if (q_vvalid != m_vvalid || q_valid != m_valid || q_ped != m_ped ||
            q_path != m_path || q_y != m_y || q_r != m_r || q_inv != m_inv) begin
          failures++;
          if (failures < 5) $display("FAIL: t=%0d", t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
