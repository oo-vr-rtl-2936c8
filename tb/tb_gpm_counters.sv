// tb_gpm_counters: random assignments, vertex/pixel increments and idle
// reports against a reference model of the total/elapsed counters and the
// per-GPM triangle, vertex and pixel registers; also checks saturation of
// remaining time at zero and clearing of the registers at frame start.
module tb_gpm_counters;
  import oovr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic frame_start;
  logic [31:0] c1, c2;
  logic assign_valid;
  logic [1:0] assign_gpm;
  logic [CNT_W-1:0] assign_pred;
  logic [REG_W-1:0] assign_tri;
  logic [3:0][INC_W-1:0] tv_inc, pix_inc;
  logic [3:0] gpm_idle;
  logic [3:0][CNT_W-1:0] total, elapsed, remaining;
  logic [3:0][REG_W-1:0] tri_cnt, tv_cnt, pix_cnt;
  int checks = 0, failures = 0;

  gpm_counters #(.NGPM(4)) dut (.*);

  logic [CNT_W-1:0] m_tot[4], m_el[4];
  logic [REG_W-1:0] m_tri[4], m_tv[4], m_pix[4];
  int sat_seen = 0;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    frame_start = 0; assign_valid = 0; assign_gpm = 0; assign_pred = 0; assign_tri = 0;
    tv_inc = '0; pix_inc = '0; gpm_idle = '0; c1 = 32'h0003_8000; c2 = 32'h0000_4000;
    for (int g = 0; g < 4; g++) begin m_tot[g] = 0; m_el[g] = 0; m_tri[g] = 0; m_tv[g] = 0; m_pix[g] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      frame_start  = (t % 1000) == 999;
      assign_valid = ($urandom % 8) == 0;
      assign_gpm   = 2'($urandom);
      assign_pred  = CNT_W'($urandom % 200000) << 8;
      assign_tri   = $urandom % 4096;
      for (int g = 0; g < 4; g++) begin
        tv_inc[g]  = 8'($urandom % 5);
        pix_inc[g] = 8'($urandom % 33);
        gpm_idle[g] = ($urandom % 50) == 0;
      end
      @(posedge clk);
      for (int g = 0; g < 4; g++) begin
        if (gpm_idle[g]) m_el[g] = m_tot[g];
        else m_el[g] += CNT_W'(c1) * tv_inc[g] + CNT_W'(c2) * pix_inc[g];
        if (assign_valid && assign_gpm == 2'(g)) m_tot[g] += assign_pred;
        if (frame_start) begin m_tri[g] = 0; m_tv[g] = 0; m_pix[g] = 0; end
        else begin
          if (assign_valid && assign_gpm == 2'(g)) m_tri[g] += assign_tri;
          m_tv[g] += REG_W'(tv_inc[g]); m_pix[g] += REG_W'(pix_inc[g]);
        end
      end
      #1;
      for (int g = 0; g < 4; g++) begin
        logic [CNT_W-1:0] rem;
        rem = (m_tot[g] > m_el[g]) ? m_tot[g] - m_el[g] : 0;
        if (m_el[g] > m_tot[g]) sat_seen++;
        checks++;
        if (total[g] != m_tot[g] || elapsed[g] != m_el[g] || remaining[g] != rem ||
            tri_cnt[g] != m_tri[g] || tv_cnt[g] != m_tv[g] || pix_cnt[g] != m_pix[g]) begin
          failures++;
          $display("FAIL t=%0d g=%0d tot %0d/%0d el %0d/%0d", t, g, total[g], m_tot[g], elapsed[g], m_el[g]);
        end
      end
    end
    checks++; if (sat_seen == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
