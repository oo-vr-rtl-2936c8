// tb_rt_predictor: feeds 8 calibration batches (triangle counts at dispatch,
// vertex/pixel increments while they run, rendering times at completion),
// then checks the learnt rates against independently computed values
//   c0 = (T << 16) / sum_tri, c1 = (T << 16) / (2 sum_tv), c2 = (T << 16) / (2 sum_pix),
// the latency from the 8th completion to cal_done (64-cycle dividers), that
// further activity no longer changes the rates, and pred_total = c0 * tri.
module tb_rt_predictor;
  import oovr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cal_tri_valid;
  logic [REG_W-1:0] cal_tri, tri_in;
  logic [3:0] done_valid;
  logic [3:0][REG_W-1:0] done_cycles;
  logic [3:0][INC_W-1:0] tv_inc, pix_inc;
  logic [CNT_W-1:0] pred_total;
  logic [31:0] c0, c1, c2;
  logic cal_done, cal_collecting;
  int checks = 0, failures = 0;

  rt_predictor #(.NGPM(4), .CAL_BATCHES(8)) dut (.*);

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint s_tri, s_tv, s_pix, s_t;
    longint e0, e1, e2;
    int n_done, t_last, t_cal;
    s_tri = 0; s_tv = 0; s_pix = 0; s_t = 0; n_done = 0;
    cal_tri_valid = 0; cal_tri = 0; tri_in = 0; done_valid = 0; done_cycles = '0; tv_inc = '0; pix_inc = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // dispatch 8 batches
    for (int b = 0; b < 8; b++) begin
      @(negedge clk); cal_tri_valid = 1; cal_tri = 200 + 37 * b; s_tri += longint'(cal_tri);
    end
    @(negedge clk); cal_tri_valid = 0;
    // run: random increments, then completions two at a time
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int g = 0; g < 4; g++) begin
        tv_inc[g] = 8'($urandom % 4); pix_inc[g] = 8'($urandom % 40);
        s_tv += longint'(tv_inc[g]); s_pix += longint'(pix_inc[g]);
      end
      done_valid = '0;
      if (t % 60 == 59) begin
        done_valid = 4'b0101 << (t / 60 % 2);
        for (int g = 0; g < 4; g++) begin
          done_cycles[g] = 1000 + 17 * t + g;
          if (done_valid[g]) begin s_t += longint'(done_cycles[g]); n_done++; end
        end
        if (n_done >= 8) t_last = int'($time / 10);
      end
      check(cal_collecting, "collecting before 8 completions");
      if (n_done >= 8) break;
    end
    @(negedge clk); done_valid = '0; tv_inc = '0; pix_inc = '0;
    wait (cal_done); t_cal = int'($time / 10);
    @(negedge clk);
    check(t_cal - t_last >= 64 && t_cal - t_last <= 70, $sformatf("calibration latency %0d", t_cal - t_last));
    e0 = (s_t << 16) / s_tri;
    e1 = (s_t << 16) / (2 * s_tv);
    e2 = (s_t << 16) / (2 * s_pix);
    check(c0 == 32'(e0), $sformatf("c0 %0d want %0d", c0, e0));
    check(c1 == 32'(e1), $sformatf("c1 %0d want %0d", c1, e1));
    check(c2 == 32'(e2), $sformatf("c2 %0d want %0d", c2, e2));
    // rates frozen after calibration
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      done_valid = 4'($urandom); done_cycles[0] = $urandom; tv_inc[1] = 8'd3;
      tri_in = $urandom % 5000;
      #1;
      check(pred_total == 64'(c0) * 64'(tri_in), "prediction c0*tri");
    end
    check(c0 == 32'(e0) && c1 == 32'(e1) && c2 == 32'(e2), "rates frozen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
