// tb_oovr_workloads: the benchmark workloads of the evaluation, one frame
// each, run side by side on one clock. Each is an oovr_workload_run built
// for its frame (both eyes side by side) with one batch per draw call:
//   DM3  191 draws at 1600x1200, 1280x1024, 640x480
//   HL2  328 draws at 1600x1200, 1280x1024, 640x480
//   NFS 1267 draws at 1280x1024
//   UT3  876 draws at 1280x1024
//   WE  1697 draws at 640x480
// 1600x1200 needs FRAME_W = 3200, FRAME_H = 1200, SMP_W = 1600 and 640x480
// needs 1280, 480, 640; 1280x1024 is the default build. Textures and the
// real triangle counts of the games are not available, so batch sizes are
// random (see oovr_workload_run). Passes when every run passes its checks;
// the watchdog ends the run after 5 million cycles.
module tb_oovr_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 9;
  bit done[N];
  int chk[N], fail[N], cyc[N], rem[N], fg[N];

  oovr_workload_run #(.FRAME_W(3200), .FRAME_H(1200), .SMP_W(1600), .NDRAW(191),  .SEED(1)) u_dm3_hi  (.clk, .rst_n, .done(done[0]), .checks(chk[0]), .failures(fail[0]), .n_cycles(cyc[0]), .n_remote(rem[0]), .n_fg(fg[0]));
  oovr_workload_run #(.FRAME_W(2560), .FRAME_H(1024), .SMP_W(1280), .NDRAW(191),  .SEED(2)) u_dm3_mid (.clk, .rst_n, .done(done[1]), .checks(chk[1]), .failures(fail[1]), .n_cycles(cyc[1]), .n_remote(rem[1]), .n_fg(fg[1]));
  oovr_workload_run #(.FRAME_W(1280), .FRAME_H(480),  .SMP_W(640),  .NDRAW(191),  .SEED(3)) u_dm3_lo  (.clk, .rst_n, .done(done[2]), .checks(chk[2]), .failures(fail[2]), .n_cycles(cyc[2]), .n_remote(rem[2]), .n_fg(fg[2]));
  oovr_workload_run #(.FRAME_W(3200), .FRAME_H(1200), .SMP_W(1600), .NDRAW(328),  .SEED(4)) u_hl2_hi  (.clk, .rst_n, .done(done[3]), .checks(chk[3]), .failures(fail[3]), .n_cycles(cyc[3]), .n_remote(rem[3]), .n_fg(fg[3]));
  oovr_workload_run #(.FRAME_W(2560), .FRAME_H(1024), .SMP_W(1280), .NDRAW(328),  .SEED(5)) u_hl2_mid (.clk, .rst_n, .done(done[4]), .checks(chk[4]), .failures(fail[4]), .n_cycles(cyc[4]), .n_remote(rem[4]), .n_fg(fg[4]));
  oovr_workload_run #(.FRAME_W(1280), .FRAME_H(480),  .SMP_W(640),  .NDRAW(328),  .SEED(6)) u_hl2_lo  (.clk, .rst_n, .done(done[5]), .checks(chk[5]), .failures(fail[5]), .n_cycles(cyc[5]), .n_remote(rem[5]), .n_fg(fg[5]));
  oovr_workload_run #(.FRAME_W(2560), .FRAME_H(1024), .SMP_W(1280), .NDRAW(1267), .SEED(7)) u_nfs     (.clk, .rst_n, .done(done[6]), .checks(chk[6]), .failures(fail[6]), .n_cycles(cyc[6]), .n_remote(rem[6]), .n_fg(fg[6]));
  oovr_workload_run #(.FRAME_W(2560), .FRAME_H(1024), .SMP_W(1280), .NDRAW(876),  .SEED(8)) u_ut3     (.clk, .rst_n, .done(done[7]), .checks(chk[7]), .failures(fail[7]), .n_cycles(cyc[7]), .n_remote(rem[7]), .n_fg(fg[7]));
  oovr_workload_run #(.FRAME_W(1280), .FRAME_H(480),  .SMP_W(640),  .NDRAW(1697), .SEED(9)) u_we      (.clk, .rst_n, .done(done[8]), .checks(chk[8]), .failures(fail[8]), .n_cycles(cyc[8]), .n_remote(rem[8]), .n_fg(fg[8]));

  int checks, failures;
  initial begin
    repeat (5000000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < N; i++) begin checks += chk[i]; failures += fail[i]; end
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    all = 0;
    while (!all) begin
      @(posedge clk);
      all = 1;
      for (int i = 0; i < N; i++) if (!done[i]) all = 0;
    end
    checks = 0; failures = 0;
    for (int i = 0; i < N; i++) begin
      checks += chk[i]; failures += fail[i];
      // every run must have sent work across the links and ended in leftover mode
      checks += 2;
      if (rem[i] == 0) failures++;
      if (fg[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
