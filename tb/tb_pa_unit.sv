// tb_pa_unit: jobs with and without pre-allocation and duplicate jobs, with
// random back-pressure on the copy and launch ports. Checks that copies cover
// exactly tex_addr .. tex_addr+lines-1 in order, that launches follow in job
// (batch-ID) order, that dup jobs launch nothing, and that an unstalled job
// of n lines takes n+2 cycles from acceptance to launch.
module tb_pa_unit;
  import oovr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic job_valid, job_ready, copy_valid, copy_ready, launch_valid, launch_ready, empty;
  pa_job_t job;
  logic [ADDR_W-1:0] copy_addr;
  logic [7:0] copy_gpm;
  batch_desc_t launch_desc;
  logic [2:0] pending;
  int checks = 0, failures = 0;

  pa_unit #(.DEPTH(4), .GPM_ID(2)) dut (.*);

  logic [ADDR_W-1:0] exp_copy[$];
  batch_desc_t exp_launch[$];
  int exp_launch_copies[$];   // copies that must be done before each launch
  int copies_enq = 0, copies_done = 0;

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (copy_valid && copy_ready) begin
      check(exp_copy.size() > 0 && copy_addr == exp_copy[0], "copy address");
      check(copy_gpm == 8'd2, "copy destination");
      if (exp_copy.size() > 0) void'(exp_copy.pop_front());
      copies_done++;
    end
    if (launch_valid && launch_ready) begin
      check(exp_launch.size() > 0 && launch_desc == exp_launch[0], "launch order");
      check(exp_launch_copies.size() > 0 && copies_done == exp_launch_copies[0], "data copied before launch");
      if (exp_launch.size() > 0) begin void'(exp_launch.pop_front()); void'(exp_launch_copies.pop_front()); end
    end
  end

  task automatic push(input pa_job_t j);
    @(negedge clk);
    job = j; job_valid = 1;
    @(posedge clk);
    while (!job_ready) @(posedge clk);
    if (j.prealloc || j.dup) for (int i = 0; i < j.desc.tex_lines; i++) begin exp_copy.push_back(j.desc.tex_addr + i); copies_enq++; end
    if (!j.dup) begin exp_launch.push_back(j.desc); exp_launch_copies.push_back(copies_enq); end
    @(negedge clk); job_valid = 0;
  endtask

  initial begin
    int t0, t1;
    job_valid = 0; job = '0; copy_ready = 1; launch_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    // timing: one job of 10 lines, no stalls
    @(negedge clk);
    job = '{desc: '{id: 16'd7, ntri: 500, tex_addr: 32'h4000, tex_lines: 16'd10}, prealloc: 1'b1, dup: 1'b0};
    job_valid = 1;
    for (int i = 0; i < 10; i++) exp_copy.push_back(32'h4000 + i);
    copies_enq = 10;
    exp_launch.push_back(job.desc); exp_launch_copies.push_back(10);
    @(posedge clk); t0 = int'($time / 10);
    @(negedge clk); job_valid = 0;
    while (!(launch_valid && launch_ready)) @(posedge clk);
    t1 = int'($time / 10);
    check(t1 - t0 == 12, $sformatf("10-line job launches after 12 cycles (got %0d)", t1 - t0));
    // random jobs with back-pressure
    fork
      begin
        for (int n = 0; n < 200; n++) begin
          pa_job_t j;
          j.desc.id = 16'(100 + n); j.desc.ntri = $urandom % 4096;
          j.desc.tex_addr = $urandom & 32'hFFFF_F000; j.desc.tex_lines = 16'($urandom % 9);
          j.prealloc = ($urandom % 2) != 0; j.dup = ($urandom % 5) == 0;
          push(j);
        end
      end
      begin
        repeat (6000) begin
          @(negedge clk);
          copy_ready = ($urandom % 3) != 0;
          launch_ready = ($urandom % 2) != 0;
        end
      end
    join
    @(negedge clk); copy_ready = 1; launch_ready = 1;
    repeat (200) @(posedge clk);
    check(exp_copy.size() == 0, "all copies issued");
    check(exp_launch.size() == 0, "all launches issued");
    check(empty && pending == 0, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
