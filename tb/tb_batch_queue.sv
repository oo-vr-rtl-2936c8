// tb_batch_queue: self-checking test of the 4-entry batch queue.
// Pushes random batches with random back-pressure on both sides, keeps a
// reference queue, and checks order, data, full at 4 entries, empty, count
// and that a pushed batch is visible one cycle later.
module tb_batch_queue;
  import oovr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, full, empty;
  batch_desc_t in_desc, out_desc;
  logic [2:0] count;
  int checks = 0, failures = 0;

  batch_queue #(.DEPTH(4)) dut (.*);

  batch_desc_t model[$];

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pushes = 0, saw_full = 0;
  initial begin
    in_valid = 0; out_ready = 0; in_desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(empty && !full && count == 0, "empty after reset");
    // fill to full with the consumer stalled
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      in_valid = 1; in_desc = '{id: 16'(i), ntri: 100 + i, tex_addr: 32'h1000 * i, tex_lines: 16'(i)};
      @(posedge clk);
      if (in_ready) model.push_back(in_desc);
      #1;
    end
    @(negedge clk); in_valid = 0;
    check(full && count == 4 && !in_ready, "full at 4 entries");
    check(model.size() == 4, "fifth push refused");
    check(out_valid && out_desc == model[0], "head visible");
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_desc   = '{id: 16'(100 + pushes), ntri: $urandom, tex_addr: $urandom, tex_lines: 16'($urandom)};
      #1;
      check(count == 3'(model.size()), "count matches");
      check(out_valid == (model.size() != 0), "out_valid");
      if (out_valid) check(out_desc == model[0], "head data");
      if (full) saw_full++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) begin model.push_back(in_desc); pushes++; end
    end
    check(saw_full > 0, "full seen under traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
