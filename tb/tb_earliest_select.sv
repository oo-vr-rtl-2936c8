// tb_earliest_select: random remaining times and eligibility masks; the
// reference picks the smallest remaining time among eligible GPMs, lowest
// index on ties, and reports no choice when nothing is eligible.
module tb_earliest_select;
  import oovr_pkg::*;
  logic [3:0][CNT_W-1:0] remaining;
  logic [3:0] eligible;
  logic [1:0] sel;
  logic sel_valid;
  logic [CNT_W-1:0] sel_remaining;
  int checks = 0, failures = 0;

  earliest_select #(.NGPM(4)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int best; logic [CNT_W-1:0] bv;
      for (int g = 0; g < 4; g++)
        remaining[g] = (t % 3 == 0) ? CNT_W'($urandom % 4) : {32'($urandom), 32'($urandom)};
      eligible = 4'($urandom);
      #1;
      best = -1; bv = '0;
      for (int g = 0; g < 4; g++)
        if (eligible[g] && (best < 0 || remaining[g] < bv)) begin best = g; bv = remaining[g]; end
      checks++;
      if (sel_valid != (best >= 0) || (best >= 0 && (int'(sel) != best || sel_remaining != bv))) begin
        failures++;
        $display("FAIL t=%0d elig=%b got %0d want %0d", t, eligible, sel, best);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
