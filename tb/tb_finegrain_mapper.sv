// tb_finegrain_mapper: leftover units with random participation masks; the
// target must be the (unit_id mod n)-th GPM of the mask, or the owner when the
// mask is empty, delivered one cycle later; back-pressure must hold the
// output. Also checks that the units spread evenly over a full mask.
module tb_finegrain_mapper;
  import oovr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] part_mask;
  logic [1:0] owner, tgt_gpm;
  logic unit_valid, unit_ready, tgt_valid, tgt_ready;
  logic [31:0] unit_id, tgt_id;
  int checks = 0, failures = 0;
  int hist[4];

  finegrain_mapper #(.NGPM(4)) dut (.*);

  function automatic int ref_tgt(input logic [3:0] m, input logic [1:0] o, input logic [31:0] id);
    int n = $countones(m), k, seen = 0;
    if (n == 0) return int'(o);
    k = id % n;
    for (int g = 0; g < 4; g++) if (m[g]) begin if (seen == k) return g; seen++; end
    return -1;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_q[$]; int exp_id[$];
    unit_valid = 0; tgt_ready = 1; part_mask = 0; owner = 0; unit_id = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      if (t < 2000) begin
        part_mask = 4'($urandom); owner = 2'($urandom);
      end else begin
        part_mask = 4'hF; owner = 2;
      end
      unit_valid = ($urandom % 4) != 0;
      tgt_ready  = (t < 1000) ? (($urandom % 3) != 0) : 1'b1;
      unit_id    = (t < 2000) ? $urandom : 32'(t);
      #1;
      if (tgt_valid) begin
        checks++;
        if (exp_q.size() == 0 || int'(tgt_gpm) != exp_q[0] || tgt_id != 32'(exp_id[0])) begin
          failures++; $display("FAIL t=%0d got %0d", t, tgt_gpm);
        end
      end
      @(posedge clk);
      if (tgt_valid && tgt_ready) begin
        if (t >= 2000) hist[tgt_gpm]++;
        void'(exp_q.pop_front()); void'(exp_id.pop_front());
      end
      if (unit_valid && unit_ready) begin exp_q.push_back(ref_tgt(part_mask, owner, unit_id)); exp_id.push_back(int'(unit_id)); end
    end
    for (int g = 0; g < 4; g++) begin
      checks++;
      if (hist[g] < 300) begin failures++; $display("FAIL uneven spread %0d: %0d", g, hist[g]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
