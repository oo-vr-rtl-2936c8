// tb_dhc_unit: one composition unit (GPM 1 of 4, 2560x1024 frame, 640-column
// strips) with random local pixels, random pixels arriving on the three
// links and random back-pressure. Checks that pixels of other strips leave
// on the link to their owner unchanged and in order, that pixels of strip 1
// (local or from links) reach the ROP port in per-source order with address
// y*640 + (x-640), that nothing is lost, and that every source gets ROP
// slots when all compete (round-robin).
module tb_dhc_unit;
  import oovr_pkg::*;
  localparam int SW = 640;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pix_valid, pix_ready, rop_valid, rop_ready;
  pixel_t pix;
  logic [3:0] rem_out_valid, rem_out_ready, rem_in_valid, rem_in_ready;
  pixel_t [3:0] rem_out_pix, rem_in_pix;
  logic [FBA_W-1:0] rop_addr;
  logic [COLOR_W-1:0] rop_color;
  logic [1:0] rop_src;
  logic [31:0] stat_local, stat_remote_out, stat_remote_in;
  int checks = 0, failures = 0;

  dhc_unit #(.NGPM(4), .GPM_ID(1), .FRAME_W(2560), .FRAME_H(1024)) dut (.*);

  typedef struct { logic [FBA_W-1:0] a; logic [COLOR_W-1:0] c; } rop_t;
  rop_t   exp_rop[4][$];   // per source
  pixel_t exp_out[4][$];   // per destination
  int rop_cnt[4];
  bit f_pix, f_rop; bit [3:0] f_out, f_in;
  pixel_t s_pix; pixel_t s_in[4];

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic pixel_t rnd_pix(input int strip);
    pixel_t p;
    p.x = 12'(strip * SW + $urandom % SW); p.y = 12'($urandom % 1024); p.color = $urandom;
    return p;
  endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    pix_valid = 0; pix = '0; rem_out_ready = '1; rem_in_valid = '0; rem_in_pix = '0; rop_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6100; t++) begin
      bit heavy, drain;
      heavy = (t >= 4000 && t < 6000);
      drain = (t >= 6000);
      @(negedge clk);
      // keep the current offer if it was not taken, else make a new one
      if (!drain && (!pix_valid || f_pix)) begin
        pix_valid = heavy ? 1'b1 : (($urandom % 3) != 0);
        pix = rnd_pix(heavy ? 1 : $urandom % 4);
      end
      for (int s = 0; s < 4; s++) if (!drain && s != 1 && (!rem_in_valid[s] || f_in[s])) begin
        rem_in_valid[s] = heavy ? 1'b1 : (($urandom % 4) == 0);
        rem_in_pix[s] = rnd_pix(1);
      end
      rem_out_ready = 4'($urandom);
      rop_ready = heavy ? 1'b1 : (($urandom % 4) != 0);
      if (drain) begin
        if (f_pix) pix_valid = 0;
        for (int s = 0; s < 4; s++) if (f_in[s]) rem_in_valid[s] = 0;
        rem_out_ready = '1; rop_ready = 1;
      end
      #1;
      f_pix = pix_valid && pix_ready; s_pix = pix;
      f_rop = rop_valid && rop_ready;
      f_out = rem_out_valid & rem_out_ready;
      f_in  = rem_in_valid & rem_in_ready;
      for (int s = 0; s < 4; s++) s_in[s] = rem_in_pix[s];
      // a local pixel passes combinationally to the ROP port or a link
      if (f_pix) begin
        int own;
        own = int'(s_pix.x) / SW;
        if (own == 1) exp_rop[1].push_back('{a: FBA_W'(int'(s_pix.y) * SW + int'(s_pix.x) - SW), c: s_pix.color});
        else          exp_out[own].push_back(s_pix);
      end
      if (f_rop) begin
        check(exp_rop[rop_src].size() > 0, "rop from expected source");
        if (exp_rop[rop_src].size() > 0) begin
          check(rop_addr == exp_rop[rop_src][0].a && rop_color == exp_rop[rop_src][0].c, "rop address/colour in order");
          void'(exp_rop[rop_src].pop_front());
        end
        if (heavy) rop_cnt[rop_src]++;
      end
      for (int d = 0; d < 4; d++) if (f_out[d]) begin
        check(d != 1 && exp_out[d].size() > 0 && rem_out_pix[d] == exp_out[d][0], "link output");
        if (exp_out[d].size() > 0) void'(exp_out[d].pop_front());
      end
      // link inputs are buffered and reach the ROP port a cycle later at the earliest
      @(posedge clk);
      for (int s = 0; s < 4; s++) if (f_in[s])
        exp_rop[s].push_back('{a: FBA_W'(int'(s_in[s].y) * SW + int'(s_in[s].x) - SW), c: s_in[s].color});
    end
    for (int s = 0; s < 4; s++) check(exp_rop[s].size() == 0 && exp_out[s].size() == 0, "nothing lost");
    for (int s = 0; s < 4; s++) check(s == 1 || (rop_cnt[s] > 300 && rop_cnt[s] < 700), $sformatf("fair share src %0d: %0d", s, rop_cnt[s]));
    check(rop_cnt[1] > 300, "local share");
    check(stat_remote_out > 0 && stat_remote_in > 0 && stat_local > 0, "statistics count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
