// tb_dist_engine: the distribution engine with four behavioural GPMs.
// Phase 1: 8 calibration batches must launch round-robin (batch i on GPM
//   i mod 4) without texture copies, and batch 9 must wait until all 8 have
//   completed and the rates are learnt; the rates are checked against values
//   computed from the reported times.
// Phase 2: with launches held (GPMs make no progress), the remaining time of
//   each GPM is the sum of c0 * #tri of its batches, so the chosen GPM of each
//   batch is predicted exactly by a reference model here; every such batch
//   must copy its texture lines before it launches; with all PA queues full
//   dispatch must stall.
// Phase 3: a frame with one large batch; after frame_end the idle GPMs must
//   receive duplicate copies of the straggler's texture data and the engine
//   must signal fine-grained mode with the straggler as owner.
module tb_dist_engine;
  import oovr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frame_start, frame_end, batch_valid, batch_ready;
  batch_desc_t batch_desc;
  logic [3:0] gpm_done_valid, gpm_idle, copy_valid, copy_ready, launch_valid, launch_ready;
  logic [3:0][REG_W-1:0] gpm_done_cycles;
  logic [3:0][INC_W-1:0] gpm_tv_inc, gpm_pix_inc;
  logic [3:0][ADDR_W-1:0] copy_addr;
  batch_desc_t [3:0] launch_desc;
  logic fg_active; logic [1:0] fg_owner; logic [3:0] fg_part_mask;
  logic cal_done;
  logic [31:0] stat_cal_dispatch, stat_pred_dispatch, stat_learn_stall, stat_full_stall, stat_dup_jobs, stat_queue_full;
  logic hold;
  int checks = 0, failures = 0;

  dist_engine #(.NGPM(4), .QDEPTH(4), .PADEPTH(4), .CAL_BATCHES(8)) dut (.*);

  int nb[4], busy[4];
  logic [BID_W-1:0] cur[4];
  for (genvar g = 0; g < 4; g++) begin : g_m
    logic pv; pixel_t pp;
    gpm_model #(.ID(g), .TRI_CYC(2), .PIX_PER_TRI(16)) u_gpm (
      .clk, .rst_n, .hold,
      .launch_valid(launch_valid[g]), .launch_ready(launch_ready[g]), .launch_desc(launch_desc[g]),
      .done_valid(gpm_done_valid[g]), .done_cycles(gpm_done_cycles[g]),
      .tv_inc(gpm_tv_inc[g]), .pix_inc(gpm_pix_inc[g]), .idle(gpm_idle[g]),
      .pix_valid(pv), .pix_ready(1'b1), .pix(pp), .n_batches(nb[g]), .busy_cycles(busy[g]), .cur_id(cur[g]));
  end
  assign copy_ready = '1;

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // monitor launches and copies
  int launch_gpm[int];      // batch id -> GPM
  int launch_time[int];
  int copies[4][$];
  int n_copy[4];
  longint s_t = 0, s_tri = 0, s_tv = 0, s_pix = 0;
  int cal_time = -1;
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 4; g++) begin
      if (launch_valid[g] && launch_ready[g]) begin
        launch_gpm[int'(launch_desc[g].id)] = g;
        launch_time[int'(launch_desc[g].id)] = int'($time / 10);
      end
      if (copy_valid[g] && copy_ready[g]) begin copies[g].push_back(int'(copy_addr[g])); n_copy[g]++; end
      if (!cal_done) begin
        if (gpm_done_valid[g]) s_t += longint'(gpm_done_cycles[g]);
        s_tv += longint'(gpm_tv_inc[g]); s_pix += longint'(gpm_pix_inc[g]);
      end
    end
    if (cal_done && cal_time < 0) cal_time = int'($time / 10);
  end

  initial begin
    #20000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input int id, input int ntri, input int addr, input int lines);
    @(negedge clk);
    batch_valid = 1;
    batch_desc = '{id: BID_W'(id), ntri: REG_W'(ntri), tex_addr: ADDR_W'(addr), tex_lines: LEN_W'(lines)};
    @(posedge clk);
    while (!batch_ready) @(posedge clk);
    @(negedge clk); batch_valid = 0;
  endtask

  initial begin
    longint m_rem[4];
    int m_cnt[4];
    longint e0, e1, e2;
    int exp_gpm[int];
    frame_start = 0; frame_end = 0; batch_valid = 0; batch_desc = '0; hold = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); frame_start = 1; @(negedge clk); frame_start = 0;

    // ---------------- phase 1: calibration ----------------
    for (int i = 0; i < 9; i++) begin
      send(i, 40 + 13 * i, 32'h1000 * (i + 1), 4);
      if (i < 8) s_tri += 40 + 13 * i;
    end
    wait (cal_done);
    repeat (30) @(posedge clk);
    for (int i = 0; i < 8; i++) check(launch_gpm.exists(i) && launch_gpm[i] == i % 4, $sformatf("calibration batch %0d round-robin", i));
    check(launch_time.exists(8) && launch_time[8] > cal_time - 1, "batch 9 waits for calibration");
    check(stat_learn_stall > 0, "learning stall counted");
    check(stat_cal_dispatch == 8, "8 calibration dispatches");
    // copies: only batch 8 (predictive) may copy
    begin
      int n_all;
      n_all = n_copy[0] + n_copy[1] + n_copy[2] + n_copy[3];
      check(n_all == 4, $sformatf("only the 9th batch pre-allocates (%0d copies)", n_all));
    end
    e0 = (s_t << 16) / s_tri; e1 = (s_t << 16) / (2 * s_tv); e2 = (s_t << 16) / (2 * s_pix);
    check(dut.c0 == 32'(e0) && dut.c1 == 32'(e1) && dut.c2 == 32'(e2), "learnt rates");
    wait (gpm_idle == 4'hF);
    repeat (5) @(posedge clk);

    // ---------------- phase 2: exact choice with GPMs held ----------------
    hold = 1;
    for (int g = 0; g < 4; g++) begin m_rem[g] = 0; m_cnt[g] = 0; copies[g].delete(); end
    for (int i = 0; i < 16; i++) begin
      int ntri, best;
      ntri = 50 + (i * 389) % 900;
      best = -1;
      for (int g = 0; g < 4; g++)
        if (m_cnt[g] < 4 && (best < 0 || m_rem[g] < m_rem[best])) best = g;
      exp_gpm[100 + i] = best;
      m_cnt[best]++;
      m_rem[best] += longint'(dut.c0) * ntri;
      send(100 + i, ntri, 32'h10_0000 + 32'h100 * i, 3);
    end
    // four PA queues of 4 hold 16 batches; one more must stall
    @(negedge clk);
    batch_valid = 1; batch_desc = '{id: 16'd200, ntri: 10, tex_addr: 32'h20_0000, tex_lines: 1};
    repeat (20) @(posedge clk);
    check(stat_full_stall > 0, "dispatch stalls with all PA queues full");
    check(launch_gpm.exists(100) == 0, "nothing launched while held");
    @(negedge clk); batch_valid = 0;
    // while a GPM is held, its PA has copied the data of its first batch
    // and waits to launch it; later batches wait behind it (batch order)
    for (int g = 0; g < 4; g++) begin
      int first;
      first = -1;
      for (int i = 15; i >= 0; i--) if (exp_gpm[100 + i] == g) first = i;
      check(first >= 0 && copies[g].size() == 3 && copies[g][0] == 32'h10_0000 + 32'h100 * first,
            $sformatf("GPM %0d copied its first batch's texture before launch", g));
    end
    hold = 0;
    repeat (5000) @(posedge clk);
    for (int i = 0; i < 16; i++)
      check(launch_gpm.exists(100 + i) && launch_gpm[100 + i] == exp_gpm[100 + i],
            $sformatf("batch %0d on predicted GPM %0d", 100 + i, exp_gpm[100 + i]));
    wait (gpm_idle == 4'hF);
    repeat (30) @(posedge clk);

    // ---------------- phase 3: leftover duplication ----------------
    @(negedge clk); frame_start = 1; @(negedge clk); frame_start = 0;
    for (int g = 0; g < 4; g++) copies[g].delete();
    send(300, 3000, 32'h30_0000, 6);   // large batch
    send(301, 20, 32'h31_0000, 2);
    send(302, 20, 32'h32_0000, 2);
    @(negedge clk); frame_end = 1; @(negedge clk); frame_end = 0;
    begin
      int seen_fg;
      seen_fg = 0;
      repeat (2000) begin
        @(posedge clk);
        if (fg_active) begin
          seen_fg++;
          check(fg_owner == 2'(launch_gpm[300]), "straggler is owner");
          check(fg_part_mask[fg_owner], "owner takes part");
        end
      end
      check(seen_fg > 0, "fine-grained mode entered");
    end
    check(stat_dup_jobs >= 3, $sformatf("duplicate jobs to idle GPMs (%0d)", stat_dup_jobs));
    for (int g = 0; g < 4; g++) if (g != launch_gpm[300]) begin
      bit found;
      found = 0;
      foreach (copies[g][k]) if (copies[g][k] == 32'h30_0005) found = 1;
      check(found, $sformatf("GPM %0d got a copy of the straggler's data", g));
      if (!found) foreach (copies[g][k]) $display("  GPM %0d copy %h", g, copies[g][k]);
    end
    $display("dispatch: cal %0d pred %0d learn-stall %0d full-stall %0d dup %0d",
             stat_cal_dispatch, stat_pred_dispatch, stat_learn_stall, stat_full_stall, stat_dup_jobs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
