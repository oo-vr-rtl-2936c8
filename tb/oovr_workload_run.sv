// oovr_workload_run: one frame of one benchmark workload through oovr_top,
// sized by parameters; instantiated by tb_oovr_workloads, one copy per
// workload (not synthesizable, testbench only).
// The harness builds the top for a stereo frame of FRAME_W x FRAME_H (both
// eyes side by side, SMP_W one eye's width), issues NDRAW batches, one per
// draw call, with 16..512 triangles each and a 2000-triangle batch last, and
// lets four behavioural GPMs (2 cycles, 3 vertices, 16 pixels and one
// sampled colour output per triangle) render them. Behavioural ROPs accept
// with random stalls.
// It checks:
//   - every batch is launched exactly once and the first 8 go round-robin;
//   - every colour output reaches the ROP of the GPM owning its strip
//     (FRAME_W/4 columns) with address y*strip + x - owner*strip, and no
//     output is lost; every strip receives outputs;
//   - one SMP triangle at x = 0 comes out at -SMP_W/2 and +SMP_W/2;
//   - load balance: from the end of calibration (all GPMs idle) to the last
//     batch done, the frame takes at most work/4 + the longest batch (the
//     bound of greedy earliest-free scheduling with exact predictions) plus
//     2% and 200 cycles of slack for copy and dispatch latency.
// The batch sizes, the GPM timing and the slack are this test's own; the
// frame sizes and draw counts are the paper's benchmark table.
// Interface: clk/rst_n in; done rises when the frame is finished and checks
// and failures hold the counts; n_cycles, n_remote and n_fg report what
// happened.
module oovr_workload_run
  import oovr_pkg::*;
#(
  parameter int FRAME_W = 2560,
  parameter int FRAME_H = 1024,
  parameter int SMP_W   = 1280,
  parameter int NDRAW   = 191,
  parameter int SEED    = 1
) (
  input  logic clk,
  input  logic rst_n,
  output bit   done,
  output int   checks,
  output int   failures,
  output int   n_cycles,
  output int   n_remote,
  output int   n_fg
);
  localparam int NG = 4, SW = FRAME_W / 4;

  logic frame_start, frame_end, batch_valid, batch_ready;
  batch_desc_t batch_desc;
  logic [NG-1:0] gpm_done_valid, gpm_idle, copy_valid, copy_ready, launch_valid, launch_ready;
  logic [NG-1:0][REG_W-1:0] gpm_done_cycles;
  logic [NG-1:0][INC_W-1:0] gpm_tv_inc, gpm_pix_inc;
  logic [NG-1:0][ADDR_W-1:0] copy_addr;
  batch_desc_t [NG-1:0] launch_desc;
  logic fg_active; logic [1:0] fg_owner;
  logic fg_unit_valid, fg_unit_ready, fg_tgt_valid, fg_tgt_ready;
  logic [REG_W-1:0] fg_unit_id, fg_tgt_id;
  logic [1:0] fg_tgt_gpm;
  logic [NG-1:0] smp_user_vp, geo_valid, geo_ready, smp_valid, smp_ready, smp_keep_l, smp_keep_r;
  logic [NG-1:0][15:0] smp_vp_off_l, smp_vp_off_r;
  tri_t [NG-1:0] geo_tri, smp_tri_l, smp_tri_r;
  logic [NG-1:0] pix_valid, pix_ready, rop_valid, rop_ready;
  pixel_t [NG-1:0] pix;
  logic [NG-1:0][FBA_W-1:0] rop_addr;
  logic [NG-1:0][COLOR_W-1:0] rop_color;
  logic cal_done;
  logic [5:0][31:0] stat_engine;
  logic [NG-1:0][31:0] stat_dhc_local, stat_dhc_remote, stat_dhc_in;

  oovr_top #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .SMP_W(SMP_W)) dut (.*);

  int nb[NG], busy[NG];
  logic [BID_W-1:0] cur[NG];
  for (genvar g = 0; g < NG; g++) begin : g_m
    gpm_model #(.ID(g + 4 * SEED), .TRI_CYC(2), .PIX_PER_TRI(16), .EMIT_PIX(1),
                .FRAME_W(FRAME_W), .FRAME_H(FRAME_H)) u_gpm (
      .clk, .rst_n, .hold(1'b0),
      .launch_valid(launch_valid[g]), .launch_ready(launch_ready[g]), .launch_desc(launch_desc[g]),
      .done_valid(gpm_done_valid[g]), .done_cycles(gpm_done_cycles[g]),
      .tv_inc(gpm_tv_inc[g]), .pix_inc(gpm_pix_inc[g]), .idle(gpm_idle[g]),
      .pix_valid(pix_valid[g]), .pix_ready(pix_ready[g]), .pix(pix[g]),
      .n_batches(nb[g]), .busy_cycles(busy[g]), .cur_id(cur[g]));
  end

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL [%0dx%0d, %0d draws] %s at %0t", FRAME_W / 2, FRAME_H, NDRAW, what, $time);
    end
  endtask

  int launched[int], launch_gpm[int];
  int exp_pix[NG][longint];
  longint pend_rop[NG][$];
  int n_sent = 0, n_rop = 0, rop_hits[NG];
  int cyc = 0, t_cal = -1, t_last_done = 0;
  int busy_at_cal[NG];
  int max_tri_after_cal = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cal_done && t_cal < 0) begin
      t_cal = cyc;
      for (int g = 0; g < NG; g++) busy_at_cal[g] = busy[g];
    end
    if (fg_active) n_fg++;
    for (int g = 0; g < NG; g++) begin
      if (launch_valid[g] && launch_ready[g]) begin
        int id;
        id = int'(launch_desc[g].id);
        launched[id] = launched.exists(id) ? launched[id] + 1 : 1;
        launch_gpm[id] = g;
      end
      if (gpm_done_valid[g]) t_last_done = cyc;
      if (pix_valid[g] && pix_ready[g]) begin
        int own; longint key;
        own = int'(pix[g].x) / SW;
        key = {12'd0, FBA_W'(int'(pix[g].y) * SW + int'(pix[g].x) - own * SW), pix[g].color};
        exp_pix[own][key] = exp_pix[own].exists(key) ? exp_pix[own][key] + 1 : 1;
        n_sent++;
        if (own != g) n_remote++;
      end
      if (rop_valid[g] && rop_ready[g]) pend_rop[g].push_back({12'd0, rop_addr[g], rop_color[g]});
    end
  end
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++) begin
      rop_ready[g] <= ($urandom % 8) != 0;
      while (pend_rop[g].size() > 0) begin
        longint key;
        key = pend_rop[g].pop_front();
        n_rop++;
        rop_hits[g]++;
        check(exp_pix[g].exists(key), $sformatf("ROP %0d pixel belongs to its strip", g));
        if (exp_pix[g].exists(key)) begin
          exp_pix[g][key]--;
          if (exp_pix[g][key] == 0) exp_pix[g].delete(key);
        end
      end
    end
  end
  assign copy_ready = '1;
  assign fg_tgt_ready = 1'b1;

  task automatic send(input int id, input int ntri, input int lines);
    @(negedge clk);
    batch_valid = 1;
    batch_desc = '{id: BID_W'(id), ntri: REG_W'(ntri), tex_addr: ADDR_W'(id) << 12, tex_lines: LEN_W'(lines)};
    @(posedge clk);
    while (!batch_ready) @(posedge clk);
    @(negedge clk); batch_valid = 0;
  endtask

  initial begin
    int ntri, work, bound;
    done = 0; checks = 0; failures = 0; n_remote = 0; n_fg = 0; n_cycles = 0;
    frame_start = 0; frame_end = 0; batch_valid = 0; batch_desc = '0;
    fg_unit_valid = 0; fg_unit_id = '0;
    smp_user_vp = '0; smp_vp_off_l = '0; smp_vp_off_r = '0;
    geo_valid = '0; geo_tri = '0; smp_ready = '1; rop_ready = '0;
    for (int g = 0; g < NG; g++) rop_hits[g] = 0;
    wait (rst_n);
    // SMP at this eye width: a vertex at x = 0 lands at -W/2 and +W/2
    @(negedge clk);
    geo_valid = '1;
    for (int g = 0; g < NG; g++) geo_tri[g] = '{v2: '{x: 16'(0), y: 16'(5)}, v1: '{x: 16'(0), y: 16'(6)}, v0: '{x: 16'(0), y: 16'(7)}};
    @(negedge clk); geo_valid = '0;
    for (int g = 0; g < NG; g++)
      check(smp_valid[g] && int'(smp_tri_l[g].v0.x) == -SMP_W / 2 && int'(smp_tri_r[g].v0.x) == SMP_W / 2 &&
            smp_keep_l[g] && smp_keep_r[g], $sformatf("SMP %0d shift by W/2", g));
    // one frame
    @(negedge clk); frame_start = 1; @(negedge clk); frame_start = 0;
    for (int i = 0; i < NDRAW; i++) begin
      ntri = (i == NDRAW - 1) ? 2000 : 16 + ($urandom % 497);
      if (i >= 8 && ntri > max_tri_after_cal) max_tri_after_cal = ntri;
      send(i, ntri, 1 + $urandom % 8);
    end
    @(negedge clk); frame_end = 1; @(negedge clk); frame_end = 0;
    wait (gpm_idle == '1 && dut.u_engine.pa_empty == '1);
    repeat (100) @(posedge clk);
    for (int i = 0; i < NDRAW; i++) check(launched.exists(i) && launched[i] == 1, $sformatf("batch %0d launched once", i));
    for (int i = 0; i < 8; i++) check(launch_gpm[i] == i % NG, "calibration round-robin");
    for (int g = 0; g < NG; g++) begin
      check(exp_pix[g].num() == 0, $sformatf("all outputs of strip %0d written", g));
      check(rop_hits[g] > 0, $sformatf("strip %0d received outputs", g));
    end
    check(n_rop == n_sent, "no output lost or duplicated");
    work = 0;
    for (int g = 0; g < NG; g++) work += busy[g] - busy_at_cal[g];
    bound = work / NG + 2 * max_tri_after_cal + work / NG / 50 + 200;
    n_cycles = t_last_done - t_cal;
    check(t_cal > 0 && n_cycles <= bound, $sformatf("balance: %0d cycles after calibration, bound %0d", n_cycles, bound));
    $display("workload %0dx%0d, %0d draws: %0d cycles after calibration for %0d GPM-cycles of work (ideal %0d, bound %0d); outputs %0d, remote %0d; leftover-mode cycles %0d; dup jobs %0d",
             FRAME_W / 2, FRAME_H, NDRAW, n_cycles, work, work / NG, bound, n_sent, n_remote, n_fg, stat_engine[4]);
    done = 1;
  end
endmodule
