// tb_oovr_top: end-to-end test of the OO-VR hardware layer at its default
// parameters (4 GPMs, 4-entry batch queue, 8 calibration batches, 2560x1024
// stereo frame in four 640-column strips, W = 1280).
// Four behavioural GPMs render the launched batches and emit colour outputs
// at pseudo-random screen positions; behavioural ROPs accept them with
// random stalls. A middleware model issues two frames of batches (the first
// includes calibration), with a large batch last in frame 2 so the leftover
// path is taken; while fine-grained mode is active the testbench feeds
// leftover unit IDs through the mapper. Every GPM also pushes triangles
// through its SMP engine in both viewport modes.
// Checks: every batch launches exactly once; calibration batches round-robin;
// every colour output reaches the ROP port of the GPM owning its strip with
// the right address and colour; each mapped unit goes to a taking-part GPM;
// SMP outputs match a reference; and each mechanism (calibration, learning
// stall, predictive dispatch, pre-allocation copies, queue back-pressure,
// PA-full stall, duplication, fine-grained mapping, local and remote
// composition, SMP drop and user-viewport mode) happened at least once.
// The GPMs are held for the first 3000 cycles of frame 2 so that the PA
// queues fill and the engine must stall on them. The mechanisms and their
// order follow the paper; the traffic, the GPM timing (2 cycles, 3 vertices
// and 16 pixels per triangle) and the random ROP stalls are this test's own.
// Runtime: about 19k cycles; the watchdog fires after 20 million cycles.
module tb_oovr_top;
  import oovr_pkg::*;
  localparam int NG = 4, SW = 640, W = 1280;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
  logic hold = 0;

  oovr_top dut (.*);

  int nb[NG], busy[NG];
  logic [BID_W-1:0] cur[NG];
  for (genvar g = 0; g < NG; g++) begin : g_m
    gpm_model #(.ID(g), .TRI_CYC(2), .PIX_PER_TRI(16), .EMIT_PIX(1)) u_gpm (
      .clk, .rst_n, .hold,
      .launch_valid(launch_valid[g]), .launch_ready(launch_ready[g]), .launch_desc(launch_desc[g]),
      .done_valid(gpm_done_valid[g]), .done_cycles(gpm_done_cycles[g]),
      .tv_inc(gpm_tv_inc[g]), .pix_inc(gpm_pix_inc[g]), .idle(gpm_idle[g]),
      .pix_valid(pix_valid[g]), .pix_ready(pix_ready[g]), .pix(pix[g]),
      .n_batches(nb[g]), .busy_cycles(busy[g]), .cur_id(cur[g]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- scoreboards ----------------
  int launched[int];                 // batch id -> count
  int launch_gpm[int];
  int exp_pix[NG][longint];          // per owner strip: {addr,color} -> count
  int n_pix_sent = 0, n_pix_rop = 0, n_copies = 0, n_fg_units = 0, n_smp = 0, n_smp_drop = 0, n_smp_uvp = 0;
  int n_remote = 0, n_local = 0;

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++) begin
      if (launch_valid[g] && launch_ready[g]) begin
        int id;
        id = int'(launch_desc[g].id);
        launched[id] = launched.exists(id) ? launched[id] + 1 : 1;
        launch_gpm[id] = g;
      end
      if (copy_valid[g] && copy_ready[g]) n_copies++;
      if (pix_valid[g] && pix_ready[g]) begin
        int own; longint key;
        own = int'(pix[g].x) / SW;
        key = {12'd0, FBA_W'(int'(pix[g].y) * SW + int'(pix[g].x) - own * SW), pix[g].color};
        exp_pix[own][key] = exp_pix[own].exists(key) ? exp_pix[own][key] + 1 : 1;
        n_pix_sent++;
        if (own == g) n_local++; else n_remote++;
      end
    end
  end
  // ROP sinks: check at the negedge before the edge that takes the pixel, so
  // a pixel accepted and delivered in the same cycle is already recorded
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++) rop_ready[g] <= ($urandom % 5) != 0;
  end
  longint pend_rop[NG][$];
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++)
      if (rop_valid[g] && rop_ready[g]) pend_rop[g].push_back({12'd0, rop_addr[g], rop_color[g]});
  end
  // match delivered pixels against sent ones once both are recorded
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++)
      while (pend_rop[g].size() > 0) begin
        longint key;
        key = pend_rop[g].pop_front();
        n_pix_rop++;
        check(exp_pix[g].exists(key), $sformatf("ROP %0d got a pixel it owns", g));
        if (exp_pix[g].exists(key)) begin
          exp_pix[g][key]--;
          if (exp_pix[g][key] == 0) exp_pix[g].delete(key);
        end
      end
  end
  assign copy_ready = '1;

  // fine-grained leftover units: reference mapping from the engine's mask of
  // taking-part GPMs (idle GPMs plus the owner of the straggler)
  assign fg_tgt_ready = 1'b1;
  int fg_q[$];
  int fg_hits[NG];
  function automatic int fg_model(input logic [NG-1:0] m, input int own, input int id);
    int n, k, seen;
    n = $countones(m);
    if (n == 0) return own;
    k = id % n; seen = 0;
    for (int g = 0; g < NG; g++) if (m[g]) begin
      if (seen == k) return g;
      seen++;
    end
    return own;
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (fg_tgt_valid && fg_tgt_ready) begin
      n_fg_units++;
      fg_hits[fg_tgt_gpm]++;
      check(fg_q.size() > 0 && int'(fg_tgt_gpm) == fg_q[0], "fine-grained target");
      if (fg_q.size() > 0) void'(fg_q.pop_front());
    end
    if (fg_unit_valid && fg_active && fg_unit_ready)
      fg_q.push_back(fg_model(dut.fg_part_mask, int'(fg_owner), int'(fg_unit_id)));
  end
  always @(negedge clk) begin
    fg_unit_valid <= fg_active && rst_n;
    fg_unit_id <= $urandom % 100000;
  end

  // SMP engines: random triangles, reference comparison
  typedef struct { tri_t l; tri_t r; bit kl; bit kr; } smp_exp_t;
  smp_exp_t smp_q[NG][$];
  function automatic smp_exp_t smp_model(input tri_t t, input bit uvp, input int ol, input int orr);
    smp_exp_t e; vtx_t vi[3]; vtx_t vl[3]; vtx_t vr[3]; int lx, rx;
    vi[0] = t.v0; vi[1] = t.v1; vi[2] = t.v2;
    e.kl = 0; e.kr = 0;
    for (int i = 0; i < 3; i++) begin
      lx = int'(vi[i].x) + (uvp ? ol : -W/2);
      rx = int'(vi[i].x) + (uvp ? orr : W/2);
      if (lx >= -W && lx <= 0) e.kl = 1;
      if (rx >= 0 && rx <= W) e.kr = 1;
      vl[i].x = 16'((lx < -W) ? -W : (lx > 0) ? 0 : lx); vl[i].y = vi[i].y;
      vr[i].x = 16'((rx < 0) ? 0 : (rx > W) ? W : rx);   vr[i].y = vi[i].y;
    end
    e.l = {vl[2], vl[1], vl[0]}; e.r = {vr[2], vr[1], vr[0]};
    return e;
  endfunction
  bit [NG-1:0] smp_fin, smp_fout;
  always @(negedge clk) if (rst_n) begin
    for (int g = 0; g < NG; g++) begin
      smp_exp_t e;
      // outputs of this cycle
      if (smp_fout[g]) void'(smp_q[g].pop_front());
      if (smp_fin[g]) smp_q[g].push_back(smp_model(geo_tri[g], smp_user_vp[g], int'($signed(smp_vp_off_l[g])), int'($signed(smp_vp_off_r[g]))));
    end
    for (int g = 0; g < NG; g++) begin
      geo_valid[g] = ($urandom % 2) != 0;
      smp_ready[g] = ($urandom % 3) != 0;
      geo_tri[g].v0 = '{x: 16'($urandom % 3000 - 1500), y: 16'($urandom % 1024)};
      geo_tri[g].v1 = '{x: 16'($urandom % 3000 - 1500), y: 16'($urandom % 1024)};
      geo_tri[g].v2 = '{x: 16'($urandom % 3000 - 1500), y: 16'($urandom % 1024)};
    end
    #1;
    for (int g = 0; g < NG; g++) begin
      smp_fin[g] = geo_valid[g] && geo_ready[g];
      smp_fout[g] = smp_valid[g] && smp_ready[g];
      if (smp_valid[g]) begin
        smp_exp_t e;
        e = smp_q[g][0];
        check(smp_q[g].size() > 0 && smp_tri_l[g] == e.l && smp_tri_r[g] == e.r &&
              smp_keep_l[g] == e.kl && smp_keep_r[g] == e.kr, $sformatf("SMP %0d output", g));
        if (smp_fout[g]) begin
          n_smp++;
          if (!e.kl || !e.kr) n_smp_drop++;
          if (smp_user_vp[g]) n_smp_uvp++;
        end
      end
    end
  end

  initial begin
    #200000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input int id, input int ntri, input int lines);
    @(negedge clk);
    batch_valid = 1;
    batch_desc = '{id: BID_W'(id), ntri: REG_W'(ntri), tex_addr: ADDR_W'(id) << 12, tex_lines: LEN_W'(lines)};
    @(posedge clk);
    while (!batch_ready) @(posedge clk);
    @(negedge clk); batch_valid = 0;
  endtask

  localparam int NB1 = 40, NB2 = 40;
  initial begin
    frame_start = 0; frame_end = 0; batch_valid = 0; batch_desc = '0;
    smp_user_vp = '0; smp_vp_off_l = '0; smp_vp_off_r = '0;
    smp_fin = '0; smp_fout = '0; geo_valid = '0; smp_ready = '0; geo_tri = '0;
    rop_ready = '0; fg_unit_valid = 0; fg_unit_id = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // frame 1 (calibration happens on its first 8 batches)
    @(negedge clk); frame_start = 1; @(negedge clk); frame_start = 0;
    for (int i = 0; i < NB1; i++) send(i, 20 + ($urandom % 300), 1 + $urandom % 8);
    @(negedge clk); frame_end = 1; @(negedge clk); frame_end = 0;
    wait (gpm_idle == '1 && !batch_valid);
    repeat (50) @(posedge clk);
    // frame 2, user-defined viewports, large batch at the end
    smp_user_vp = '1;
    for (int g = 0; g < NG; g++) begin smp_vp_off_l[g] = 16'(-600 - 10 * g); smp_vp_off_r[g] = 16'(600 + 10 * g); end
    // GPMs held at the start of frame 2 so the PA queues fill up
    @(negedge clk); frame_start = 1; hold = 1; @(negedge clk); frame_start = 0;
    fork begin repeat (3000) @(negedge clk); hold = 0; end join_none
    for (int i = 0; i < NB2; i++) send(1000 + i, (i == NB2 - 1) ? 4000 : 20 + ($urandom % 300), 1 + $urandom % 8);
    @(negedge clk); frame_end = 1; @(negedge clk); frame_end = 0;
    wait (gpm_idle == '1);
    repeat (200) @(posedge clk);

    // ---------------- results ----------------
    for (int i = 0; i < NB1; i++) check(launched.exists(i) && launched[i] == 1, $sformatf("batch %0d launched once", i));
    for (int i = 0; i < NB2; i++) check(launched.exists(1000 + i) && launched[1000 + i] == 1, $sformatf("batch %0d launched once", 1000 + i));
    for (int i = 0; i < 8; i++) check(launch_gpm[i] == i % NG, "calibration round-robin");
    for (int g = 0; g < NG; g++) check(exp_pix[g].num() == 0, $sformatf("all pixels of strip %0d written", g));
    check(n_pix_rop == n_pix_sent, "pixel count");
    $display("mechanisms: cal=%0d pred=%0d learn_stall=%0d pa_full_stall=%0d dup=%0d queue_full=%0d",
             stat_engine[0], stat_engine[1], stat_engine[2], stat_engine[3], stat_engine[4], stat_engine[5]);
    $display("            fine-grained per GPM: %0d %0d %0d %0d", fg_hits[0], fg_hits[1], fg_hits[2], fg_hits[3]);
    $display("            copies=%0d fg_units=%0d pix local=%0d remote=%0d smp=%0d drop=%0d user_vp=%0d",
             n_copies, n_fg_units, n_local, n_remote, n_smp, n_smp_drop, n_smp_uvp);
    check(stat_engine[0] == 8, "calibration dispatches");
    check(stat_engine[1] == NB1 + NB2 - 8, "predictive dispatches");
    check(stat_engine[2] > 0, "learning stall happened");
    check(stat_engine[3] > 0, "PA-full stall happened");
    check(stat_engine[4] > 0, "duplication happened");
    check(stat_engine[5] > 0, "queue back-pressure happened");
    check(n_copies > 0, "pre-allocation copies happened");
    check(n_fg_units > 0, "fine-grained mapping happened");
    check((fg_hits[0] > 0) + (fg_hits[1] > 0) + (fg_hits[2] > 0) + (fg_hits[3] > 0) > 1, "fine-grained work spread over GPMs");
    check(n_local > 0 && n_remote > 0, "local and remote composition happened");
    check(n_smp > 0 && n_smp_drop > 0 && n_smp_uvp > 0, "SMP drop and user viewport happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
