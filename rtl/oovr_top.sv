// oovr_top: the OO-VR hardware layer of a NUMA multi-GPU system with NGPM
// GPU modules (GPMs).
//
// Data flow (top to bottom of the framework):
//   driver batches -> dist_engine (batch queue, rendering time predictor,
//   per-GPM counters, earliest-GPM selector, one PA unit per GPM)
//   -> texture copy requests and batch launches per GPM
//   -> [GPMs, outside this module: geometry, SMP, raster, shading]
//   -> colour outputs -> one dhc_unit per GPM, linked all-to-all
//   -> ROP port of the GPM owning the pixel's frame-buffer strip.
// The SMP engine that sits inside each GPM's geometry front end is included
// here as one smp_engine per GPM with its own ports, and the fine-grained
// mapper routes the straggler's leftover units to the GPMs taking part while
// the engine reports fg_active.
// GPMs, ROPs, DRAM and links are not part of this module; their signals are
// ports. All ports are plain packed arrays indexed by GPM.
module oovr_top
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM        = 4,
  parameter int unsigned QDEPTH      = 4,
  parameter int unsigned PADEPTH     = 4,
  parameter int unsigned CAL_BATCHES = 8,
  parameter int unsigned FRAME_W     = 2560,
  parameter int unsigned FRAME_H     = 1024,
  parameter int          SMP_W       = 1280
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        frame_start,
  input  logic                        frame_end,
  // batches from the middleware
  input  logic                        batch_valid,
  output logic                        batch_ready,
  input  batch_desc_t                 batch_desc,
  // GPM runtime information
  input  logic [NGPM-1:0]             gpm_done_valid,
  input  logic [NGPM-1:0][REG_W-1:0]  gpm_done_cycles,
  input  logic [NGPM-1:0][INC_W-1:0]  gpm_tv_inc,
  input  logic [NGPM-1:0][INC_W-1:0]  gpm_pix_inc,
  input  logic [NGPM-1:0]             gpm_idle,
  // pre-allocation copies and launches
  output logic [NGPM-1:0]             copy_valid,
  input  logic [NGPM-1:0]             copy_ready,
  output logic [NGPM-1:0][ADDR_W-1:0] copy_addr,
  output logic [NGPM-1:0]             launch_valid,
  input  logic [NGPM-1:0]             launch_ready,
  output batch_desc_t [NGPM-1:0]      launch_desc,
  // fine-grained leftover units
  output logic                        fg_active,
  output logic [$clog2(NGPM)-1:0]     fg_owner,
  input  logic                        fg_unit_valid,
  output logic                        fg_unit_ready,
  input  logic [REG_W-1:0]            fg_unit_id,
  output logic                        fg_tgt_valid,
  input  logic                        fg_tgt_ready,
  output logic [$clog2(NGPM)-1:0]     fg_tgt_gpm,
  output logic [REG_W-1:0]            fg_tgt_id,
  // SMP engines (one per GPM)
  input  logic [NGPM-1:0]             smp_user_vp,
  input  logic [NGPM-1:0][15:0]       smp_vp_off_l,
  input  logic [NGPM-1:0][15:0]       smp_vp_off_r,
  input  logic [NGPM-1:0]             geo_valid,
  output logic [NGPM-1:0]             geo_ready,
  input  tri_t [NGPM-1:0]             geo_tri,
  output logic [NGPM-1:0]             smp_valid,
  input  logic [NGPM-1:0]             smp_ready,
  output tri_t [NGPM-1:0]             smp_tri_l,
  output tri_t [NGPM-1:0]             smp_tri_r,
  output logic [NGPM-1:0]             smp_keep_l,
  output logic [NGPM-1:0]             smp_keep_r,
  // colour outputs of the GPMs
  input  logic [NGPM-1:0]             pix_valid,
  output logic [NGPM-1:0]             pix_ready,
  input  pixel_t [NGPM-1:0]           pix,
  // ROP ports
  output logic [NGPM-1:0]             rop_valid,
  input  logic [NGPM-1:0]             rop_ready,
  output logic [NGPM-1:0][FBA_W-1:0]  rop_addr,
  output logic [NGPM-1:0][COLOR_W-1:0] rop_color,
  // status
  output logic                        cal_done,
  output logic [5:0][31:0]            stat_engine,   // cal, pred, learn stall, full stall, dup, queue full
  output logic [NGPM-1:0][31:0]       stat_dhc_local,    // pixels written by own ROPs from own GPM
  output logic [NGPM-1:0][31:0]       stat_dhc_remote,   // pixels this GPM sent to other strips
  output logic [NGPM-1:0][31:0]       stat_dhc_in        // pixels this GPM's ROPs took from links
);
  localparam int unsigned GW = $clog2(NGPM);

  logic [NGPM-1:0] fg_part_mask;

  dist_engine #(.NGPM(NGPM), .QDEPTH(QDEPTH), .PADEPTH(PADEPTH), .CAL_BATCHES(CAL_BATCHES)) u_engine (
    .clk, .rst_n, .frame_start, .frame_end,
    .batch_valid, .batch_ready, .batch_desc,
    .gpm_done_valid, .gpm_done_cycles, .gpm_tv_inc, .gpm_pix_inc, .gpm_idle,
    .copy_valid, .copy_ready, .copy_addr,
    .launch_valid, .launch_ready, .launch_desc,
    .fg_active, .fg_owner, .fg_part_mask,
    .cal_done,
    .stat_cal_dispatch(stat_engine[0]), .stat_pred_dispatch(stat_engine[1]),
    .stat_learn_stall(stat_engine[2]),  .stat_full_stall(stat_engine[3]),
    .stat_dup_jobs(stat_engine[4]),     .stat_queue_full(stat_engine[5])
  );

  finegrain_mapper #(.NGPM(NGPM)) u_fg (
    .clk, .rst_n, .part_mask(fg_part_mask), .owner(fg_owner),
    .unit_valid(fg_unit_valid && fg_active), .unit_ready(fg_unit_ready), .unit_id(fg_unit_id),
    .tgt_valid(fg_tgt_valid), .tgt_ready(fg_tgt_ready), .tgt_gpm(fg_tgt_gpm), .tgt_id(fg_tgt_id)
  );

  // all-to-all links between the composition units: link[s][d] carries
  // pixels from the DHC of GPM s to the DHC of GPM d
  logic   [NGPM-1:0][NGPM-1:0] lk_valid, lk_ready;
  pixel_t [NGPM-1:0][NGPM-1:0] lk_pix;
  logic   [NGPM-1:0][NGPM-1:0] in_valid_t, in_ready_t;
  pixel_t [NGPM-1:0][NGPM-1:0] in_pix_t;

  always_comb begin
    for (int d = 0; d < NGPM; d++)
      for (int s = 0; s < NGPM; s++) begin
        in_valid_t[d][s] = lk_valid[s][d];
        in_pix_t[d][s]   = lk_pix[s][d];
        lk_ready[s][d]   = in_ready_t[d][s];
      end
  end

  for (genvar g = 0; g < NGPM; g++) begin : g_gpm
    logic [GW-1:0] src_unused;

    dhc_unit #(.NGPM(NGPM), .GPM_ID(g), .FRAME_W(FRAME_W), .FRAME_H(FRAME_H)) u_dhc (
      .clk, .rst_n,
      .pix_valid(pix_valid[g]), .pix_ready(pix_ready[g]), .pix(pix[g]),
      .rem_out_valid(lk_valid[g]), .rem_out_ready(lk_ready[g]), .rem_out_pix(lk_pix[g]),
      .rem_in_valid(in_valid_t[g]), .rem_in_ready(in_ready_t[g]), .rem_in_pix(in_pix_t[g]),
      .rop_valid(rop_valid[g]), .rop_ready(rop_ready[g]), .rop_addr(rop_addr[g]),
      .rop_color(rop_color[g]), .rop_src(src_unused),
      .stat_local(stat_dhc_local[g]), .stat_remote_out(stat_dhc_remote[g]), .stat_remote_in(stat_dhc_in[g])
    );

    smp_engine #(.W(SMP_W)) u_smp (
      .clk, .rst_n,
      .user_vp(smp_user_vp[g]), .vp_off_l(smp_vp_off_l[g]), .vp_off_r(smp_vp_off_r[g]),
      .in_valid(geo_valid[g]), .in_ready(geo_ready[g]), .in_tri(geo_tri[g]),
      .out_valid(smp_valid[g]), .out_ready(smp_ready[g]),
      .out_l(smp_tri_l[g]), .out_r(smp_tri_r[g]), .keep_l(smp_keep_l[g]), .keep_r(smp_keep_r[g])
    );
  end
endmodule
