// dist_engine: object-aware runtime batch distribution engine.
//
// A small controller placed in front of the GPMs. Batches written by the
// driver middleware enter the batch queue (4 entries). The engine works in
// three phases:
//   calibration  the first CAL_BATCHES (8) batches go to the GPMs round-robin
//                (batch i to GPM i mod NGPM) without pre-allocation, so data
//                is placed first-touch as in the baseline;
//   learning     dispatch stalls until those 8 batches have reported done
//                and the predictor has derived the rates c0, c1, c2;
//   predictive   each further batch goes to the eligible GPM with the least
//                predicted remaining time (total - elapsed counter); its PA
//                unit first copies the batch's texture data into the GPM's
//                local DRAM, and the GPM's total counter grows by c0*#tri.
// At most one batch is dispatched per cycle; a GPM whose PA queue is full is
// not eligible and dispatch stalls when none is.
// Leftover work: after frame_end (all batches of the frame issued), once the
// queue and every PA queue are empty while some GPMs are idle and at least
// one is still rendering, the engine takes the busy GPM with the most
// predicted remaining time as the straggler and sends each idle GPM's PA one
// duplicate job of the straggler's current batch, so its data is copied
// locally; fg_active, fg_owner and fg_part_mask then drive the fine-grained
// mapper. Calibration happens once after reset (this design's choice).
// Figure 17's block names are kept: batch queue, rendering time predictor,
// counters, selector, PA units.
module dist_engine
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM        = 4,
  parameter int unsigned QDEPTH      = 4,
  parameter int unsigned PADEPTH     = 4,
  parameter int unsigned CAL_BATCHES = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        frame_start,
  input  logic                        frame_end,
  // batches from the middleware
  input  logic                        batch_valid,
  output logic                        batch_ready,
  input  batch_desc_t                 batch_desc,
  // runtime information from the GPMs
  input  logic [NGPM-1:0]             gpm_done_valid,
  input  logic [NGPM-1:0][REG_W-1:0]  gpm_done_cycles,
  input  logic [NGPM-1:0][INC_W-1:0]  gpm_tv_inc,
  input  logic [NGPM-1:0][INC_W-1:0]  gpm_pix_inc,
  input  logic [NGPM-1:0]             gpm_idle,
  // PA copy requests
  output logic [NGPM-1:0]             copy_valid,
  input  logic [NGPM-1:0]             copy_ready,
  output logic [NGPM-1:0][ADDR_W-1:0] copy_addr,
  // batch launches
  output logic [NGPM-1:0]             launch_valid,
  input  logic [NGPM-1:0]             launch_ready,
  output batch_desc_t [NGPM-1:0]      launch_desc,
  // fine-grained leftover mode
  output logic                        fg_active,
  output logic [$clog2(NGPM)-1:0]     fg_owner,
  output logic [NGPM-1:0]             fg_part_mask,
  // status
  output logic                        cal_done,
  output logic [31:0]                 stat_cal_dispatch,
  output logic [31:0]                 stat_pred_dispatch,
  output logic [31:0]                 stat_learn_stall,
  output logic [31:0]                 stat_full_stall,
  output logic [31:0]                 stat_dup_jobs,
  output logic [31:0]                 stat_queue_full
);
  localparam int unsigned GW = $clog2(NGPM);

  // dispatch bookkeeping: calibration batch count and round-robin target
  logic [$clog2(CAL_BATCHES+1)-1:0] n_cal;
  logic [GW-1:0] rr;
  logic          in_cal;

  // ---------------- batch queue ----------------
  batch_desc_t q_head;
  logic        q_valid, q_pop, q_full, q_empty;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  batch_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid(batch_valid), .in_ready(batch_ready), .in_desc(batch_desc),
    .out_valid(q_valid), .out_ready(q_pop), .out_desc(q_head),
    .full(q_full), .empty(q_empty), .count(q_count)
  );

  // ---------------- predictor ----------------
  logic [CNT_W-1:0] pred_total;
  logic [31:0]      c0, c1, c2;
  logic             cal_collecting;
  logic             cal_fire;

  rt_predictor #(.NGPM(NGPM), .CAL_BATCHES(CAL_BATCHES)) u_pred (
    .clk, .rst_n,
    .cal_tri_valid(cal_fire), .cal_tri(q_head.ntri),
    .done_valid(gpm_done_valid), .done_cycles(gpm_done_cycles),
    .tv_inc(gpm_tv_inc), .pix_inc(gpm_pix_inc),
    .tri_in(q_head.ntri), .pred_total,
    .c0, .c1, .c2, .cal_done, .cal_collecting
  );

  // ---------------- PA units ----------------
  logic [NGPM-1:0] pa_job_valid, pa_job_ready, pa_empty;
  pa_job_t [NGPM-1:0] pa_job;

  for (genvar g = 0; g < NGPM; g++) begin : g_pa
    logic [7:0] copy_gpm_unused;
    logic [$clog2(PADEPTH+1)-1:0] pending_unused;
    pa_unit #(.DEPTH(PADEPTH), .GPM_ID(g)) u_pa (
      .clk, .rst_n,
      .job_valid(pa_job_valid[g]), .job_ready(pa_job_ready[g]), .job(pa_job[g]),
      .copy_valid(copy_valid[g]), .copy_ready(copy_ready[g]), .copy_addr(copy_addr[g]),
      .copy_gpm(copy_gpm_unused),
      .launch_valid(launch_valid[g]), .launch_ready(launch_ready[g]), .launch_desc(launch_desc[g]),
      .empty(pa_empty[g]), .pending(pending_unused)
    );
  end

  // ---------------- counters and selector ----------------
  logic [NGPM-1:0][CNT_W-1:0] total, elapsed, remaining;
  logic [NGPM-1:0][REG_W-1:0] tri_cnt, tv_cnt, pix_cnt;
  logic [NGPM-1:0]            eff_idle;
  logic                       pred_fire;
  logic [GW-1:0]              sel;
  logic                       sel_valid;
  logic [CNT_W-1:0]           sel_rem;

  assign eff_idle = gpm_idle & pa_empty;

  gpm_counters #(.NGPM(NGPM)) u_cnt (
    .clk, .rst_n, .frame_start, .c1, .c2,
    .assign_valid(pred_fire || cal_fire), .assign_gpm(cal_fire ? rr : sel),
    .assign_pred(cal_fire ? '0 : pred_total), .assign_tri(q_head.ntri),
    .tv_inc(gpm_tv_inc), .pix_inc(gpm_pix_inc), .gpm_idle(eff_idle),
    .total, .elapsed, .remaining, .tri_cnt, .tv_cnt, .pix_cnt
  );

  earliest_select #(.NGPM(NGPM)) u_sel (
    .remaining, .eligible(pa_job_ready), .sel, .sel_valid, .sel_remaining(sel_rem)
  );

  // ---------------- dispatch control ----------------

  assign rr        = GW'(n_cal % NGPM);
  assign in_cal    = (32'(n_cal) < CAL_BATCHES);
  assign cal_fire  = q_valid && in_cal && pa_job_ready[rr];
  assign pred_fire = q_valid && !in_cal && cal_done && sel_valid;
  assign q_pop     = cal_fire || pred_fire;

  // ---------------- leftover (fine-grained) mode ----------------
  batch_desc_t [NGPM-1:0] last_desc;
  logic        frame_end_seen;
  logic [NGPM-1:0] dup_given;
  logic [BID_W-1:0] dup_bid;
  logic [GW-1:0]    strag;
  logic             strag_valid;
  logic [NGPM-1:0]  dup_push;
  logic             lo_cond;

  always_comb begin
    strag = '0;
    strag_valid = 1'b0;
    for (int g = 0; g < NGPM; g++) begin
      if (!eff_idle[g] && (!strag_valid || remaining[g] > remaining[strag])) begin
        strag = GW'(g);
        strag_valid = 1'b1;
      end
    end
  end

  assign lo_cond = frame_end_seen && q_empty && !batch_valid && cal_done &&
                   (&(pa_empty | ~gpm_idle)) && strag_valid && (|eff_idle);
  assign fg_active    = lo_cond;
  assign fg_owner     = strag;
  assign fg_part_mask = eff_idle | (NGPM'(1) << strag);

  always_comb begin
    for (int g = 0; g < NGPM; g++) begin
      dup_push[g] = lo_cond && eff_idle[g] && pa_job_ready[g] &&
                    !(dup_given[g] && dup_bid == last_desc[strag].id);
    end
  end

  always_comb begin
    for (int g = 0; g < NGPM; g++) begin
      pa_job_valid[g] = (cal_fire && rr == GW'(g)) || (pred_fire && sel == GW'(g)) || dup_push[g];
      pa_job[g].desc     = dup_push[g] ? last_desc[strag] : q_head;
      pa_job[g].prealloc = pred_fire;
      pa_job[g].dup      = dup_push[g];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cal              <= '0;
      last_desc          <= '0;
      frame_end_seen     <= 1'b0;
      dup_given          <= '0;
      dup_bid            <= '0;
      stat_cal_dispatch  <= '0;
      stat_pred_dispatch <= '0;
      stat_learn_stall   <= '0;
      stat_full_stall    <= '0;
      stat_dup_jobs      <= '0;
      stat_queue_full    <= '0;
    end else begin
      if (cal_fire) begin
        n_cal <= n_cal + 1'b1;
        last_desc[rr] <= q_head;
        stat_cal_dispatch <= stat_cal_dispatch + 1;
      end
      if (pred_fire) begin
        last_desc[sel] <= q_head;
        stat_pred_dispatch <= stat_pred_dispatch + 1;
      end
      if (q_valid && !in_cal && !cal_done) stat_learn_stall <= stat_learn_stall + 1;
      if (q_valid && ((in_cal && !pa_job_ready[rr]) || (!in_cal && cal_done && !sel_valid)))
        stat_full_stall <= stat_full_stall + 1;
      if (batch_valid && !batch_ready) stat_queue_full <= stat_queue_full + 1;

      if (frame_start)    frame_end_seen <= 1'b0;
      else if (frame_end) frame_end_seen <= 1'b1;

      if (frame_start) begin
        dup_given <= '0;
      end else if (lo_cond) begin
        if (dup_bid != last_desc[strag].id) begin
          dup_bid   <= last_desc[strag].id;
          dup_given <= dup_push;
        end else begin
          dup_given <= dup_given | dup_push;
        end
      end
      stat_dup_jobs <= stat_dup_jobs + 32'($countones(dup_push));
    end
  end

  // unused observability signals
  logic unused;
  assign unused = ^{q_full, q_count, c0, cal_collecting, total, elapsed, tri_cnt, tv_cnt, pix_cnt, sel_rem};

`ifndef SYNTHESIS
  a_one_dispatch: assert property (@(posedge clk) disable iff (!rst_n) !(cal_fire && pred_fire));
  a_no_pred_before_cal: assert property (@(posedge clk) disable iff (!rst_n) pred_fire |-> cal_done);
`endif
endmodule
