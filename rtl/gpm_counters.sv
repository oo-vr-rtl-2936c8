// gpm_counters: per-GPM time counters of the OO-VR distribution engine.
//
// Each GPM has a total-rendering-time counter and an elapsed-rendering-time
// counter (CNT_W = 64 bits each, as in the paper), kept in the predictor's
// fixed point. When a batch is assigned to GPM g, total[g] grows by the
// predicted time c0 * #triangles. While the GPM renders, every transformed
// vertex adds c1 and every rendered pixel adds c2 to elapsed[g]; several
// increments per cycle are accepted. remaining[g] = total[g] - elapsed[g]
// (zero if elapsed has overtaken total) is the predicted time until the GPM
// becomes free, which the selector compares across GPMs.
//
// Design choice (not from the paper): when a GPM reports idle, elapsed[g] is
// set equal to total[g] (its value before any assignment in the same cycle),
// so a mis-prediction does not bias later decisions.
// The twelve 32-bit registers of the paper are the triangle, vertex and pixel
// counts of each of the four GPMs; they are cleared by frame_start.
// All updates take effect at the next clock edge.
module gpm_counters
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM = 4,
  parameter int unsigned CW   = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        frame_start,
  input  logic [CW-1:0]               c1,
  input  logic [CW-1:0]               c2,
  input  logic                        assign_valid,
  input  logic [$clog2(NGPM)-1:0]     assign_gpm,
  input  logic [CNT_W-1:0]            assign_pred,
  input  logic [REG_W-1:0]            assign_tri,
  input  logic [NGPM-1:0][INC_W-1:0]  tv_inc,
  input  logic [NGPM-1:0][INC_W-1:0]  pix_inc,
  input  logic [NGPM-1:0]             gpm_idle,
  output logic [NGPM-1:0][CNT_W-1:0]  total,
  output logic [NGPM-1:0][CNT_W-1:0]  elapsed,
  output logic [NGPM-1:0][CNT_W-1:0]  remaining,
  output logic [NGPM-1:0][REG_W-1:0]  tri_cnt,
  output logic [NGPM-1:0][REG_W-1:0]  tv_cnt,
  output logic [NGPM-1:0][REG_W-1:0]  pix_cnt
);
  logic [NGPM-1:0][CNT_W-1:0] new_total;
  always_comb begin
    for (int g = 0; g < NGPM; g++)
      new_total[g] = (assign_valid && 32'(assign_gpm) == g) ? total[g] + assign_pred : total[g];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      total   <= '0;
      elapsed <= '0;
      tri_cnt <= '0;
      tv_cnt  <= '0;
      pix_cnt <= '0;
    end else begin
      for (int g = 0; g < NGPM; g++) begin
        total[g] <= new_total[g];
        if (gpm_idle[g])
          elapsed[g] <= total[g];   // a batch assigned in this cycle stays pending
        else
          elapsed[g] <= elapsed[g] + CNT_W'(c1) * CNT_W'(tv_inc[g])
                                   + CNT_W'(c2) * CNT_W'(pix_inc[g]);
        if (frame_start) begin
          tri_cnt[g] <= '0;
          tv_cnt[g]  <= '0;
          pix_cnt[g] <= '0;
        end else begin
          if (assign_valid && 32'(assign_gpm) == g) tri_cnt[g] <= tri_cnt[g] + assign_tri;
          tv_cnt[g]  <= tv_cnt[g]  + REG_W'(tv_inc[g]);
          pix_cnt[g] <= pix_cnt[g] + REG_W'(pix_inc[g]);
        end
      end
    end
  end

  always_comb begin
    for (int g = 0; g < NGPM; g++)
      remaining[g] = (total[g] > elapsed[g]) ? total[g] - elapsed[g] : '0;
  end
endmodule
