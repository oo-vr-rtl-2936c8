// gpm_model: behavioural model of one GPU module for the testbenches (not
// synthesizable, not part of the design). It accepts batch launches into an
// unbounded queue and renders them one at a time: each triangle takes
// TRI_CYC cycles; on a triangle's first cycle the model reports 3
// transformed vertices and PIX_PER_TRI rendered pixels and, if EMIT_PIX is
// set, offers one colour output at a pseudo-random screen position. When a
// batch ends it pulses done with the cycles it took. 'hold' blocks launches.
module gpm_model
  import oovr_pkg::*;
#(
  parameter int ID          = 0,
  parameter int TRI_CYC     = 2,
  parameter int PIX_PER_TRI = 16,
  parameter bit EMIT_PIX    = 0,
  parameter int FRAME_W     = 2560,
  parameter int FRAME_H     = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              hold,
  input  logic              launch_valid,
  output logic              launch_ready,
  input  batch_desc_t       launch_desc,
  output logic              done_valid,
  output logic [REG_W-1:0]  done_cycles,
  output logic [INC_W-1:0]  tv_inc,
  output logic [INC_W-1:0]  pix_inc,
  output logic              idle,
  output logic              pix_valid,
  input  logic              pix_ready,
  output pixel_t            pix,
  output int                n_batches,
  output int                busy_cycles,
  output logic [BID_W-1:0]  cur_id
);
  batch_desc_t q[$];
  int tri_left, sub, cyc;
  bit busy;
  int pend_pix;
  int seed;

  assign launch_ready = !hold;
  assign idle = !busy && q.size() == 0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 0; tri_left <= 0; sub <= 0; cyc <= 0; done_valid <= 0; done_cycles <= 0;
      tv_inc <= 0; pix_inc <= 0; n_batches <= 0; busy_cycles <= 0; pend_pix <= 0;
      pix_valid <= 0; pix <= '0; cur_id <= '0; seed = ID * 7919 + 1;
    end else begin
      done_valid <= 0;
      tv_inc <= 0;
      pix_inc <= 0;
      if (launch_valid && launch_ready) q.push_back(launch_desc);
      if (pix_valid && pix_ready) pix_valid <= 0;
      if (!busy) begin
        if (q.size() > 0) begin
          batch_desc_t d;
          d = q.pop_front();
          busy <= 1; tri_left <= (d.ntri == 0) ? 1 : int'(d.ntri); sub <= 0; cyc <= 0; cur_id <= d.id;
        end
      end else begin
        busy_cycles <= busy_cycles + 1;
        cyc <= cyc + 1;
        if (sub == 0) begin
          tv_inc  <= 3;
          pix_inc <= INC_W'(PIX_PER_TRI);
          if (EMIT_PIX && (!pix_valid || pix_ready)) begin
            seed = seed * 1103515245 + 12345;
            pix_valid <= 1;
            pix.x <= XY_W'((seed >>> 8) & 32'h7FFF) % XY_W'(FRAME_W);
            pix.y <= XY_W'((seed >>> 20) & 32'h7FF) % XY_W'(FRAME_H);
            pix.color <= {cur_id, 16'(tri_left)};
          end
        end
        if (sub == TRI_CYC - 1) begin
          sub <= 0;
          if (tri_left == 1) begin
            busy <= 0;
            done_valid <= 1;
            done_cycles <= REG_W'(cyc + 1);
            n_batches <= n_batches + 1;
          end
          tri_left <= tri_left - 1;
        end else begin
          sub <= sub + 1;
        end
      end
    end
  end
endmodule
