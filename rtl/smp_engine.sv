// smp_engine: simultaneous multi-projection of one triangle into both eyes.
//
// The geometry stage runs once per triangle; this engine turns its output
// into a left-eye and a right-eye triangle. The display X range is [-W, +W];
// the left eye owns [-W, 0] and the right eye [0, +W]. In the default mode
// the left copy is shifted by -W/2 and the right copy by +W/2; with user_vp
// set, the user-defined viewport offsets vp_off_l / vp_off_r are added
// instead (the viewportL / viewportR of the object-oriented programming
// model). Each copy is then clipped against its own eye's half so nothing
// spills into the other eye: a copy whose three vertices all lie outside the
// half is dropped (keep_* = 0), otherwise vertex X values are clamped to the
// half. Y is not changed.
// Shift and clip follow the paper's description of its SMP engine; the sign
// convention, the clamping form of the clip (no new vertices are generated)
// and the 16-bit integer coordinates are this design's choices.
// Timing: one triangle per cycle, one register stage (valid/ready, output
// register refilled when empty or consumed).
module smp_engine
  import oovr_pkg::*;
#(
  parameter int W = 1280
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               user_vp,
  input  logic signed [15:0] vp_off_l,
  input  logic signed [15:0] vp_off_r,
  input  logic               in_valid,
  output logic               in_ready,
  input  tri_t               in_tri,
  output logic               out_valid,
  input  logic               out_ready,
  output tri_t               out_l,
  output tri_t               out_r,
  output logic               keep_l,
  output logic               keep_r
);
  localparam logic signed [16:0] HALF = 17'(W / 2);
  localparam logic signed [16:0] WMAX = 17'(W);

  function automatic logic signed [16:0] shift_x(input logic signed [15:0] x,
                                                 input logic signed [16:0] off);
    return 17'(x) + off;
  endfunction

  // lo/hi: the eye's half
  function automatic logic signed [15:0] clampx(input logic signed [16:0] x,
                                                input logic signed [16:0] lo,
                                                input logic signed [16:0] hi);
    if (x < lo) return 16'(lo);
    if (x > hi) return 16'(hi);
    return 16'(x);
  endfunction

  logic signed [16:0] off_l, off_r;
  logic signed [16:0] xl [3];
  logic signed [16:0] xr [3];
  vtx_t vin [3];
  tri_t tl, tr;
  logic kl, kr;

  always_comb begin
    off_l = user_vp ? 17'(vp_off_l) : -HALF;
    off_r = user_vp ? 17'(vp_off_r) :  HALF;
    vin[0] = in_tri.v0; vin[1] = in_tri.v1; vin[2] = in_tri.v2;
    kl = 1'b0; kr = 1'b0;
    for (int i = 0; i < 3; i++) begin
      xl[i] = shift_x(vin[i].x, off_l);
      xr[i] = shift_x(vin[i].x, off_r);
      if (xl[i] >= -WMAX && xl[i] <= 0)   kl = 1'b1;
      if (xr[i] >= 0     && xr[i] <= WMAX) kr = 1'b1;
    end
    tl.v0.x = clampx(xl[0], -WMAX, 0); tl.v0.y = vin[0].y;
    tl.v1.x = clampx(xl[1], -WMAX, 0); tl.v1.y = vin[1].y;
    tl.v2.x = clampx(xl[2], -WMAX, 0); tl.v2.y = vin[2].y;
    tr.v0.x = clampx(xr[0], 0, WMAX);  tr.v0.y = vin[0].y;
    tr.v1.x = clampx(xr[1], 0, WMAX);  tr.v1.y = vin[1].y;
    tr.v2.x = clampx(xr[2], 0, WMAX);  tr.v2.y = vin[2].y;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_l <= '0; out_r <= '0; keep_l <= 1'b0; keep_r <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_l  <= tl;
        out_r  <= tr;
        keep_l <= kl;
        keep_r <= kr;
      end
    end
  end
endmodule
