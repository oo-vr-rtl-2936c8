// tb_smp_engine: random triangles through the multi-projection engine in the
// default (+-W/2 shift) and user-viewport modes, with random back-pressure.
// A reference model shifts each vertex, decides per eye whether any vertex
// lies in that eye's half ([-W,0] left, [0,W] right) and clamps X to it.
module tb_smp_engine;
  import oovr_pkg::*;
  localparam int W = 1280;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic user_vp;
  logic signed [15:0] vp_off_l, vp_off_r;
  logic in_valid, in_ready, out_valid, out_ready, keep_l, keep_r;
  tri_t in_tri, out_l, out_r;
  int checks = 0, failures = 0, n_drop = 0, n_clamp = 0;

  smp_engine #(.W(W)) dut (.*);

  typedef struct { tri_t l; tri_t r; bit kl; bit kr; } exp_t;
  exp_t q[$];
  bit fire_in, fire_out;

  function automatic exp_t model(input tri_t t, input bit uvp, input int ol, input int orr);
    exp_t e; int xs[3]; int ys[3]; int lx, rx;
    int offl = uvp ? ol : -W/2;
    int offr = uvp ? orr : W/2;
    xs[0] = int'(t.v0.x); xs[1] = int'(t.v1.x); xs[2] = int'(t.v2.x);
    ys[0] = int'(t.v0.y); ys[1] = int'(t.v1.y); ys[2] = int'(t.v2.y);
    e.kl = 0; e.kr = 0;
    for (int i = 0; i < 3; i++) begin
      vtx_t vl, vr;
      lx = xs[i] + offl; rx = xs[i] + orr * 0 + offr;
      if (lx >= -W && lx <= 0) e.kl = 1;
      if (rx >= 0 && rx <= W) e.kr = 1;
      vl.x = 16'((lx < -W) ? -W : (lx > 0) ? 0 : lx); vl.y = 16'(ys[i]);
      vr.x = 16'((rx < 0) ? 0 : (rx > W) ? W : rx);   vr.y = 16'(ys[i]);
      if (i == 0) begin e.l.v0 = vl; e.r.v0 = vr; end
      if (i == 1) begin e.l.v1 = vl; e.r.v1 = vr; end
      if (i == 2) begin e.l.v2 = vl; e.r.v2 = vr; end
    end
    return e;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; out_ready = 1; user_vp = 0; vp_off_l = 0; vp_off_r = 0; in_tri = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // directed: a triangle centred at 0 lands at -W/2 and +W/2
    @(negedge clk);
    in_valid = 1;
    in_tri.v0 = '{x: 0, y: 10}; in_tri.v1 = '{x: 100, y: 20}; in_tri.v2 = '{x: -100, y: 30};
    q.push_back(model(in_tri, 0, 0, 0));
    @(negedge clk); in_valid = 0;
    checks++;
    if (!(out_valid && out_l.v0.x == -16'(W/2) && out_r.v0.x == 16'(W/2) && out_l.v1.x == -16'(W/2 - 100) &&
          keep_l && keep_r)) begin failures++; $display("FAIL directed shift"); end
    @(posedge clk);
    void'(q.pop_front());
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      if (t % 1000 == 0) begin
        user_vp = 1'((t / 1000) % 2);
        vp_off_l = 16'(-($urandom % 1280)); vp_off_r = 16'($urandom % 1280);
      end
      in_valid  = ($urandom % 4) != 0;
      out_ready = ($urandom % 4) != 0;
      in_tri.v0 = '{x: 16'($urandom % 3000 - 1500), y: 16'($urandom % 1024)};
      in_tri.v1 = '{x: 16'($urandom % 3000 - 1500), y: 16'($urandom % 1024)};
      in_tri.v2 = '{x: 16'($urandom % 3000 - 1500), y: 16'($urandom % 1024)};
      #1;
      if (out_valid) begin
        exp_t e;
        e = q[0];
        checks++;
        if (out_l != e.l || out_r != e.r || keep_l != e.kl || keep_r != e.kr) begin
          failures++; if (failures < 4) $display("FAIL t=%0d got %p %p %b%b want %p %p %b%b", t, out_l, out_r, keep_l, keep_r, e.l, e.r, e.kl, e.kr);
        end
      end
      fire_out = out_valid && out_ready;
      fire_in  = in_valid && in_ready;
      @(posedge clk);
      if (fire_out) begin
        if (!q[0].kl || !q[0].kr) n_drop++;
        void'(q.pop_front());
      end
      if (fire_in) q.push_back(model(in_tri, user_vp, int'(vp_off_l), int'(vp_off_r)));
    end
    checks++; if (n_drop == 0) begin failures++; $display("FAIL no copy was ever dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
