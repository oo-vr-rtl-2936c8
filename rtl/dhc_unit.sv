// dhc_unit: distributed hardware composition unit of one GPM.
//
// The frame buffer of the final stereo frame is split into NGPM vertical
// strips of STRIP_W = FRAME_W / NGPM columns; strip g lives in the local DRAM
// of GPM g (the same mapping as vertical tile-level split-frame rendering:
// strips T0..T3 left to right on GPM0..GPM3). Every GPM renders whole
// batches, so its colour outputs land anywhere on the screen. This unit
// decides for each output pixel which strip owns it:
//   owner == GPM_ID : the pixel goes to this GPM's ROP port;
//   otherwise       : it is sent over the link to the owner's DHC (rem_out[owner]).
// Pixels arriving from the other DHCs wait in a LINK_FIFO-deep buffer per
// link; the ROP port takes one pixel per cycle, chosen round-robin among the
// local stream and the link buffers, and carries the address inside the
// local strip, addr = y * STRIP_W + (x - owner * STRIP_W).
// So the ROPs of all GPMs write the frame in parallel instead of one root
// GPM's ROPs doing all composition.
// Interface: valid/ready everywhere; the local input is accepted in the cycle
// its target (ROP arbiter or link) accepts it, a remote pixel reaches the
// owner's ROP port at the earliest one cycle after it was sent. The one-pixel
// beat width, the buffer depth and the arbitration are this design's choice.
// rem_out_pix of every link carries the local pixel unchanged and only the
// valid bits are steered; rem_out_valid[GPM_ID] is always 0. Synthesis thus
// sees those outputs as wires from inputs or constants, which is intended.
// Likewise the link input of the own index (rem_in_*[GPM_ID]) is never read.
module dhc_unit
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM      = 4,
  parameter int unsigned GPM_ID    = 0,
  parameter int unsigned FRAME_W   = 2560,
  parameter int unsigned FRAME_H   = 1024,
  parameter int unsigned LINK_FIFO = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // colour output of this GPM
  input  logic                     pix_valid,
  output logic                     pix_ready,
  input  pixel_t                   pix,
  // links to the other DHCs (index = destination GPM; own index unused)
  output logic [NGPM-1:0]          rem_out_valid,
  input  logic [NGPM-1:0]          rem_out_ready,
  output pixel_t [NGPM-1:0]        rem_out_pix,
  // links from the other DHCs (index = source GPM; own index unused)
  input  logic [NGPM-1:0]          rem_in_valid,
  output logic [NGPM-1:0]          rem_in_ready,
  input  pixel_t [NGPM-1:0]        rem_in_pix,
  // to the local ROPs and frame-buffer partition
  output logic                     rop_valid,
  input  logic                     rop_ready,
  output logic [FBA_W-1:0]         rop_addr,
  output logic [COLOR_W-1:0]       rop_color,
  output logic [$clog2(NGPM)-1:0]  rop_src,      // GPM the pixel came from
  // counters
  output logic [31:0]              stat_local,
  output logic [31:0]              stat_remote_out,
  output logic [31:0]              stat_remote_in
);
  localparam int unsigned GW      = $clog2(NGPM);
  localparam int unsigned STRIP_W = FRAME_W / NGPM;

  // owner strip of a pixel: the largest g with x >= g * STRIP_W
  function automatic logic [GW-1:0] owner_of(input logic [XY_W-1:0] x);
    logic [GW-1:0] o;
    o = '0;
    for (int g = 1; g < NGPM; g++)
      if (32'(x) >= g * STRIP_W) o = GW'(g);
    return o;
  endfunction

  logic [GW-1:0] own;
  assign own = owner_of(pix.x);
  wire is_local = (32'(own) == GPM_ID);

  // ---- link input buffers ----
  logic   [NGPM-1:0] lb_valid, lb_pop;
  pixel_t [NGPM-1:0] lb_pix;
  for (genvar s = 0; s < NGPM; s++) begin : g_link
    if (s == GPM_ID) begin : g_self
      assign rem_in_ready[s] = 1'b0;
      assign lb_valid[s]     = 1'b0;
      assign lb_pix[s]       = '0;
    end else begin : g_buf
      logic [$clog2(LINK_FIFO+1)-1:0] cnt_unused;
      stream_fifo #(.T(pixel_t), .DEPTH(LINK_FIFO)) u_lb (
        .clk, .rst_n,
        .in_valid(rem_in_valid[s]), .in_ready(rem_in_ready[s]), .in_data(rem_in_pix[s]),
        .out_valid(lb_valid[s]), .out_ready(lb_pop[s]), .out_data(lb_pix[s]),
        .count(cnt_unused)
      );
    end
  end

  // ---- ROP arbitration: requester s = link from GPM s, except s == GPM_ID
  // which is the local stream ----
  logic [NGPM-1:0] req, gnt;
  logic [GW-1:0]   rr_ptr;
  always_comb begin
    req = lb_valid;
    req[GPM_ID] = pix_valid && is_local;
    gnt = '0;
    for (int i = 0; i < NGPM; i++) begin
      logic [GW-1:0] idx;
      idx = GW'((32'(rr_ptr) + i) % NGPM);
      if (gnt == '0 && req[idx]) gnt[idx] = 1'b1;
    end
  end

  pixel_t win;
  logic [GW-1:0] win_idx;
  always_comb begin
    win = '0;
    win_idx = '0;
    for (int s = 0; s < NGPM; s++) begin
      if (gnt[s]) begin
        win     = (s == GPM_ID) ? pix : lb_pix[s];
        win_idx = GW'(s);
      end
    end
  end

  assign rop_valid = |gnt;
  assign rop_color = win.color;
  assign rop_src   = win_idx;
  assign rop_addr  = FBA_W'(32'(win.y) * STRIP_W + (32'(win.x) - GPM_ID * STRIP_W));

  always_comb begin
    lb_pop = gnt & {NGPM{rop_ready}};
    lb_pop[GPM_ID] = 1'b0;
  end

  // ---- local input steering ----
  always_comb begin
    rem_out_valid = '0;
    rem_out_pix   = '0;
    for (int d = 0; d < NGPM; d++) rem_out_pix[d] = pix;
    if (pix_valid && !is_local) rem_out_valid[own] = 1'b1;
  end
  assign pix_ready = is_local ? (gnt[GPM_ID] && rop_ready) : rem_out_ready[own];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr          <= '0;
      stat_local      <= '0;
      stat_remote_out <= '0;
      stat_remote_in  <= '0;
    end else begin
      if (rop_valid && rop_ready) begin
        rr_ptr <= GW'((32'(win_idx) + 1) % NGPM);
        if (32'(win_idx) == GPM_ID) stat_local <= stat_local + 1;
        else                        stat_remote_in <= stat_remote_in + 1;
      end
      if (pix_valid && pix_ready && !is_local) stat_remote_out <= stat_remote_out + 1;
    end
  end

`ifndef SYNTHESIS
  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_in_frame:   assert property (@(posedge clk) disable iff (!rst_n)
                  pix_valid |-> (32'(pix.x) < FRAME_W && 32'(pix.y) < FRAME_H));
  a_rop_owned:  assert property (@(posedge clk) disable iff (!rst_n)
                  rop_valid |-> 32'(owner_of(win.x)) == GPM_ID);
`endif
endmodule
