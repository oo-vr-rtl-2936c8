// rt_predictor: rendering time predictor of the OO-VR distribution engine.
//
// The paper models a batch's rendering time linearly,
//   t(X) = c0 * #triangles = c1 * #transformed_vertices + c2 * #pixels,
// with c0, c1, c2 the GPM's triangle, vertex and pixel rates. The rates are
// learnt from the first CAL_BATCHES (8) batches of rendering: while they run,
// this block sums their triangle counts (at dispatch), the vertex and pixel
// increments reported by all GPMs, and the rendering times the GPMs report
// when each batch completes. When the last of them completes it divides:
//   c0 = T / sum_tri,  c1 = T / (2 sum_tv),  c2 = T / (2 sum_pix)
// (T = sum of reported times). How the one measured time is split between
// vertices and pixels is not given by the paper; splitting it in halves is
// this design's choice, and if one of the two counts is zero the other takes
// the whole time. Rates are unsigned fixed point with FRAC fraction bits.
//
// Prediction is combinational: pred_total = c0 * tri_in, a CNT_W-bit time in
// the same fixed point. cal_done rises W_DIV+2 cycles after the last
// calibration batch reports done and stays high until reset.
module rt_predictor
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM        = 4,
  parameter int unsigned CAL_BATCHES = 8,
  parameter int unsigned CW          = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // calibration inputs
  input  logic                  cal_tri_valid,      // a calibration batch was dispatched
  input  logic [REG_W-1:0]      cal_tri,            // its triangle count
  input  logic [NGPM-1:0]       done_valid,         // GPM g finished a batch
  input  logic [NGPM-1:0][REG_W-1:0] done_cycles,   // its measured rendering time
  input  logic [NGPM-1:0][INC_W-1:0] tv_inc,
  input  logic [NGPM-1:0][INC_W-1:0] pix_inc,
  // prediction
  input  logic [REG_W-1:0]      tri_in,
  output logic [CNT_W-1:0]      pred_total,
  // learnt rates
  output logic [CW-1:0]         c0,
  output logic [CW-1:0]         c1,
  output logic [CW-1:0]         c2,
  output logic                  cal_done,
  output logic                  cal_collecting      // still counting calibration batches
);
  localparam int unsigned DW = 64;

  typedef enum logic [1:0] {S_COLLECT, S_START, S_DIV, S_DONE} state_e;
  state_e state;

  logic [REG_W-1:0] sum_tri, sum_tv, sum_pix, sum_t;
  logic [$clog2(CAL_BATCHES+1)-1:0] n_done;

  // per-cycle sums over all GPMs
  logic [REG_W-1:0] cyc_t, cyc_tv, cyc_pix;
  logic [$clog2(NGPM+1)-1:0] cyc_done;
  always_comb begin
    cyc_t = '0; cyc_tv = '0; cyc_pix = '0; cyc_done = '0;
    for (int g = 0; g < NGPM; g++) begin
      if (done_valid[g]) begin
        cyc_t    = cyc_t + done_cycles[g];
        cyc_done = cyc_done + 1'b1;
      end
      cyc_tv  = cyc_tv  + REG_W'(tv_inc[g]);
      cyc_pix = cyc_pix + REG_W'(pix_inc[g]);
    end
  end

  // dividers
  logic [DW-1:0] dividend, dv0, dv1, dv2;
  logic [DW-1:0] q0, q1, q2;
  logic [DW-1:0] r0, r1, r2;
  logic b0, b1, b2, d0, d1, d2;
  logic div_start;

  assign dividend = DW'(sum_t) << FRAC;
  always_comb begin
    dv0 = DW'(sum_tri);
    dv1 = (sum_pix != 0) ? (DW'(sum_tv)  << 1) : DW'(sum_tv);
    dv2 = (sum_tv  != 0) ? (DW'(sum_pix) << 1) : DW'(sum_pix);
  end

  seq_divider #(.W(DW)) u_div0 (.clk, .rst_n, .start(div_start), .dividend, .divisor(dv0),
                                .busy(b0), .done(d0), .quotient(q0), .remainder(r0));
  seq_divider #(.W(DW)) u_div1 (.clk, .rst_n, .start(div_start), .dividend, .divisor(dv1),
                                .busy(b1), .done(d1), .quotient(q1), .remainder(r1));
  seq_divider #(.W(DW)) u_div2 (.clk, .rst_n, .start(div_start), .dividend, .divisor(dv2),
                                .busy(b2), .done(d2), .quotient(q2), .remainder(r2));

  assign div_start      = (state == S_START);
  assign cal_done       = (state == S_DONE);
  assign cal_collecting = (state == S_COLLECT);

  function automatic logic [CW-1:0] sat(input logic [DW-1:0] q, input logic zero_div);
    if (zero_div) return '0;
    return (q > DW'({CW{1'b1}})) ? {CW{1'b1}} : q[CW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_COLLECT;
      sum_tri <= '0; sum_tv <= '0; sum_pix <= '0; sum_t <= '0;
      n_done  <= '0;
      c0 <= '0; c1 <= '0; c2 <= '0;
    end else begin
      unique case (state)
        S_COLLECT: begin
          if (cal_tri_valid) sum_tri <= sum_tri + cal_tri;
          sum_tv  <= sum_tv  + cyc_tv;
          sum_pix <= sum_pix + cyc_pix;
          sum_t   <= sum_t   + cyc_t;
          n_done  <= n_done  + cyc_done;
          if (32'(n_done) + 32'(cyc_done) >= CAL_BATCHES) state <= S_START;
        end
        S_START: state <= S_DIV;
        S_DIV: if (d0) begin   // all three dividers take the same time
          c0 <= sat(q0, dv0 == 0);
          c1 <= sat(q1, dv1 == 0);
          c2 <= sat(q2, dv2 == 0);
          state <= S_DONE;
        end
        S_DONE: ;
        default: state <= S_COLLECT;
      endcase
    end
  end

  assign pred_total = CNT_W'(c0) * CNT_W'(tri_in);

  // remainders and busy flags are not needed
  logic unused;
  assign unused = ^{r0, r1, r2, b0, b1, b2, d1, d2};

`ifndef SYNTHESIS
  a_dividers_in_step: assert property (@(posedge clk) disable iff (!rst_n) d0 == d1 && d1 == d2);
`endif
endmodule
