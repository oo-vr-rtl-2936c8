// earliest_select: picks the GPM predicted to become free first.
//
// Combinational minimum over the remaining-time counters of the GPMs marked
// eligible (this design makes a GPM ineligible while its pre-allocation queue
// is full). Ties go to the lowest GPM index. sel_valid is low when no GPM is
// eligible. This is the comparison the paper describes between each GPM's
// total and elapsed counters; the tie rule is this design's choice.
module earliest_select
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM = 4
) (
  input  logic [NGPM-1:0][CNT_W-1:0] remaining,
  input  logic [NGPM-1:0]            eligible,
  output logic [$clog2(NGPM)-1:0]    sel,
  output logic                       sel_valid,
  output logic [CNT_W-1:0]           sel_remaining
);
  always_comb begin
    sel           = '0;
    sel_valid     = 1'b0;
    sel_remaining = '1;
    for (int g = 0; g < NGPM; g++) begin
      if (eligible[g] && (!sel_valid || remaining[g] < sel_remaining)) begin
        sel           = ($clog2(NGPM))'(g);
        sel_valid     = 1'b1;
        sel_remaining = remaining[g];
      end
    end
  end
endmodule
