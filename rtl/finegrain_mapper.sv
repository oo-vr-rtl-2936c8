// finegrain_mapper: fine-grained task mapping for leftover work.
//
// At the end of a frame a large batch can keep one GPM busy while the others
// are idle. The paper then spreads the remaining processing units (triangles
// in the geometry stage, fragments in the fragment stage) of that batch over
// the idle GPMs by ID. This block maps each unit to a GPM: with the mask of
// participating GPMs (the idle ones plus the owner, which keeps a share) it
// sends unit_id to the k-th set bit of the mask, k = unit_id mod popcount.
// The exact ID rule is this design's choice. One unit per cycle, output
// registered (one cycle of latency), valid/ready with a one-entry output
// register; an empty mask sends the unit to the owner.
module finegrain_mapper
  import oovr_pkg::*;
#(
  parameter int unsigned NGPM = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NGPM-1:0]         part_mask,   // GPMs taking part
  input  logic [$clog2(NGPM)-1:0] owner,       // GPM that owns the batch
  input  logic                    unit_valid,
  output logic                    unit_ready,
  input  logic [REG_W-1:0]        unit_id,
  output logic                    tgt_valid,
  input  logic                    tgt_ready,
  output logic [$clog2(NGPM)-1:0] tgt_gpm,
  output logic [REG_W-1:0]        tgt_id
);
  localparam int unsigned GW = $clog2(NGPM);

  logic [GW:0]   n_part;
  logic [GW:0]   k;
  logic [GW-1:0] pick;
  logic [GW:0]   seen;

  always_comb begin
    seen   = '0;
    n_part = '0;
    for (int g = 0; g < NGPM; g++) n_part = n_part + (GW+1)'(part_mask[g]);
    k    = (n_part == 0) ? '0 : (GW+1)'(unit_id % REG_W'(n_part));
    pick = owner;
    if (n_part != 0) begin
      for (int g = 0; g < NGPM; g++) begin
        if (part_mask[g]) begin
          if (seen == k) pick = GW'(g);
          seen = seen + 1'b1;
        end
      end
    end
  end

  assign unit_ready = !tgt_valid || tgt_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tgt_valid <= 1'b0;
      tgt_gpm   <= '0;
      tgt_id    <= '0;
    end else if (unit_ready) begin
      tgt_valid <= unit_valid;
      if (unit_valid) begin
        tgt_gpm <= pick;
        tgt_id  <= unit_id;
      end
    end
  end
endmodule
