// lfau: lag-first aggregate unit.
//
// Picks, among the valid rays of a ray packet, the ray that lags furthest behind
// and returns its voxel tag; all rays sharing that tag advance together in the
// current iteration, the others wait. The tags of the four rays are repacked per
// axis in the priority order given by ADOrder (most dominant direction component
// first). Three chained pairwise-comparison stages follow, as in the paper's
// diagram: stage 1 keeps the rays whose component on the first axis is smallest,
// stage 2 keeps, among those, the smallest on the second axis, stage 3 the
// smallest on the third axis (EN1..EN3 are the surviving-ray masks); a multiplexer
// then picks the tag of the first survivor. "Smallest" is measured along the
// direction of travel: for an axis whose average direction is negative the
// component is inverted (dir_neg, this design's addition; the paper does not
// define how lag is measured).
//
// Purely combinational. Used with TAG_W = 2 (coarse voxel tags) in the coarse
// traversal unit and TAG_W = 5 (fine voxel tags) in the fine traversal unit.
module lfau
  import edr_pkg::*;
#(
  parameter int TAG_W = CV_W
) (
  input  logic [2:0]                        adorder,
  input  logic [2:0]                        dir_neg,
  input  logic [NRAY-1:0]                   valid,
  input  logic [NRAY-1:0][2:0][TAG_W-1:0]   tag,
  output logic [2:0][TAG_W-1:0]             sel_tag,
  output logic [NRAY-1:0]                   sel_mask,
  output logic [2:0][NRAY-1:0]              en
);

  logic [2:0][1:0] prio;   // axis index per priority rank

  always_comb begin
    unique case (adorder)
      3'd0:    prio = {2'd2, 2'd1, 2'd0};
      3'd1:    prio = {2'd1, 2'd2, 2'd0};
      3'd2:    prio = {2'd2, 2'd0, 2'd1};
      3'd3:    prio = {2'd0, 2'd2, 2'd1};
      3'd4:    prio = {2'd1, 2'd0, 2'd2};
      default: prio = {2'd0, 2'd1, 2'd2};
    endcase
  end

  always_comb begin
    logic [NRAY-1:0] keep;
    logic [TAG_W-1:0] key [NRAY];
    logic [TAG_W-1:0] mn;
    keep = valid;
    for (int s = 0; s < 3; s++) begin
      // component package for this rank
      for (int r = 0; r < NRAY; r++)
        key[r] = dir_neg[prio[s]] ? ~tag[r][prio[s]] : tag[r][prio[s]];
      mn = '1;
      for (int r = 0; r < NRAY; r++)
        if (keep[r] && key[r] < mn) mn = key[r];
      for (int r = 0; r < NRAY; r++)
        if (key[r] != mn) keep[r] = 1'b0;
      en[s] = keep;
    end
    sel_tag = '0;
    for (int r = NRAY - 1; r >= 0; r--)
      if (en[2][r]) sel_tag = tag[r];
    for (int r = 0; r < NRAY; r++)
      sel_mask[r] = valid[r] && (tag[r] == sel_tag) && (en[2] != '0);
  end

endmodule
