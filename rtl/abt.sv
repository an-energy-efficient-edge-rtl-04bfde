// abt: AABB tester.
//
// Decides for each of the four rays of a packet whether the ray o + t*d, t >= 0,
// crosses the scene's axis-aligned bounding box [lo, hi). It is the slab test
// written without division: per axis the entry and exit distances are the
// fractions n_lo/d and n_hi/d (after mirroring axes whose direction is negative),
// and two fractions are compared by cross multiplication. A ray hits when every
// entry distance is below every exit distance and every exit distance is
// positive; an axis with zero direction component requires the origin to lie
// inside that slab. The slab test itself is this design's choice: the paper only
// states that rays missing the box are discarded.
//
// Purely combinational: hit = ray_ok & (ray crosses the box).
module abt
  import edr_pkg::*;
(
  input  vec3p_t               org,
  input  aabb_t                box,
  input  vec3d_t [NRAY-1:0]    dir,
  input  logic   [NRAY-1:0]    ray_ok,
  output logic   [NRAY-1:0]    hit
);

  always_comb begin
    for (int r = 0; r < NRAY; r++) begin
      logic signed [POS_W+1:0] nlo [3];
      logic signed [POS_W+1:0] nhi [3];
      logic signed [DIR_W:0]   dd  [3];
      logic ok;
      ok = ray_ok[r];
      for (int a = 0; a < 3; a++) begin
        if (dir[r][a] < 0) begin
          nlo[a] = (POS_W+2)'(org[a]) - (POS_W+2)'(box.hi[a]);
          nhi[a] = (POS_W+2)'(org[a]) - (POS_W+2)'(box.lo[a]);
          dd[a]  = -(DIR_W+1)'(dir[r][a]);
        end else begin
          nlo[a] = (POS_W+2)'(box.lo[a]) - (POS_W+2)'(org[a]);
          nhi[a] = (POS_W+2)'(box.hi[a]) - (POS_W+2)'(org[a]);
          dd[a]  = (DIR_W+1)'(dir[r][a]);
        end
        if (dd[a] == 0) begin
          if (nlo[a] > 0 || nhi[a] <= 0) ok = 1'b0;
        end else if (nhi[a] <= 0) begin
          ok = 1'b0;
        end
      end
      // every entry before every exit: nlo_a/d_a < nhi_b/d_b
      for (int a = 0; a < 3; a++)
        for (int b = 0; b < 3; b++)
          if (a != b && dd[a] != 0 && dd[b] != 0)
            if ((40'(nlo[a]) * 40'(dd[b])) >= (40'(nhi[b]) * 40'(dd[a]))) ok = 1'b0;
      hit[r] = ok;
    end
  end

endmodule
