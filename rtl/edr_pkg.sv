// edr_pkg: types, widths and helper functions shared by the neural-rendering
// coprocessor.
//
// Space is a three-level voxel hierarchy: a micro grid of GRID_MICRO^3 occupancy
// bits, fine voxels of FINE_MICRO^3 micro voxels and coarse voxels (CVs) of
// CV_FINE^3 fine voxels. The factors 8 (fine per CV) and 4 (micro per fine, which
// gives 5^3 = 125 feature vertices per fine voxel) follow the paper; the 128^3
// micro grid is this design's choice. Ray positions and directions are fixed point
// with POS_FRAC fractional bits in micro-voxel units (the paper's own custom
// floating-point format is not described). A ray packet (RP) holds NRAY = 4 rays.
//
// The feature bank functions implement the balanced bank allocation: the eight
// vertex classes of a fine voxel (by vertex parity) go to eight banks, rotated by
// XOR with the cache slot number, so that every group of eight slots fills each
// bank with exactly 125 vectors.
package edr_pkg;

  localparam int NRAY       = 4;
  localparam int CNT_W      = 22;         // Z-order counter width
  localparam int COORD_W    = 11;         // pixel coordinate width
  localparam int GRID_MICRO = 128;        // micro voxels per axis
  localparam int FINE_MICRO = 4;          // micro voxels per fine voxel per axis
  localparam int CV_FINE    = 8;          // fine voxels per coarse voxel per axis
  localparam int MICRO_W    = 7;          // log2(GRID_MICRO)
  localparam int FINE_W     = 5;          // bits per axis of a fine voxel index
  localparam int CV_W       = 2;          // bits per axis of a coarse voxel index
  localparam int POS_FRAC   = 8;
  localparam int POS_W      = 18;         // signed, POS_FRAC fractional bits
  localparam int DIR_W      = 16;         // signed, POS_FRAC fractional bits
  localparam int NFV        = 16;         // feature vector dimension
  localparam int FEAT_W     = 4;          // INT4 features
  localparam int VEC_W      = NFV * FEAT_W;
  localparam int IFV_W      = 16;         // interpolated feature component
  localparam int NVTX       = 125;        // vertices per fine voxel
  localparam int NRP        = 32;         // global RP buffer capacity
  localparam int PTR_W      = 5;
  localparam int FVTAG_W    = 3 * FINE_W; // fine voxel tag {z,y,x}
  localparam int CVTAG_W    = 3 * CV_W;   // coarse voxel tag {z,y,x}
  localparam int T_W        = 16;         // transmittance, Q0.16

  typedef logic signed [POS_W-1:0] pos_t;
  typedef logic signed [DIR_W-1:0] dir_t;
  typedef pos_t [2:0] vec3p_t;
  typedef dir_t [2:0] vec3d_t;

  // Pre-processed camera pose: ray direction = (D0 + x*DX + y*DY) >>> 8.
  typedef struct packed {
    logic signed [31:0] d0x, d0y, d0z;
    logic signed [23:0] dxx, dxy, dxz;
    logic signed [23:0] dyx, dyy, dyz;
    vec3p_t             org;
  } pcp_t;

  typedef struct packed {
    vec3p_t lo;
    vec3p_t hi;
  } aabb_t;

  // Control part of a CCRP with sample positions (one sample per ray in mask).
  typedef struct packed {
    logic [PTR_W-1:0]   ptr;
    logic [NRAY-1:0]    mask;
    logic [FVTAG_W-1:0] fvtag;
    logic [CVTAG_W-1:0] cvtag;
  } sp_ctrl_t;

  // Sample coordinate sent to the interpolation unit.
  typedef struct packed {
    logic [PTR_W-1:0]   ptr;
    logic [1:0]         ray;
    logic [FVTAG_W-1:0] fvtag;
    logic [CVTAG_W-1:0] cvtag;
    logic [2:0][1:0]    mloc;   // micro voxel inside the fine voxel, per axis
    logic [2:0][7:0]    frac;   // position inside the micro voxel, per axis
    logic               last;   // last sample of its CCRP_SP
  } samc_t;

  // Interpolated feature vector with its routing information.
  typedef struct packed {
    logic [PTR_W-1:0]             ptr;
    logic [1:0]                   ray;
    logic [CVTAG_W-1:0]           cvtag;
    logic [NFV-1:0][IFV_W-1:0]    ifv;
  } ifv_pkt_t;

  // Colour and density of one sample.
  typedef struct packed {
    logic [PTR_W-1:0] ptr;
    logic [1:0]       ray;
    logic [7:0]       r, g, b;
    logic [7:0]       sigma;   // optical depth per step, Q4.4
  } smp_out_t;

  // Finished pixel quad.
  typedef struct packed {
    logic [COORD_W-1:0]             x0, y0;   // coordinate of ray 0
    logic [NRAY-1:0][COORD_W-1:0]   x, y;
    logic [NRAY-1:0][23:0]          rgb;
  } pix_t;

  // ---------------- voxel index helpers ----------------
  function automatic logic [MICRO_W-1:0] micro_of(pos_t p);
    return p[POS_FRAC +: MICRO_W];
  endfunction

  function automatic logic [FVTAG_W-1:0] fvtag_of(vec3p_t p);
    return {p[2][POS_FRAC+2 +: FINE_W], p[1][POS_FRAC+2 +: FINE_W], p[0][POS_FRAC+2 +: FINE_W]};
  endfunction

  function automatic logic [CVTAG_W-1:0] cvtag_of(vec3p_t p);
    return {p[2][POS_FRAC+5 +: CV_W], p[1][POS_FRAC+5 +: CV_W], p[0][POS_FRAC+5 +: CV_W]};
  endfunction

  // Inside the micro grid and inside the box [lo, hi).
  function automatic logic inside_box(vec3p_t p, aabb_t b);
    logic ok;
    ok = 1'b1;
    for (int a = 0; a < 3; a++) begin
      if (p[a] < b.lo[a] || p[a] >= b.hi[a]) ok = 1'b0;
      if (p[a] < 0 || p[a] >= pos_t'(GRID_MICRO << POS_FRAC)) ok = 1'b0;
    end
    return ok;
  endfunction

  // ---------------- balanced feature bank allocation ----------------
  // Number of vertices of a fine voxel with vertex ID v (bit a = parity on axis a):
  // 3 even and 2 odd positions along each axis.
  function automatic int unsigned vcount(logic [2:0] v);
    return (v[0] ? 2 : 3) * (v[1] ? 2 : 3) * (v[2] ? 2 : 3);
  endfunction

  // Word offset, inside a group of eight slots, where slot s starts in bank b.
  function automatic int unsigned bank_off(logic [2:0] b, logic [2:0] s);
    int unsigned o;
    o = 0;
    for (int k = 0; k < 8; k++)
      if (k < int'(s)) o += vcount(b ^ 3'(k));
    return o;
  endfunction

  // Index of vertex (vx,vy,vz), each 0..4, among the vertices of its class.
  function automatic int unsigned vclass_idx(logic [2:0] vx, logic [2:0] vy, logic [2:0] vz);
    int unsigned nx, ny;
    nx = vx[0] ? 2 : 3;
    ny = vy[0] ? 2 : 3;
    return (int'(vx) >> 1) + nx * ((int'(vy) >> 1) + ny * (int'(vz) >> 1));
  endfunction

endpackage
