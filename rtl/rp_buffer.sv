// rp_buffer: global ray-packet buffer.
//
// Every ray packet (RP) in flight owns one entry, addressed by its RP pointer;
// the units downstream of ray generation pass only the pointer and read or update
// the packet's state here. An entry holds the pixel coordinates, directions,
// current positions and alive flags of the four rays, the direction order
// (ADOrder) and signs, the transmittance T and the accumulated colour of each ray,
// a count of samples still in flight and a traversal-done flag. The number of RPs
// under processing is bounded by the number of entries, as in the paper; the
// entry count (NRP) is this design's choice.
//
// Ports, one per client, all reads combinational and all writes on the clock:
//   alloc : a new RP from ray generation takes the lowest free pointer.
//   ctu   : coarse traversal reads and writes positions/alive, may mark done.
//   ftu   : fine traversal, likewise, and adds the samples it issues.
//   vru   : volume rendering reads and writes T and colour of one ray and
//           retires one sample.
//   pix   : an entry whose traversal is done and which has no sample in flight
//           leaves as a finished pixel quad (lowest index first) and is freed.
// A pointer is used by at most one of ctu/ftu at a time, so their writes never
// collide; the in-flight count combines the ftu increment and vru decrement.
module rp_buffer
  import edr_pkg::*;
#(
  parameter int N = NRP
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // allocation
  input  logic                          alloc_valid,
  output logic                          alloc_ready,
  output logic [PTR_W-1:0]              alloc_ptr,
  input  logic [NRAY-1:0][COORD_W-1:0]  alloc_x,
  input  logic [NRAY-1:0][COORD_W-1:0]  alloc_y,
  input  vec3d_t [NRAY-1:0]             alloc_dir,
  input  vec3p_t [NRAY-1:0]             alloc_pos,
  input  logic [NRAY-1:0]               alloc_alive,
  input  logic [2:0]                    alloc_adorder,
  input  logic [2:0]                    alloc_dneg,
  // coarse traversal port
  input  logic [PTR_W-1:0]              ctu_ptr,
  output vec3p_t [NRAY-1:0]             ctu_pos,
  output vec3d_t [NRAY-1:0]             ctu_dir,
  output logic [NRAY-1:0]               ctu_alive,
  output logic [2:0]                    ctu_adorder,
  output logic [2:0]                    ctu_dneg,
  input  logic                          ctu_we,
  input  vec3p_t [NRAY-1:0]             ctu_wpos,
  input  logic [NRAY-1:0]               ctu_walive,
  input  logic                          ctu_done,
  // fine traversal port
  input  logic [PTR_W-1:0]              ftu_ptr,
  output vec3p_t [NRAY-1:0]             ftu_pos,
  output vec3d_t [NRAY-1:0]             ftu_dir,
  output logic [NRAY-1:0]               ftu_alive,
  output logic [2:0]                    ftu_adorder,
  output logic [2:0]                    ftu_dneg,
  output logic [NRAY-1:0][T_W-1:0]      ftu_t,
  input  logic                          ftu_we,
  input  vec3p_t [NRAY-1:0]             ftu_wpos,
  input  logic [NRAY-1:0]               ftu_walive,
  input  logic                          ftu_done,
  input  logic [2:0]                    ftu_add,
  // volume rendering port
  input  logic [PTR_W-1:0]              vru_ptr,
  input  logic [1:0]                    vru_ray,
  output logic [T_W-1:0]                vru_t,
  output logic [2:0][23:0]              vru_c,
  input  logic                          vru_we,
  input  logic [T_W-1:0]                vru_wt,
  input  logic [2:0][23:0]              vru_wc,
  // finished pixels
  output logic                          pix_valid,
  input  logic                          pix_ready,
  output pix_t                          pix,
  output logic                          empty
);

  typedef struct packed {
    logic                          used;
    logic                          done;
    logic [7:0]                    inflight;
    logic [NRAY-1:0][COORD_W-1:0]  x, y;
    vec3d_t [NRAY-1:0]             dir;
    vec3p_t [NRAY-1:0]             pos;
    logic [NRAY-1:0]               alive;
    logic [2:0]                    adorder, dneg;
    logic [NRAY-1:0][T_W-1:0]      t;
    logic [NRAY-1:0][2:0][23:0]    c;
  } ent_t;

  ent_t ent [N];

  logic [PTR_W-1:0] free_idx, out_idx;
  logic             free_ok, out_ok;

  always_comb begin
    free_ok  = 1'b0;
    free_idx = '0;
    out_ok   = 1'b0;
    out_idx  = '0;
    empty    = 1'b1;
    for (int i = N - 1; i >= 0; i--) begin
      if (!ent[i].used) begin
        free_ok  = 1'b1;
        free_idx = PTR_W'(i);
      end
      if (ent[i].used && ent[i].done && ent[i].inflight == 0) begin
        out_ok  = 1'b1;
        out_idx = PTR_W'(i);
      end
      if (ent[i].used) empty = 1'b0;
    end
  end

  assign alloc_ready = free_ok;
  assign alloc_ptr   = free_idx;
  assign pix_valid   = out_ok;

  always_comb begin
    pix.x0 = ent[out_idx].x[0];
    pix.y0 = ent[out_idx].y[0];
    pix.x  = ent[out_idx].x;
    pix.y  = ent[out_idx].y;
    for (int r = 0; r < NRAY; r++)
      pix.rgb[r] = {ent[out_idx].c[r][0][23:16], ent[out_idx].c[r][1][23:16],
                    ent[out_idx].c[r][2][23:16]};
  end

  assign ctu_pos     = ent[ctu_ptr].pos;
  assign ctu_dir     = ent[ctu_ptr].dir;
  assign ctu_alive   = ent[ctu_ptr].alive;
  assign ctu_adorder = ent[ctu_ptr].adorder;
  assign ctu_dneg    = ent[ctu_ptr].dneg;
  assign ftu_pos     = ent[ftu_ptr].pos;
  assign ftu_dir     = ent[ftu_ptr].dir;
  assign ftu_alive   = ent[ftu_ptr].alive;
  assign ftu_adorder = ent[ftu_ptr].adorder;
  assign ftu_dneg    = ent[ftu_ptr].dneg;
  assign ftu_t       = ent[ftu_ptr].t;
  assign vru_t       = ent[vru_ptr].t[vru_ray];
  assign vru_c       = ent[vru_ptr].c[vru_ray];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        logic [7:0] inc, dec;
        inc = (ftu_we && ftu_ptr == PTR_W'(i)) ? 8'(ftu_add) : 8'd0;
        dec = (vru_we && vru_ptr == PTR_W'(i)) ? 8'd1 : 8'd0;
        if (alloc_valid && free_ok && free_idx == PTR_W'(i)) begin
          ent[i].used     <= 1'b1;
          ent[i].done     <= (alloc_alive == '0);
          ent[i].inflight <= '0;
          ent[i].x        <= alloc_x;
          ent[i].y        <= alloc_y;
          ent[i].dir      <= alloc_dir;
          ent[i].pos      <= alloc_pos;
          ent[i].alive    <= alloc_alive;
          ent[i].adorder  <= alloc_adorder;
          ent[i].dneg     <= alloc_dneg;
          ent[i].t        <= {NRAY{16'hFFFF}};
          ent[i].c        <= '0;
        end else if (pix_ready && out_ok && out_idx == PTR_W'(i)) begin
          ent[i].used <= 1'b0;
        end else begin
          ent[i].inflight <= ent[i].inflight + inc - dec;
          if (ctu_we && ctu_ptr == PTR_W'(i)) begin
            ent[i].pos   <= ctu_wpos;
            ent[i].alive <= ctu_walive;
            if (ctu_done) ent[i].done <= 1'b1;
          end
          if (ftu_we && ftu_ptr == PTR_W'(i)) begin
            ent[i].pos   <= ftu_wpos;
            ent[i].alive <= ftu_walive;
            if (ftu_done) ent[i].done <= 1'b1;
          end
          if (vru_we && vru_ptr == PTR_W'(i)) begin
            ent[i].t[vru_ray] <= vru_wt;
            ent[i].c[vru_ray] <= vru_wc;
          end
        end
      end
    end
  end

endmodule
