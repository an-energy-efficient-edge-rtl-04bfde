// edr_nr_top: the neural-rendering coprocessor.
//
// Renders a new view of a scene stored as an occupancy hierarchy (coarse bitmap,
// fine bitmap, micro bitmap lines) and a grid of INT4 feature vectors, with one
// tiny MLP per coarse voxel. Data flow:
//   zorg  -> abt -> tsps        Z-order ray packets of 4 rays, box test, entry point
//   rp_buffer                   one entry per packet in flight (pointer-addressed)
//   ctu                         coarse traversal to the next non-empty coarse voxel
//   rp_rob                      packets grouped by coarse voxel tag
//   ftu (+ mgb_cache)           fine and micro traversal, sample generation
//   ooo_si                      out-of-order issue of sample sets with on-chip features
//   cfiu                        feature cache, miss handling, trilinear interpolation
//   tme                         per-CV MLP: colour and density
//   vru                         compositing; finished packets leave as pixel quads
// Two feedback paths close the loop: reschedule (ftu -> rp_rob, the packet stays
// in its coarse voxel) and retire (ftu -> rp_rob placeholder release, and on a
// coarse voxel transition ftu -> ctu).
//
// External memory is outside: the micro bitmap lines (mgb_mem_*) and the feature
// vectors of a fine voxel (fdr_*) are fetched over request/response ports. The
// host loads the camera pose, image bounds, box, coarse bitmap (cbm), fine bitmap
// (fbm_*), MLP weights (wt_*) and the transmittance threshold, then pulses start.
// Pixel quads stream out on pix_*; done rises when every packet has left. ev
// carries one pulse per mechanism event for monitoring (bit list next to its assignment).
module edr_nr_top
  import edr_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // host configuration
  input  logic                  start,
  input  logic                  flush,
  input  logic [COORD_W-1:0]    bx,
  input  logic [COORD_W-1:0]    by,
  input  pcp_t                  pcp,
  input  aabb_t                 box,
  input  logic [63:0]           cbm,
  input  logic [T_W-1:0]        t_thr,
  input  logic                  fbm_we,
  input  logic [FVTAG_W-1:0]    fbm_addr,
  input  logic                  fbm_data,
  input  logic                  wt_we,
  input  logic [CVTAG_W-1:0]    wt_cv,
  input  logic [5:0]            wt_word,
  input  logic [127:0]          wt_data,
  // external memory: micro bitmap lines
  output logic                  mgb_mem_req,
  output logic [FVTAG_W-1:0]    mgb_mem_addr,
  input  logic                  mgb_mem_rsp_valid,
  input  logic [63:0]           mgb_mem_rsp_data,
  // external memory: feature vectors
  output logic                  fdr_req_valid,
  input  logic                  fdr_req_ready,
  output logic [FVTAG_W-1:0]    fdr_req_fv,
  input  logic                  fdr_rsp_valid,
  input  logic [VEC_W-1:0]      fdr_rsp_data,
  // output image
  output logic                  pix_valid,
  input  logic                  pix_ready,
  output pix_t                  pix,
  output logic                  done,
  output logic [15:0]           ev
);

  // ---------------- ray generation ----------------
  logic                          z_valid, z_ready, z_busy, z_done;
  logic [NRAY-1:0][COORD_W-1:0]  z_x, z_y;
  logic [NRAY-1:0]               z_ok, z_hit;
  vec3d_t [NRAY-1:0]             z_dir;
  logic [2:0]                    z_ado, z_dneg;

  zorg u_zorg (
    .clk, .rst_n, .start, .bx, .by, .pcp,
    .rp_valid(z_valid), .rp_ready(z_ready), .rcx(z_x), .rcy(z_y), .ray_ok(z_ok),
    .dir(z_dir), .adorder(z_ado), .dir_neg(z_dneg), .busy(z_busy), .done(z_done)
  );

  abt u_abt (.org(pcp.org), .box, .dir(z_dir), .ray_ok(z_ok), .hit(z_hit));

  logic                          s_valid, s_ready;
  logic [NRAY-1:0]               s_alive;
  vec3p_t [NRAY-1:0]             s_pos;
  vec3d_t [NRAY-1:0]             s_dir;
  logic [NRAY-1:0][COORD_W-1:0]  s_x, s_y;
  logic [2:0]                    s_ado, s_dneg;

  tsps u_tsps (
    .clk, .rst_n, .org(pcp.org), .box,
    .in_valid(z_valid), .in_ready(z_ready), .in_hit(z_hit), .in_dir(z_dir),
    .in_x(z_x), .in_y(z_y), .in_adorder(z_ado), .in_dneg(z_dneg),
    .out_valid(s_valid), .out_ready(s_ready), .out_alive(s_alive), .out_pos(s_pos),
    .out_dir(s_dir), .out_x(s_x), .out_y(s_y), .out_adorder(s_ado), .out_dneg(s_dneg)
  );

  // ---------------- global RP buffer ----------------
  logic              a_valid, a_ready, a_dead, c_new_valid, c_new_ready;
  logic [PTR_W-1:0]  a_ptr;

  assign a_dead      = (s_alive == '0);
  assign a_valid     = s_valid && (a_dead || c_new_ready);
  assign c_new_valid = s_valid && a_ready && !a_dead;
  assign s_ready     = a_ready && (a_dead || c_new_ready);

  logic [PTR_W-1:0]          c_ptr, f_ptr, v_ptr;
  vec3p_t [NRAY-1:0]         c_pos, f_pos, c_wpos, f_wpos;
  vec3d_t [NRAY-1:0]         c_dir, f_dir;
  logic [NRAY-1:0]           c_alive, f_alive, c_walive, f_walive;
  logic [2:0]                c_ado, c_dneg, f_ado, f_dneg, f_add;
  logic [NRAY-1:0][T_W-1:0]  f_t;
  logic                      c_we, c_done, f_we, f_done, v_we;
  logic [1:0]                v_ray;
  logic [T_W-1:0]            v_t, v_wt;
  logic [2:0][23:0]          v_c, v_wc;
  logic                      rb_empty;

  rp_buffer u_rpb (
    .clk, .rst_n,
    .alloc_valid(a_valid), .alloc_ready(a_ready), .alloc_ptr(a_ptr),
    .alloc_x(s_x), .alloc_y(s_y), .alloc_dir(s_dir), .alloc_pos(s_pos),
    .alloc_alive(s_alive), .alloc_adorder(s_ado), .alloc_dneg(s_dneg),
    .ctu_ptr(c_ptr), .ctu_pos(c_pos), .ctu_dir(c_dir), .ctu_alive(c_alive),
    .ctu_adorder(c_ado), .ctu_dneg(c_dneg), .ctu_we(c_we), .ctu_wpos(c_wpos),
    .ctu_walive(c_walive), .ctu_done(c_done),
    .ftu_ptr(f_ptr), .ftu_pos(f_pos), .ftu_dir(f_dir), .ftu_alive(f_alive),
    .ftu_adorder(f_ado), .ftu_dneg(f_dneg), .ftu_t(f_t), .ftu_we(f_we),
    .ftu_wpos(f_wpos), .ftu_walive(f_walive), .ftu_done(f_done), .ftu_add(f_add),
    .vru_ptr(v_ptr), .vru_ray(v_ray), .vru_t(v_t), .vru_c(v_c), .vru_we(v_we),
    .vru_wt(v_wt), .vru_wc(v_wc),
    .pix_valid, .pix_ready, .pix, .empty(rb_empty)
  );

  // ---------------- coarse traversal ----------------
  logic                  crp_valid, crp_ready, cvt_valid, c_skip, c_idle;
  logic [PTR_W-1:0]      crp_ptr, cvt_ptr;
  logic [CVTAG_W-1:0]    crp_tag;

  ctu u_ctu (
    .clk, .rst_n, .box, .cbm,
    .new_valid(c_new_valid), .new_ready(c_new_ready), .new_ptr(a_ptr),
    .ret_valid(cvt_valid), .ret_ptr(cvt_ptr),
    .rb_ptr(c_ptr), .rb_pos(c_pos), .rb_dir(c_dir), .rb_alive(c_alive),
    .rb_adorder(c_ado), .rb_dneg(c_dneg), .rb_we(c_we), .rb_wpos(c_wpos),
    .rb_walive(c_walive), .rb_done(c_done),
    .crp_valid, .crp_ready, .crp_ptr, .crp_tag, .ev_skip(c_skip), .idle(c_idle)
  );

  // ---------------- reordering buffer ----------------
  logic                  sch_valid, sch_ready, rsc_valid, ret_valid, ev_switch, ev_multi;
  logic [PTR_W-1:0]      sch_ptr, rsc_ptr;
  logic [CVTAG_W-1:0]    sch_tag;
  logic [2:0]            sch_entry, rsc_entry, ret_entry;

  rp_rob u_rob (
    .clk, .rst_n,
    .ins_valid(crp_valid), .ins_ready(crp_ready), .ins_ptr(crp_ptr), .ins_tag(crp_tag),
    .sch_valid, .sch_ready, .sch_ptr, .sch_tag, .sch_entry,
    .rsc_valid, .rsc_ptr, .rsc_entry, .ret_valid, .ret_entry,
    .ev_switch, .ev_multi
  );

  // ---------------- fine traversal ----------------
  logic                  m_req_valid, m_req_ready, m_rsp_valid, m_miss;
  logic [FVTAG_W-1:0]    m_req_fv;
  logic [63:0]           m_rsp_line;
  logic                  sp_valid, sp_ready;
  sp_ctrl_t              sp_ctrl;
  vec3p_t [NRAY-1:0]     sp_pos;
  logic                  f_fskip, f_rsc, f_cvt, f_term, f_div, f_idle;

  ftu u_ftu (
    .clk, .rst_n, .box, .t_thr, .fbm_we, .fbm_addr, .fbm_data,
    .sch_valid, .sch_ready, .sch_ptr, .sch_tag, .sch_entry,
    .rsc_valid, .rsc_ptr, .rsc_entry, .ret_valid, .ret_entry,
    .cvt_valid, .cvt_ptr,
    .rb_ptr(f_ptr), .rb_pos(f_pos), .rb_dir(f_dir), .rb_alive(f_alive),
    .rb_adorder(f_ado), .rb_dneg(f_dneg), .rb_t(f_t), .rb_we(f_we), .rb_wpos(f_wpos),
    .rb_walive(f_walive), .rb_done(f_done), .rb_add(f_add),
    .mgb_req_valid(m_req_valid), .mgb_req_ready(m_req_ready), .mgb_req_fv(m_req_fv),
    .mgb_rsp_valid(m_rsp_valid), .mgb_rsp_line(m_rsp_line),
    .sp_valid, .sp_ready, .sp_ctrl, .sp_pos,
    .ev_fskip(f_fskip), .ev_rsc(f_rsc), .ev_cvt(f_cvt), .ev_term(f_term),
    .ev_diverge(f_div), .idle(f_idle)
  );

  mgb_cache u_mgb (
    .clk, .rst_n, .flush,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req_fv(m_req_fv),
    .rsp_valid(m_rsp_valid), .rsp_line(m_rsp_line),
    .mem_req(mgb_mem_req), .mem_addr(mgb_mem_addr),
    .mem_rsp_valid(mgb_mem_rsp_valid), .mem_rsp_data(mgb_mem_rsp_data), .ev_miss(m_miss)
  );

  // ---------------- sample issue and interpolation ----------------
  logic                  chk_valid, chk_hit, chk_accept, fill_valid;
  logic [FVTAG_W-1:0]    chk_fvtag, fill_fvtag;
  logic                  samc_valid, samc_ready, o_bypass;
  samc_t                 samc;
  logic                  ifv_valid, ifv_ready, i_miss, i_merge, i_rsv;
  ifv_pkt_t              ifv;

  ooo_si u_oooi (
    .clk, .rst_n,
    .in_valid(sp_valid), .in_ready(sp_ready), .in_ctrl(sp_ctrl), .in_pos(sp_pos),
    .chk_valid, .chk_fvtag, .chk_hit, .chk_accept, .fill_valid, .fill_fvtag,
    .samc_valid, .samc_ready, .samc, .ev_bypass(o_bypass)
  );

  cfiu u_cfiu (
    .clk, .rst_n, .flush,
    .chk_valid, .chk_fvtag, .chk_hit, .chk_accept, .fill_valid, .fill_fvtag,
    .fdr_req_valid, .fdr_req_ready, .fdr_req_fv, .fdr_rsp_valid, .fdr_rsp_data,
    .samc_valid, .samc_ready, .samc, .ifv_valid, .ifv_ready, .ifv,
    .ev_miss(i_miss), .ev_merge(i_merge), .ev_rsv_block(i_rsv)
  );

  // ---------------- MLP and compositing ----------------
  logic      t_valid, t_ready;
  smp_out_t  t_out;

  tme u_tme (
    .clk, .rst_n, .wt_we, .wt_cv, .wt_word, .wt_data,
    .in_valid(ifv_valid), .in_ready(ifv_ready), .in_pkt(ifv),
    .out_valid(t_valid), .out_ready(t_ready), .out(t_out)
  );

  vru u_vru (
    .in_valid(t_valid), .in_ready(t_ready), .in_smp(t_out),
    .rb_ptr(v_ptr), .rb_ray(v_ray), .rb_t(v_t), .rb_c(v_c), .rb_we(v_we),
    .rb_wt(v_wt), .rb_wc(v_wc)
  );

  assign done = z_done && !z_busy && rb_empty && !s_valid && c_idle && f_idle;

  // event pulses: 0 coarse skip, 1 ROB tag switch, 2 tag in several entries,
  // 3 fine skip, 4 reschedule, 5 CV transition, 6 termination, 7 ray divergence,
  // 8 micro-bitmap miss, 9 feature miss, 10 MSHR merge, 11 RM blocked replacement,
  // 12 out-of-order bypass, 13 sample composited, 14 pixel quad out, 15 packet
  // discarded by the box test
  assign ev = {a_valid && a_ready && a_dead, pix_valid && pix_ready, v_we, o_bypass,
               i_rsv, i_merge, i_miss, m_miss, f_div, f_term, f_cvt, f_rsc, f_fskip,
               ev_multi, ev_switch, c_skip};

endmodule
