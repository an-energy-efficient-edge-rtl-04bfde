// ftu: fine traversal unit with micro traversal.
//
// Takes a clustered candidate RP (CCRP) from the reordering buffer and marches
// those of its rays that lie in the packet's current coarse voxel (CV) through
// fine voxels. Each cycle the lag-first aggregate unit picks the lagging ray's fine
// voxel: if the fine bitmap marks it empty the rays in it advance one step; if
// not, the 64-bit micro occupancy line of that fine voxel is taken from the micro
// grid bitmap cache (kept in a local register while the packet stays in the same
// fine voxel, so it is reused) and every selected ray standing on an occupied micro
// voxel produces a sample. The samples of one cycle share one fine voxel and
// leave together as a CCRP with sample positions (CCRP_SP) for the out-of-order
// sample issuer; the sampled rays then step on.
//
// The packet leaves the unit on three events, as in the paper:
//   reschedule : a fine-voxel transition after samples were produced; the packet
//                returns to its reordering-buffer entry.
//   CV transition : no live ray is left in the CV; the entry placeholder is
//                retired and the pointer goes back to coarse traversal.
//   termination : every ray has left the box or its transmittance is below the
//                threshold; the placeholder is retired and the packet is marked
//                done in the RP buffer.
// The one-step marching and the fine bitmap array written by the host are this
// design's choices; the leaf tier of the paper is not modelled separately.
module ftu
  import edr_pkg::*;
#(
  parameter int EW = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  aabb_t                    box,
  input  logic [T_W-1:0]           t_thr,
  // fine bitmap load
  input  logic                     fbm_we,
  input  logic [FVTAG_W-1:0]       fbm_addr,
  input  logic                     fbm_data,
  // schedule from reordering buffer
  input  logic                     sch_valid,
  output logic                     sch_ready,
  input  logic [PTR_W-1:0]         sch_ptr,
  input  logic [CVTAG_W-1:0]       sch_tag,
  input  logic [EW-1:0]            sch_entry,
  // reschedule / retire to reordering buffer
  output logic                     rsc_valid,
  output logic [PTR_W-1:0]         rsc_ptr,
  output logic [EW-1:0]            rsc_entry,
  output logic                     ret_valid,
  output logic [EW-1:0]            ret_entry,
  // CV transition back to coarse traversal
  output logic                     cvt_valid,
  output logic [PTR_W-1:0]         cvt_ptr,
  // RP buffer port
  output logic [PTR_W-1:0]         rb_ptr,
  input  vec3p_t [NRAY-1:0]        rb_pos,
  input  vec3d_t [NRAY-1:0]        rb_dir,
  input  logic [NRAY-1:0]          rb_alive,
  input  logic [2:0]               rb_adorder,
  input  logic [2:0]               rb_dneg,
  input  logic [NRAY-1:0][T_W-1:0] rb_t,
  output logic                     rb_we,
  output vec3p_t [NRAY-1:0]        rb_wpos,
  output logic [NRAY-1:0]          rb_walive,
  output logic                     rb_done,
  output logic [2:0]               rb_add,
  // micro grid bitmap cache
  output logic                     mgb_req_valid,
  input  logic                     mgb_req_ready,
  output logic [FVTAG_W-1:0]       mgb_req_fv,
  input  logic                     mgb_rsp_valid,
  input  logic [63:0]              mgb_rsp_line,
  // samples to the out-of-order sample issuer
  output logic                     sp_valid,
  input  logic                     sp_ready,
  output sp_ctrl_t                 sp_ctrl,
  output vec3p_t [NRAY-1:0]        sp_pos,
  // statistics
  output logic                     ev_fskip,
  output logic                     ev_rsc,
  output logic                     ev_cvt,
  output logic                     ev_term,
  output logic                     ev_diverge,
  output logic                     idle
);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_REQ, S_WAIT, S_EMIT} st_e;
  st_e st;

  logic                 fbm [2**FVTAG_W];
  logic [PTR_W-1:0]     cur;
  logic [CVTAG_W-1:0]   ctag;
  logic [EW-1:0]        cent;
  logic [63:0]          line;
  logic [FVTAG_W-1:0]   line_fv;
  logic                 line_ok;
  logic                 emitted;
  logic [FVTAG_W-1:0]   emit_fv;

  always_ff @(posedge clk)
    if (fbm_we) fbm[fbm_addr] <= fbm_data;

  // ray classification
  logic [NRAY-1:0] live, active;
  logic [NRAY-1:0][2:0][FINE_W-1:0] ftag;
  always_comb
    for (int r = 0; r < NRAY; r++) begin
      live[r]   = rb_alive[r] && (rb_t[r] >= t_thr);
      active[r] = live[r] && (cvtag_of(rb_pos[r]) == ctag);
      for (int a = 0; a < 3; a++) ftag[r][a] = rb_pos[r][a][POS_FRAC+2 +: FINE_W];
    end

  logic [2:0][FINE_W-1:0] sel_fv;
  logic [NRAY-1:0]        sel;
  logic [2:0][NRAY-1:0]   en;
  lfau #(.TAG_W(FINE_W)) u_lfau (
    .adorder(rb_adorder), .dir_neg(rb_dneg), .valid(active), .tag(ftag),
    .sel_tag(sel_fv), .sel_mask(sel), .en(en)
  );

  logic fine_occ, have_line;
  logic [NRAY-1:0] occ;
  assign fine_occ  = fbm[sel_fv];
  assign have_line = line_ok && line_fv == FVTAG_W'(sel_fv);
  always_comb
    for (int r = 0; r < NRAY; r++)
      occ[r] = sel[r] && line[{rb_pos[r][2][POS_FRAC +: 2], rb_pos[r][1][POS_FRAC +: 2],
                               rb_pos[r][0][POS_FRAC +: 2]}];

  // event decode in S_RUN
  logic e_term, e_cvt, e_rsc, e_skip, e_samp;
  always_comb begin
    e_term = 1'b0; e_cvt = 1'b0; e_rsc = 1'b0; e_skip = 1'b0; e_samp = 1'b0;
    if (st == S_RUN) begin
      if (live == '0)                                e_term = 1'b1;
      else if (active == '0)                         e_cvt  = 1'b1;
      else if (emitted && FVTAG_W'(sel_fv) != emit_fv) e_rsc = 1'b1;
      else if (!fine_occ)                            e_skip = 1'b1;
      else if (have_line && occ != '0)               e_samp = 1'b1;
      else if (have_line)                            e_skip = 1'b1;
    end
  end

  // stepping: rays in mask m advance one step
  function automatic vec3p_t step(vec3p_t p, vec3d_t d);
    vec3p_t q;
    for (int a = 0; a < 3; a++) q[a] = p[a] + POS_W'(d[a]);
    return q;
  endfunction

  always_comb begin
    rb_we     = 1'b0;
    rb_done   = 1'b0;
    rb_add    = '0;
    rb_wpos   = rb_pos;
    rb_walive = live;
    if (e_term) begin
      rb_we   = 1'b1;
      rb_done = 1'b1;
    end else if (e_cvt) begin
      rb_we = 1'b1;
    end else if (e_skip) begin
      rb_we = 1'b1;
      for (int r = 0; r < NRAY; r++)
        if (sel[r]) begin
          rb_wpos[r]   = step(rb_pos[r], rb_dir[r]);
          rb_walive[r] = inside_box(rb_wpos[r], box);
        end
    end else if (st == S_EMIT && sp_ready) begin
      rb_we = 1'b1;
      for (int r = 0; r < NRAY; r++) begin
        rb_add = rb_add + 3'(sp_ctrl.mask[r]);
        if (sp_ctrl.mask[r]) begin
          rb_wpos[r]   = step(rb_pos[r], rb_dir[r]);
          rb_walive[r] = rb_alive[r] && inside_box(rb_wpos[r], box);
        end
      end
    end
  end

  assign rb_ptr        = cur;
  assign sch_ready     = (st == S_IDLE);
  assign rsc_valid     = e_rsc;
  assign rsc_ptr       = cur;
  assign rsc_entry     = cent;
  assign ret_valid     = e_term || e_cvt;
  assign ret_entry     = cent;
  assign cvt_valid     = e_cvt;
  assign cvt_ptr       = cur;
  assign mgb_req_valid = (st == S_REQ);
  assign mgb_req_fv    = line_fv;
  assign sp_valid      = (st == S_EMIT);
  assign ev_fskip      = e_skip;
  assign ev_rsc        = e_rsc;
  assign ev_cvt        = e_cvt;
  assign ev_term       = e_term;
  assign ev_diverge    = (st == S_RUN) && (sel != active);
  assign idle          = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cur     <= '0;
      ctag    <= '0;
      cent    <= '0;
      line    <= '0;
      line_fv <= '0;
      line_ok <= 1'b0;
      emitted <= 1'b0;
      emit_fv <= '0;
      sp_ctrl <= '0;
      sp_pos  <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (sch_valid) begin
          cur     <= sch_ptr;
          ctag    <= sch_tag;
          cent    <= sch_entry;
          emitted <= 1'b0;
          st      <= S_RUN;
        end
        S_RUN: begin
          if (e_term || e_cvt || e_rsc) st <= S_IDLE;
          else if (e_samp) begin
            sp_ctrl.ptr   <= cur;
            sp_ctrl.mask  <= occ;
            sp_ctrl.fvtag <= FVTAG_W'(sel_fv);
            sp_ctrl.cvtag <= ctag;
            sp_pos        <= rb_pos;
            emitted       <= 1'b1;
            emit_fv       <= FVTAG_W'(sel_fv);
            st            <= S_EMIT;
          end else if (fine_occ && !have_line) begin
            line_fv <= FVTAG_W'(sel_fv);
            line_ok <= 1'b0;
            st      <= S_REQ;
          end
        end
        S_REQ:  if (mgb_req_ready) st <= S_WAIT;
        S_WAIT: if (mgb_rsp_valid) begin
          line    <= mgb_rsp_line;
          line_ok <= 1'b1;
          st      <= S_RUN;
        end
        S_EMIT: if (sp_ready) st <= S_RUN;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
