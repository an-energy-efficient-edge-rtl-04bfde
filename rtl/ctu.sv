// ctu: coarse traversal unit.
//
// Marches a ray packet through coarse voxels (CVs) until it finds a CV that the
// coarse occupancy bitmap marks as non-empty, then hands the packet on as a
// candidate RP (CRP) tagged with that CV to the RP reordering buffer. Each cycle
// the lag-first aggregate unit picks the lagging ray's CV; if that CV is empty,
// the rays inside it advance one step (pos += dir) and rays leaving the bounding
// box die; if it is occupied, the CRP is emitted. A packet with no live ray has
// finished traversal and is marked done in the RP buffer (RP termination).
//
// Packets arrive through an input queue of RP pointers fed by two sources: new
// packets from ray generation and packets returned by the fine traversal unit on
// a CV transition (the retire path, given priority). The queue holds NRP
// pointers, so a returning packet is never refused. The one-step-per-cycle
// marching and the 64-bit coarse bitmap register are this design's choices; the
// paper states what the unit finds, not how it steps.
module ctu
  import edr_pkg::*;
#(
  parameter int QD = NRP
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  aabb_t                    box,
  input  logic [63:0]              cbm,        // coarse bitmap, bit = CV tag
  // new packets
  input  logic                     new_valid,
  output logic                     new_ready,
  input  logic [PTR_W-1:0]         new_ptr,
  // packets back from fine traversal (CV transition)
  input  logic                     ret_valid,
  input  logic [PTR_W-1:0]         ret_ptr,
  // RP buffer port
  output logic [PTR_W-1:0]         rb_ptr,
  input  vec3p_t [NRAY-1:0]        rb_pos,
  input  vec3d_t [NRAY-1:0]        rb_dir,
  input  logic [NRAY-1:0]          rb_alive,
  input  logic [2:0]               rb_adorder,
  input  logic [2:0]               rb_dneg,
  output logic                     rb_we,
  output vec3p_t [NRAY-1:0]        rb_wpos,
  output logic [NRAY-1:0]          rb_walive,
  output logic                     rb_done,
  // candidate RP to the reordering buffer
  output logic                     crp_valid,
  input  logic                     crp_ready,
  output logic [PTR_W-1:0]         crp_ptr,
  output logic [CVTAG_W-1:0]       crp_tag,
  // statistics
  output logic                     ev_skip,    // an empty CV step was taken
  output logic                     idle
);

  // ---------------- input queue ----------------
  logic [PTR_W-1:0] q [QD];
  logic [$clog2(QD):0] qcnt;
  logic [$clog2(QD)-1:0] qrd, qwr;
  logic pop, push;
  logic [PTR_W-1:0] push_ptr;

  assign new_ready = !ret_valid && (qcnt < ($clog2(QD)+1)'(QD));
  assign push      = ret_valid || (new_valid && new_ready);
  assign push_ptr  = ret_valid ? ret_ptr : new_ptr;

  // ---------------- traversal ----------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_EMIT} st_e;
  st_e st;
  logic [PTR_W-1:0] cur;

  logic [NRAY-1:0][2:0][CV_W-1:0] tags;
  logic [2:0][CV_W-1:0]           sel_tag;
  logic [NRAY-1:0]                sel_mask;
  logic [2:0][NRAY-1:0]           en;
  logic                           occ;

  always_comb
    for (int r = 0; r < NRAY; r++)
      for (int a = 0; a < 3; a++)
        tags[r][a] = rb_pos[r][a][POS_FRAC+5 +: CV_W];

  lfau #(.TAG_W(CV_W)) u_lfau (
    .adorder(rb_adorder), .dir_neg(rb_dneg), .valid(rb_alive),
    .tag(tags), .sel_tag(sel_tag), .sel_mask(sel_mask), .en(en)
  );

  assign occ    = cbm[sel_tag];
  assign rb_ptr = cur;
  assign pop    = (st == S_IDLE) && (qcnt != 0);

  always_comb begin
    rb_we     = 1'b0;
    rb_done   = 1'b0;
    rb_wpos   = rb_pos;
    rb_walive = rb_alive;
    ev_skip   = 1'b0;
    if (st == S_RUN) begin
      if (rb_alive == '0) begin
        rb_we   = 1'b1;
        rb_done = 1'b1;
      end else if (!occ) begin
        rb_we   = 1'b1;
        ev_skip = 1'b1;
        for (int r = 0; r < NRAY; r++)
          if (sel_mask[r]) begin
            for (int a = 0; a < 3; a++)
              rb_wpos[r][a] = rb_pos[r][a] + POS_W'(rb_dir[r][a]);
            rb_walive[r] = inside_box(rb_wpos[r], box);
          end
      end
    end
  end

  assign crp_valid = (st == S_EMIT);
  assign crp_ptr   = cur;
  assign idle      = (st == S_IDLE) && (qcnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cur     <= '0;
      qcnt    <= '0;
      qrd     <= '0;
      qwr     <= '0;
      crp_tag <= '0;
    end else begin
      if (push) begin
        q[qwr] <= push_ptr;
        qwr    <= qwr + 1'b1;
      end
      if (pop) qrd <= qrd + 1'b1;
      qcnt <= qcnt + ($clog2(QD)+1)'(push) - ($clog2(QD)+1)'(pop);
      unique case (st)
        S_IDLE: if (pop) begin
          cur <= q[qrd];
          st  <= S_RUN;
        end
        S_RUN: begin
          if (rb_alive == '0) st <= S_IDLE;
          else if (occ) begin
            crp_tag <= sel_tag;
            st      <= S_EMIT;
          end
        end
        S_EMIT: if (crp_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
