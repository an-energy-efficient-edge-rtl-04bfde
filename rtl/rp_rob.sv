// rp_rob: ray-packet reordering buffer with tag selector.
//
// Collects candidate RPs (CRPs) from coarse traversal and groups them by the
// coarse voxel (CV) they are about to enter, so that the fine traversal and
// everything behind it work on one CV's data for as long as possible. The buffer
// has NE entries of DEPTH slots. An entry is labelled with a CV tag while it holds
// any packet; a CV with many packets may occupy several entries.
//
// Four operations, as in the paper:
//   insert     : a CRP goes to the entry with its tag that holds the most packets
//                and still has room; failing that, an empty entry is labelled.
//                The recent-tags recorder (NRT tags, least recently used order)
//                moves the tag to its front.
//   schedule   : a clustered CRP (CCRP) of the current tag leaves for fine
//                traversal, from the current-tag entry with the most queued
//                packets. When the current tag has nothing queued the tag is
//                switched: entries whose tag is in the recent-tags recorder are
//                preferred and the one with the fewest packets is chosen; with no
//                such entry the lowest-index non-empty entry is taken.
//   reschedule : a packet that stays in its CV returns to its entry.
//   retire     : a packet leaves for good (done, or CV transition) and frees its
//                place.
// A scheduled packet keeps its place ("placeholder") until it retires, so a
// reschedule always finds room. Reading "most occupied entry", "least CCRPs" and
// the placeholder from the paper; the tie-breaks, the no-hit fallback and switching
// once no packet of the current tag is queued are this design's choices.
// Insert is refused in a cycle with a reschedule (one write port per cycle).
module rp_rob
  import edr_pkg::*;
#(
  parameter int NE    = 8,
  parameter int DEPTH = 8,
  parameter int NRT   = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // insert
  input  logic                        ins_valid,
  output logic                        ins_ready,
  input  logic [PTR_W-1:0]            ins_ptr,
  input  logic [CVTAG_W-1:0]          ins_tag,
  // schedule
  output logic                        sch_valid,
  input  logic                        sch_ready,
  output logic [PTR_W-1:0]            sch_ptr,
  output logic [CVTAG_W-1:0]          sch_tag,
  output logic [$clog2(NE)-1:0]       sch_entry,
  // reschedule
  input  logic                        rsc_valid,
  input  logic [PTR_W-1:0]            rsc_ptr,
  input  logic [$clog2(NE)-1:0]       rsc_entry,
  // retire
  input  logic                        ret_valid,
  input  logic [$clog2(NE)-1:0]       ret_entry,
  // statistics
  output logic                        ev_switch,
  output logic                        ev_multi   // a tag held in more than one entry
);

  localparam int EW = $clog2(NE);
  localparam int DW = $clog2(DEPTH);

  logic [CVTAG_W-1:0]  etag [NE];
  logic [DW:0]         occ  [NE];   // queued + placeholders
  logic [DW:0]         qn   [NE];   // queued
  logic [DW-1:0]       hd   [NE];
  logic [DW-1:0]       tl   [NE];
  logic [PTR_W-1:0]    mem  [NE][DEPTH];   // RP SRAM

  logic [CVTAG_W-1:0]  rt   [NRT];
  logic [NRT-1:0]      rtv;
  logic [CVTAG_W-1:0]  cur_tag;
  logic                cur_ok;

  // ---------------- entry selector, insert ----------------
  logic          ins_ok;
  logic [EW-1:0] ins_e;
  always_comb begin
    logic [DW:0] best;
    ins_ok = 1'b0;
    ins_e  = '0;
    best   = '0;
    for (int e = 0; e < NE; e++)
      if (occ[e] != 0 && etag[e] == ins_tag && occ[e] < (DW+1)'(DEPTH) &&
          (!ins_ok || occ[e] > best)) begin
        ins_ok = 1'b1;
        ins_e  = EW'(e);
        best   = occ[e];
      end
    if (!ins_ok)
      for (int e = NE - 1; e >= 0; e--)
        if (occ[e] == 0) begin
          ins_ok = 1'b1;
          ins_e  = EW'(e);
        end
  end
  assign ins_ready = ins_ok && !rsc_valid;

  // ---------------- entry selector / tag selector, schedule ----------------
  logic          sch_ok;
  logic [EW-1:0] sch_e;
  logic          switching;
  always_comb begin
    logic [DW:0] best;
    logic        hit;
    sch_ok    = 1'b0;
    sch_e     = '0;
    best      = '0;
    switching = 1'b0;
    hit       = 1'b0;
    for (int e = 0; e < NE; e++)
      if (cur_ok && qn[e] != 0 && etag[e] == cur_tag && (!sch_ok || qn[e] > best)) begin
        sch_ok = 1'b1;
        sch_e  = EW'(e);
        best   = qn[e];
      end
    if (!sch_ok) begin
      switching = 1'b1;
      // hit checker + candidate tag sorter: fewest packets among recent tags
      for (int e = 0; e < NE; e++) begin
        hit = 1'b0;
        for (int k = 0; k < NRT; k++)
          if (rtv[k] && rt[k] == etag[e]) hit = 1'b1;
        if (hit && qn[e] != 0 && (!sch_ok || qn[e] < best)) begin
          sch_ok = 1'b1;
          sch_e  = EW'(e);
          best   = qn[e];
        end
      end
      if (!sch_ok)
        for (int e = NE - 1; e >= 0; e--)
          if (qn[e] != 0) begin
            sch_ok = 1'b1;
            sch_e  = EW'(e);
          end
    end
  end

  assign sch_valid = sch_ok;
  assign sch_ptr   = mem[sch_e][hd[sch_e]];
  assign sch_tag   = etag[sch_e];
  assign sch_entry = sch_e;
  assign ev_switch = sch_valid && sch_ready && switching;

  always_comb begin
    ev_multi = 1'b0;
    for (int e = 0; e < NE; e++)
      for (int f = 0; f < NE; f++)
        if (e != f && occ[e] != 0 && occ[f] != 0 && etag[e] == etag[f]) ev_multi = 1'b1;
  end

  // ---------------- state update ----------------
  logic do_ins, do_sch;
  assign do_ins = ins_valid && ins_ready;
  assign do_sch = sch_valid && sch_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NE; e++) begin
        etag[e] <= '0;
        occ[e]  <= '0;
        qn[e]   <= '0;
        hd[e]   <= '0;
        tl[e]   <= '0;
      end
      for (int k = 0; k < NRT; k++) rt[k] <= '0;
      rtv     <= '0;
      cur_tag <= '0;
      cur_ok  <= 1'b0;
    end else begin
      for (int e = 0; e < NE; e++) begin
        logic push, pop, rel, add;
        add  = do_ins && ins_e == EW'(e);
        push = add || (rsc_valid && rsc_entry == EW'(e));
        pop  = do_sch && sch_e == EW'(e);
        rel  = ret_valid && ret_entry == EW'(e);
        if (push) begin
          mem[e][tl[e]] <= add ? ins_ptr : rsc_ptr;
          tl[e]         <= tl[e] + 1'b1;
        end
        if (pop) hd[e] <= hd[e] + 1'b1;
        qn[e]  <= qn[e] + (DW+1)'(push) - (DW+1)'(pop);
        occ[e] <= occ[e] + (DW+1)'(add) - (DW+1)'(rel);
        if (add) etag[e] <= ins_tag;
      end
      if (do_sch) begin
        cur_tag <= etag[sch_e];
        cur_ok  <= 1'b1;
      end
      // recent tags recorder, least recently used order (index 0 = newest)
      if (do_ins) begin
        int pos;
        pos   = NRT - 1;
        for (int k = NRT - 1; k >= 0; k--)
          if (rtv[k] && rt[k] == ins_tag) begin
            pos = k;
          end
        for (int k = 1; k < NRT; k++)
          if (k <= pos) begin
            rt[k]  <= rt[k-1];
            rtv[k] <= rtv[k-1];
          end
        rt[0]  <= ins_tag;
        rtv[0] <= 1'b1;
      end
    end
  end

  // a reschedule or retire must name an entry that holds a placeholder
  a_placeholder: assert property (@(posedge clk) disable iff (!rst_n)
    (rsc_valid || ret_valid) |-> occ[rsc_valid ? rsc_entry : ret_entry] != 0)
    else $error("rp_rob: reschedule/retire of an empty entry");

endmodule
