// ooo_si: out-of-order sample issuer.
//
// Sits between fine traversal and the interpolation unit (CFIU) and lets sample
// sets whose features are already on chip overtake sets that wait for external
// memory. Parts, following the paper's diagram:
//   location shifter (LS) : NR registers, oldest at REG0, each with an entry
//       state, the control part of a CCRP_SP (packet pointer, ray mask, fine voxel
//       tag FVTag, CV tag) and the base address of its positions in Comp SRAM.
//       When an entry leaves, the younger entries shift down one place.
//   Comp SRAM : the sample positions of each queued set, NR slots.
//   SCC (sample coordinate calculator) : turns the positions of the issued set
//       into sample coordinates (micro voxel inside the fine voxel and the
//       fraction inside the micro voxel), one ray per cycle.
//
// Each cycle: the oldest UNCHECKED entry is presented to the CFIU (chk_*). A hit
// makes it HIT; a miss accepted by the CFIU (which then prefetches) makes it MISS;
// a refused miss stays UNCHECKED and is tried again. A CFIU fill broadcast turns
// every MISS entry of that fine voxel into HIT. The oldest HIT entry is issued
// whenever the SCC is free, except that a set never overtakes an older set of the
// same packet: volume rendering composites the samples of a ray front to back,
// so only sets of different packets are reordered. Checking one entry per cycle,
// oldest-first order and the per-packet order rule are this design's choices.
module ooo_si
  import edr_pkg::*;
#(
  parameter int NR = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // CCRP_SP from fine traversal
  input  logic                  in_valid,
  output logic                  in_ready,
  input  sp_ctrl_t              in_ctrl,
  input  vec3p_t [NRAY-1:0]     in_pos,
  // hit check / prefetch to CFIU
  output logic                  chk_valid,
  output logic [FVTAG_W-1:0]    chk_fvtag,
  input  logic                  chk_hit,
  input  logic                  chk_accept,
  input  logic                  fill_valid,
  input  logic [FVTAG_W-1:0]    fill_fvtag,
  // sample coordinates to CFIU
  output logic                  samc_valid,
  input  logic                  samc_ready,
  output samc_t                 samc,
  // statistics
  output logic                  ev_bypass   // a younger set issued before an older waiting one
);

  localparam int IW = $clog2(NR);

  typedef enum logic [1:0] {E_UNCHK, E_MISS, E_HIT} est_e;
  typedef struct packed {
    est_e          st;
    sp_ctrl_t      ctrl;
    logic [IW-1:0] base;
  } lsent_t;

  lsent_t            ls   [NR];
  logic [IW:0]       cnt;
  vec3p_t [NRAY-1:0] comp [NR];    // Comp SRAM
  logic [NR-1:0]     slot_used;

  // SCC state
  logic              scc_busy;
  sp_ctrl_t          scc_ctrl;
  vec3p_t [NRAY-1:0] scc_pos;
  logic [NRAY-1:0]   scc_left;

  // oldest unchecked and oldest hit
  logic          chk_ok, iss_ok;
  logic [IW-1:0] chk_i, iss_i;
  logic [IW-1:0] free_slot;
  // an entry waits behind any older entry of the same packet, so the samples of
  // a ray reach compositing in marching order
  logic [NR-1:0] behind;
  always_comb
    for (int i = 0; i < NR; i++) begin
      behind[i] = 1'b0;
      for (int j = 0; j < i; j++)
        if ((IW+1)'(j) < cnt && ls[j].ctrl.ptr == ls[i].ctrl.ptr) behind[i] = 1'b1;
    end

  always_comb begin
    chk_ok = 1'b0; chk_i = '0; iss_ok = 1'b0; iss_i = '0; free_slot = '0;
    for (int i = NR - 1; i >= 0; i--) begin
      if ((IW+1)'(i) < cnt && ls[i].st == E_UNCHK) begin chk_ok = 1'b1; chk_i = IW'(i); end
      if ((IW+1)'(i) < cnt && ls[i].st == E_HIT && !behind[i]) begin
        iss_ok = 1'b1; iss_i = IW'(i);
      end
      if (!slot_used[i]) free_slot = IW'(i);
    end
  end

  assign chk_valid = chk_ok;
  assign chk_fvtag = ls[chk_i].ctrl.fvtag;
  assign in_ready  = (cnt < (IW+1)'(NR));

  logic do_iss, do_in;
  assign do_iss = iss_ok && !scc_busy;
  assign do_in  = in_valid && in_ready;

  always_comb begin
    ev_bypass = 1'b0;
    for (int i = 0; i < NR; i++)
      if (do_iss && IW'(i) < iss_i && ls[i].st != E_HIT) ev_bypass = 1'b1;
  end

  // SCC: next ray of the issued set
  logic [1:0] ray;
  always_comb begin
    ray = '0;
    for (int r = NRAY - 1; r >= 0; r--) if (scc_left[r]) ray = 2'(r);
  end
  assign samc_valid = scc_busy;
  always_comb begin
    samc.ptr   = scc_ctrl.ptr;
    samc.ray   = ray;
    samc.fvtag = scc_ctrl.fvtag;
    samc.cvtag = scc_ctrl.cvtag;
    for (int a = 0; a < 3; a++) begin
      samc.mloc[a] = scc_pos[ray][a][POS_FRAC +: 2];
      samc.frac[a] = scc_pos[ray][a][POS_FRAC-1:0];
    end
    samc.last = ((scc_left & ~(NRAY'(1) << ray)) == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      slot_used <= '0;
      scc_busy  <= 1'b0;
      scc_left  <= '0;
      scc_ctrl  <= '0;
      for (int i = 0; i < NR; i++) ls[i] <= '0;
    end else begin
      lsent_t nx [NR];
      int     n;
      // state updates in place
      for (int i = 0; i < NR; i++) begin
        nx[i] = ls[i];
        if ((IW+1)'(i) < cnt && ls[i].st == E_MISS && fill_valid && ls[i].ctrl.fvtag == fill_fvtag)
          nx[i].st = E_HIT;
      end
      if (chk_ok) begin
        if (chk_hit)         nx[chk_i].st = E_HIT;
        else if (chk_accept) nx[chk_i].st = E_MISS;
      end
      // removal of the issued entry with shift
      n = int'(cnt);
      if (do_iss) begin
        for (int i = 0; i < NR - 1; i++)
          if (IW'(i) >= iss_i) nx[i] = nx[i+1];
        n = n - 1;
        scc_busy  <= 1'b1;
        scc_ctrl  <= ls[iss_i].ctrl;
        scc_pos   <= comp[ls[iss_i].base];
        scc_left  <= ls[iss_i].ctrl.mask;
      end
      // append
      if (do_in) begin
        nx[n].st   = E_UNCHK;
        nx[n].ctrl = in_ctrl;
        nx[n].base = free_slot;
        comp[free_slot] <= in_pos;
        n = n + 1;
      end
      for (int i = 0; i < NR; i++) ls[i] <= nx[i];
      cnt <= (IW+1)'(n);
      slot_used <= (slot_used
                    & ~(do_iss ? (NR'(1) << ls[iss_i].base) : '0))
                    | (do_in ? (NR'(1) << free_slot) : '0);
      // SCC progress
      if (scc_busy && samc_ready) begin
        scc_left <= scc_left & ~(NRAY'(1) << ray);
        if (samc.last) scc_busy <= 1'b0;
      end
    end
  end

  a_mask: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> in_ctrl.mask != '0) else $error("ooo_si: empty sample set");

endmodule
