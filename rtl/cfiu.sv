// cfiu: conflict-free interpolation unit with its feature cache.
//
// Keeps the feature vectors of recently used fine voxels on chip and interpolates
// one sample per request from the eight vertices around it. Parts, following the
// paper's diagram:
//   feature memory : eight feature SRAM banks (FSRAM0..7) of BANK_DEPTH words, one
//       INT4 x NFV feature vector per word. A fine voxel occupies one of SLOTS
//       cache slots and stores all its 125 vertex vectors (5x5x5 grid).
//   balanced bank allocation : the vertex ID is the parity of the vertex position
//       on the three axes, so the eight vertices of any micro voxel have eight
//       different IDs. Within slot s, vertex ID v is stored in bank v XOR (s mod 8);
//       the eight slots of a group thus put every vertex class once into every bank,
//       and every bank holds exactly 125 words per group (uniform depth). The
//       address is group*125 + (words of the earlier slots of the group in that
//       bank) + index of the vertex within its class.
//   hit state monitor : valid bit and fine-voxel tag per slot, direct mapped.
//   MSHR : NMSHR outstanding misses; a second miss on the same fine voxel is
//       merged (counted) instead of fetched again.
//   reservation monitor (RM) : per slot, the number of sample sets that were
//       told "hit" and are not yet interpolated; a slot with reservations is never
//       chosen for replacement.
//   data rearrangement unit : writes the 125 incoming vectors of a fetched fine
//       voxel (x fastest, then y, then z) into their banks and addresses.
//   tri-linear coefficient generator + feature interpolation unit : computes the
//       eight weights, reorders them to bank order, reads the eight banks in one
//       cycle and forms the weighted sum (16 components, 16 bit).
// The XOR rotation is read from the paper's bank map figure; slot organisation,
// widths and the one-sample-in-flight interpolation pipeline are this design's.
//
// Timing: chk_hit/chk_accept answer chk_* in the same cycle. A fill takes one
// request plus 125 response beats; fill_valid pulses with the last beat. A sample
// is accepted when the unit is empty and leaves two cycles later on ifv_*.
module cfiu
  import edr_pkg::*;
#(
  parameter int SLOTS      = 256,
  parameter int BANK_DEPTH = 4096,
  parameter int NMSHR      = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flush,
  // hit check / prefetch
  input  logic                  chk_valid,
  input  logic [FVTAG_W-1:0]    chk_fvtag,
  output logic                  chk_hit,
  output logic                  chk_accept,
  output logic                  fill_valid,
  output logic [FVTAG_W-1:0]    fill_fvtag,
  // external feature memory
  output logic                  fdr_req_valid,
  input  logic                  fdr_req_ready,
  output logic [FVTAG_W-1:0]    fdr_req_fv,
  input  logic                  fdr_rsp_valid,
  input  logic [VEC_W-1:0]      fdr_rsp_data,
  // samples
  input  logic                  samc_valid,
  output logic                  samc_ready,
  input  samc_t                 samc,
  output logic                  ifv_valid,
  input  logic                  ifv_ready,
  output ifv_pkt_t              ifv,
  // statistics
  output logic                  ev_miss,
  output logic                  ev_merge,
  output logic                  ev_rsv_block
);

  localparam int SW = $clog2(SLOTS);
  localparam int AW = $clog2(BANK_DEPTH);
  localparam int MW = $clog2(NMSHR);

  // ---------------- hit state monitor, RM, MSHR ----------------
  logic [SLOTS-1:0]    sval;
  logic [FVTAG_W-1:0]  stag [SLOTS];
  logic [5:0]          rsv  [SLOTS];
  logic [NMSHR-1:0]    mv, mis;
  logic [FVTAG_W-1:0]  mfv  [NMSHR];
  logic [5:0]          mcnt [NMSHR];

  logic [SW-1:0] cidx;
  logic          merge, alloc_ok, slot_busy;
  logic [MW-1:0] merge_i, free_i;
  logic          free_ok;

  // fill engine state
  typedef enum logic [1:0] {F_IDLE, F_REQ, F_RECV} fst_e;
  fst_e            fst;
  logic [MW-1:0]   fm;          // MSHR being filled
  logic [2:0]      vx, vy, vz;
  logic            last_beat;
  logic [SW-1:0]   fslot;

  assign fslot      = mfv[fm][SW-1:0];
  assign last_beat  = (fst == F_RECV) && fdr_rsp_valid && vx == 3'd4 && vy == 3'd4 && vz == 3'd4;
  assign fill_valid = last_beat;
  assign fill_fvtag = mfv[fm];

  assign cidx = chk_fvtag[SW-1:0];
  always_comb begin
    merge = 1'b0; merge_i = '0; free_ok = 1'b0; free_i = '0; slot_busy = 1'b0;
    for (int m = NMSHR - 1; m >= 0; m--) begin
      if (mv[m] && mfv[m] == chk_fvtag) begin merge = 1'b1; merge_i = MW'(m); end
      if (!mv[m]) begin free_ok = 1'b1; free_i = MW'(m); end
      if (mv[m] && mfv[m][SW-1:0] == cidx) slot_busy = 1'b1;
    end
    chk_hit    = chk_valid && ((sval[cidx] && stag[cidx] == chk_fvtag) ||
                               (fill_valid && fill_fvtag == chk_fvtag));
    alloc_ok   = free_ok && !slot_busy && rsv[cidx] == 0;
    chk_accept = chk_valid && !chk_hit && (merge || alloc_ok);
  end

  assign ev_miss      = chk_accept && !merge;
  assign ev_merge     = chk_accept && merge;
  assign ev_rsv_block = chk_valid && !chk_hit && !merge && free_ok && !slot_busy && rsv[cidx] != 0;

  // ---------------- data rearrangement ----------------
  logic [7:0]            b_we;
  logic [7:0][AW-1:0]    b_waddr;
  logic [7:0][AW-1:0]    b_raddr;
  logic [7:0][VEC_W-1:0] b_rdata;
  logic                  b_re;

  always_comb begin
    logic [2:0] vid, bk;
    vid = {vz[0], vy[0], vx[0]};
    bk  = vid ^ fslot[2:0];
    b_we = '0;
    for (int b = 0; b < 8; b++)
      b_waddr[b] = AW'((int'(fslot) >> 3) * NVTX + int'(bank_off(bk, fslot[2:0])) +
                       int'(vclass_idx(vx, vy, vz)));
    if (fst == F_RECV && fdr_rsp_valid) b_we[bk] = 1'b1;
  end

  assign fdr_req_valid = (fst == F_REQ);
  assign fdr_req_fv    = mfv[fm];

  // ---------------- feature memory ----------------
  for (genvar b = 0; b < 8; b++) begin : g_bank
    fsram #(.DEPTH(BANK_DEPTH), .W(VEC_W)) u_fsram (
      .clk(clk), .we(b_we[b]), .waddr(b_waddr[b]), .wdata(fdr_rsp_data),
      .re(b_re), .raddr(b_raddr[b]), .rdata(b_rdata[b])
    );
  end

  // ---------------- tri-linear coefficient generator ----------------
  logic                s1_v;
  samc_t               s1;
  logic [7:0][8:0]     s1_tc;      // coefficient per bank
  logic [7:0][8:0]     tc;
  logic [SW-1:0]       sslot;

  assign sslot      = samc.fvtag[SW-1:0];
  assign samc_ready = !s1_v && !ifv_valid;
  assign b_re       = samc_valid && samc_ready;

  always_comb begin
    for (int b = 0; b < 8; b++) begin
      logic [2:0] vid, d, v [3];
      logic [24:0] w;
      logic [8:0]  f9;
      vid = 3'(b) ^ sslot[2:0];
      w   = 25'd1;
      for (int a = 0; a < 3; a++) begin
        d[a] = vid[a] ^ samc.mloc[a][0];
        v[a] = 3'(samc.mloc[a]) + 3'(d[a]);
        f9   = d[a] ? {1'b0, samc.frac[a]} : 9'd256 - {1'b0, samc.frac[a]};
        w    = (a == 0) ? {16'd0, f9} : w * {16'd0, f9};
      end
      tc[b]      = 9'(w >> 16);
      b_raddr[b] = AW'((int'(sslot) >> 3) * NVTX + int'(bank_off(3'(b), sslot[2:0])) +
                       int'(vclass_idx(v[0], v[1], v[2])));
    end
  end

  // ---------------- feature interpolation unit ----------------
  logic [NFV-1:0][IFV_W-1:0] sum;
  always_comb begin
    for (int k = 0; k < NFV; k++) begin
      logic signed [IFV_W-1:0] acc;
      acc = '0;
      for (int b = 0; b < 8; b++)
        begin
          logic signed [IFV_W-1:0] f, c;
          f   = IFV_W'($signed(b_rdata[b][k*FEAT_W +: FEAT_W]));
          c   = IFV_W'(s1_tc[b]);
          acc = acc + f * c;
        end
      sum[k] = acc;
    end
  end

  // ---------------- sequential state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sval      <= '0;
      mv        <= '0;
      mis       <= '0;
      fst       <= F_IDLE;
      fm        <= '0;
      vx        <= '0; vy <= '0; vz <= '0;
      s1_v      <= 1'b0;
      s1        <= '0;
      s1_tc     <= '0;
      ifv_valid <= 1'b0;
      ifv       <= '0;
      for (int s = 0; s < SLOTS; s++) begin
        rsv[s]  <= '0;
        stag[s] <= '0;
      end
      for (int m = 0; m < NMSHR; m++) begin
        mfv[m]  <= '0;
        mcnt[m] <= '0;
      end
    end else begin
      // reservation monitor
      for (int s = 0; s < SLOTS; s++) begin
        logic [5:0] inc, dec;
        inc = '0; dec = '0;
        if (chk_hit && cidx == SW'(s)) inc = inc + 6'd1;
        if (last_beat && fslot == SW'(s)) inc = inc + mcnt[fm];
        if (s1_v && s1.last && s1.fvtag[SW-1:0] == SW'(s)) dec = 6'd1;
        rsv[s] <= rsv[s] + inc - dec;
      end
      // MSHR allocation / merge
      if (chk_accept) begin
        if (merge) mcnt[merge_i] <= mcnt[merge_i] + 6'd1;
        else begin
          mv[free_i]   <= 1'b1;
          mis[free_i]  <= 1'b0;
          mfv[free_i]  <= chk_fvtag;
          mcnt[free_i] <= 6'd1;
          sval[cidx]   <= 1'b0;     // the slot is being replaced
        end
      end
      // fill engine
      unique case (fst)
        F_IDLE: begin
          for (int m = NMSHR - 1; m >= 0; m--)
            if (mv[m] && !mis[m]) begin
              fm  <= MW'(m);
              fst <= F_REQ;
            end
        end
        F_REQ: if (fdr_req_ready) begin
          mis[fm] <= 1'b1;
          vx <= '0; vy <= '0; vz <= '0;
          fst <= F_RECV;
        end
        F_RECV: if (fdr_rsp_valid) begin
          if (vx == 3'd4) begin
            vx <= '0;
            if (vy == 3'd4) begin vy <= '0; vz <= vz + 3'd1; end
            else vy <= vy + 3'd1;
          end else vx <= vx + 3'd1;
          if (last_beat) begin
            sval[fslot] <= 1'b1;
            stag[fslot] <= mfv[fm];
            mv[fm]      <= 1'b0;
            fst         <= F_IDLE;
          end
        end
        default: fst <= F_IDLE;
      endcase
      if (flush) sval <= '0;
      // interpolation pipeline
      if (samc_valid && samc_ready) begin
        s1_v  <= 1'b1;
        s1    <= samc;
        s1_tc <= tc;
      end else if (s1_v) begin
        s1_v          <= 1'b0;
        ifv_valid     <= 1'b1;
        ifv.ptr       <= s1.ptr;
        ifv.ray       <= s1.ray;
        ifv.cvtag     <= s1.cvtag;
        ifv.ifv       <= sum;
      end else if (ifv_valid && ifv_ready) begin
        ifv_valid <= 1'b0;
      end
    end
  end

endmodule
