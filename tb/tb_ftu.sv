// tb_ftu: self-checking test of the fine traversal unit.
//
// Around the unit: a behavioural RP buffer (positions, directions, alive bits,
// transmittance, done flags), a micro-grid bitmap memory that answers line
// requests after a random delay with a hashed 64-bit occupancy line, and a
// scheduler stand-in that hands packets to the unit with the CV tag of one of
// their live rays, re-schedules them on a reschedule and picks a new CV after a
// CV transition. The fine bitmap is loaded with about 30% occupied fine voxels.
// Checks, cycle by cycle:
//   - every emitted sample lies in an occupied fine voxel and an occupied micro
//     voxel, in the packet's CV, and all samples of one set share the fine voxel
//     named in the set; rb_add equals the number of samples,
//   - a ray steps (by exactly its direction) only if its fine voxel or micro
//     voxel is empty or it has just been sampled, so no occupied micro voxel is
//     ever skipped; it dies exactly when it leaves the box,
//   - termination is signalled only when no ray is alive with T at or above
//     the threshold, a CV transition only when no live ray is in the CV,
//   - the micro-grid line is reused: fewer line requests than sample sets.
// Fine skips, reschedules, CV transitions, terminations (both by leaving the box
// and by low transmittance) and divergence must all have been seen.
module tb_ftu;
  import edr_pkg::*;

  localparam int NP = 16;
  localparam logic [T_W-1:0] TTHR = 16'd600;

  logic clk = 0, rst_n = 0;
  aabb_t                    box;
  logic [T_W-1:0]           t_thr;
  logic                     fbm_we;
  logic [FVTAG_W-1:0]       fbm_addr;
  logic                     fbm_data;
  logic                     sch_valid, sch_ready;
  logic [PTR_W-1:0]         sch_ptr;
  logic [CVTAG_W-1:0]       sch_tag;
  logic [2:0]               sch_entry;
  logic                     rsc_valid;
  logic [PTR_W-1:0]         rsc_ptr;
  logic [2:0]               rsc_entry;
  logic                     ret_valid;
  logic [2:0]               ret_entry;
  logic                     cvt_valid;
  logic [PTR_W-1:0]         cvt_ptr;
  logic [PTR_W-1:0]         rb_ptr;
  vec3p_t [NRAY-1:0]        rb_pos;
  vec3d_t [NRAY-1:0]        rb_dir;
  logic [NRAY-1:0]          rb_alive;
  logic [2:0]               rb_adorder, rb_dneg;
  logic [NRAY-1:0][T_W-1:0] rb_t;
  logic                     rb_we;
  vec3p_t [NRAY-1:0]        rb_wpos;
  logic [NRAY-1:0]          rb_walive;
  logic                     rb_done;
  logic [2:0]               rb_add;
  logic                     mgb_req_valid, mgb_req_ready;
  logic [FVTAG_W-1:0]       mgb_req_fv;
  logic                     mgb_rsp_valid;
  logic [63:0]              mgb_rsp_line;
  logic                     sp_valid, sp_ready;
  sp_ctrl_t                 sp_ctrl;
  vec3p_t [NRAY-1:0]        sp_pos;
  logic                     ev_fskip, ev_rsc, ev_cvt, ev_term, ev_diverge, idle;

  always #5 clk = ~clk;

  ftu #(.EW(3)) dut (.*);

  // scene
  bit fbm_ref [2**FVTAG_W];
  function automatic logic [63:0] line_of(logic [FVTAG_W-1:0] fv);
    logic [63:0] l;
    for (int k = 0; k < 64; k++) l[k] = (((int'(fv) * 2654435761 + k * 40503) >> 7) % 10) < 3;
    return l;
  endfunction
  function automatic bit micro_occ(vec3p_t p);
    logic [FVTAG_W-1:0] fv;
    fv = fvtag_of(p);
    return fbm_ref[fv] && line_of(fv)[{p[2][POS_FRAC +: 2], p[1][POS_FRAC +: 2], p[0][POS_FRAC +: 2]}];
  endfunction

  // behavioural RP buffer
  vec3p_t [NRAY-1:0]        pos   [NP];
  vec3d_t [NRAY-1:0]        dir   [NP];
  logic [NRAY-1:0]          alive [NP];
  logic [NRAY-1:0][T_W-1:0] tr    [NP];
  logic [2:0]               ado   [NP];
  logic [2:0]               dng   [NP];
  bit                       done  [NP];

  assign rb_pos     = pos[rb_ptr];
  assign rb_dir     = dir[rb_ptr];
  assign rb_alive   = alive[rb_ptr];
  assign rb_t       = tr[rb_ptr];
  assign rb_adorder = ado[rb_ptr];
  assign rb_dneg    = dng[rb_ptr];

  int checks = 0, failures = 0;
  int n_skip = 0, n_rsc = 0, n_cvt = 0, n_term = 0, n_div = 0, n_sets = 0, n_req = 0;
  int n_term_t = 0;
  bit got_rsc, got_ret;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL: %s", m); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor: sets sp_ready at the falling edge, then checks once the logic settled
  always @(negedge clk) if (rst_n) begin
    bit emit;
    sp_ready = ($urandom_range(0, 3) != 0);
    #1;
    emit = sp_valid && sp_ready;
    if (rb_we) begin
      int ns;
      ns = 0;
      for (int r = 0; r < NRAY; r++) begin
        if (rb_wpos[r] != rb_pos[r]) begin
          chk(!micro_occ(rb_pos[r]) || (emit && sp_ctrl.mask[r]), "occupied micro voxel skipped");
          for (int a = 0; a < 3; a++)
            chk(rb_wpos[r][a] == rb_pos[r][a] + POS_W'(rb_dir[r][a]), "step size");
          chk(rb_walive[r] == (rb_alive[r] && inside_box(rb_wpos[r], box)), "alive after step");
        end
      end
      if (emit) for (int r = 0; r < NRAY; r++) ns += int'(sp_ctrl.mask[r]);
      chk(int'(rb_add) == ns, "rb_add");
    end
    if (emit) begin
      n_sets++;
      for (int r = 0; r < NRAY; r++)
        if (sp_ctrl.mask[r]) begin
          chk(micro_occ(sp_pos[r]), "sample in empty micro voxel");
          chk(fvtag_of(sp_pos[r]) == sp_ctrl.fvtag, "sample set mixes fine voxels");
          chk(cvtag_of(sp_pos[r]) == sp_ctrl.cvtag, "sample outside the CV");
          chk(sp_pos[r] == rb_pos[r] && sp_ctrl.ptr == rb_ptr, "sample position");
        end
    end
    if (ev_term) begin
      bit any;
      any = 0;
      for (int r = 0; r < NRAY; r++) if (rb_alive[r] && rb_t[r] >= t_thr) any = 1;
      chk(!any && rb_done && ret_valid, "termination with live rays");
      n_term++;
      for (int r = 0; r < NRAY; r++) if (rb_alive[r] && rb_t[r] < t_thr) begin n_term_t++; break; end
    end
    if (ev_cvt) begin
      bit any;
      any = 0;
      for (int r = 0; r < NRAY; r++)
        if (rb_alive[r] && rb_t[r] >= t_thr && cvtag_of(rb_pos[r]) == dut.ctag) any = 1;
      chk(!any && ret_valid && cvt_ptr == rb_ptr, "CV transition with rays in the CV");
      n_cvt++;
    end
    if (ev_rsc) begin
      chk(rsc_ptr == rb_ptr && !ret_valid, "reschedule");
      n_rsc++;
    end
    if (ev_fskip) n_skip++;
    if (ev_diverge) n_div++;
    if (mgb_req_valid && mgb_req_ready) n_req++;
    if (rsc_valid) got_rsc = 1;
    if (ret_valid) got_ret = 1;
  end

  // RP buffer writes
  always @(posedge clk)
    if (rst_n && rb_we) begin
      pos[rb_ptr]   <= rb_wpos;
      alive[rb_ptr] <= rb_walive;
      if (rb_done) done[rb_ptr] <= 1;
    end

  // micro-grid bitmap memory
  initial begin
    mgb_rsp_valid = 0; mgb_rsp_line = '0; mgb_req_ready = 0;
    forever begin
      @(negedge clk);
      mgb_req_ready = 1;
      #1;
      if (mgb_req_valid) begin
        logic [FVTAG_W-1:0] fv;
        fv = mgb_req_fv;
        @(negedge clk);
        mgb_req_ready = 0;
        repeat ($urandom_range(0, 4)) @(negedge clk);
        mgb_rsp_valid = 1; mgb_rsp_line = line_of(fv);
        @(negedge clk);
        mgb_rsp_valid = 0;
      end
    end
  end


  task automatic schedule(int p, logic [CVTAG_W-1:0] tag);
    @(negedge clk);
    sch_valid = 1; sch_ptr = PTR_W'(p); sch_tag = tag; sch_entry = 3'($urandom);
    #1;
    while (!sch_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    sch_valid = 0;
    got_rsc = 0; got_ret = 0;
    while (!got_rsc && !got_ret) @(negedge clk);
    #1;
  endtask

  initial begin
    box.lo = '{default: POS_W'(0)};
    box.hi = '{default: POS_W'((128 << POS_FRAC) - 1)};
    t_thr = TTHR;
    sch_valid = 0; sch_ptr = '0; sch_tag = '0; sch_entry = '0;
    fbm_we = 0; fbm_addr = '0; fbm_data = 0; sp_ready = 0;
    for (int p = 0; p < NP; p++) begin
      logic [2:0][DIR_W-1:0] d;
      for (int a = 0; a < 3; a++) d[a] = DIR_W'(int'($urandom_range(0, 240)) - 120);
      for (int r = 0; r < NRAY; r++)
        for (int a = 0; a < 3; a++) begin
          pos[p][r][a] = POS_W'($urandom_range(0, (128 << POS_FRAC) - 1));
          // rays of one packet are close and roughly parallel, with some spread
          if (r > 0) pos[p][r][a] = POS_W'(int'(pos[p][0][a]) + int'($urandom_range(0, 512)) - 256);
          dir[p][r][a] = DIR_W'(int'(d[a]) + int'($urandom_range(0, 16)) - 8);
        end
      for (int r = 0; r < NRAY; r++) begin
        alive[p][r] = inside_box(pos[p][r], box);
        tr[p][r]    = (p % 4 == 3 && r != 0) ? 16'd100 : 16'hFFFF;   // some rays already opaque
      end
      ado[p]  = 3'($urandom_range(0, 5));
      dng[p]  = {dir[p][0][2][DIR_W-1], dir[p][0][1][DIR_W-1], dir[p][0][0][DIR_W-1]};
      done[p] = 0;
    end
    // ray 0 of the opaque packets dies early so that the low-T rays end the packet
    for (int p = 3; p < NP; p += 4) tr[p][0] = 16'd200;
    for (int f = 0; f < 2**FVTAG_W; f++) fbm_ref[f] = ($urandom_range(0, 9) < 3);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2**FVTAG_W; f++) begin
      @(negedge clk);
      fbm_we = 1; fbm_addr = FVTAG_W'(f); fbm_data = fbm_ref[f];
    end
    @(negedge clk); fbm_we = 0;
    // march every packet to its end
    for (int p = 0; p < NP; p++) begin
      int guard;
      guard = 0;
      while (!done[p] && guard < 2000) begin
        logic [CVTAG_W-1:0] tag;
        tag = '0;
        for (int r = NRAY - 1; r >= 0; r--) if (alive[p][r]) tag = cvtag_of(pos[p][r]);
        schedule(p, tag);
        while (got_rsc && !done[p]) schedule(p, tag);
        guard++;
      end
      chk(done[p], $sformatf("packet %0d finished", p));
    end
    $display("sets %0d line requests %0d fine skips %0d reschedules %0d CV transitions %0d terminations %0d (by T %0d) divergence %0d",
             n_sets, n_req, n_skip, n_rsc, n_cvt, n_term, n_term_t, n_div);
    chk(n_req < n_sets, "micro-grid line reused");
    chk(n_skip > 0 && n_rsc > 0 && n_cvt > 0 && n_term == NP && n_term_t > 0 && n_div > 0,
        "every mechanism seen");
    chk(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
