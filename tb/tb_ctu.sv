// tb_ctu: self-checking test of the coarse traversal unit.
//
// A behavioural RP buffer (positions, directions, alive bits per packet) sits on
// the unit's buffer port. Random packets of four rays start inside the bounding
// box with random directions; the coarse bitmap marks about a third of the 64 CVs
// occupied. The test checks, cycle by cycle:
//   - a ray only ever steps while it stands in an empty CV, and by exactly its
//     direction; it dies exactly when it leaves the box,
//   - an emitted CRP carries an occupied CV tag that holds at least one live ray,
//   - a packet with no live ray is marked done and never emitted.
// Half of the emitted packets are sent back through the return path after the
// test has moved their rays out of the CV (as fine traversal would), so both
// input sources are used. At the end every packet is either done or parked in
// an occupied CV, and the unit is idle. Skips, CRPs and terminations are counted
// and must all have happened.
module tb_ctu;
  import edr_pkg::*;

  localparam int NP = NRP;

  logic clk = 0, rst_n = 0;
  aabb_t                box;
  logic [63:0]          cbm;
  logic                 new_valid, new_ready;
  logic [PTR_W-1:0]     new_ptr;
  logic                 ret_valid;
  logic [PTR_W-1:0]     ret_ptr;
  logic [PTR_W-1:0]     rb_ptr;
  vec3p_t [NRAY-1:0]    rb_pos;
  vec3d_t [NRAY-1:0]    rb_dir;
  logic [NRAY-1:0]      rb_alive;
  logic [2:0]           rb_adorder, rb_dneg;
  logic                 rb_we;
  vec3p_t [NRAY-1:0]    rb_wpos;
  logic [NRAY-1:0]      rb_walive;
  logic                 rb_done;
  logic                 crp_valid, crp_ready;
  logic [PTR_W-1:0]     crp_ptr;
  logic [CVTAG_W-1:0]   crp_tag;
  logic                 ev_skip, idle;

  always #5 clk = ~clk;

  ctu dut (.*);

  // behavioural RP buffer
  vec3p_t [NRAY-1:0] pos   [NP];
  vec3d_t [NRAY-1:0] dir   [NP];
  logic [NRAY-1:0]   alive [NP];
  logic [2:0]        ado   [NP];
  logic [2:0]        dng   [NP];
  bit                done  [NP];
  bit                parked[NP];
  int                retq  [$];

  assign rb_pos     = pos[rb_ptr];
  assign rb_dir     = dir[rb_ptr];
  assign rb_alive   = alive[rb_ptr];
  assign rb_adorder = ado[rb_ptr];
  assign rb_dneg    = dng[rb_ptr];

  int checks = 0, failures = 0, skips = 0, crps = 0, terms = 0, rets = 0;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL: %s", m); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    if (rst_n && rb_we) begin
      for (int r = 0; r < NRAY; r++) begin
        if (rb_wpos[r] != rb_pos[r]) begin
          chk(rb_alive[r] && !cbm[cvtag_of(rb_pos[r])], "step outside an empty CV");
          for (int a = 0; a < 3; a++)
            chk(rb_wpos[r][a] == rb_pos[r][a] + POS_W'(rb_dir[r][a]), "step size");
          chk(rb_walive[r] == inside_box(rb_wpos[r], box), "alive after step");
        end else
          chk(rb_walive[r] == rb_alive[r], "alive changed without a step");
      end
      if (rb_done) begin
        chk(rb_alive == '0, "done with live rays");
        terms++;
      end
      if (ev_skip) skips++;
    end
    if (rst_n && crp_valid && crp_ready) begin
      bit any;
      any = 0;
      for (int r = 0; r < NRAY; r++)
        if (rb_alive[r] && cvtag_of(rb_pos[r]) == crp_tag) any = 1;
      chk(crp_ptr == rb_ptr, "crp pointer");
      chk(cbm[crp_tag], "CRP tag is empty");
      chk(any, "CRP tag holds no live ray");
      crps++;
    end
  end

  // buffer writes and the fine-traversal stand-in on the return path
  always @(posedge clk) begin
    if (rst_n && rb_we) begin
      pos[rb_ptr]   <= rb_wpos;
      alive[rb_ptr] <= rb_walive;
      if (rb_done) done[rb_ptr] <= 1;
    end
    if (rst_n && crp_valid && crp_ready) begin
      if ($urandom_range(0, 1) == 1) begin
        // move every live ray of that CV out of it, then return the packet
        for (int r = 0; r < NRAY; r++) begin
          vec3p_t p;
          p = pos[crp_ptr][r];
          for (int n = 0; n < 400 && alive[crp_ptr][r] && cvtag_of(p) == crp_tag; n++)
            for (int a = 0; a < 3; a++) p[a] = p[a] + POS_W'(dir[crp_ptr][r][a]);
          pos[crp_ptr][r]   <= p;
          alive[crp_ptr][r] <= alive[crp_ptr][r] && inside_box(p, box);
        end
        retq.push_back(int'(crp_ptr));
      end else parked[crp_ptr] <= 1;
    end
  end

  initial begin
    box.lo = '{default: POS_W'(0)};
    box.hi = '{default: POS_W'((128 << POS_FRAC) - 1)};
    cbm = '0;
    for (int c = 0; c < 64; c++) cbm[c] = ($urandom_range(0, 2) == 0);
    new_valid = 0; new_ptr = '0; ret_valid = 0; ret_ptr = '0; crp_ready = 0;
    for (int p = 0; p < NP; p++) begin
      for (int r = 0; r < NRAY; r++)
        for (int a = 0; a < 3; a++) begin
          pos[p][r][a] = POS_W'($urandom_range(0, (128 << POS_FRAC) - 1));
          dir[p][r][a] = DIR_W'(int'($urandom_range(0, 1200)) - 600);
        end
      alive[p]  = NRAY'($urandom_range(0, 15));
      ado[p]    = 3'($urandom_range(0, 5));
      dng[p]    = 3'($urandom);
      done[p]   = 0;
      parked[p] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int p = 0; p < NP; p++) begin
          @(negedge clk);
          new_valid = 1; new_ptr = PTR_W'(p);
          #1;
          while (!new_ready) begin @(negedge clk); #1; end
          @(negedge clk);
          new_valid = 0;
        end
      end
      begin
        for (int c = 0; c < 40000; c++) begin
          @(negedge clk);
          crp_ready = ($urandom_range(0, 2) != 0);
          ret_valid = 0;
          if (retq.size() > 0 && $urandom_range(0, 3) == 0) begin
            ret_valid = 1;
            ret_ptr   = PTR_W'(retq.pop_front());
            rets++;
          end
        end
      end
    join
    @(negedge clk); ret_valid = 0;
    chk(idle && retq.size() == 0, "unit idle at end");
    for (int p = 0; p < NP; p++) chk(done[p] != parked[p], $sformatf("packet %0d lost", p));
    chk(skips > 0 && crps > 0 && terms > 0 && rets > 0,
        $sformatf("mechanisms skip %0d crp %0d term %0d ret %0d", skips, crps, terms, rets));
    $display("skips %0d crps %0d terms %0d returns %0d", skips, crps, terms, rets);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
