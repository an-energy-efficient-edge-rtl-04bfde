// tb_ooo_si: self-checking test of the out-of-order sample issuer.
//
// A small model of the interpolation unit's hit check stands in for the CFIU:
// fine voxel tags 0..63 can be on chip (the sets use a moving window of 8); a check of an absent tag is accepted with
// some probability (always, merged, if its fetch is already pending) and answered by a fill broadcast 5..40 cycles later, after
// which the tag is present. Random sample sets (random masks, positions and tags)
// are pushed in. The test checks that
//   - every ray of every set leaves exactly once, with the right pointer, fine
//     voxel, CV tag, micro location and fraction, and 'last' on the final ray,
//   - a set only leaves after its fine voxel was reported present,
//   - sets of the same packet leave in arrival order,
//   - younger sets do overtake waiting older ones (ev_bypass seen).
module tb_ooo_si;
  import edr_pkg::*;

  localparam int NR = 8;
  localparam int NSET = 400;

  logic clk = 0, rst_n = 0;
  logic              in_valid, in_ready;
  sp_ctrl_t          in_ctrl;
  vec3p_t [NRAY-1:0] in_pos;
  logic              chk_valid;
  logic [FVTAG_W-1:0] chk_fvtag;
  logic              chk_hit, chk_accept;
  logic              fill_valid;
  logic [FVTAG_W-1:0] fill_fvtag;
  logic              samc_valid, samc_ready;
  samc_t             samc;
  logic              ev_bypass;

  always #5 clk = ~clk;

  ooo_si #(.NR(NR)) dut (.*);

  int nsent = 0;
  int checks = 0, failures = 0, bypass = 0, outs = 0, expect_outs = 0;
  bit present [64];
  int fill_at [64];          // cycle of the pending fill, -1 if none
  int cyc = 0;
  sp_ctrl_t          sent_ctrl [NSET];
  vec3p_t [NRAY-1:0] sent_pos  [NSET];
  int                left      [NSET];
  int                next_out  [64];   // per fine voxel: index of the oldest set not fully out

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL: %s", m); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CFIU hit-check model
  always_comb begin
    chk_hit    = chk_valid && present[chk_fvtag[5:0]];
    chk_accept = chk_valid && !chk_hit && (fill_at[chk_fvtag[5:0]] >= 0 || cyc % 3 != 0);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    fill_valid <= 1'b0;
    for (int t = 0; t < 64; t++)
      if (fill_at[t] >= 0 && cyc >= fill_at[t]) begin
        fill_valid  <= 1'b1;
        fill_fvtag  <= FVTAG_W'(t);
        present[t]  <= 1'b1;
        fill_at[t]  <= -1;
        break;
      end
    if (chk_accept && fill_at[chk_fvtag[5:0]] < 0) fill_at[chk_fvtag[5:0]] <= cyc + $urandom_range(5, 40);
    if (ev_bypass) bypass++;
  end

  // output checker
  always @(negedge clk) begin
    samc_ready = ($urandom_range(0, 3) != 0);
    if (rst_n && samc_valid && samc_ready) begin
      int s, t;
      t = int'(samc.fvtag[5:0]);
      // the issued set is the oldest unfinished one of its fine voxel and packet
      s = next_out[t];
      while (s < nsent && (sent_ctrl[s].fvtag != samc.fvtag || sent_ctrl[s].ptr != samc.ptr ||
                           left[s] == 0)) s++;
      outs++;
      chk(s < nsent, "sample of unknown set");
      if (s < nsent) begin
        chk(present[t], "issued before its fine voxel was present");
        for (int o = 0; o < s; o++)
          if (sent_ctrl[o].ptr == sent_ctrl[s].ptr) chk(left[o] == 0, "set overtook an older set of its packet");
        chk(samc.ptr == sent_ctrl[s].ptr && samc.cvtag == sent_ctrl[s].cvtag, "control fields");
        chk(sent_ctrl[s].mask[samc.ray] && left[s][samc.ray], "ray not expected");
        for (int a = 0; a < 3; a++)
          chk(samc.mloc[a] == sent_pos[s][samc.ray][a][POS_FRAC +: 2] &&
              samc.frac[a] == sent_pos[s][samc.ray][a][POS_FRAC-1:0], "coordinates");
        left[s] = left[s] & ~(1 << samc.ray);
        chk(samc.last == (left[s] == 0), "last flag");
        if (left[s] == 0)
          while (next_out[t] < nsent && (sent_ctrl[next_out[t]].fvtag[5:0] != 6'(t) ||
                                        left[next_out[t]] == 0))
            next_out[t]++;
      end
    end
  end

  initial begin
    for (int t = 0; t < 64; t++) begin present[t] = 0; fill_at[t] = -1; next_out[t] = 0; end
    fill_valid = 0; fill_fvtag = '0; samc_ready = 0;
    in_valid = 0; in_ctrl = '0; in_pos = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSET; s++) begin
      sp_ctrl_t c;
      vec3p_t [NRAY-1:0] p;
      c.ptr   = PTR_W'(s % 4);
      c.mask  = NRAY'($urandom_range(1, 15));
      c.fvtag = FVTAG_W'($urandom_range(0, 7) + 8 * (s / 50));  // working set moves on
      c.cvtag = CVTAG_W'($urandom);
      for (int r = 0; r < NRAY; r++)
        for (int a = 0; a < 3; a++) p[r][a] = POS_W'($urandom);
      sent_ctrl[s] = c;
      sent_pos[s]  = p;
      left[s]      = int'(c.mask);
      nsent        = s + 1;
      for (int r = 0; r < NRAY; r++) expect_outs += int'(c.mask[r]);
      @(negedge clk);
      in_valid = 1; in_ctrl = c; in_pos = p;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    while (outs < expect_outs && cyc < 200000) @(negedge clk);
    chk(outs == expect_outs, $sformatf("samples out %0d of %0d", outs, expect_outs));
    for (int s = 0; s < NSET; s++) chk(left[s] == 0, $sformatf("set %0d not finished", s));
    chk(bypass > 0, "no bypass seen");
    $display("bypasses %0d", bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
