// tb_cfiu: feature cache fill, miss merging, reservation and interpolation.
// Features come from a memory model whose vector for vertex (x,y,z) of fine voxel
// fv is a hash; the reference interpolation works on vertex coordinates directly
// (no bank mapping) with the same 8-bit fractions. Checked: a repeated miss is
// merged (one fetch), a reserved slot is not replaced, interpolated vectors of
// random samples in all eight slot rotations, the 2-cycle sample latency, and that
// filling eight slots of a group writes exactly 125 words into every bank.
module tb_cfiu;
  import edr_pkg::*;
  localparam int SLOTS = 16, DEPTH = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, chk_valid, chk_hit, chk_accept, fill_valid;
  logic [FVTAG_W-1:0] chk_fvtag, fill_fvtag, fdr_req_fv;
  logic fdr_req_valid, fdr_req_ready, fdr_rsp_valid;
  logic [VEC_W-1:0] fdr_rsp_data;
  logic samc_valid, samc_ready, ifv_valid, ifv_ready, ev_miss, ev_merge, ev_rsv_block;
  samc_t samc;
  ifv_pkt_t ifv;
  int checks = 0, failures = 0, fetches = 0;
  int wcount [8];

  cfiu #(.SLOTS(SLOTS), .BANK_DEPTH(DEPTH), .NMSHR(2)) dut (.*);

  function automatic logic [3:0] feat(int fv, int x, int y, int z, int k);
    int h;
    h = fv * 7919 + x * 131 + y * 37 + z * 11 + k * 3;
    h = h ^ (h >> 3);
    return 4'(h);
  endfunction

  // external feature memory: 3 cycles after a request, 125 beats
  initial begin
    fdr_req_ready = 1; fdr_rsp_valid = 0; fdr_rsp_data = '0;
    forever begin
      @(posedge clk);
      if (fdr_req_valid) begin
        int fv;
        fv = int'(fdr_req_fv);
        fetches++;
        repeat (3) @(posedge clk);
        for (int z = 0; z < 5; z++)
          for (int y = 0; y < 5; y++)
            for (int x = 0; x < 5; x++) begin
              for (int k = 0; k < NFV; k++) fdr_rsp_data[k*4 +: 4] <= feat(fv, x, y, z, k);
              fdr_rsp_valid <= 1;
              @(posedge clk);
            end
        fdr_rsp_valid <= 0;
      end
    end
  end

  // words written per bank in slot group 0
  always @(posedge clk)
    for (int b = 0; b < 8; b++)
      if (dut.b_we[b] && int'(dut.fslot) < 8) wcount[b]++;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL: %s", m); end
  endtask

  task automatic check_tag(int fv, output bit hit, output bit acc);
    @(negedge clk);
    chk_fvtag = FVTAG_W'(fv); chk_valid = 1; #1;
    hit = chk_hit; acc = chk_accept;
    @(negedge clk); chk_valid = 0;
  endtask

  task automatic wait_fill(int fv);
    int n;
    n = 0;
    while (!(fill_valid && fill_fvtag == FVTAG_W'(fv)) && n < 2000) begin @(negedge clk); n++; end
    chk(n < 2000, $sformatf("fill of %0d", fv));
    @(negedge clk);
  endtask

  task automatic sample(int fv, bit last);
    int mx, my, mz, fx, fy, fz, lat;
    logic [IFV_W-1:0] e [NFV];
    mx = $urandom_range(0, 3); my = $urandom_range(0, 3); mz = $urandom_range(0, 3);
    fx = $urandom_range(0, 255); fy = $urandom_range(0, 255); fz = $urandom_range(0, 255);
    for (int k = 0; k < NFV; k++) begin
      int s;
      s = 0;
      for (int c = 0; c < 8; c++) begin
        int dx, dy, dz, w;
        dx = c & 1; dy = (c >> 1) & 1; dz = (c >> 2) & 1;
        w = ((dx ? fx : 256 - fx) * (dy ? fy : 256 - fy) * (dz ? fz : 256 - fz)) >> 16;
        s += w * int'($signed(feat(fv, mx + dx, my + dy, mz + dz, k)));
      end
      e[k] = IFV_W'(s);
    end
    @(negedge clk);
    while (!samc_ready) @(negedge clk);
    samc = '0;
    samc.fvtag = FVTAG_W'(fv); samc.ptr = 5'd9; samc.ray = 2'd2; samc.last = last;
    samc.mloc[0] = 2'(mx); samc.mloc[1] = 2'(my); samc.mloc[2] = 2'(mz);
    samc.frac[0] = 8'(fx); samc.frac[1] = 8'(fy); samc.frac[2] = 8'(fz);
    samc_valid = 1;
    @(negedge clk); samc_valid = 0;
    lat = 1;
    while (!ifv_valid) begin @(negedge clk); lat++; end
    chk(lat == 2, $sformatf("latency %0d", lat));
    chk(ifv.ptr == 5'd9 && ifv.ray == 2'd2, "routing");
    for (int k = 0; k < NFV; k++)
      chk(ifv.ifv[k] == e[k], $sformatf("fv %0d comp %0d got %0d exp %0d", fv, k, ifv.ifv[k], e[k]));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h, a;
    int f0;
    flush = 0; chk_valid = 0; chk_fvtag = 0; samc_valid = 0; samc = '0; ifv_ready = 1;
    for (int b = 0; b < 8; b++) wcount[b] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // miss, then a merged miss on the same fine voxel
    check_tag(100, h, a); chk(!h && a, "first miss accepted");
    check_tag(100, h, a); chk(!h && a, "second miss merged");
    wait_fill(100);
    chk(fetches == 1, "one fetch for two misses");
    chk(dut.rsv[100 % SLOTS] == 2, "two reservations after fill");
    // same slot, other fine voxel: blocked while reserved
    check_tag(100 + SLOTS, h, a); chk(!h && !a, "reserved slot not replaced");
    check_tag(100, h, a); chk(h, "hit");
    sample(100, 0); sample(100, 1); sample(100, 1); sample(100, 1);
    chk(dut.rsv[100 % SLOTS] == 0, "reservations released");
    check_tag(100 + SLOTS, h, a); chk(!h && a, "replacement allowed");
    wait_fill(100 + SLOTS);
    sample(100 + SLOTS, 1);
    check_tag(100, h, a); chk(!h && a, "old line gone, refetch accepted");
    wait_fill(100);
    sample(100, 1);
    chk(dut.rsv[100 % SLOTS] == 0, "reservation of the refill released");
    // one full group: slots 0..7, every rotation
    for (int b = 0; b < 8; b++) wcount[b] = 0;
    for (int s = 0; s < 8; s++) begin
      f0 = 32 * 7 + s;     // fv with low bits s -> slot s
      check_tag(f0, h, a); chk(a, "group miss");
      wait_fill(f0);
      repeat (6) sample(f0, 0);
    end
    for (int b = 0; b < 8; b++) chk(wcount[b] == 125, $sformatf("bank %0d words %0d", b, wcount[b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
