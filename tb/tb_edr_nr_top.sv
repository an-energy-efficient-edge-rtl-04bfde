// tb_edr_nr_top: end-to-end test of the neural-rendering coprocessor.
//
// Builds a small synthetic scene and renders it three times:
//   - occupancy: about half of the 64 coarse voxels occupied, about a third of
//     the fine voxels inside them, micro-voxel lines from a hash (~40% set);
//   - features: INT4 values hashed from the global vertex coordinate, so
//     neighbouring fine voxels agree on shared vertices;
//   - MLP: random INT8 weights per coarse voxel, density biased so that rays
//     become opaque after a handful of samples;
//   - camera: 12 x 12 pixels (36 ray packets) looking along +x from far outside
//     the grid with a wide field of view, so that corner packets miss the box;
//     a third frame uses a narrow field of view, so that many packets enter the
//     same coarse voxel and its tag spreads over several reordering entries.
// External memory is modelled here: micro-bitmap lines answer after 3..10
// cycles; a feature request is followed, after 4..20 cycles, by the 125 vertex
// vectors of the fine voxel, one per cycle (x fastest, then y, then z), with
// random gaps. The pixel output is back-pressured at random.
//
// Checks: every pixel quad of the image arrives exactly once with consistent
// coordinates; packets that missed the box are black; done rises only after the
// last quad and stays; the second frame (caches warm) gives the same image
// up to what late early-termination may add. Each
// mechanism event of the ev port is counted over all frames and any mechanism
// that never happened is a failure. The top runs at its default parameters.
module tb_edr_nr_top;
  import edr_pkg::*;

  localparam int W = 12, H = 12;

  logic clk = 0, rst_n = 0;
  logic                  start, flush;
  logic [COORD_W-1:0]    bx, by;
  pcp_t                  pcp;
  aabb_t                 box;
  logic [63:0]           cbm;
  logic [T_W-1:0]        t_thr;
  logic                  fbm_we;
  logic [FVTAG_W-1:0]    fbm_addr;
  logic                  fbm_data;
  logic                  wt_we;
  logic [CVTAG_W-1:0]    wt_cv;
  logic [5:0]            wt_word;
  logic [127:0]          wt_data;
  logic                  mgb_mem_req;
  logic [FVTAG_W-1:0]    mgb_mem_addr;
  logic                  mgb_mem_rsp_valid;
  logic [63:0]           mgb_mem_rsp_data;
  logic                  fdr_req_valid, fdr_req_ready;
  logic [FVTAG_W-1:0]    fdr_req_fv;
  logic                  fdr_rsp_valid;
  logic [VEC_W-1:0]      fdr_rsp_data;
  logic                  pix_valid, pix_ready;
  pix_t                  pix;
  logic                  done;
  logic [15:0]           ev;

  always #5 clk = ~clk;

  edr_nr_top dut (.*);

  int checks = 0, failures = 0;
  int evcnt [16];
  string evname [16] = '{"coarse skip", "ROB tag switch", "tag in several entries",
                         "fine skip", "reschedule", "CV transition", "termination",
                         "ray divergence", "micro-bitmap miss", "feature miss",
                         "MSHR merge", "reservation blocked replacement",
                         "out-of-order bypass", "sample composited", "pixel quad out",
                         "packet discarded by box test"};

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- scene ----------------
  function automatic logic [63:0] mline(logic [FVTAG_W-1:0] fv);
    logic [63:0] l;
    for (int k = 0; k < 64; k++) l[k] = (((int'(fv) * 40503 + k * 2654435761) >> 9) % 10) < 4;
    return l;
  endfunction

  function automatic logic [3:0] feat(int gx, int gy, int gz, int k);
    int h;
    h = gx * 7919 + gy * 131 + gz * 37 + k * 11;
    h = h ^ (h >> 5);
    return 4'(h);
  endfunction

  // ---------------- external memory ----------------
  always @(negedge clk) begin
    for (int e = 0; e < 16; e++) if (rst_n && ev[e]) evcnt[e]++;
  end

  initial begin : mgb_mem
    mgb_mem_rsp_valid = 0; mgb_mem_rsp_data = '0;
    forever begin
      @(negedge clk);
      if (rst_n && mgb_mem_req) begin
        logic [FVTAG_W-1:0] a;
        a = mgb_mem_addr;
        repeat ($urandom_range(3, 10)) @(negedge clk);
        mgb_mem_rsp_valid = 1; mgb_mem_rsp_data = mline(a);
        @(negedge clk);
        mgb_mem_rsp_valid = 0;
      end
    end
  end

  initial begin : fdr_mem
    fdr_req_ready = 0; fdr_rsp_valid = 0; fdr_rsp_data = '0;
    forever begin
      @(negedge clk);
      fdr_req_ready = 1;
      #1;
      if (rst_n && fdr_req_valid) begin
        logic [FVTAG_W-1:0] fv;
        int bx0, by0, bz0;
        fv  = fdr_req_fv;
        bx0 = 4 * int'(fv[4:0]); by0 = 4 * int'(fv[9:5]); bz0 = 4 * int'(fv[14:10]);
        @(negedge clk);
        fdr_req_ready = 0;
        repeat ($urandom_range(4, 20)) @(negedge clk);
        for (int z = 0; z < 5; z++)
          for (int y = 0; y < 5; y++)
            for (int x = 0; x < 5; x++) begin
              while ($urandom_range(0, 7) == 0) begin fdr_rsp_valid = 0; @(negedge clk); end
              for (int k = 0; k < NFV; k++) fdr_rsp_data[k*4 +: 4] = feat(bx0 + x, by0 + y, bz0 + z, k);
              fdr_rsp_valid = 1;
              @(negedge clk);
            end
        fdr_rsp_valid = 0;
      end
    end
  end

  // ---------------- one frame ----------------
  logic [23:0] img [3][W][H];
  bit          seen [W][H];
  bit          missq [W][H];

  task automatic frame(int f);
    int quads, cyc;
    for (int x = 0; x < W; x++) for (int y = 0; y < H; y++) seen[x][y] = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    quads = 0; cyc = 0;
    while (!(done && quads == W * H / 4) && cyc < 3000000) begin
      pix_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (pix_valid && pix_ready) begin
        bit black;
        black = 1;
        chk(!done, "done before the last quad");
        chk(pix.x0 == pix.x[0] && pix.y0 == pix.y[0], "quad origin");
        for (int r = 0; r < NRAY; r++) begin
          int x, y;
          x = int'(pix.x[r]); y = int'(pix.y[r]);
          chk(x == int'(pix.x0) + (r >> 1) && y == int'(pix.y0) + (r & 1), "quad layout");
          chk(x < W && y < H && !seen[x][y], $sformatf("pixel %0d,%0d out of range or repeated", x, y));
          if (x < W && y < H) begin
            seen[x][y]   = 1;
            img[f][x][y] = pix.rgb[r];
          end
          if (pix.rgb[r] != '0) black = 0;
        end
        if (missq[pix.x0 >> 1][pix.y0 >> 1]) chk(black, "packet outside the box is not black");
        quads++;
      end
      @(negedge clk);
      cyc++;
    end
    chk(quads == W * H / 4, $sformatf("frame %0d: %0d quads", f, quads));
    chk(done, "done at end of frame");
    repeat (20) @(negedge clk);
    chk(done && !pix_valid, "done stays, nothing more out");
    $display("frame %0d: %0d cycles", f, cyc);
  endtask

  initial begin
    int lit, tol;
    start = 0; flush = 0; pix_ready = 0;
    fbm_we = 0; fbm_addr = '0; fbm_data = 0;
    wt_we = 0; wt_cv = '0; wt_word = '0; wt_data = '0;
    for (int e = 0; e < 16; e++) evcnt[e] = 0;
    bx = COORD_W'(W - 1); by = COORD_W'(H - 1);
    // camera at x = -150 micro voxels, looking along +x; pixel x moves the ray in
    // y, pixel y moves it in z
    pcp = '0;
    pcp.d0x = 32'sd32768;                    // 128 (half a micro voxel) per step, << 8
    pcp.d0y = -32'sd17920; pcp.d0z = -32'sd17920;
    pcp.dxy = 24'sd3200;   pcp.dyz = 24'sd3200;
    pcp.org[0] = POS_W'(-150 * 256);
    pcp.org[1] = POS_W'(64 * 256 + 37);
    pcp.org[2] = POS_W'(64 * 256 + 91);
    box.lo = '{default: POS_W'(8 * 256)};
    box.hi = '{default: POS_W'(120 * 256)};
    t_thr  = 16'h0600;
    // which quads miss the box: the ray of the quad's corner pixel (coarse test
    // of the camera set-up, used only to check that they come out black)
    for (int qx = 0; qx < W / 2; qx++)
      for (int qy = 0; qy < H / 2; qy++) begin
        bit any;
        any = 0;
        for (int r = 0; r < NRAY; r++) begin
          int px, py;
          real dy, dz, ty, tz, t;
          px = 2 * qx + (r >> 1); py = 2 * qy + (r & 1);
          dy = (real'(-17920 + px * 3200)) / 32768.0;
          dz = (real'(-17920 + py * 3200)) / 32768.0;
          t  = 158.0;                         // x from -150 to 8
          ty = 64.0 + dy * t; tz = 64.0 + dz * t;
          if (ty > 9.0 && ty < 119.0 && tz > 9.0 && tz < 119.0) any = 1;
          t  = 270.0;                         // x at 120
          ty = 64.0 + dy * t; tz = 64.0 + dz * t;
          if (ty > 9.0 && ty < 119.0 && tz > 9.0 && tz < 119.0) any = 1;
        end
        missq[qx][qy] = !any;
      end
    cbm = '0;
    for (int c = 0; c < 64; c++) cbm[c] = ($urandom_range(0, 9) < 5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fine bitmap
    for (int f = 0; f < 2**FVTAG_W; f++) begin
      logic [FVTAG_W-1:0] fv;
      logic [CVTAG_W-1:0] cv;
      fv = FVTAG_W'(f);
      cv = {fv[14:13], fv[9:8], fv[4:3]};
      @(negedge clk);
      fbm_we = 1; fbm_addr = fv; fbm_data = cbm[cv] && ($urandom_range(0, 2) == 0);
    end
    @(negedge clk); fbm_we = 0;
    // MLP weights
    for (int c = 0; c < 64; c++)
      for (int w = 0; w < NFV + 1 + 16 + 1; w++) begin
        logic [127:0] d;
        for (int b = 0; b < 16; b++) begin
          if (w < NFV)                d[b*8 +: 8] = 8'($urandom_range(0, 32) - 16);
          else if (w == NFV)          d[b*8 +: 8] = 8'($urandom_range(0, 40));
          else if (w < NFV + 1 + 16)  d[b*8 +: 8] = 8'($urandom_range(0, 16) - 8);
          else                        d[b*8 +: 8] = (b == 3) ? 8'($urandom_range(6, 14))
                                                             : 8'($urandom_range(0, 120));
        end
        @(negedge clk);
        wt_we = 1; wt_cv = CVTAG_W'(c); wt_word = 6'(w); wt_data = d;
      end
    @(negedge clk); wt_we = 0;
    repeat (5) @(negedge clk);
    frame(0);
    frame(1);
    // a ray is stopped once its transmittance is seen below t_thr; samples that
    // were already in flight still add, at most t_thr * 255 per channel
    tol = (int'(t_thr) * 255 >> 16) + 1;
    lit = 0;
    for (int x = 0; x < W; x++)
      for (int y = 0; y < H; y++) begin
        for (int k = 0; k < 3; k++) begin
          int d;
          d = int'(img[0][x][y][k*8 +: 8]) - int'(img[1][x][y][k*8 +: 8]);
          chk(d <= tol && d >= -tol, $sformatf("pixel %0d,%0d differs between frames", x, y));
        end
        if (img[0][x][y] != '0) lit++;
      end
    chk(lit > 0, "image is not all black");
    pcp.d0y = -32'sd4400; pcp.d0z = -32'sd4400;
    pcp.dxy = 24'sd800;   pcp.dyz = 24'sd800;
    for (int qx = 0; qx < W / 2; qx++) for (int qy = 0; qy < H / 2; qy++) missq[qx][qy] = 0;
    frame(2);
    $display("lit pixels %0d of %0d", lit, W * H);
    for (int e = 0; e < 16; e++) begin
      $display("  %-32s %0d", evname[e], evcnt[e]);
      chk(evcnt[e] > 0, $sformatf("mechanism never happened: %s", evname[e]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
