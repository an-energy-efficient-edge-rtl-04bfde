// tb_zorg: checks the Z-order ray generator on a 7 x 5 image.
// An independent model walks every multiple of 4 of the 22-bit counter, splits
// odd/even bits into x/y and keeps the quads whose corner is inside the image;
// the generator must produce exactly that sequence, with per-ray in-image flags,
// directions from the pose formula and the ADOrder code of the summed direction.
// The run must take fewer cycles than quads plus 2 per counter bit (rectifier
// jumps), and at most one cycle per quad while quads are in bounds.
module tb_zorg;
  import edr_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic [COORD_W-1:0] bx = 11'd6, by = 11'd4;
  pcp_t pcp;
  logic rp_valid, rp_ready, busy, done;
  logic [NRAY-1:0][COORD_W-1:0] rcx, rcy;
  logic [NRAY-1:0] ray_ok;
  vec3d_t [NRAY-1:0] dir;
  logic [2:0] adorder, dir_neg;
  int checks = 0, failures = 0;

  zorg dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int exp_x [$], exp_y [$];
  int cycles, n;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcp = '0;
    pcp.d0x = -32'sd3000; pcp.d0y = 32'sd100; pcp.d0z = 32'sd60000;
    pcp.dxx = 24'sd900;   pcp.dyy = -24'sd700; pcp.dxz = 24'sd5;
    for (int f = 0; f < (1 << 22); f += 4) begin
      int x, y;
      x = 0; y = 0;
      for (int i = 0; i < 11; i++) begin
        x |= ((f >> (2*i+1)) & 1) << i;
        y |= ((f >> (2*i)) & 1) << i;
      end
      if (x <= 6 && y <= 4) begin exp_x.push_back(x); exp_y.push_back(y); end
    end
    rp_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start <= 1;
    @(posedge clk); start <= 0;
    cycles = 0; n = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
      if (rp_valid) begin
        int sx, sy, sz;
        logic [2:0] eo;
        chk(n < exp_x.size(), "too many packets");
        if (n < exp_x.size()) begin
          chk(rcx[0] == exp_x[n] && rcy[0] == exp_y[n], $sformatf("quad %0d at %0d,%0d", n, rcx[0], rcy[0]));
          for (int i = 0; i < 4; i++) begin
            int xi, yi;
            xi = exp_x[n] + i / 2; yi = exp_y[n] + i % 2;
            chk(rcx[i] == xi && rcy[i] == yi && ray_ok[i] == (xi <= 6 && yi <= 4), "ray coords");
            chk(dir[i][0] == DIR_W'((-3000 + 900 * xi) >>> 8) &&
                dir[i][1] == DIR_W'((100 - 700 * yi) >>> 8) &&
                dir[i][2] == DIR_W'((60000 + 5 * xi) >>> 8), "direction");
          end
          sx = 0; sy = 0; sz = 0;
          for (int i = 0; i < 4; i++) begin sx += dir[i][0]; sy += dir[i][1]; sz += dir[i][2]; end
          sx = sx < 0 ? -sx : sx; sy = sy < 0 ? -sy : sy; sz = sz < 0 ? -sz : sz;
          if (sx >= sy && sx >= sz) eo = (sy >= sz) ? 0 : 1;
          else if (sy >= sz) eo = (sx >= sz) ? 2 : 3;
          else eo = (sx >= sy) ? 4 : 5;
          chk(adorder == eo, "adorder");
        end
        n++;
      end
    end
    chk(n == exp_x.size(), $sformatf("packet count %0d vs %0d", n, exp_x.size()));
    chk(cycles <= exp_x.size() + 2 * 22 + 4, $sformatf("cycles %0d", cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
