// tb_abt: random rays against a real-valued slab test.
// The reference computes entry/exit distances with real division; cases whose
// entry and exit distances are within a small margin of each other (grazing rays)
// are skipped because fixed-point and real arithmetic may legitimately differ.
module tb_abt;
  import edr_pkg::*;
  vec3p_t org;
  aabb_t box;
  vec3d_t [NRAY-1:0] dir;
  logic [NRAY-1:0] ray_ok, hit;
  int checks = 0, failures = 0, nhit = 0;

  abt dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int a = 0; a < 3; a++) begin
        int l, h;
        org[a] = POS_W'($urandom_range(0, 60000)) - POS_W'(20000);
        l = $urandom_range(0, 20000);
        h = l + $urandom_range(256, 12000);
        box.lo[a] = POS_W'(l); box.hi[a] = POS_W'(h);
      end
      for (int r = 0; r < NRAY; r++)
        for (int a = 0; a < 3; a++)
          if (r % 2 == 0)
            dir[r][a] = DIR_W'(((int'(box.lo[a]) + int'(box.hi[a])) / 2 - int'(org[a])) / 256
                               + int'($urandom_range(0, 8)) - 4);
          else
            dir[r][a] = DIR_W'($urandom_range(0, 1024)) - DIR_W'(512);
      ray_ok = NRAY'($urandom) | 4'b0001;
      #1;
      for (int r = 0; r < NRAY; r++) begin
        real tmin, tmax, t1, t2;
        bit e, skip;
        tmin = 0.0; tmax = 1.0e30; e = 1; skip = 0;
        for (int a = 0; a < 3; a++) begin
          real o, d;
          o = real'(org[a]); d = real'(dir[r][a]);
          if (dir[r][a] == 0) begin
            if (org[a] < box.lo[a] || org[a] >= box.hi[a]) e = 0;
          end else begin
            t1 = (real'(box.lo[a]) - o) / d; t2 = (real'(box.hi[a]) - o) / d;
            if (t1 > t2) begin real tt; tt = t1; t1 = t2; t2 = tt; end
            if (t1 > tmin) tmin = t1;
            if (t2 < tmax) tmax = t2;
          end
        end
        if (tmin < tmax && tmax - tmin < 0.01) skip = 1;
        if (tmax > 0 && tmax < 0.01) skip = 1;
        e = e && (tmin < tmax) && ray_ok[r];
        if (!skip) begin
          checks++;
          if (e) nhit++;
          if (hit[r] != e) begin
            failures++;
            if (failures < 5) $display("FAIL it %0d ray %0d: hit %b exp %b", it, r, hit[r], e);
          end
        end
      end
    end
    checks++;
    if (nhit < 50) begin failures++; $display("FAIL: too few hits %0d", nhit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
