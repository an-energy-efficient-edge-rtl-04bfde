// tb_tsps: binary-search entry point against a linear scan.
// For random rays aimed at a random box, the model scans t = 0, 1, 2, ... for the
// first step at which all entry planes are passed, and expects that position and
// alive = hit && position inside the box. The result must appear TB + 1 cycles
// after the packet is offered (TB + 1 after it is taken).
module tb_tsps;
  import edr_pkg::*;
  localparam int TB = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  vec3p_t org;
  aabb_t box;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [NRAY-1:0] in_hit, out_alive;
  vec3d_t [NRAY-1:0] in_dir, out_dir;
  logic [NRAY-1:0][COORD_W-1:0] in_x, in_y, out_x, out_y;
  logic [2:0] in_adorder, in_dneg, out_adorder, out_dneg;
  vec3p_t [NRAY-1:0] out_pos;
  int checks = 0, failures = 0;

  tsps #(.TB(TB)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 6) $display("FAIL: %s", m); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    in_valid = 0; out_ready = 1;
    in_x = '0; in_y = '0; in_adorder = 3'd2; in_dneg = 3'd5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      for (int a = 0; a < 3; a++) begin
        int l;
        org[a] = POS_W'($urandom_range(0, 40000)) - POS_W'(5000);
        l = $urandom_range(2000, 20000);
        box.lo[a] = POS_W'(l); box.hi[a] = POS_W'(l + $urandom_range(3000, 9000));
      end
      for (int r = 0; r < NRAY; r++)
        for (int a = 0; a < 3; a++)
          in_dir[r][a] = DIR_W'(((int'(box.lo[a]) + int'(box.hi[a])) / 2 - int'(org[a])) / 300
                                + int'($urandom_range(0, 6)) - 3);
      in_hit = NRAY'($urandom) | 4'b0010;
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      chk(lat == TB + 2, $sformatf("latency %0d", lat));
      chk(out_adorder == 3'd2 && out_dneg == 3'd5 && out_dir == in_dir, "pass-through");
      for (int r = 0; r < NRAY; r++) begin
        int t;
        vec3p_t p;
        bit ok, ins;
        t = 0;
        forever begin
          ok = 1;
          for (int a = 0; a < 3; a++) begin
            p[a] = POS_W'(int'(org[a]) + t * int'(in_dir[r][a]));
            if (in_dir[r][a] > 0 && p[a] < box.lo[a]) ok = 0;
            if (in_dir[r][a] < 0 && p[a] >= box.hi[a]) ok = 0;
          end
          if (ok || t >= (1 << TB)) break;
          t++;
        end
        ins = 1;
        for (int a = 0; a < 3; a++)
          if (p[a] < box.lo[a] || p[a] >= box.hi[a] || p[a] < 0 || p[a] >= 32768) ins = 0;
        if (t < (1 << TB)) begin
          chk(out_alive[r] == (in_hit[r] && ins), $sformatf("alive ray %0d", r));
          if (in_hit[r] && ins) chk(out_pos[r] == p, $sformatf("pos ray %0d t %0d got %p exp %p dir %p org %p lo %p", r, t, out_pos[r], p, in_dir[r], org, box.lo));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
