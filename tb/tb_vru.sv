// tb_vru: self-checking test of the volume rendering unit.
//
// Drives random samples (density, colour) against random ray states (T, colour
// accumulators) and checks, for every sample:
//   - the new transmittance against a real-valued exp(-sigma) model (within 1%
//     of full scale plus the table step),
//   - that T never grows and the weight T - T' is what is added per channel,
//   - the routing of pointer and ray to the RP buffer port.
// It also composites whole rays (T starts at 0xFFFF) until T is small and checks
// that the accumulated colour of a constant-colour ray approaches that colour.
// The unit is combinational, so values are sampled one time step after driving.
module tb_vru;
  import edr_pkg::*;

  logic              in_valid, in_ready;
  smp_out_t          in_smp;
  logic [PTR_W-1:0]  rb_ptr;
  logic [1:0]        rb_ray;
  logic [T_W-1:0]    rb_t;
  logic [2:0][23:0]  rb_c;
  logic              rb_we;
  logic [T_W-1:0]    rb_wt;
  logic [2:0][23:0]  rb_wc;

  int checks = 0, failures = 0;

  vru dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL: %s", m); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_smp = '0; rb_t = '0; rb_c = '0;
    #1;
    // single samples
    for (int i = 0; i < 4000; i++) begin
      real tr, texp;
      int  w;
      in_valid     = 1;
      in_smp.ptr   = PTR_W'($urandom);
      in_smp.ray   = 2'($urandom);
      in_smp.r     = 8'($urandom);
      in_smp.g     = 8'($urandom);
      in_smp.b     = 8'($urandom);
      in_smp.sigma = (i % 4 == 0) ? 8'($urandom_range(0, 15)) : 8'($urandom);
      rb_t         = T_W'($urandom);
      for (int k = 0; k < 3; k++) rb_c[k] = 24'($urandom_range(0, 1 << 20));
      #1;
      tr   = real'(rb_t) * $exp(-real'(in_smp.sigma) / 16.0);
      texp = real'(rb_wt);
      chk(in_ready && rb_we, "handshake");
      chk(rb_ptr == in_smp.ptr && rb_ray == in_smp.ray, "routing");
      chk(rb_wt <= rb_t, "transmittance grows");
      chk(texp - tr < 0.01 * 65536.0 && tr - texp < 0.01 * 65536.0,
          $sformatf("T %0d sigma %0d got %0d exp %f", rb_t, in_smp.sigma, rb_wt, tr));
      w = int'(rb_t) - int'(rb_wt);
      chk(rb_wc[0] == rb_c[0] + 24'(w * int'(in_smp.r)) &&
          rb_wc[1] == rb_c[1] + 24'(w * int'(in_smp.g)) &&
          rb_wc[2] == rb_c[2] + 24'(w * int'(in_smp.b)), "colour accumulation");
      #1;
    end
    // whole rays of constant colour
    for (int r = 0; r < 50; r++) begin
      logic [7:0] col;
      int n;
      col  = 8'($urandom_range(1, 255));
      rb_t = 16'hFFFF;
      rb_c = '0;
      n    = 0;
      while (rb_t > 16'd64 && n < 1000) begin
        in_smp       = '0;
        in_smp.r     = col; in_smp.g = col; in_smp.b = col;
        in_smp.sigma = 8'($urandom_range(2, 40));
        #1;
        rb_t = rb_wt;
        rb_c = rb_wc;
        n++;
        #1;
      end
      chk(n < 1000, "ray saturates");
      chk(int'(rb_c[0][23:16]) >= int'(col) - 2 && rb_c[0][23:16] <= col,
          $sformatf("ray colour %0d for %0d", rb_c[0][23:16], col));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
