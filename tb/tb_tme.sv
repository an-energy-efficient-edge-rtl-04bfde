// tb_tme: self-checking test of the tiny MLP engine.
//
// Loads random INT8 weights for a few coarse voxels (small NCV) through the weight
// port, then sends random interpolated feature vectors with random CV tags and
// compares the colour/density outputs with a reference network computed here
// from the documented weight layout (hidden = clamp((W1*x + 256*B1) >> 8),
// out = clamp((W2*h + 256*B2) >> 8), clamp to 0..255). Also checks the latency
// (NFV + NH + 2 cycles plus the hand-off), that in_ready is low while busy, and
// that a result is held while out_ready is low.
module tb_tme;
  import edr_pkg::*;

  localparam int NH  = 16;
  localparam int NCV = 4;
  localparam int WPC = NFV + 1 + NH + 1;

  logic clk = 0, rst_n = 0;
  logic                 wt_we;
  logic [CVTAG_W-1:0]   wt_cv;
  logic [5:0]           wt_word;
  logic [127:0]         wt_data;
  logic                 in_valid, in_ready;
  ifv_pkt_t             in_pkt;
  logic                 out_valid, out_ready;
  smp_out_t             out;

  logic [127:0] wref [NCV][WPC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tme #(.NH(NH), .NCV(NCV)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL: %s", m); end
  endtask

  function automatic int clamp8(int v);
    int s;
    s = v >>> 8;
    return s < 0 ? 0 : (s > 255 ? 255 : s);
  endfunction

  function automatic int sb(logic [127:0] w, int j);
    return int'($signed(w[j*8 +: 8]));
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wt_we = 0; wt_cv = '0; wt_word = '0; wt_data = '0;
    in_valid = 0; in_pkt = '0; out_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weights
    for (int c = 0; c < NCV; c++)
      for (int w = 0; w < WPC; w++) begin
        @(negedge clk);
        wref[c][w] = {$urandom, $urandom, $urandom, $urandom};
        wt_we = 1; wt_cv = CVTAG_W'(c); wt_word = 6'(w); wt_data = wref[c][w];
      end
    @(negedge clk); wt_we = 0;
    for (int n = 0; n < 300; n++) begin
      int x [NFV];
      int h [NH];
      int o [4];
      int cv, lat;
      cv = $urandom_range(0, NCV - 1);
      for (int i = 0; i < NFV; i++) x[i] = $urandom_range(0, 1500) - 750;
      for (int j = 0; j < NH; j++) begin
        int a;
        a = 256 * sb(wref[cv][NFV], j);
        for (int i = 0; i < NFV; i++) a += sb(wref[cv][i], j) * x[i];
        h[j] = clamp8(a);
      end
      for (int k = 0; k < 4; k++) begin
        int a;
        a = 256 * sb(wref[cv][NFV + 1 + NH], k);
        for (int j = 0; j < NH; j++) a += sb(wref[cv][NFV + 1 + j], k) * h[j];
        o[k] = clamp8(a);
      end
      @(negedge clk);
      chk(in_ready, "idle before packet");
      in_pkt = '0;
      in_pkt.ptr = PTR_W'($urandom); in_pkt.ray = 2'($urandom); in_pkt.cvtag = CVTAG_W'(cv);
      for (int i = 0; i < NFV; i++) in_pkt.ifv[i] = IFV_W'(x[i]);
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      chk(!in_ready, "busy after packet");
      out_ready = (n % 5 != 0);
      lat = 1;
      while (!out_valid && lat < 200) begin @(negedge clk); lat++; end
      chk(lat == NFV + NH + 3, $sformatf("latency %0d", lat));
      if (!out_ready) begin
        repeat (3) @(negedge clk);
        chk(out_valid, "result held while not ready");
        out_ready = 1;
      end
      chk(out.ptr == in_pkt.ptr && out.ray == in_pkt.ray, "routing");
      chk(int'(out.r) == o[0] && int'(out.g) == o[1] && int'(out.b) == o[2] &&
          int'(out.sigma) == o[3],
          $sformatf("cv %0d got %0d %0d %0d %0d exp %0d %0d %0d %0d", cv,
                    out.r, out.g, out.b, out.sigma, o[0], o[1], o[2], o[3]));
      @(negedge clk);
      chk(!out_valid, "result taken");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
