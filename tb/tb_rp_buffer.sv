// tb_rp_buffer: allocation, per-port updates, in-flight counting and retirement.
// Fills every entry, checks pointers are handed out lowest-first and refused when
// full, that a packet leaves only when done and with no samples in flight, that
// the pixel quad carries the stored coordinates and top colour bytes, and that a
// packet allocated with no live ray leaves at once.
module tb_rp_buffer;
  import edr_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_valid, alloc_ready;
  logic [PTR_W-1:0] alloc_ptr, ctu_ptr, ftu_ptr, vru_ptr;
  logic [NRAY-1:0][COORD_W-1:0] alloc_x, alloc_y;
  vec3d_t [NRAY-1:0] alloc_dir, ctu_dir, ftu_dir;
  vec3p_t [NRAY-1:0] alloc_pos, ctu_pos, ftu_pos, ctu_wpos, ftu_wpos;
  logic [NRAY-1:0] alloc_alive, ctu_alive, ftu_alive, ctu_walive, ftu_walive;
  logic [2:0] alloc_adorder, alloc_dneg, ctu_adorder, ctu_dneg, ftu_adorder, ftu_dneg, ftu_add;
  logic [NRAY-1:0][T_W-1:0] ftu_t;
  logic ctu_we, ctu_done, ftu_we, ftu_done, vru_we, pix_valid, pix_ready, empty;
  logic [1:0] vru_ray;
  logic [T_W-1:0] vru_t, vru_wt;
  logic [2:0][23:0] vru_c, vru_wc;
  pix_t pix;
  int checks = 0, failures = 0;

  rp_buffer #(.N(N)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_valid = 0; ctu_we = 0; ftu_we = 0; vru_we = 0; pix_ready = 1;
    ctu_done = 0; ftu_done = 0; ftu_add = 0; ctu_ptr = 0; ftu_ptr = 0; vru_ptr = 0; vru_ray = 0;
    alloc_dir = '0; alloc_pos = '0; alloc_adorder = 3'd1; alloc_dneg = 3'd0;
    ctu_wpos = '0; ftu_wpos = '0; ctu_walive = '0; ftu_walive = '0; vru_wt = '0; vru_wc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(empty, "empty after reset");
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      chk(alloc_ready && alloc_ptr == PTR_W'(i), $sformatf("alloc ptr %0d", alloc_ptr));
      for (int r = 0; r < 4; r++) begin alloc_x[r] = 11'(10 * i + r); alloc_y[r] = 11'(i); end
      alloc_alive = 4'b1111; alloc_valid = 1;
      @(negedge clk); alloc_valid = 0;
    end
    chk(!alloc_ready, "full");
    chk(!pix_valid, "nothing finished");
    // ctu marks 3 done, ftu adds 2 samples to 3 first
    ftu_ptr = 3; ftu_we = 1; ftu_add = 3'd2; ftu_walive = 4'b1111;
    @(negedge clk); ftu_we = 0;
    ctu_ptr = 3; ctu_we = 1; ctu_done = 1; ctu_walive = 4'b0000;
    @(negedge clk); ctu_we = 0; ctu_done = 0;
    chk(!pix_valid, "in-flight samples hold the packet");
    // vru composites two samples on ray 1
    vru_ptr = 3; vru_ray = 1; #1;
    chk(vru_t == 16'hFFFF, "initial transmittance");
    vru_we = 1; vru_wt = 16'h8000; vru_wc = {24'hAB0000, 24'h120000, 24'h340000};
    @(negedge clk);
    vru_wt = 16'h4000; vru_wc = {24'hCD0000, 24'h560000, 24'h780000};
    chk(!pix_valid, "one sample left");
    @(negedge clk); vru_we = 0;
    chk(pix_valid && pix.x0 == 11'd30 && pix.y[2] == 11'd3, "packet 3 leaves");
    chk(pix.rgb[1] == 24'h7856CD, $sformatf("rgb %h", pix.rgb[1]));
    @(negedge clk);
    chk(!pix_valid && alloc_ready && alloc_ptr == 3, "entry 3 freed");
    // dead packet leaves immediately
    alloc_alive = '0; alloc_valid = 1;
    @(negedge clk); alloc_valid = 0;
    chk(pix_valid && pix.x0 == 11'd70, "dead packet out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
