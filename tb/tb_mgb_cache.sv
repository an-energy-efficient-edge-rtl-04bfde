// tb_mgb_cache: misses fetch from a memory model, hits answer in 2 cycles.
// Line contents are a hash of the fine-voxel index. Requests cover a miss, a hit
// on the same line, a conflicting line with the same index (evicts), the original
// again (miss), and a flush (miss again). Every response must carry the hash.
module tb_mgb_cache;
  import edr_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush, req_valid, req_ready, rsp_valid, mem_req, mem_rsp_valid, ev_miss;
  logic [FVTAG_W-1:0] req_fv, mem_addr;
  logic [63:0] rsp_line, mem_rsp_data;
  int checks = 0, failures = 0, fetches = 0;

  mgb_cache #(.LINES(16)) dut (.*);

  function automatic logic [63:0] hashv(logic [FVTAG_W-1:0] a);
    return {32'(a) * 32'h9E3779B1, 32'(a) ^ 32'h5A5A1234};
  endfunction

  // memory: answers 5 cycles after the request rises
  initial begin
    mem_rsp_valid = 0; mem_rsp_data = '0;
    forever begin
      @(posedge clk);
      if (mem_req && !mem_rsp_valid) begin
        repeat (4) @(posedge clk);
        mem_rsp_data <= hashv(mem_addr);
        mem_rsp_valid <= 1;
        fetches++;
        @(posedge clk);
        mem_rsp_valid <= 0;
      end
    end
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic rd(int fv, bit expect_hit);
    int lat, f0;
    f0 = fetches;
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_fv = FVTAG_W'(fv); req_valid = 1;
    @(negedge clk); req_valid = 0;
    lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    chk(rsp_line == hashv(FVTAG_W'(fv)), $sformatf("data fv %0d", fv));
    if (expect_hit) chk(lat == 2 && fetches == f0, $sformatf("hit latency %0d", lat));
    else chk(fetches == f0 + 1, "miss fetched once");
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flush = 0; req_valid = 0; req_fv = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    rd(37, 0); rd(37, 1); rd(38, 0); rd(37 + 16, 0); rd(38, 1); rd(37, 0);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    rd(38, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
