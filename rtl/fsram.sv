// fsram: one feature SRAM bank, written as an array.
//
// A simple dual-port memory (one write port, one read port) with a registered
// read: data of raddr appears on rdata the cycle after re. Stands in for the
// foundry SRAM macro of a feature bank; depth and width are parameters.
module fsram #(
  parameter int DEPTH = 4096,
  parameter int W     = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
