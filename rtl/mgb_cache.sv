// mgb_cache: micro grid bitmap cache.
//
// Holds the micro-voxel occupancy of recently visited fine voxels: one 64-bit
// line per fine voxel (its 4x4x4 micro voxels, bit index {z,y,x} of the micro
// voxel inside the fine voxel). LINES lines of 64 bits make the 8 KB the paper
// gives for this cache; direct mapping by the low fine-voxel index bits is this
// design's choice. A miss fetches the line from external memory over a
// request/response pair and then answers.
//
// Timing: a request is accepted when the cache is idle; a hit answers on the
// next cycle (rsp_valid for one cycle), a miss after the external response.
// flush invalidates every line (a new scene).
module mgb_cache
  import edr_pkg::*;
#(
  parameter int LINES = 1024
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flush,
  input  logic                  req_valid,
  output logic                  req_ready,
  input  logic [FVTAG_W-1:0]    req_fv,
  output logic                  rsp_valid,
  output logic [63:0]           rsp_line,
  // external memory
  output logic                  mem_req,
  output logic [FVTAG_W-1:0]    mem_addr,
  input  logic                  mem_rsp_valid,
  input  logic [63:0]           mem_rsp_data,
  output logic                  ev_miss
);

  localparam int IW = $clog2(LINES);

  logic [63:0]          data  [LINES];
  logic [FVTAG_W-1:0]   tagm  [LINES];
  logic [LINES-1:0]     vld;

  typedef enum logic [1:0] {IDLE, LOOK, MISS} st_e;
  st_e st;
  logic [FVTAG_W-1:0] fv;
  logic [IW-1:0]      idx;

  assign idx       = fv[IW-1:0];
  assign req_ready = (st == IDLE);
  assign mem_req   = (st == MISS);
  assign mem_addr  = fv;
  assign ev_miss   = (st == LOOK) && !(vld[idx] && tagm[idx] == fv);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= IDLE;
      vld       <= '0;
      fv        <= '0;
      rsp_valid <= 1'b0;
      rsp_line  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (flush) vld <= '0;
      unique case (st)
        IDLE: if (req_valid) begin
          fv <= req_fv;
          st <= LOOK;
        end
        LOOK: begin
          if (vld[idx] && tagm[idx] == fv && !flush) begin
            rsp_valid <= 1'b1;
            rsp_line  <= data[idx];
            st        <= IDLE;
          end else begin
            st <= MISS;
          end
        end
        MISS: if (mem_rsp_valid) begin
          data[idx] <= mem_rsp_data;
          tagm[idx] <= fv;
          vld[idx]  <= 1'b1;
          rsp_valid <= 1'b1;
          rsp_line  <= mem_rsp_data;
          st        <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end

endmodule
