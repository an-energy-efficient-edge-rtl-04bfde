// zorg: Z-order ray generator.
//
// A CNT_W-bit counter FC advances by 4, one ray packet (RP) of four rays per
// step. The odd bits of FC form the X coordinate and the even bits the Y
// coordinate, so the image is walked along a Z (Morton) curve and the four rays of
// an RP are a 2x2 pixel quad (ray i: x = CX + i[1], y = CY + i[0]). The split of
// odd/even bits, the step of 4 and the two bound comparators (BX < CX, CY > BY,
// with BX/BY the last valid coordinate) follow the paper's block diagram.
//
// Rectification: when the quad at FC lies outside the image, every point of the
// largest aligned Z block that starts at FC lies outside as well (its corner is
// the minimum in both axes), so FC jumps over that whole block in one cycle. This
// jump rule is this design's way to realise the paper's coordinate rectifier.
//
// Directions: dir_i = (D0 + x_i*DX + y_i*DY) >>> 8 per component, taken from the
// pre-processed camera pose (PCP). The paper's normaliser is not built: the host
// scales the pose so that a direction vector is one marching step. ADOrder gives
// the order of the components of the average direction by decreasing magnitude
// (code 0..5 = xyz, xzy, yxz, yzx, zxy, zyx); dir_neg gives their signs.
//
// Interface: pulse start to restart from FC = 0; RPs leave on a valid/ready
// handshake, one per cycle at best; done rises after the last RP.
module zorg
  import edr_pkg::*;
#(
  parameter int CW = CNT_W
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [COORD_W-1:0]             bx,
  input  logic [COORD_W-1:0]             by,
  input  pcp_t                           pcp,
  output logic                           rp_valid,
  input  logic                           rp_ready,
  output logic [NRAY-1:0][COORD_W-1:0]   rcx,
  output logic [NRAY-1:0][COORD_W-1:0]   rcy,
  output logic [NRAY-1:0]                ray_ok,
  output vec3d_t [NRAY-1:0]              dir,
  output logic [2:0]                     adorder,
  output logic [2:0]                     dir_neg,
  output logic                           busy,
  output logic                           done
);

  localparam int HW = CW / 2;

  logic [CW-1:0] fc;
  logic [HW-1:0] cx, cy;
  logic          oob;
  logic [CW:0]   jump;

  always_comb begin
    for (int i = 0; i < HW; i++) begin
      cx[i] = fc[2*i+1];
      cy[i] = fc[2*i];
    end
  end

  assign oob = (COORD_W'(cx) > bx) || (COORD_W'(cy) > by);

  // size of the largest aligned block starting at fc: 4^j with fc[2j-1:0] == 0
  always_comb begin
    jump = (CW+1)'(4);
    for (int j = 2; j <= HW; j++)
      if ((fc & ((CW'(1) << (2*j)) - CW'(1))) == '0) jump = (CW+1)'(1) << (2*j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fc   <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else if (start) begin
      fc   <= '0;
      busy <= 1'b1;
      done <= 1'b0;
    end else if (busy) begin
      if (oob || rp_ready) begin
        logic [CW:0] nxt;
        nxt = {1'b0, fc} + (oob ? jump : (CW+1)'(4));
        fc <= nxt[CW-1:0];
        if (nxt[CW]) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign rp_valid = busy && !oob;

  // coordinates generator
  always_comb begin
    for (int i = 0; i < NRAY; i++) begin
      rcx[i]    = COORD_W'(cx) + COORD_W'(i >> 1);
      rcy[i]    = COORD_W'(cy) + COORD_W'(i & 1);
      ray_ok[i] = (rcx[i] <= bx) && (rcy[i] <= by);
    end
  end

  // direction generator and averager
  logic signed [47:0] acc [3];
  logic signed [47:0] avg [3];
  logic        [47:0] mag [3];

  always_comb begin
    for (int a = 0; a < 3; a++) avg[a] = '0;
    for (int i = 0; i < NRAY; i++) begin
      logic signed [47:0] xs, ys;
      xs = 48'(rcx[i]);
      ys = 48'(rcy[i]);
      acc[0] = 48'(pcp.d0x) + xs * 48'(pcp.dxx) + ys * 48'(pcp.dyx);
      acc[1] = 48'(pcp.d0y) + xs * 48'(pcp.dxy) + ys * 48'(pcp.dyy);
      acc[2] = 48'(pcp.d0z) + xs * 48'(pcp.dxz) + ys * 48'(pcp.dyz);
      for (int a = 0; a < 3; a++) begin
        dir[i][a] = DIR_W'(acc[a] >>> 8);
        avg[a]    = avg[a] + 48'(dir[i][a]);
      end
    end
    for (int a = 0; a < 3; a++) begin
      mag[a]     = avg[a][47] ? 48'(-avg[a]) : 48'(avg[a]);
      dir_neg[a] = avg[a][47];
    end
    if (mag[0] >= mag[1] && mag[0] >= mag[2])
      adorder = (mag[1] >= mag[2]) ? 3'd0 : 3'd1;
    else if (mag[1] >= mag[2])
      adorder = (mag[0] >= mag[2]) ? 3'd2 : 3'd3;
    else
      adorder = (mag[0] >= mag[1]) ? 3'd4 : 3'd5;
  end

endmodule
