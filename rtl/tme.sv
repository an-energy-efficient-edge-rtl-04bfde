// tme: tiny MLP engine.
//
// Turns the interpolated feature vector of a sample into its colour and density
// with a small fully connected network, one network per coarse voxel (CV) as in
// the paper's KiloNeRF-like spatial partitioning: the CV tag of the sample selects
// the weight set. The network here is NFV inputs -> NH hidden units (ReLU) -> 4
// outputs (r, g, b, sigma), INT8 weights and biases; its size, the fixed-point
// scaling (accumulators shifted right by 8 and clamped to 0..255) and the absence
// of the view-direction input are this design's choices, the paper gives no
// network shape.
//
// Weight memory: WPC 128-bit words per CV, written by the host (wt_*):
//   word i      (0..NFV-1) : byte j = W1[j][i]       (input i to hidden j)
//   word NFV               : byte j = B1[j]
//   word NFV+1+j (j<NH)    : byte o = W2[o][j]       (hidden j to output o)
//   word NFV+1+NH          : byte o = B2[o]
// A bias counts 256 times its value (it is added before the shift).
//
// Timing: one MAC row per cycle, NFV + 1 + NH + 1 cycles per sample, then the
// result waits on out_valid/out_ready. in_ready is high only when idle.
module tme
  import edr_pkg::*;
#(
  parameter int NH  = 16,
  parameter int NCV = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wt_we,
  input  logic [CVTAG_W-1:0]    wt_cv,
  input  logic [5:0]            wt_word,
  input  logic [127:0]          wt_data,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  ifv_pkt_t              in_pkt,
  output logic                  out_valid,
  input  logic                  out_ready,
  output smp_out_t              out
);

  localparam int WPC = NFV + 1 + NH + 1;

  logic [127:0] wmem [NCV * WPC];

  always_ff @(posedge clk)
    if (wt_we && int'(wt_word) < WPC)
      wmem[int'(wt_cv) * WPC + int'(wt_word)] <= wt_data;

  typedef enum logic [1:0] {IDLE, RUN, OUT} st_e;
  st_e st;
  logic [5:0]                     step;
  ifv_pkt_t                       pkt;
  logic signed [31:0]             acc1 [NH];
  logic signed [31:0]             acc2 [4];
  logic [7:0]                     h    [NH];
  logic [127:0]                   word;

  assign word     = wmem[int'(pkt.cvtag) * WPC + int'(step)];
  assign in_ready = (st == IDLE);
  assign out_valid = (st == OUT);

  function automatic logic [7:0] clamp8(logic signed [31:0] v);
    logic signed [31:0] s;
    s = v >>> 8;
    if (s < 0) return 8'd0;
    if (s > 255) return 8'd255;
    return s[7:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= IDLE;
      step <= '0;
      pkt  <= '0;
      out  <= '0;
      for (int j = 0; j < NH; j++) begin acc1[j] <= '0; h[j] <= '0; end
      for (int o = 0; o < 4; o++) acc2[o] <= '0;
    end else begin
      unique case (st)
        IDLE: if (in_valid) begin
          pkt  <= in_pkt;
          step <= '0;
          for (int j = 0; j < NH; j++) acc1[j] <= '0;
          for (int o = 0; o < 4; o++) acc2[o] <= '0;
          st   <= RUN;
        end
        RUN: begin
          if (int'(step) < NFV) begin
            for (int j = 0; j < NH; j++)
              acc1[j] <= acc1[j] + 32'($signed(word[j*8 +: 8])) *
                                   32'($signed(pkt.ifv[step[3:0]]));
          end else if (int'(step) == NFV) begin
            for (int j = 0; j < NH; j++)
              h[j] <= clamp8(acc1[j] + (32'($signed(word[j*8 +: 8])) <<< 8));
          end else if (int'(step) < NFV + 1 + NH) begin
            for (int o = 0; o < 4; o++)
              acc2[o] <= acc2[o] + 32'($signed(word[o*8 +: 8])) *
                                   32'($signed({1'b0, h[int'(step) - NFV - 1]}));
          end else begin
            out.ptr   <= pkt.ptr;
            out.ray   <= pkt.ray;
            out.r     <= clamp8(acc2[0] + (32'($signed(word[7:0])) <<< 8));
            out.g     <= clamp8(acc2[1] + (32'($signed(word[15:8])) <<< 8));
            out.b     <= clamp8(acc2[2] + (32'($signed(word[23:16])) <<< 8));
            out.sigma <= clamp8(acc2[3] + (32'($signed(word[31:24])) <<< 8));
            st        <= OUT;
          end
          step <= step + 6'd1;
        end
        OUT: if (out_ready) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

endmodule
