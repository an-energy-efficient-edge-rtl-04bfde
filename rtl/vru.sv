// vru: volume rendering unit.
//
// Composites one sample per cycle into its ray, following the rendering equation
// C = sum_i T_i (1 - exp(-sigma_i delta_i)) c_i with T_{i+1} = T_i exp(-sigma_i
// delta_i). The sample's density sigma is taken as the optical depth of one
// marching step in Q4.4, so exp(-sigma) = 2^(-sigma*log2(e)); the power of two is
// split into an integer shift and a 16-entry table of 2^(-k/16) (entry k =
// round(65536 * 2^(-k/16))), interpolated linearly on the low four fraction
// bits. The new transmittance is T' = T * 2^(...), the sample's weight T - T', and each colour channel accumulates weight * c in 24 bits
// (the pixel value is the top 8 bits). T and the colour live in the RP buffer;
// this unit reads them combinationally and writes them back on the same clock.
// The table-and-shift exponential and the fixed-point formats are this design's
// choices.
//
// Timing: always ready; one sample per cycle, result written at the next edge.
module vru
  import edr_pkg::*;
(
  input  logic              in_valid,
  output logic              in_ready,
  input  smp_out_t          in_smp,
  // RP buffer port
  output logic [PTR_W-1:0]  rb_ptr,
  output logic [1:0]        rb_ray,
  input  logic [T_W-1:0]    rb_t,
  input  logic [2:0][23:0]  rb_c,
  output logic              rb_we,
  output logic [T_W-1:0]    rb_wt,
  output logic [2:0][23:0]  rb_wc
);

  localparam logic [16:0] EXP2 [16] = '{
    17'd65536, 17'd62757, 17'd60097, 17'd57549, 17'd55109, 17'd52773, 17'd50535, 17'd48393,
    17'd46341, 17'd44376, 17'd42495, 17'd40693, 17'd38968, 17'd37316, 17'd35734, 17'd34219};

  assign in_ready = 1'b1;
  assign rb_ptr   = in_smp.ptr;
  assign rb_ray   = in_smp.ray;
  assign rb_we    = in_valid;

  always_comb begin
    logic [15:0] e;       // sigma * log2(e), Q8.8
    logic [16:0] f;       // 2^(-e), Q1.16
    logic [16:0] lo, hi;  // table entries around the fraction of e
    logic [32:0] tn;
    logic [T_W-1:0] w;
    logic [7:0] c [3];
    e  = 16'((20'(in_smp.sigma) * 20'd369) >> 4);
    hi = EXP2[e[7:4]];
    lo = (e[7:4] == 4'd15) ? 17'd32768 : EXP2[e[7:4] + 4'd1];
    f  = hi - 17'((21'(hi - lo) * 21'(e[3:0])) >> 4);
    f  = (e[15:8] >= 8'd17) ? 17'd0 : (f >> e[15:8]);
    tn = 33'(rb_t) * 33'(f);
    rb_wt = T_W'(tn >> 16);
    w  = rb_t - rb_wt;
    c[0] = in_smp.r;
    c[1] = in_smp.g;
    c[2] = in_smp.b;
    for (int k = 0; k < 3; k++)
      rb_wc[k] = rb_c[k] + 24'(w) * 24'(c[k]);
  end

endmodule
