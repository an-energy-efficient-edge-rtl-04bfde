// tsps: traversal starting point searcher.
//
// For the rays of a packet that hit the bounding box, finds the first integer
// step t at which the ray position o + t*d has passed every entry plane of the
// box, by binary search: the predicate "all entry planes passed" is monotonic in
// t, so the largest failing t is built one bit per cycle from the most
// significant bit down (TB cycles per packet, the four rays in parallel). The
// ray position at the found step is the packet's traversal start; a ray whose
// start point does not lie inside the box (the integer step overshot a thin box)
// is dropped. The paper names the binary search; the integer-step predicate and
// its width are this design's choices.
//
// Interface: one packet in (valid/ready), one packet out (valid/ready) TB+1
// cycles. The pixel coordinates and directions pass through with the result.
module tsps
  import edr_pkg::*;
#(
  parameter int TB = 12
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  vec3p_t                        org,
  input  aabb_t                         box,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [NRAY-1:0]               in_hit,
  input  vec3d_t [NRAY-1:0]             in_dir,
  input  logic [NRAY-1:0][COORD_W-1:0]  in_x,
  input  logic [NRAY-1:0][COORD_W-1:0]  in_y,
  input  logic [2:0]                    in_adorder,
  input  logic [2:0]                    in_dneg,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [NRAY-1:0]               out_alive,
  output vec3p_t [NRAY-1:0]             out_pos,
  output vec3d_t [NRAY-1:0]             out_dir,
  output logic [NRAY-1:0][COORD_W-1:0]  out_x,
  output logic [NRAY-1:0][COORD_W-1:0]  out_y,
  output logic [2:0]                    out_adorder,
  output logic [2:0]                    out_dneg
);

  typedef enum logic [1:0] {IDLE, SEARCH, OUT} st_e;
  st_e st;
  logic [$clog2(TB+1)-1:0] bitn;
  logic [NRAY-1:0][TB-1:0] lfail;
  logic [NRAY-1:0]         hit_q;

  function automatic vec3p_t pos_at(vec3p_t o, vec3d_t d, logic [TB:0] t);
    vec3p_t p;
    for (int a = 0; a < 3; a++)
      p[a] = POS_W'(32'(o[a]) + 32'(signed'({1'b0, t})) * 32'(d[a]));
    return p;
  endfunction

  // all entry planes passed at step t (full-width arithmetic, no wrap-around)
  function automatic logic passed(vec3p_t o, vec3d_t d, aabb_t b, logic [TB:0] t);
    logic signed [39:0] p;
    logic ok;
    ok = 1'b1;
    for (int a = 0; a < 3; a++) begin
      p = 40'(o[a]) + 40'(signed'({1'b0, t})) * 40'(d[a]);
      if (d[a] > 0 && p < 40'(b.lo[a])) ok = 1'b0;
      if (d[a] < 0 && p >= 40'(b.hi[a])) ok = 1'b0;
    end
    return ok;
  endfunction

  assign in_ready  = (st == IDLE);
  assign out_valid = (st == OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= IDLE;
      bitn  <= '0;
      lfail <= '0;
      hit_q <= '0;
    end else begin
      unique case (st)
        IDLE: if (in_valid) begin
          st          <= SEARCH;
          bitn        <= ($clog2(TB+1))'(TB);
          lfail       <= '0;
          hit_q       <= in_hit;
          out_dir     <= in_dir;
          out_x       <= in_x;
          out_y       <= in_y;
          out_adorder <= in_adorder;
          out_dneg    <= in_dneg;
        end
        SEARCH: begin
          if (bitn == 0) begin
            for (int r = 0; r < NRAY; r++) begin
              logic [TB:0] t;
              t = passed(org, out_dir[r], box, '0) ? '0 : {1'b0, lfail[r]} + 1'b1;
              out_pos[r]   <= pos_at(org, out_dir[r], t);
              out_alive[r] <= hit_q[r] && inside_box(pos_at(org, out_dir[r], t), box);
            end
            st <= OUT;
          end else begin
            for (int r = 0; r < NRAY; r++) begin
              logic [TB-1:0] cand;
              cand = lfail[r] | (TB'(1) << (bitn - 1'b1));
              if (!passed(org, out_dir[r], box, {1'b0, cand})) lfail[r] <= cand;
            end
            bitn <= bitn - 1'b1;
          end
        end
        OUT: if (out_ready) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

endmodule
