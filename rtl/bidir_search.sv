// bidir_search: bidirectional shortest-path search between two chiplets.
//
// Hardware form of the modified shortest-path algorithm. The network map is
// the chiplet mesh of a TILES_X x TILES_Y grid of 3x3 tiles (GX x GY nodes,
// flat index y*GX+x). Its edges are the three link ranges: short-range links
// between every pair of orthogonally adjacent chiplets, mid-range diagonal
// links from each tile's central UC to the four corner chiplets of its tile,
// and long-range links between the UCs of orthogonally adjacent tiles.
//
// On start the search forms the subgraph: the nodes inside the bounding box
// that has src and dst on opposite corners, minus the nodes set in mask (MCs
// and congested nodes; src and dst themselves are never masked). It then
// keeps two visited sets, one grown from src and one from dst. Every cycle
// it expands the src side by one hop and checks it against the dst side, then
// expands the dst side by one hop and checks again, all in one clock. The
// first common node is the intersection (inter_node) and the hop count of
// the path through it is the returned latency estimate. If either frontier
// runs dry first the search fails (found = 0, hops = all ones).
//
// Timing: start is a one-cycle pulse while idle (busy = 0); done pulses one
// cycle after the last expansion, about ceil(distance/2)+1 cycles after
// start (2 cycles if src == dst).
//
// Follows the source: subgraph extraction by bounding box, masked nodes,
// parallel one-hop expansion from both ends, stop at the first intersection.
// This design's choices: edge cost is one hop for every link range (the
// source's per-range link latencies are not applied), and the path itself is
// not stored, only its length and intersection node.
module bidir_search
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X = 6,
  parameter int unsigned TILES_Y = 6,
  localparam int unsigned GX = 3 * TILES_X,
  localparam int unsigned GY = 3 * TILES_Y,
  localparam int unsigned N  = GX * GY,
  localparam int unsigned GI_W = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [GI_W-1:0] src,
  input  logic [GI_W-1:0] dst,
  input  logic [N-1:0]    mask,
  output logic            busy,
  output logic            done,
  output logic            found,
  output cost_t           hops,
  output logic [GI_W-1:0] inter_node
);
  logic [N-1:0] allow, vis_s, vis_d, fr_s, fr_d;
  cost_t        hs, hd;

  // One-hop expansion of a frontier over the three link ranges
  function automatic logic [N-1:0] expand(logic [N-1:0] f);
    logic [N-1:0] r;
    r = '0;
    for (int y = 0; y < GY; y++) begin
      for (int x = 0; x < GX; x++) begin
        int i;
        logic uc, corner;
        i = y * GX + x;
        uc     = (x % 3 == 1) && (y % 3 == 1);
        corner = (x % 3 != 1) && (y % 3 != 1);
        if (x > 0      && f[i-1])  r[i] = 1'b1;
        if (x < GX - 1 && f[i+1])  r[i] = 1'b1;
        if (y > 0      && f[i-GX]) r[i] = 1'b1;
        if (y < GY - 1 && f[i+GX]) r[i] = 1'b1;
        if (uc) begin
          if (f[i-GX-1] || f[i-GX+1] || f[i+GX-1] || f[i+GX+1]) r[i] = 1'b1;
          if (x >= 3      && f[i-3])    r[i] = 1'b1;
          if (x + 3 < GX  && f[i+3])    r[i] = 1'b1;
          if (y >= 3      && f[i-3*GX]) r[i] = 1'b1;
          if (y + 3 < GY  && f[i+3*GX]) r[i] = 1'b1;
        end
        if (corner) begin
          logic [GI_W-1:0] u;
          u = GI_W'(((y / 3) * 3 + 1) * GX + (x / 3) * 3 + 1);
          if (f[u]) r[i] = 1'b1;
        end
      end
    end
    return r;
  endfunction

  function automatic logic [GI_W-1:0] lowest(logic [N-1:0] v);
    logic [GI_W-1:0] r;
    r = '0;
    for (int i = N - 1; i >= 0; i--) if (v[i]) r = GI_W'(i);
    return r;
  endfunction

  // Bounding-box subgraph minus masked nodes; the endpoints always stay in
  function automatic logic [N-1:0] subgraph(logic [GI_W-1:0] a, logic [GI_W-1:0] b,
                                            logic [N-1:0] m);
    logic [N-1:0] r;
    int ax, ay, bx, by, x0, x1, y0, y1;
    ax = int'(a) % GX; ay = int'(a) / GX;
    bx = int'(b) % GX; by = int'(b) / GX;
    x0 = (ax < bx) ? ax : bx;  x1 = (ax < bx) ? bx : ax;
    y0 = (ay < by) ? ay : by;  y1 = (ay < by) ? by : ay;
    for (int y = 0; y < GY; y++)
      for (int x = 0; x < GX; x++)
        r[y*GX+x] = (x >= x0) && (x <= x1) && (y >= y0) && (y <= y1) && !m[y*GX+x];
    r[a] = 1'b1;
    r[b] = 1'b1;
    return r;
  endfunction

  logic [N-1:0] ns, nd, vs1, vd1;
  logic         hit1, hit2;
  always_comb begin
    ns   = expand(fr_s) & allow & ~vis_s;
    vs1  = vis_s | ns;
    hit1 = |(vs1 & vis_d);
    nd   = expand(fr_d) & allow & ~vis_d;
    vd1  = vis_d | nd;
    hit2 = |(vs1 & vd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; found <= 1'b0; hops <= '0; inter_node <= '0;
      allow <= '0; vis_s <= '0; vis_d <= '0; fr_s <= '0; fr_d <= '0; hs <= '0; hd <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          if (src == dst) begin
            done <= 1'b1; found <= 1'b1; hops <= '0; inter_node <= src;
          end else begin
            busy  <= 1'b1;
            allow <= subgraph(src, dst, mask);
            vis_s <= N'(1) << src;  fr_s <= N'(1) << src;
            vis_d <= N'(1) << dst;  fr_d <= N'(1) << dst;
            hs <= '0; hd <= '0;
          end
        end
      end else begin
        if (hit1) begin
          busy <= 1'b0; done <= 1'b1; found <= 1'b1;
          hops <= hs + hd + 1'b1;
          inter_node <= lowest(vs1 & vis_d);
        end else if (hit2) begin
          busy <= 1'b0; done <= 1'b1; found <= 1'b1;
          hops <= hs + hd + cost_t'(2);
          inter_node <= lowest(vs1 & vd1);
        end else if (ns == '0 || nd == '0) begin
          busy <= 1'b0; done <= 1'b1; found <= 1'b0; hops <= COST_INF;
        end else begin
          vis_s <= vs1; fr_s <= ns; hs <= hs + 1'b1;
          vis_d <= vd1; fr_d <= nd; hd <= hd + 1'b1;
        end
      end
    end
  end
endmodule
