// uc_router: the packet switch of a utility chiplet (UC).
//
// Thirteen ports: 0..8 are the short-range links to the chiplets of the UC's
// own 3x3 tile, indexed by their place in the tile (port 4 is the UC's own
// core, i.e. the SHIFT engine), and 9..12 are the long-range UC-to-UC links
// to the north, east, south and west neighbouring tiles. Every input has a
// FIFO; the head flit of each FIFO computes its output port, each output has
// a round-robin arbiter, and a crossbar moves the granted flit. A flit whose
// destination tile differs from this one is routed dimension-ordered (X
// first, then Y) over the long-range links; a flit for this tile leaves on
// the port of its destination place. One flit moves per output per cycle.
//
// Interface: valid/ready per port; a flit is accepted when in_valid and
// in_ready are both high, and leaves when out_valid and out_ready are both
// high. Latency through an idle router is one cycle (FIFO write, then
// combinational arbitration and crossbar). occupancy is the sum of all input
// FIFO fill levels, the buffer status the traffic monitor reads.
//
// Follows the source: input FIFOs, arbitration, crossbar, multi-range ports,
// dimension-ordered routing as the default route compute. This design's own
// choices: one virtual channel per port (the source draws VC0..VCn and uses
// escape VCs), single-flit packets, no output FIFO (the downstream input
// FIFO plays that role), no ECC stage and no burst bypass.
module uc_router
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X = 6,
  parameter int unsigned TILES_Y = 6,
  parameter int unsigned DEPTH   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TILE_W-1:0] my_tile,
  input  logic [12:0]       in_valid,
  input  flit_t             in_flit  [13],
  output logic [12:0]       in_ready,
  output logic [12:0]       out_valid,
  output flit_t             out_flit [13],
  input  logic [12:0]       out_ready,
  output logic [7:0]        occupancy
);
  localparam int unsigned P = 13;
  localparam int unsigned PORT_N = 9, PORT_E = 10, PORT_S = 11, PORT_W = 12;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  flit_t          head  [P];
  logic [P-1:0]   empty, full, pop;
  logic [CW-1:0]  cnt   [P];
  logic [3:0]     route [P];
  logic [P-1:0]   req   [P];   // req[o][i]
  logic [P-1:0]   gnt   [P];   // gnt[o][i]

  for (genvar i = 0; i < P; i++) begin : g_in
    sync_fifo #(.WIDTH(FLIT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en(in_valid[i] && !full[i]), .wr_data(in_flit[i]), .full(full[i]),
      .rd_en(pop[i]), .rd_data(head[i]), .empty(empty[i]), .count(cnt[i])
    );
    assign in_ready[i] = !full[i];
  end

  // Route compute: X first, then Y, then the local place
  function automatic logic [3:0] route_of(node_id_t dst, logic [TILE_W-1:0] me);
    int unsigned mx, my, dx, dy;
    mx = int'(me) % TILES_X;
    my = int'(me) / TILES_X;
    dx = int'(node_tile(dst)) % TILES_X;
    dy = int'(node_tile(dst)) / TILES_X;
    if (int'(node_tile(dst)) >= TILES_X * TILES_Y) return POS_UC;  // off-grid: core drops it
    else if (dx > mx) return 4'(PORT_E);
    else if (dx < mx) return 4'(PORT_W);
    else if (dy > my) return 4'(PORT_S);
    else if (dy < my) return 4'(PORT_N);
    else if (node_pos(dst) > 4'd8) return POS_UC;
    else return node_pos(dst);
  endfunction

  always_comb begin
    for (int i = 0; i < P; i++) route[i] = route_of(head[i].dst, my_tile);
    for (int o = 0; o < P; o++)
      for (int i = 0; i < P; i++)
        req[o][i] = !empty[i] && (route[i] == 4'(o));
  end

  for (genvar o = 0; o < P; o++) begin : g_out
    rr_arbiter #(.N(P)) u_arb (
      .clk, .rst_n, .req(req[o]), .adv(out_ready[o]), .gnt(gnt[o])
    );
    // crossbar
    always_comb begin
      out_valid[o] = |gnt[o];
      out_flit[o]  = head[0];
      for (int i = 0; i < P; i++)
        if (gnt[o][i]) out_flit[o] = head[i];
    end
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < P; o++)
      for (int i = 0; i < P; i++)
        if (gnt[o][i] && out_ready[o]) pop[i] = 1'b1;
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < P; i++) occupancy = occupancy + 8'(cnt[i]);
  end
endmodule
