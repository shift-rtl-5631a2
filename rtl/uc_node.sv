// uc_node: one utility chiplet (UC), the centre of a 3x3 tile.
//
// It joins the UC router to the SHIFT engine (with its traffic monitor,
// estimator and transaction table) through the router's core port, place 4.
// The other twelve router ports are the UC's ports: places 0..3 and 5..8 are
// short-range links to the FCs and MCs of the tile, ports 9..12 are the
// long-range links to the UCs of the north, east, south and west tiles. The
// router's buffer occupancy feeds the traffic monitor. Port 4 of the
// external arrays is unused (its inputs are ignored, its outputs idle).
//
// Follows the source's UC organisation: router pipeline with a core that
// makes routing and relocation decisions. The core is the hardwired engine.
module uc_node
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X = 6,
  parameter int unsigned TILES_Y = 6,
  parameter bit          MBW     = 1'b1,
  parameter int unsigned DEPTH   = 4,
  parameter int unsigned CONG_HI = 12,
  parameter int unsigned CONG_LO = 4,
  localparam int unsigned NT = TILES_X * TILES_Y
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
  output logic [NT-1:0]     congested,
  output logic [15:0]       stats [11]
);
  logic [12:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t       r_in_flit [13];
  flit_t       r_out_flit [13];
  logic [7:0]  occupancy;
  logic        e_in_ready, e_out_valid;
  flit_t       e_out_flit;

  always_comb begin
    for (int p = 0; p < 13; p++) begin
      r_in_valid[p]  = (p == 4) ? e_out_valid : in_valid[p];
      r_in_flit[p]   = (p == 4) ? e_out_flit  : in_flit[p];
      r_out_ready[p] = (p == 4) ? e_in_ready  : out_ready[p];
      in_ready[p]    = (p == 4) ? 1'b0 : r_in_ready[p];
      out_valid[p]   = (p == 4) ? 1'b0 : r_out_valid[p];
      out_flit[p]    = r_out_flit[p];
    end
  end

  uc_router #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .DEPTH(DEPTH)) u_router (
    .clk, .rst_n, .my_tile,
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_flit(r_out_flit), .out_ready(r_out_ready),
    .occupancy
  );

  shift_engine #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .MBW(MBW),
                 .CONG_HI(CONG_HI), .CONG_LO(CONG_LO)) u_engine (
    .clk, .rst_n, .my_tile, .occupancy,
    .in_valid(r_out_valid[4]), .in_flit(r_out_flit[4]), .in_ready(e_in_ready),
    .out_valid(e_out_valid), .out_flit(e_out_flit), .out_ready(r_in_ready[4]),
    .congested,
    .n_iip(stats[0]), .n_local_l1(stats[1]), .n_local_tile(stats[2]), .n_evaluated(stats[3]),
    .n_relocated(stats[4]), .n_rejected(stats[5]), .n_commit(stats[6]), .n_gossip_tx(stats[7]),
    .n_dropped(stats[8]), .n_cong_events(stats[9]), .n_searches(stats[10])
  );
endmodule
