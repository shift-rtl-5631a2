// shift_noif_top: a wafer-scale grid of SHIFT tiles.
//
// TILES_X x TILES_Y tiles, each a 3x3 group of chiplets around a utility
// chiplet (UC). Place 4 of every tile is the UC (uc_node: router plus SHIFT
// engine), place 3 is the tile's memory chiplet (MC) and, when MBW = 1, the
// tiles in the right half of the grid are high-bandwidth tiles whose place 5
// is a second MC. All other places are functional chiplets (FCs), each with
// a fc_shift_agent. FCs and MCs connect to their UC by short-range links;
// neighbouring UCs connect by long-range links (ports 9..12 of each router).
// With the defaults (6 x 6 tiles, MBW) the grid has 36 UCs, 234 FCs and
// 54 MCs.
//
// Chiplet slot s = tile*9 + place indexes every per-chiplet port array; the
// entries of slots that are not of the port's kind are unused (inputs
// ignored, outputs zero). Per FC: the core's dispatch and execute
// handshakes and the scratchpad ports of fc_shift_agent. Per MC: the raw
// short-range link (flits to the MC on mc_rx_*, flits from it on mc_tx_*),
// since the HBM memory chiplet itself is outside this RTL. Per UC: its
// congestion map and its statistics counters.
//
// Follows the source's tile (seven FCs, one MC, one central UC; six FCs and
// two MCs in an HBD tile), its multi-range links and its MBW configuration
// with 36 UCs. This design's choices: FC-to-FC short-range links and the
// mid-range diagonal links are used by the path estimate but all traffic
// travels through the tile's UC router; the GPD/HBD split is by grid half.
module shift_noif_top
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X = 6,
  parameter int unsigned TILES_Y = 6,
  parameter bit          MBW     = 1'b1,
  parameter int unsigned DEPTH   = 4,
  parameter int unsigned CONG_HI = 12,
  parameter int unsigned CONG_LO = 4,
  localparam int unsigned NT = TILES_X * TILES_Y,
  localparam int unsigned NS = NT * 9
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // FC core side
  input  logic                 fc_issue_valid [NS],
  input  iip_t                 fc_issue_iip   [NS],
  output logic                 fc_issue_ready [NS],
  output logic                 fc_stalled     [NS],
  output logic                 fc_exec_valid  [NS],
  output iip_t                 fc_exec_iip    [NS],
  output logic [PAYLOAD_W-1:0] fc_exec_op0    [NS],
  output logic [PAYLOAD_W-1:0] fc_exec_op1    [NS],
  input  logic                 fc_exec_done   [NS],
  input  logic [PAYLOAD_W-1:0] fc_exec_result [NS],
  output logic                 fc_spad_rd_valid [NS],
  output logic [31:0]          fc_spad_rd_op    [NS],
  input  logic [PAYLOAD_W-1:0] fc_spad_rd_data  [NS],
  output logic                 fc_spad_wr_valid [NS],
  output tid_t                 fc_spad_wr_tid   [NS],
  output logic [PAYLOAD_W-1:0] fc_spad_wr_data  [NS],
  output logic [15:0]          fc_stats [NS][5],
  // MC short-range links
  output logic                 mc_rx_valid [NS],
  output flit_t                mc_rx_flit  [NS],
  input  logic                 mc_rx_ready [NS],
  input  logic                 mc_tx_valid [NS],
  input  flit_t                mc_tx_flit  [NS],
  output logic                 mc_tx_ready [NS],
  // UC status
  output logic [NT-1:0]        uc_congested [NT],
  output logic [15:0]          uc_stats [NT][11]
);
  function automatic bit is_hbd(int t);
    return MBW && ((t % TILES_X) >= (TILES_X / 2));
  endfunction
  function automatic bit is_mc(int t, int p);
    return (p == 3) || (p == 5 && is_hbd(t));
  endfunction

  // router port signals of every tile
  logic [12:0] r_in_valid  [NT];
  logic [12:0] r_in_ready  [NT];
  logic [12:0] r_out_valid [NT];
  logic [12:0] r_out_ready [NT];
  flit_t       r_in_flit   [NT][13];
  flit_t       r_out_flit  [NT][13];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    localparam int TX = t % TILES_X;
    localparam int TY = t / TILES_X;

    uc_node #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .MBW(MBW), .DEPTH(DEPTH),
              .CONG_HI(CONG_HI), .CONG_LO(CONG_LO)) u_uc (
      .clk, .rst_n, .my_tile(TILE_W'(t)),
      .in_valid(r_in_valid[t]), .in_flit(r_in_flit[t]), .in_ready(r_in_ready[t]),
      .out_valid(r_out_valid[t]), .out_flit(r_out_flit[t]), .out_ready(r_out_ready[t]),
      .congested(uc_congested[t]), .stats(uc_stats[t])
    );

    // long-range links: 9 N, 10 E, 11 S, 12 W
    if (TY > 0) begin : g_n
      assign r_in_valid[t][9]  = r_out_valid[t-TILES_X][11];
      assign r_in_flit[t][9]   = r_out_flit[t-TILES_X][11];
      assign r_out_ready[t][9] = r_in_ready[t-TILES_X][11];
    end else begin : g_n_edge
      assign r_in_valid[t][9]  = 1'b0;
      assign r_in_flit[t][9]   = '0;
      assign r_out_ready[t][9] = 1'b1;
    end
    if (TX < TILES_X - 1) begin : g_e
      assign r_in_valid[t][10]  = r_out_valid[t+1][12];
      assign r_in_flit[t][10]   = r_out_flit[t+1][12];
      assign r_out_ready[t][10] = r_in_ready[t+1][12];
    end else begin : g_e_edge
      assign r_in_valid[t][10]  = 1'b0;
      assign r_in_flit[t][10]   = '0;
      assign r_out_ready[t][10] = 1'b1;
    end
    if (TY < TILES_Y - 1) begin : g_s
      assign r_in_valid[t][11]  = r_out_valid[t+TILES_X][9];
      assign r_in_flit[t][11]   = r_out_flit[t+TILES_X][9];
      assign r_out_ready[t][11] = r_in_ready[t+TILES_X][9];
    end else begin : g_s_edge
      assign r_in_valid[t][11]  = 1'b0;
      assign r_in_flit[t][11]   = '0;
      assign r_out_ready[t][11] = 1'b1;
    end
    if (TX > 0) begin : g_w
      assign r_in_valid[t][12]  = r_out_valid[t-1][10];
      assign r_in_flit[t][12]   = r_out_flit[t-1][10];
      assign r_out_ready[t][12] = r_in_ready[t-1][10];
    end else begin : g_w_edge
      assign r_in_valid[t][12]  = 1'b0;
      assign r_in_flit[t][12]   = '0;
      assign r_out_ready[t][12] = 1'b1;
    end

    for (genvar p = 0; p < 9; p++) begin : g_place
      localparam int S = t * 9 + p;
      if (p == 4) begin : g_uc
        assign r_in_valid[t][p]  = 1'b0;
        assign r_in_flit[t][p]   = '0;
        assign r_out_ready[t][p] = 1'b1;
      end
      if (p != 4 && is_mc(t, p)) begin : g_mc
        assign mc_rx_valid[S]    = r_out_valid[t][p];
        assign mc_rx_flit[S]     = r_out_flit[t][p];
        assign r_out_ready[t][p] = mc_rx_ready[S];
        assign r_in_valid[t][p]  = mc_tx_valid[S];
        assign r_in_flit[t][p]   = mc_tx_flit[S];
        assign mc_tx_ready[S]    = r_in_ready[t][p];
      end else begin : g_no_mc
        assign mc_rx_valid[S] = 1'b0;
        assign mc_rx_flit[S]  = '0;
        assign mc_tx_ready[S] = 1'b0;
      end
      if (p != 4 && !is_mc(t, p)) begin : g_fc
        fc_shift_agent u_fc (
          .clk, .rst_n, .my_node(make_node(TILE_W'(t), POS_W'(p))),
          .issue_valid(fc_issue_valid[S]), .issue_iip(fc_issue_iip[S]),
          .issue_ready(fc_issue_ready[S]), .stalled(fc_stalled[S]),
          .exec_valid(fc_exec_valid[S]), .exec_iip(fc_exec_iip[S]),
          .exec_op('{fc_exec_op0[S], fc_exec_op1[S]}),
          .exec_done(fc_exec_done[S]), .exec_result(fc_exec_result[S]),
          .spad_rd_valid(fc_spad_rd_valid[S]), .spad_rd_op(fc_spad_rd_op[S]),
          .spad_rd_data(fc_spad_rd_data[S]),
          .spad_wr_valid(fc_spad_wr_valid[S]), .spad_wr_tid(fc_spad_wr_tid[S]),
          .spad_wr_data(fc_spad_wr_data[S]),
          .in_valid(r_out_valid[t][p]), .in_flit(r_out_flit[t][p]), .in_ready(r_out_ready[t][p]),
          .out_valid(r_in_valid[t][p]), .out_flit(r_in_flit[t][p]), .out_ready(r_in_ready[t][p]),
          .n_issued(fc_stats[S][0]), .n_exec_home(fc_stats[S][1]), .n_exec_hosted(fc_stats[S][2]),
          .n_shifted_away(fc_stats[S][3]), .n_killed(fc_stats[S][4])
        );
      end else begin : g_no_fc
        assign fc_issue_ready[S]   = 1'b0;
        assign fc_stalled[S]       = 1'b0;
        assign fc_exec_valid[S]    = 1'b0;
        assign fc_exec_iip[S]      = '0;
        assign fc_exec_op0[S]      = '0;
        assign fc_exec_op1[S]      = '0;
        assign fc_spad_rd_valid[S] = 1'b0;
        assign fc_spad_rd_op[S]    = '0;
        assign fc_spad_wr_valid[S] = 1'b0;
        assign fc_spad_wr_tid[S]   = '0;
        assign fc_spad_wr_data[S]  = '0;
        for (genvar k = 0; k < 5; k++) begin : g_z
          assign fc_stats[S][k] = '0;
        end
      end
    end
  end
endmodule
