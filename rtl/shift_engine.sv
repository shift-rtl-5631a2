// shift_engine: the relocation decision logic of a utility chiplet (UC).
//
// This is the SHIFT firmware of the UC router core built as hardware. It is
// attached to the router's core port (place 4 of the tile) and works on the
// flits addressed to the UC:
//   IIP     - pushed into the IIP reception FIFO;
//   COMMIT  - removes the instruction's entry from the transaction table;
//   GOSSIP  - handed to the traffic monitor (congestion map update).
// The decision pipeline takes one IIP at a time from the FIFO and
//   1. decodes it (iip_decoder) and drops it if malformed;
//   2. applies the memory-aware filter (reloc_predictor): an instruction
//      whose operand is in the source FC or its own tile executes locally;
//   3. otherwise runs the latency estimator over the candidate FCs: every FC
//      inside the bounding box of the source and operand locations, outside
//      congested tiles. MCs and congested tiles are masked from the search;
//   4. dispatches commands. Local: EXECUTE to the source. Relocation:
//      SHIFT_TO (aux = new FC) to the source FC, SHIFT_TO to each operand
//      holder, EXECUTE with the IIP as metadata to the new FC, then KILL to
//      the source FC. The entry is written into the transaction table.
// Between decisions it sends queued gossip messages to the UCs of the four
// neighbouring tiles. It waits (does not pop) while the table is full.
//
// Interface: flit valid/ready pair in from and out to the router core port.
// Timing: a local decision takes 4 cycles from FIFO head to EXECUTE; an
// evaluated one adds the estimator's run time (three searches per candidate).
// Counters report how often each path was taken.
//
// Follows the source's IIP handling, prediction and dispatch algorithms and
// its command names. This design's choices: commands leave one flit per
// cycle in the order listed, the candidate set is the bounding box of the
// participants, MBW = 1 makes the tiles in the right half of the grid
// high-bandwidth tiles with a second MC at place 5.
module shift_engine
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X   = 6,
  parameter int unsigned TILES_Y   = 6,
  parameter bit          MBW       = 1'b1,
  parameter int unsigned IIP_DEPTH = 8,
  parameter int unsigned TT_SIZE   = 16,
  parameter cost_t       MARGIN    = cost_t'(1),
  parameter cost_t       OVERHEAD  = cost_t'(1),
  parameter int unsigned CONG_HI   = 12,
  parameter int unsigned CONG_LO   = 4,
  parameter int unsigned PERIOD    = 0,
  localparam int unsigned NT = TILES_X * TILES_Y,
  localparam int unsigned GX = 3 * TILES_X,
  localparam int unsigned GY = 3 * TILES_Y,
  localparam int unsigned N  = GX * GY,
  localparam int unsigned GI_W = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TILE_W-1:0] my_tile,
  input  logic [7:0]        occupancy,
  input  logic              in_valid,
  input  flit_t             in_flit,
  output logic              in_ready,
  output logic              out_valid,
  output flit_t             out_flit,
  input  logic              out_ready,
  output logic [NT-1:0]     congested,
  output logic [15:0]       n_iip,
  output logic [15:0]       n_local_l1,
  output logic [15:0]       n_local_tile,
  output logic [15:0]       n_evaluated,
  output logic [15:0]       n_relocated,
  output logic [15:0]       n_rejected,
  output logic [15:0]       n_commit,
  output logic [15:0]       n_gossip_tx,
  output logic [15:0]       n_dropped,
  output logic [15:0]       n_cong_events,
  output logic [15:0]       n_searches
);
  // ---------------- grid helpers ----------------
  function automatic logic is_hbd_tile(int t);
    return MBW && ((t % TILES_X) >= (TILES_X / 2));
  endfunction

  function automatic logic is_mem_gidx(int g);
    int x, y, p, t;
    x = g % GX; y = g / GX;
    p = (y % 3) * 3 + (x % 3);
    t = (y / 3) * TILES_X + (x / 3);
    return (p == int'(POS_MC)) || (p == int'(POS_MC2) && is_hbd_tile(t));
  endfunction

  function automatic logic is_fc_gidx(int g);
    int x, y, p;
    x = g % GX; y = g / GX;
    p = (y % 3) * 3 + (x % 3);
    return (p != 4) && !is_mem_gidx(g);
  endfunction

  function automatic node_id_t node_of_gidx(logic [GI_W-1:0] g);
    int x, y;
    x = int'(g) % GX; y = int'(g) / GX;
    return make_node(TILE_W'((y / 3) * TILES_X + (x / 3)), POS_W'((y % 3) * 3 + (x % 3)));
  endfunction

  // ---------------- inbound demux ----------------
  logic            fifo_full, fifo_empty, fifo_pop;
  logic [IIP_W-1:0] fifo_head;
  logic            is_iip, is_commit, is_gossip;

  assign is_iip    = in_flit.ptype == PK_IIP;
  assign is_commit = in_flit.ptype == PK_COMMIT;
  assign is_gossip = in_flit.ptype == PK_GOSSIP;
  assign in_ready  = is_iip ? !fifo_full : 1'b1;

  logic [$clog2(IIP_DEPTH+1)-1:0] unused_fifo_count;
  sync_fifo #(.WIDTH(IIP_W), .DEPTH(IIP_DEPTH)) u_iip_fifo (
    .clk, .rst_n, .wr_en(in_valid && is_iip && !fifo_full), .wr_data(in_flit.payload[IIP_W-1:0]),
    .full(fifo_full), .rd_en(fifo_pop), .rd_data(fifo_head), .empty(fifo_empty), .count(unused_fifo_count)
  );

  // ---------------- traffic monitor ----------------
  logic              msg_valid, msg_pop;
  logic [TILE_W+4:0] msg;
  logic        unused_local_cong;
  logic [15:0] unused_n_drops;
  traffic_monitor #(.NT(NT), .HI(CONG_HI), .LO(CONG_LO), .PERIOD(PERIOD)) u_mon (
    .clk, .rst_n, .my_tile, .occupancy,
    .g_in_valid(in_valid && is_gossip), .g_in_tile(in_flit.payload[TILE_W+4:5]),
    .g_in_cong(in_flit.payload[4]), .g_in_seq(in_flit.payload[3:0]),
    .local_cong(unused_local_cong), .congested, .msg_valid, .msg, .msg_pop,
    .n_events(n_cong_events), .n_drops(unused_n_drops)
  );

  // ---------------- decision pipeline ----------------
  typedef enum logic [2:0] {E_IDLE, E_DEC, E_EST, E_DECIDE, E_SEND, E_GOSSIP} state_e;
  state_e state;

  logic [IIP_W-1:0] cur_raw;
  iip_t             iip;
  node_id_t         src_node, wb_node, op_home [2];
  logic [1:0]       op_used;
  logic [GI_W-1:0]  src_gidx, op_gidx [2];
  logic             well_formed;

  iip_decoder #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_dec (
    .raw(cur_raw), .iip, .src_node, .wb_node, .op_used, .op_home,
    .src_gidx, .op_gidx, .well_formed
  );

  logic            est_start, est_busy, est_done;
  cost_t           c_base, c_shift;
  logic [GI_W-1:0] best_gidx;
  logic [15:0]     est_searches;
  logic [N-1:0]    cand, mask;
  node_id_t        best_node;
  pred_e           pred;
  logic            relocate;

  assign best_node = node_of_gidx(best_gidx);

  reloc_predictor #(.MARGIN(MARGIN)) u_pred (
    .src_node, .op_used, .op_home, .c_shift, .c_base, .best_node, .pred, .relocate
  );

  // candidate FCs and masked nodes
  always_comb begin
    int x0, x1, y0, y1, sx, sy, ox, oy;
    logic [TILE_W-1:0] t;
    sx = int'(src_gidx) % GX; sy = int'(src_gidx) / GX;
    x0 = sx; x1 = sx; y0 = sy; y1 = sy;
    ox = 0; oy = 0; t = '0;
    mask = '0;
    cand = '0;
    for (int k = 0; k < 2; k++) begin
      ox = int'(op_gidx[k]) % GX;
      oy = int'(op_gidx[k]) / GX;
      if (op_used[k] && ox < x0) x0 = ox;
      if (op_used[k] && ox > x1) x1 = ox;
      if (op_used[k] && oy < y0) y0 = oy;
      if (op_used[k] && oy > y1) y1 = oy;
    end
    for (int g = 0; g < N; g++) begin
      t = TILE_W'(((g / GX) / 3) * TILES_X + ((g % GX) / 3));
      mask[g] = is_mem_gidx(g) || congested[t];
      cand[g] = is_fc_gidx(g) && !congested[t]
             && ((g % GX) >= x0) && ((g % GX) <= x1) && ((g / GX) >= y0) && ((g / GX) <= y1);
    end
  end

  latency_estimator #(.TILES_X(TILES_X), .TILES_Y(TILES_Y), .OVERHEAD(OVERHEAD)) u_est (
    .clk, .rst_n, .start(est_start), .src(src_gidx), .op_used, .op_loc(op_gidx),
    .cand, .mask, .busy(est_busy), .done(est_done), .c_base, .c_shift,
    .best_node(best_gidx), .searches(est_searches)
  );

  // ---------------- transaction table ----------------
  logic     tt_ins, tt_ok, tt_full, tt_hit;
  node_id_t exec_node;
  logic     do_reloc;
  node_id_t unused_rem_exec;
  logic [$clog2(TT_SIZE+1)-1:0] unused_tt_used;
  transaction_table #(.ENTRIES(TT_SIZE)) u_tt (
    .clk, .rst_n, .ins(tt_ins), .ins_tid(iip.instr_id), .ins_src(src_node),
    .ins_exec(exec_node), .ins_reloc(do_reloc), .ins_ok(tt_ok),
    .rem(in_valid && is_commit), .rem_tid(in_flit.tid), .rem_hit(tt_hit), .rem_exec(unused_rem_exec),
    .used(unused_tt_used), .full(tt_full)
  );

  // ---------------- command list ----------------
  // 0: SHIFT_TO src, 1: SHIFT_TO op0 holder, 2: SHIFT_TO op1 holder,
  // 3: EXECUTE exec_node, 4: KILL src
  logic [2:0]  cmd;
  logic [4:0]  cmd_need;
  flit_t       cmd_flit;
  logic [1:0]  g_dir;
  logic [TILE_W+4:0] g_msg;

  always_comb begin
    cmd_need = do_reloc ? {1'b1, 1'b1, op_used[1], op_used[0], 1'b1} : 5'b01000;
    cmd_flit = '0;
    cmd_flit.src = make_node(my_tile, POS_UC);
    cmd_flit.tid = iip.instr_id;
    cmd_flit.aux = exec_node;
    cmd_flit.payload[IIP_W-1:0] = cur_raw;
    case (cmd)
      3'd0:    begin cmd_flit.ptype = PK_SHIFT_TO; cmd_flit.dst = src_node; end
      3'd1:    begin cmd_flit.ptype = PK_SHIFT_TO; cmd_flit.dst = op_home[0];
                     cmd_flit.payload[IIP_W-1:0] = IIP_W'({iip.op0_len, iip.op0_off, iip.op0_id}); end
      3'd2:    begin cmd_flit.ptype = PK_SHIFT_TO; cmd_flit.dst = op_home[1];
                     cmd_flit.payload[IIP_W-1:0] = IIP_W'({1'b1, iip.op1_len, iip.op1_off, iip.op1_id}); end
      3'd3:    begin cmd_flit.ptype = PK_EXECUTE;  cmd_flit.dst = exec_node; end
      default: begin cmd_flit.ptype = PK_KILL;     cmd_flit.dst = src_node; end
    endcase
  end

  // neighbour UC for gossip direction g_dir (0 N, 1 E, 2 S, 3 W); valid flag
  function automatic logic [TILE_W:0] nbr(logic [TILE_W-1:0] t, logic [1:0] d);
    int tx, ty;
    tx = int'(t) % TILES_X; ty = int'(t) / TILES_X;
    case (d)
      2'd0: return {ty > 0,           TILE_W'(t - TILES_X)};
      2'd1: return {tx < TILES_X - 1, TILE_W'(t + 1)};
      2'd2: return {ty < TILES_Y - 1, TILE_W'(t + TILES_X)};
      default: return {tx > 0,        TILE_W'(t - 1)};
    endcase
  endfunction

  logic [TILE_W:0] g_nb;
  assign g_nb = nbr(my_tile, g_dir);

  always_comb begin
    out_valid = 1'b0;
    out_flit  = cmd_flit;
    if (state == E_SEND) begin
      out_valid = cmd_need[cmd];
    end else if (state == E_GOSSIP) begin
      out_valid = g_nb[TILE_W];
      out_flit  = '0;
      out_flit.ptype = PK_GOSSIP;
      out_flit.src   = make_node(my_tile, POS_UC);
      out_flit.dst   = make_node(g_nb[TILE_W-1:0], POS_UC);
      out_flit.payload[TILE_W+4:0] = g_msg;
    end
  end

  assign fifo_pop  = (state == E_IDLE) && !fifo_empty && !tt_full;
  assign est_start = (state == E_DEC) && well_formed && (pred == DEC_EVALUATE);
  assign tt_ins    = (state == E_SEND) && (cmd == 3'd4 || !do_reloc) && (!cmd_need[cmd] || out_ready);
  assign msg_pop   = (state == E_IDLE) && fifo_empty && msg_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; cur_raw <= '0; cmd <= '0; do_reloc <= 1'b0; exec_node <= '0;
      g_dir <= '0; g_msg <= '0;
      n_iip <= '0; n_local_l1 <= '0; n_local_tile <= '0; n_evaluated <= '0;
      n_relocated <= '0; n_rejected <= '0; n_commit <= '0; n_gossip_tx <= '0;
      n_dropped <= '0; n_searches <= '0;
    end else begin
      if (in_valid && is_commit && tt_hit) n_commit <= n_commit + 1'b1;
      case (state)
        E_IDLE: begin
          if (fifo_pop) begin
            cur_raw <= fifo_head;
            n_iip   <= n_iip + 1'b1;
            state   <= E_DEC;
          end else if (msg_pop) begin
            g_msg <= msg; g_dir <= 2'd0;
            state <= E_GOSSIP;
          end
        end
        E_DEC: begin
          exec_node <= src_node;
          do_reloc  <= 1'b0;
          cmd       <= 3'd3;
          if (!well_formed) begin
            n_dropped <= n_dropped + 1'b1;
            state <= E_IDLE;
          end else if (pred == DEC_LOCAL_L1) begin
            n_local_l1 <= n_local_l1 + 1'b1;
            state <= E_SEND;
          end else if (pred == DEC_LOCAL_TILE) begin
            n_local_tile <= n_local_tile + 1'b1;
            state <= E_SEND;
          end else begin
            n_evaluated <= n_evaluated + 1'b1;
            state <= E_EST;
          end
        end
        E_EST: if (est_done) begin
          n_searches <= n_searches + est_searches;
          state <= E_DECIDE;
        end
        E_DECIDE: begin
          if (relocate) begin
            do_reloc  <= 1'b1;
            exec_node <= best_node;
            cmd       <= 3'd0;
            n_relocated <= n_relocated + 1'b1;
          end else begin
            n_rejected <= n_rejected + 1'b1;
          end
          state <= E_SEND;
        end
        E_SEND: begin
          if (!cmd_need[cmd] || out_ready) begin
            if (!do_reloc || cmd == 3'd4) state <= E_IDLE;
            else cmd <= cmd + 1'b1;
          end
        end
        E_GOSSIP: begin
          if (!g_nb[TILE_W] || out_ready) begin
            if (g_nb[TILE_W]) n_gossip_tx <= n_gossip_tx + 1'b1;
            if (g_dir == 2'd3) state <= E_IDLE;
            g_dir <= g_dir + 1'b1;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // a relocation always notifies the source, starts the new FC and kills the copy
  always_comb
    if (rst_n && state == E_SEND && do_reloc)
      a_cmd_order: assert (cmd_need[0] && cmd_need[3] && cmd_need[4]);

  // IIP fields and flit fields the engine does not use for its decision
  logic unused_fields;
  assign unused_fields = ^{iip, wb_node, est_busy, tt_ok, in_flit};
endmodule
