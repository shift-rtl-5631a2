// traffic_monitor: local congestion sensing and gossip bookkeeping of a UC.
//
// Local side: the router's total input-buffer occupancy is compared with two
// thresholds. The tile becomes congested when occupancy reaches HI and
// clears when it falls to LO or below (hysteresis). Every change of the
// local state, and additionally every PERIOD cycles (0 disables the periodic
// report), queues a gossip message {tile, congested, sequence number} for
// the UC to send to its neighbouring UCs.
//
// Remote side: a received gossip message (g_in_valid) updates the entry of
// its tile in the congested-tile map when its sequence number is newer than
// the one held; a newer message is also queued for forwarding, so a change
// floods the grid once and then stops. The map (congested) is what the SHIFT
// engine uses to mask congested tiles from path search and candidate lists.
//
// Queue: msg_valid/msg/msg_pop expose the head of a MSGQ-deep queue of
// outgoing messages; when the queue is full new messages are dropped (gossip
// is best effort; drops are counted).
//
// Follows the source: buffer-occupancy monitoring, event-driven broadcast on
// congestion thresholds, periodic compressed reports, distributed map with
// no central controller. Thresholds, hysteresis, sequence numbers and the
// forwarding rule are this design's choices.
module traffic_monitor
  import shift_pkg::*;
#(
  parameter int unsigned NT     = 36,
  parameter int unsigned HI     = 12,
  parameter int unsigned LO     = 4,
  parameter int unsigned PERIOD = 0,
  parameter int unsigned MSGQ   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TILE_W-1:0] my_tile,
  input  logic [7:0]        occupancy,
  input  logic              g_in_valid,
  input  logic [TILE_W-1:0] g_in_tile,
  input  logic              g_in_cong,
  input  logic [3:0]        g_in_seq,
  output logic              local_cong,
  output logic [NT-1:0]     congested,
  output logic              msg_valid,
  output logic [TILE_W+4:0] msg,        // {tile, cong, seq}
  input  logic              msg_pop,
  output logic [15:0]       n_events,
  output logic [15:0]       n_drops
);
  localparam int unsigned MW = TILE_W + 5;
  logic [3:0]  seq [NT];
  logic [3:0]  my_seq;
  logic        next_cong, change, newer, q_full, q_empty, push;
  logic [MW-1:0] push_msg;
  logic [31:0] tick;

  always_comb begin
    next_cong = local_cong;
    if (!local_cong && occupancy >= 8'(HI)) next_cong = 1'b1;
    if ( local_cong && occupancy <= 8'(LO)) next_cong = 1'b0;
    change = (next_cong != local_cong) || (PERIOD != 0 && tick == PERIOD - 1);
    newer  = g_in_valid && (int'(g_in_tile) < NT) && (g_in_tile != my_tile)
          && ((4'(g_in_seq - seq[g_in_tile]) != 4'd0) && (4'(g_in_seq - seq[g_in_tile]) < 4'd8));
    // the local event has priority; a forward lost in the same cycle is a drop
    push     = change || newer;
    push_msg = change ? {my_tile, next_cong, 4'(my_seq + 1'b1)}
                      : {g_in_tile, g_in_cong, g_in_seq};
  end

  logic [$clog2(MSGQ+1)-1:0] unused_count;
  sync_fifo #(.WIDTH(MW), .DEPTH(MSGQ)) u_q (
    .clk, .rst_n, .wr_en(push && !q_full), .wr_data(push_msg), .full(q_full),
    .rd_en(msg_pop && msg_valid), .rd_data(msg), .empty(q_empty), .count(unused_count)
  );
  assign msg_valid = !q_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      local_cong <= 1'b0; congested <= '0; my_seq <= '0; tick <= '0;
      n_events <= '0; n_drops <= '0;
      for (int i = 0; i < NT; i++) seq[i] <= '0;
    end else begin
      tick <= (PERIOD != 0 && tick == PERIOD - 1) ? '0 : tick + 1;
      local_cong <= next_cong;
      if (int'(my_tile) < NT) congested[my_tile] <= next_cong;
      if (change) begin
        my_seq <= my_seq + 1'b1;
        n_events <= n_events + 1'b1;
      end
      if (newer) begin
        seq[g_in_tile] <= g_in_seq;
        congested[g_in_tile] <= g_in_cong;
      end
      if ((push && q_full) || (change && newer)) n_drops <= n_drops + 1'b1;
    end
  end
endmodule
