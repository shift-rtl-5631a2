// tb_traffic_monitor: congestion hysteresis, gossip events and map updates.
//
// HI = 10, LO = 4, PERIOD = 0, own tile 5 of 9. Raises occupancy across HI,
// holds it between the thresholds, drops it to LO, and checks local_cong,
// the congested map bit of the own tile and that exactly one message
// {5, state, seq} is queued per crossing with increasing sequence numbers.
// Then feeds gossip: a newer message sets the map bit and is queued for
// forwarding, a repeated (same sequence) one changes nothing and queues
// nothing, an older one is ignored.
module tb_traffic_monitor;
  import shift_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [TILE_W-1:0] my_tile = 6'd5;
  logic [7:0] occupancy = '0;
  logic g_in_valid = 0, g_in_cong = 0;
  logic [TILE_W-1:0] g_in_tile = '0;
  logic [3:0] g_in_seq = '0;
  logic local_cong, msg_valid, msg_pop = 0;
  logic [8:0] congested;
  logic [TILE_W+4:0] msg;
  logic [15:0] n_events, n_drops;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  traffic_monitor #(.NT(9), .HI(10), .LO(4), .PERIOD(0), .MSGQ(4)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic expect_msg(logic [TILE_W+4:0] m, string what);
    chk(msg_valid && msg == m, what);
    msg_pop = 1; @(negedge clk); msg_pop = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    occupancy = 9;  repeat (3) @(negedge clk);
    chk(!local_cong && !msg_valid, "below HI");
    occupancy = 10; @(negedge clk);
    chk(local_cong && congested[5], "congested at HI");
    expect_msg({6'd5, 1'b1, 4'd1}, "event message 1");
    occupancy = 6; repeat (3) @(negedge clk);
    chk(local_cong && !msg_valid, "hysteresis holds");
    occupancy = 4; @(negedge clk);
    chk(!local_cong && !congested[5], "cleared at LO");
    expect_msg({6'd5, 1'b0, 4'd2}, "event message 2");
    chk(n_events == 2, "event count");
    // gossip from tile 2
    g_in_valid = 1; g_in_tile = 6'd2; g_in_cong = 1; g_in_seq = 4'd1;
    @(negedge clk); g_in_valid = 0;
    chk(congested[2], "gossip sets map");
    expect_msg({6'd2, 1'b1, 4'd1}, "gossip forwarded");
    g_in_valid = 1; @(negedge clk); g_in_valid = 0;
    chk(!msg_valid, "repeat not forwarded");
    g_in_valid = 1; g_in_cong = 0; g_in_seq = 4'd0; @(negedge clk); g_in_valid = 0;
    chk(congested[2] && !msg_valid, "older ignored");
    g_in_valid = 1; g_in_cong = 0; g_in_seq = 4'd2; @(negedge clk); g_in_valid = 0;
    chk(!congested[2], "newer clears");
    expect_msg({6'd2, 1'b0, 4'd2}, "second forward");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
