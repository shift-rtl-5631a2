// tb_uc_node: checks a UC (router plus SHIFT engine) through its ports.
//
// 3 x 3 tiles, the node is tile 0 (a corner), congestion thresholds 10/4. The
// testbench plays the tile's FCs and MCs on places 0..8 and the
// neighbouring UCs on the east and south ports. It checks that:
//   - an IIP from an FC whose operand is in its own tile comes back as a
//     single EXECUTE on that FC's port (local-preferred path);
//   - an IIP whose operands are in the east neighbour tile or the far corner
//     tile is evaluated and either
//     rejected (one EXECUTE to the source) or relocated (SHIFT_TO to the
//     source, SHIFT_TO to each holder, EXECUTE to the new FC, KILL to the
//     source), every flit on the port that XY routing selects;
//   - COMMIT from the executing FC is counted;
//   - gossip arriving on the east port sets that tile's congestion bit and
//     is forwarded;
//   - holding one output port busy while flits pile up raises the router
//     occupancy over the threshold, and the node then sends a congestion
//     gossip message to the east and south UCs.
module tb_uc_node;
  import shift_pkg::*;
  localparam int TX = 3, TY = 3, NT = 9;

  logic clk = 0, rst_n = 0;
  logic [12:0] in_valid = '0, in_ready, out_valid, out_ready = '1;
  flit_t in_flit [13];
  flit_t out_flit [13];
  logic [NT-1:0] congested;
  logic [15:0] stats [11];
  int checks = 0, failures = 0;
  flit_t got [13][$];
  int n_local = 0, n_reloc = 0, n_rej = 0;

  always #5 clk = ~clk;

  uc_node #(.TILES_X(TX), .TILES_Y(TY), .MBW(1'b1), .DEPTH(4), .CONG_HI(10), .CONG_LO(4))
    dut (.clk, .rst_n, .my_tile(6'd0), .in_valid, .in_flit, .in_ready, .out_valid,
         .out_flit, .out_ready, .congested, .stats);

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int p = 0; p < 13; p++) if (out_valid[p] && out_ready[p]) got[p].push_back(out_flit[p]);

  function automatic int port_for(node_id_t d);
    int t;
    t = int'(d[9:4]);
    if (t % TX > 0) return 10;
    if (t / TX > 0) return 11;
    return int'(d[3:0]);
  endfunction

  task automatic send(int p, flit_t f);
    @(negedge clk);
    in_flit[p] = f; in_valid[p] = 1;
    #1;
    while (!in_ready[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid[p] = 0;
  endtask

  task automatic take(int p, output flit_t f);
    int w;
    w = 0;
    while (got[p].size() == 0 && w < 5000) begin @(negedge clk); w++; end
    checks++;
    if (got[p].size() == 0) begin failures++; $display("FAIL nothing on port %0d", p); f = '0; end
    else f = got[p].pop_front();
  endtask

  task automatic expect_on(pkt_type_e t, node_id_t d, tid_t id, string what);
    flit_t f;
    take(port_for(d), f);
    checks++;
    if (f.ptype != t || f.dst != d || f.tid != id) begin
      failures++;
      $display("FAIL %s: type %0d dst %h tid %0d exp type %0d dst %h", what, f.ptype, f.dst, f.tid, t, d);
    end
  endtask

  task automatic one(int k, bit far);
    iip_t p;
    flit_t f;
    int place;
    logic [15:0] rel0, rej0;
    logic [5:0] ot;
    do place = $urandom % 9; while (place == 3 || place == 4);
    p = '0;
    p.instr_id = tid_t'(k + 1);
    p.src_fc_id = {6'd0, 4'(place)};
    p.src_uc_id = 6'd1;
    p.dst_fc_id = p.src_fc_id;
    ot = (k % 3 == 1) ? 6'd1 : 6'd8;   // neighbour tile or far corner tile
    if (far) begin
      p.op0_id = {ot, 4'd3, 2'd0}; p.op0_len = 8'd4;
      if ($urandom % 2) begin p.op1_id = {ot, 4'd7, 2'd1}; p.op1_len = 8'd2; end
    end else begin
      p.op0_id = {6'd0, 4'd3, 2'd0}; p.op0_len = 8'd4;
    end
    rel0 = stats[4]; rej0 = stats[5];
    f = '0; f.ptype = PK_IIP; f.dst = {6'd0, 4'd4}; f.src = p.src_fc_id; f.tid = p.instr_id;
    f.payload[IIP_W-1:0] = p;
    send(place, f);
    if (!far) begin
      expect_on(PK_EXECUTE, p.src_fc_id, p.instr_id, "local EXECUTE");
      n_local++;
    end else begin
      // wait for the decision
      repeat (20000) begin
        @(negedge clk);
        if (stats[4] != rel0 || stats[5] != rej0) break;
      end
      checks++;
      if (stats[4] != rel0) begin
        flit_t e;
        n_reloc++;
        take(place, e);
        checks++;
        if (e.ptype != PK_SHIFT_TO || e.dst != p.src_fc_id) begin
          failures++; $display("FAIL first relocation command");
        end
        expect_on(PK_SHIFT_TO, {ot, 4'd3}, p.instr_id, "SHIFT_TO op0 holder");
        if (p.op1_id != 0) expect_on(PK_SHIFT_TO, {ot, 4'd7}, p.instr_id, "SHIFT_TO op1 holder");
        expect_on(PK_EXECUTE, e.aux, p.instr_id, "EXECUTE at new FC");
        expect_on(PK_KILL, p.src_fc_id, p.instr_id, "KILL");
        checks++;
        if (e.aux == p.src_fc_id || e.aux[3:0] == 4'd4 || e.aux[3:0] == 4'd3) begin
          failures++; $display("FAIL relocation target %h", e.aux);
        end
      end else if (stats[5] != rej0) begin
        n_rej++;
        expect_on(PK_EXECUTE, p.src_fc_id, p.instr_id, "rejected EXECUTE");
      end else begin
        failures++; $display("FAIL no decision for far IIP");
      end
    end
    // the executor commits
    f = '0; f.ptype = PK_COMMIT; f.dst = {6'd0, 4'd4}; f.src = p.src_fc_id; f.tid = p.instr_id;
    send(place, f);
  endtask

  initial begin
    flit_t f;
    logic [15:0] c0;
    for (int p = 0; p < 13; p++) in_flit[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) one(k, k % 3 != 0);
    repeat (5) @(negedge clk);
    checks += 2;
    if (stats[6] != 60) begin failures++; $display("FAIL commits counted %0d", stats[6]); end
    if (stats[0] != 60) begin failures++; $display("FAIL IIPs counted %0d", stats[0]); end
    // gossip from the east neighbour
    f = '0; f.ptype = PK_GOSSIP; f.dst = {6'd0, 4'd4}; f.src = {6'd1, 4'd4};
    f.payload[10:0] = {6'd1, 1'b1, 4'd1};
    send(10, f);
    repeat (10) @(negedge clk);
    checks++;
    if (!congested[1]) begin failures++; $display("FAIL east congestion not recorded"); end
    take(10, f); take(11, f);   // forwarded copies
    // congestion: block place 8, pile flits for it from many inputs
    out_ready[8] = 0;
    c0 = stats[9];
    for (int p = 0; p < 13; p++) if (p != 4 && p != 8) begin
      f = '0; f.ptype = PK_WR_DATA; f.dst = {6'd0, 4'd8}; f.src = {6'd0, 4'(p)};
      in_flit[p] = f; in_valid[p] = 1;
    end
    repeat (30) @(negedge clk);
    in_valid = '0;
    checks++;
    if (stats[9] == c0 || !congested[0]) begin failures++; $display("FAIL congestion not detected"); end
    take(10, f);
    checks++;
    if (f.ptype != PK_GOSSIP || f.payload[10:4] != {6'd0, 1'b1}) begin
      failures++; $display("FAIL congestion gossip east");
    end
    take(11, f);
    checks++;
    if (f.ptype != PK_GOSSIP || f.payload[10:4] != {6'd0, 1'b1}) begin
      failures++; $display("FAIL congestion gossip south");
    end
    out_ready[8] = 1;
    repeat (100) @(negedge clk);
    checks++;
    if (congested[0]) begin failures++; $display("FAIL congestion not cleared"); end
    checks++;
    if (n_local == 0 || n_reloc == 0 || n_rej == 0) begin
      failures++; $display("FAIL path never taken: local %0d reloc %0d rej %0d", n_local, n_reloc, n_rej);
    end
    $display("local %0d relocated %0d rejected %0d", n_local, n_reloc, n_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
