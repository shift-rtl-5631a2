// tb_shift_engine: checks the UC decision engine command by command.
//
// 2 x 2 tiles, right column high-bandwidth (MBW), engine in tile 0, a
// 4-entry transaction table. Random IIPs are sent with sources on FC places
// and operands homed at random FCs or MCs, biased so that every path is
// taken: operand in the source FC, operand in the source tile, operands in
// other tiles, malformed packets. For each IIP a software model (plain BFS
// from tb_ref_pkg, candidate set = FCs in the participants' bounding box
// outside congested tiles, MCs and congested tiles masked) predicts the
// exact flits: EXECUTE to the source for local or rejected decisions, or
// SHIFT_TO source, SHIFT_TO per operand holder, EXECUTE to the new FC and
// KILL to the source for a relocation. Flits received are compared in order
// (type, destination, aux, tid, payload). COMMITs are sent at random; when
// the table is full the engine must hold the next IIP until a COMMIT frees
// an entry. Gossip is checked both ways: raising and lowering the router
// occupancy must send one message to each existing neighbour UC, and a
// received gossip message must set the congestion bit of its tile, which
// then changes the candidate set used by the model. out_ready toggles at
// random. Every path counter must be nonzero at the end.
module tb_shift_engine;
  import shift_pkg::*;
  import tb_ref_pkg::*;
  localparam int TX = 2, TY = 2, NT = TX * TY, GX = 3 * TX, GY = 3 * TY, N = GX * GY;
  localparam int OVH = 1, MRG = 1, TT = 4;

  logic clk = 0, rst_n = 0;
  logic [7:0] occupancy = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  flit_t in_flit, out_flit;
  logic [NT-1:0] congested;
  logic [15:0] n_iip, n_local_l1, n_local_tile, n_evaluated, n_relocated, n_rejected,
               n_commit, n_gossip_tx, n_dropped, n_cong_events, n_searches;
  int checks = 0, failures = 0;
  flit_t got [$];
  int tt_stalls = 0;

  always #5 clk = ~clk;

  shift_engine #(.TILES_X(TX), .TILES_Y(TY), .MBW(1'b1), .IIP_DEPTH(4), .TT_SIZE(TT),
                 .MARGIN(cost_t'(MRG)), .OVERHEAD(cost_t'(OVH)), .CONG_HI(20), .CONG_LO(5))
    dut (.clk, .rst_n, .my_tile(6'd0), .occupancy, .in_valid, .in_flit, .in_ready,
         .out_valid, .out_flit, .out_ready, .congested, .n_iip, .n_local_l1, .n_local_tile,
         .n_evaluated, .n_relocated, .n_rejected, .n_commit, .n_gossip_tx, .n_dropped,
         .n_cong_events, .n_searches);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_flit);
  always @(negedge clk) out_ready = ($urandom % 4) != 0;

  // ---------------- model ----------------
  function automatic bit hbd(int t); return (t % TX) >= TX / 2; endfunction
  function automatic int gi(node_id_t n);
    int t, p;
    t = int'(n[9:4]); p = int'(n[3:0]);
    return ((t / TX) * 3 + p / 3) * GX + (t % TX) * 3 + p % 3;
  endfunction
  function automatic int tile_of_g(int g); return ((g / GX) / 3) * TX + (g % GX) / 3; endfunction
  function automatic int pos_of_g(int g); return ((g / GX) % 3) * 3 + (g % GX) % 3; endfunction
  function automatic bit mem_g(int g);
    return pos_of_g(g) == 3 || (pos_of_g(g) == 5 && hbd(tile_of_g(g)));
  endfunction
  function automatic bit fc_g(int g); return pos_of_g(g) != 4 && !mem_g(g); endfunction
  function automatic int cst(int v); return (v < 0) ? 4095 : v; endfunction
  function automatic int h(int a, int b, bit m []);
    bit mk [];
    mk = new[N];
    foreach (mk[i]) mk[i] = m[i];
    mk[a] = 0; mk[b] = 0;
    return cst(ref_hops(GX, GY, a, b, mk));
  endfunction

  function automatic node_id_t rand_fc();
    int t, p;
    t = $urandom % NT;
    do p = $urandom % 9; while (p == 3 || p == 4 || (p == 5 && hbd(t)));
    return {6'(t), 4'(p)};
  endfunction
  function automatic node_id_t rand_mem();
    int t;
    t = $urandom % NT;
    return {6'(t), (hbd(t) && $urandom % 2) ? 4'd5 : 4'd3};
  endfunction

  // send one flit on the input handshake
  task automatic send(flit_t f);
    @(negedge clk);
    in_flit = f; in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic commit(tid_t t);
    flit_t f;
    f = '0; f.ptype = PK_COMMIT; f.dst = {6'd0, 4'd4}; f.tid = t;
    send(f);
  endtask

  task automatic expect_flits(flit_t e [$], string what);
    int w;
    w = 0;
    while (got.size() < e.size() && w < 20000) begin @(negedge clk); w++; end
    repeat (3) @(negedge clk);
    checks++;
    if (got.size() != e.size()) begin
      failures++; $display("FAIL %s: got %0d flits expected %0d", what, got.size(), e.size());
    end
    for (int i = 0; i < e.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != e[i]) begin
        failures++;
        $display("FAIL %s flit %0d: type %0d dst %h aux %h pl %h exp type %0d dst %h aux %h pl %h", what, i,
                 got[i].ptype, got[i].dst, got[i].aux, got[i].payload[15:0], e[i].ptype, e[i].dst, e[i].aux, e[i].payload[15:0]);
      end
    end
    got.delete();
  endtask

  tid_t outstanding [$];
  int ev_l1 = 0, ev_tile = 0, ev_eval = 0, ev_reloc = 0, ev_rej = 0, ev_drop = 0, commits_ok = 0;
  int gossip_seq = 0;

  task automatic one_iip(int k);
    iip_t p;
    flit_t f, e;
    flit_t ex [$];
    node_id_t home [2];
    bit used [2];
    bit m [];
    int s, kind, eb, es, best, x0, x1, y0, y1, cls;
    bit bad;
    p = '0;
    p.instr_id = tid_t'(k + 1);
    p.instr_type = 5'($urandom);
    p.src_fc_id = rand_fc();
    p.src_uc_id = 6'(p.src_fc_id[9:4] + 1);
    p.dst_fc_id = rand_fc();
    kind = $urandom % 8;
    for (int j = 0; j < 2; j++) begin
      home[j] = ($urandom % 2) ? rand_mem() : rand_fc();
      used[j] = ($urandom % 5) != 0;
    end
    if (kind == 0) home[0] = p.src_fc_id;
    if (kind == 1) home[1] = {p.src_fc_id[9:4], 4'd3};
    if (kind == 0) used[0] = 1;
    if (kind == 1) used[1] = 1;
    if (kind >= 2) for (int j = 0; j < 2; j++)
      while (home[j][9:4] == p.src_fc_id[9:4]) home[j] = ($urandom % 2) ? rand_mem() : rand_fc();
    p.op0_id = used[0] ? {home[0], 2'($urandom)} : '0;
    p.op0_off = 12'($urandom); p.op0_len = used[0] ? 8'($urandom % 255 + 1) : 8'd0;
    p.op1_id = used[1] ? {home[1], 2'($urandom)} : '0;
    p.op1_off = 12'($urandom); p.op1_len = used[1] ? 8'($urandom % 255 + 1) : 8'd0;
    bad = ($urandom % 25) == 0;
    if (bad) p.zero_pad = 11'd1;
    // wait while the table is full: the engine must not answer
    f = '0; f.ptype = PK_IIP; f.dst = {6'd0, 4'd4}; f.src = p.src_fc_id; f.tid = p.instr_id;
    f.payload[IIP_W-1:0] = p;
    // model
    s = gi(p.src_fc_id);
    e = '0; e.src = {6'd0, 4'd4}; e.tid = p.instr_id; e.payload[IIP_W-1:0] = p;
    if (bad) cls = 0;
    else if ((used[0] && home[0] == p.src_fc_id) || (used[1] && home[1] == p.src_fc_id)
             || (!used[0] && !used[1])) cls = 1;
    else if ((used[0] && home[0][9:4] == p.src_fc_id[9:4]) ||
             (used[1] && home[1][9:4] == p.src_fc_id[9:4])) cls = 2;
    else cls = 3;
    if (cls == 0) ev_drop++;
    if (cls == 1) ev_l1++;
    if (cls == 2) ev_tile++;
    if (cls == 3) ev_eval++;
    best = s;
    if (cls == 3) begin
      m = new[N];
      x0 = s % GX; x1 = x0; y0 = s / GX; y1 = y0;
      for (int j = 0; j < 2; j++) if (used[j]) begin
        int g;
        g = gi(home[j]);
        if (g % GX < x0) x0 = g % GX;
        if (g % GX > x1) x1 = g % GX;
        if (g / GX < y0) y0 = g / GX;
        if (g / GX > y1) y1 = g / GX;
      end
      for (int g = 0; g < N; g++) m[g] = mem_g(g) || congested[tile_of_g(g)];
      eb = 0;
      for (int j = 0; j < 2; j++) if (used[j] && h(gi(home[j]), s, m) > eb) eb = h(gi(home[j]), s, m);
      es = 4095;
      for (int g = 0; g < N; g++) begin
        int c, t;
        if (g == s || !fc_g(g) || congested[tile_of_g(g)]) continue;
        if (g % GX < x0 || g % GX > x1 || g / GX < y0 || g / GX > y1) continue;
        c = h(s, g, m);
        for (int j = 0; j < 2; j++) if (used[j] && h(gi(home[j]), g, m) > c) c = h(gi(home[j]), g, m);
        t = (c + OVH > 4095) ? 4095 : c + OVH;
        if (t < es) begin es = t; best = g; end
      end
      if (!(best != s && es != 4095 && es + MRG < eb)) best = s;
    end
    if (cls != 0 && best == s) begin
      if (cls == 3) ev_rej++;
      e.ptype = PK_EXECUTE; e.dst = p.src_fc_id; e.aux = p.src_fc_id;
      ex.push_back(e);
    end else if (cls != 0) begin
      node_id_t bn;
      ev_reloc++;
      bn = {6'(tile_of_g(best)), 4'(pos_of_g(best))};
      e.aux = bn;
      e.ptype = PK_SHIFT_TO; e.dst = p.src_fc_id; ex.push_back(e);
      if (used[0]) begin
        flit_t e2;
        e2 = e; e2.dst = home[0]; e2.payload = '0;
        e2.payload[IIP_W-1:0] = IIP_W'({p.op0_len, p.op0_off, p.op0_id});
        ex.push_back(e2);
      end
      if (used[1]) begin
        flit_t e2;
        e2 = e; e2.dst = home[1]; e2.payload = '0;
        e2.payload[IIP_W-1:0] = IIP_W'({1'b1, p.op1_len, p.op1_off, p.op1_id});
        ex.push_back(e2);
      end
      e.ptype = PK_EXECUTE; e.dst = bn; ex.push_back(e);
      e.ptype = PK_KILL; e.dst = p.src_fc_id; ex.push_back(e);
    end
    send(f);
    if (cls != 0 && outstanding.size() == TT) begin
      repeat (40) @(negedge clk);
      checks++;
      if (got.size() != 0) begin failures++; $display("FAIL engine answered with a full table"); end
      tt_stalls++;
      commit(outstanding.pop_front());
      commits_ok++;
    end
    expect_flits(ex, $sformatf("iip %0d class %0d", k, cls));
    if (cls != 0) outstanding.push_back(p.instr_id);
    if (outstanding.size() > 0 && ($urandom % 3) == 0) begin
      commit(outstanding.pop_front());
      commits_ok++;
    end
  endtask

  task automatic gossip_in(int t, bit c);
    flit_t f;
    f = '0; f.ptype = PK_GOSSIP; f.dst = {6'd0, 4'd4}; f.src = {6'(t), 4'd4};
    gossip_seq++;
    f.payload[10:0] = {6'(t), c, 4'(gossip_seq)};
    send(f);
    // an accepted message is forwarded to the neighbour UCs (tiles 1 and 2)
    begin
      flit_t ex [$];
      flit_t e;
      e = '0; e.ptype = PK_GOSSIP; e.src = {6'd0, 4'd4}; e.payload[10:0] = f.payload[10:0];
      e.dst = {6'd1, 4'd4}; ex.push_back(e);
      e.dst = {6'd2, 4'd4}; ex.push_back(e);
      expect_flits(ex, "forwarded gossip");
    end
    checks++;
    if (congested[t] != c) begin failures++; $display("FAIL gossip from tile %0d not applied", t); end
  endtask

  task automatic local_cong(int occ, bit c, int seq);
    flit_t ex [$];
    flit_t e;
    occupancy = 8'(occ);
    e = '0; e.ptype = PK_GOSSIP; e.src = {6'd0, 4'd4};
    e.payload[10:0] = {6'd0, c, 4'(seq)};
    e.dst = {6'd1, 4'd4}; ex.push_back(e);   // east neighbour
    e.dst = {6'd2, 4'd4}; ex.push_back(e);   // south neighbour
    expect_flits(ex, "local congestion gossip");
    checks++;
    if (congested[0] != c) begin failures++; $display("FAIL own congestion bit"); end
  endtask

  initial begin
    in_flit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int k = 0; k < 200; k++) begin
      if (k == 60) gossip_in(3, 1);
      if (k == 100) gossip_in(3, 0);
      if (k == 120) gossip_in(1, 1);
      if (k == 150) gossip_in(1, 0);
      one_iip(k);
    end
    // stale gossip (old sequence number) must be ignored
    begin
      flit_t f;
      f = '0; f.ptype = PK_GOSSIP; f.dst = {6'd0, 4'd4};
      f.payload[10:0] = {6'd3, 1'b1, 4'd1};   // tile 3 last sent seq 2
      send(f);
      repeat (2) @(negedge clk);
      checks++;
      if (congested[3]) begin failures++; $display("FAIL stale gossip applied"); end
    end
    local_cong(30, 1, 1);
    local_cong(2, 0, 2);
    while (outstanding.size() > 0) begin commit(outstanding.pop_front()); commits_ok++; end
    repeat (5) @(negedge clk);
    // counters against the model
    checks += 8;
    if (n_iip != 200) begin failures++; $display("FAIL n_iip %0d", n_iip); end
    if (n_local_l1 != ev_l1) begin failures++; $display("FAIL n_local_l1 %0d exp %0d", n_local_l1, ev_l1); end
    if (n_local_tile != ev_tile) begin failures++; $display("FAIL n_local_tile %0d exp %0d", n_local_tile, ev_tile); end
    if (n_evaluated != ev_eval) begin failures++; $display("FAIL n_evaluated %0d exp %0d", n_evaluated, ev_eval); end
    if (n_relocated != ev_reloc) begin failures++; $display("FAIL n_relocated %0d exp %0d", n_relocated, ev_reloc); end
    if (n_rejected != ev_rej) begin failures++; $display("FAIL n_rejected %0d exp %0d", n_rejected, ev_rej); end
    if (n_dropped != ev_drop) begin failures++; $display("FAIL n_dropped %0d exp %0d", n_dropped, ev_drop); end
    if (n_commit != commits_ok) begin failures++; $display("FAIL n_commit %0d exp %0d", n_commit, commits_ok); end
    checks++;
    if (ev_l1 == 0 || ev_tile == 0 || ev_reloc == 0 || ev_rej == 0 || ev_drop == 0 || tt_stalls == 0
        || n_gossip_tx != 12) begin
      failures++;
      $display("FAIL a path never taken: l1 %0d tile %0d reloc %0d rej %0d drop %0d stalls %0d gossip %0d",
               ev_l1, ev_tile, ev_reloc, ev_rej, ev_drop, tt_stalls, n_gossip_tx);
    end
    $display("l1 %0d tile %0d eval %0d reloc %0d rej %0d drop %0d stalls %0d searches %0d",
             ev_l1, ev_tile, ev_eval, ev_reloc, ev_rej, ev_drop, tt_stalls, n_searches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
