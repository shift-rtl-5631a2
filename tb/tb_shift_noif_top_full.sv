// tb_shift_noif_top_full: end-to-end run of the full wafer grid.
//
// The top is instantiated with its defaults: 6 x 6 tiles in the MBW layout
// (36 UCs, 234 FCs, 54 MCs). The testbench models what lies outside the RTL:
//   FC cores   - issue instructions with unique ids whose operands live in
//                the FC itself, in the tile's MC, in a remote MC or in a
//                remote FC; execute after a random delay, result = op0 ^ op1 ^
//                id; every operand seen by the core is checked against the
//                value its holder must have supplied;
//   scratchpads- read data is a fixed function of {len, off, id}, the same
//                function the MC model uses, so data are checkable wherever
//                they come from; writes are checked against the result the
//                instruction must have produced;
//   MCs        - answer RD_REQ and data SHIFT_TO with one RD_DATA flit, absorb
//                WR_DATA (checked), with random busy periods.
// After a mixed phase, a hotspot phase makes every FC read from the MC of
// tile 0 while that MC is busy, so the routers around it fill up, congestion
// is detected and gossiped, and later decisions avoid the congested tiles.
// At the end every instruction must have left STALL, been committed at its
// UC and written back once, and every mechanism must have happened at least
// once: stall, local-preferred (operand in L1 and in the tile), candidate
// evaluation, relocation (SHIFT_TO, hosted execution, KILL), rejection,
// congestion detection and gossip.
module tb_shift_noif_top_full;
  import shift_pkg::*;
  localparam int TX = 6, TY = 6;
  localparam bit MBW_L = 1'b1;
  localparam int NT = TX * TY, NS = NT * 9, GX = 3 * TX;
  localparam int PER_FC = 6;            // instructions per FC in the mixed phase
  localparam int HOT_FC = 2;            // instructions per FC in the hotspot phase

  logic                 clk = 0, rst_n = 0;
  logic                 fc_issue_valid [NS];
  iip_t                 fc_issue_iip   [NS];
  logic                 fc_issue_ready [NS];
  logic                 fc_stalled     [NS];
  logic                 fc_exec_valid  [NS];
  iip_t                 fc_exec_iip    [NS];
  logic [PAYLOAD_W-1:0] fc_exec_op0    [NS];
  logic [PAYLOAD_W-1:0] fc_exec_op1    [NS];
  logic                 fc_exec_done   [NS];
  logic [PAYLOAD_W-1:0] fc_exec_result [NS];
  logic                 fc_spad_rd_valid [NS];
  logic [31:0]          fc_spad_rd_op    [NS];
  logic [PAYLOAD_W-1:0] fc_spad_rd_data  [NS];
  logic                 fc_spad_wr_valid [NS];
  tid_t                 fc_spad_wr_tid   [NS];
  logic [PAYLOAD_W-1:0] fc_spad_wr_data  [NS];
  logic [15:0]          fc_stats [NS][5];
  logic                 mc_rx_valid [NS];
  flit_t                mc_rx_flit  [NS];
  logic                 mc_rx_ready [NS];
  logic                 mc_tx_valid [NS];
  flit_t                mc_tx_flit  [NS];
  logic                 mc_tx_ready [NS];
  logic [NT-1:0]        uc_congested [NT];
  logic [15:0]          uc_stats [NT][11];

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: issued %0d completed %0d written %0d", n_issued, n_done, n_written);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit hbd(int t); return MBW_L && (t % TX) >= TX / 2; endfunction
  function automatic bit is_mc(int s); return (s % 9 == 3) || (s % 9 == 5 && hbd(s / 9)); endfunction
  function automatic bit is_fc(int s); return (s % 9 != 4) && !is_mc(s); endfunction
  function automatic node_id_t node(int s); return {6'(s / 9), 4'(s % 9)}; endfunction
  function automatic logic [PAYLOAD_W-1:0] val(logic [31:0] op);
    return {8{op ^ 32'h5a5a0000}};
  endfunction
  function automatic logic [PAYLOAD_W-1:0] opval(iip_t p, int k);
    if (k == 0) return (p.op0_id != 0 && p.op0_len != 0) ? val({p.op0_len, p.op0_off, p.op0_id}) : '0;
    return (p.op1_id != 0 && p.op1_len != 0) ? val({p.op1_len, p.op1_off, p.op1_id}) : '0;
  endfunction
  function automatic logic [PAYLOAD_W-1:0] result_of(iip_t p);
    return opval(p, 0) ^ opval(p, 1) ^ PAYLOAD_W'(p.instr_id);
  endfunction

  // ---------------- instruction bookkeeping ----------------
  iip_t issued_iip [int];
  int   wr_count [int];
  int   n_issued = 0, n_done = 0, n_written = 0, n_stall_cycles = 0, n_exec = 0;
  int   next_tid = 1;
  int   quota [NS];
  bit   hot = 0;
  bit   mc_hot_busy = 0;

  function automatic int rand_slot(bit want_mc);
    int s;
    do s = $urandom % NS; while (want_mc ? !is_mc(s) : !is_fc(s));
    return s;
  endfunction

  function automatic iip_t make_iip(int s);
    iip_t p;
    int kind;
    logic [9:0] home [2];
    bit used [2];
    p = '0;
    p.instr_id = tid_t'(next_tid);
    p.instr_type = 5'($urandom);
    p.dst_fc_id = ($urandom % 2) ? node(s) : node(rand_slot($urandom % 2));
    kind = $urandom % 6;
    for (int k = 0; k < 2; k++) begin
      used[k] = (k == 0) || ($urandom % 3 != 0);
      case (kind)
        0:       home[k] = (k == 0) ? node(s) : node(rand_slot(1));          // in L1
        1:       home[k] = {6'(s / 9), 4'd3};                                 // tile MC
        2, 3:    home[k] = node(rand_slot(1));                                // remote MC
        default: home[k] = node(rand_slot(0));                                // remote FC
      endcase
      if (hot) home[k] = {6'd0, 4'd3};
    end
    if (used[0]) begin p.op0_id = {home[0], 2'($urandom)}; p.op0_len = 8'($urandom % 255 + 1); end
    if (used[1]) begin p.op1_id = {home[1], 2'($urandom)}; p.op1_len = 8'($urandom % 255 + 1); end
    p.op0_off = 12'($urandom); p.op1_off = 12'($urandom);
    return p;
  endfunction

  // ---------------- FC core and scratchpad models ----------------
  int  exec_wait [NS];
  bit  exec_busy [NS];
  bit  was_stalled [NS];

  always_comb
    for (int s = 0; s < NS; s++) fc_spad_rd_data[s] = val(fc_spad_rd_op[s]);

  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) if (is_fc(s)) begin
      // issue: one-cycle pulse while the agent is idle
      fc_issue_valid[s] = 0;
      if (fc_issue_ready[s] && !was_stalled[s] && quota[s] > 0 && ($urandom % 8) == 0) begin
        iip_t p;
        p = make_iip(s);
        next_tid++;
        quota[s]--;
        fc_issue_iip[s] = p;
        fc_issue_valid[s] = 1;
        p.src_fc_id = node(s);
        p.src_uc_id = 6'(s / 9 + 1);
        issued_iip[int'(p.instr_id)] = p;
        wr_count[int'(p.instr_id)] = 0;
        n_issued++;
      end
      // execute
      fc_exec_done[s] = 0;
      if (fc_exec_valid[s] && !exec_busy[s]) begin
        iip_t p;
        exec_busy[s] = 1;
        exec_wait[s] = $urandom % 4;
        p = fc_exec_iip[s];
        checks += 2;
        if (fc_exec_op0[s] != opval(p, 0) || fc_exec_op1[s] != opval(p, 1)) begin
          failures++; $display("FAIL operands of %0d at slot %0d", p.instr_id, s);
        end
        if (!issued_iip.exists(int'(p.instr_id)) || p.src_fc_id != issued_iip[int'(p.instr_id)].src_fc_id) begin
          failures++; $display("FAIL unknown instruction %0d executed", p.instr_id);
        end
        fc_exec_result[s] = fc_exec_op0[s] ^ fc_exec_op1[s] ^ PAYLOAD_W'(p.instr_id);
        n_exec++;
      end else if (exec_busy[s]) begin
        if (exec_wait[s] == 0) begin fc_exec_done[s] = 1; exec_busy[s] = 0; end
        else exec_wait[s]--;
      end
    end
  end

  // ---------------- MC model ----------------
  bit    mc_pend [NS];
  flit_t mc_rsp  [NS];
  int    mc_busy [NS];
  always_comb
    for (int s = 0; s < NS; s++) begin
      mc_tx_valid[s] = mc_pend[s];
      mc_tx_flit[s]  = mc_rsp[s];
      mc_rx_ready[s] = !mc_pend[s] && mc_busy[s] == 0 && !(s == 3 && mc_hot_busy);
    end

  task automatic check_write(tid_t id, logic [PAYLOAD_W-1:0] d, int s);
    checks++;
    if (!issued_iip.exists(int'(id))) begin
      failures++; $display("FAIL write for unknown instruction %0d", id);
    end else begin
      if (d != result_of(issued_iip[int'(id)]) || issued_iip[int'(id)].dst_fc_id != node(s)) begin
        failures++; $display("FAIL write-back of %0d at slot %0d", id, s);
      end
      wr_count[int'(id)]++;
      n_written++;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      if (is_mc(s)) begin
        // state driving the DUT's inputs changes with nonblocking assignments
        if (mc_busy[s] > 0) mc_busy[s] <= mc_busy[s] - 1;
        else if (($urandom % 64) == 0) mc_busy[s] <= $urandom % 8;
        if (mc_pend[s] && mc_tx_ready[s]) mc_pend[s] <= 0;
        if (mc_rx_valid[s] && mc_rx_ready[s]) begin
          flit_t f, r;
          f = mc_rx_flit[s];
          r = '0;
          r.ptype = PK_RD_DATA; r.src = node(s); r.tid = f.tid;
          r.aux = NODE_W'(f.payload[32]); r.payload = val(f.payload[31:0]);
          case (f.ptype)
            PK_RD_REQ:   begin r.dst = f.src; mc_rsp[s] <= r; mc_pend[s] <= 1; end
            PK_SHIFT_TO: begin r.dst = f.aux; mc_rsp[s] <= r; mc_pend[s] <= 1; end
            PK_WR_DATA:  check_write(f.tid, f.payload, s);
            default: begin failures++; $display("FAIL MC %0d got type %0d", s, f.ptype); end
          endcase
        end
      end
      if (is_fc(s)) begin
        if (fc_spad_wr_valid[s]) check_write(fc_spad_wr_tid[s], fc_spad_wr_data[s], s);
        if (fc_stalled[s]) n_stall_cycles++;
        if (was_stalled[s] && !fc_stalled[s]) n_done++;
        was_stalled[s] = fc_stalled[s];
      end
    end
  end

  // ---------------- sequence and final checks ----------------
  function automatic int stat_sum(int k);
    int a;
    a = 0;
    for (int t = 0; t < NT; t++) a += int'(uc_stats[t][k]);
    return a;
  endfunction
  function automatic int fc_sum(int k);
    int a;
    a = 0;
    for (int s = 0; s < NS; s++) a += int'(fc_stats[s][k]);
    return a;
  endfunction

  task automatic drain(string phase);
    int w, idle, last;
    w = 0; idle = 0; last = n_done;
    // stop early once nothing has completed for 20000 cycles or a check failed
    while ((quota.sum() > 0 || n_done < n_issued || n_written < n_issued) && w < 150000
           && idle < 20000 && failures == 0) begin
      @(negedge clk); w++;
      if (n_done != last) begin idle = 0; last = n_done; end else idle++;
    end
    repeat (50) @(negedge clk);
    checks++;
    if (n_done != n_issued || n_written != n_issued) begin
      failures++;
      $display("FAIL %s: issued %0d completed %0d written %0d", phase, n_issued, n_done, n_written);
    end
    if (failures != 0) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  endtask

  initial begin
    int c_cong;
    for (int s = 0; s < NS; s++) begin
      fc_issue_valid[s] = 0; fc_issue_iip[s] = '0; fc_exec_done[s] = 0; fc_exec_result[s] = '0;
      mc_pend[s] = 0; mc_rsp[s] = '0; mc_busy[s] = 0; exec_busy[s] = 0; exec_wait[s] = 0;
      was_stalled[s] = 0;
      quota[s] = is_fc(s) ? PER_FC : 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    drain("mixed phase");
    $display("mixed phase done: %0d instructions", n_issued);
    // hotspot: every FC reads the MC of tile 0 while it is busy
    hot = 1;
    mc_hot_busy = 1;
    for (int s = 0; s < NS; s++) if (is_fc(s)) quota[s] = HOT_FC;
    repeat (600) @(negedge clk);
    mc_hot_busy = 0;
    drain("hotspot phase");
    c_cong = stat_sum(9);
    // mechanism coverage and global consistency
    checks += 12;
    if (n_stall_cycles == 0) begin failures++; $display("FAIL no FC ever stalled"); end
    if (stat_sum(0) != n_issued) begin failures++; $display("FAIL IIPs seen %0d issued %0d", stat_sum(0), n_issued); end
    if (stat_sum(6) != n_issued) begin failures++; $display("FAIL commits %0d issued %0d", stat_sum(6), n_issued); end
    if (stat_sum(1) == 0) begin failures++; $display("FAIL no local-preferred (L1) decision"); end
    if (stat_sum(2) == 0) begin failures++; $display("FAIL no local-preferred (tile) decision"); end
    if (stat_sum(3) == 0) begin failures++; $display("FAIL no candidate evaluation"); end
    if (stat_sum(4) == 0) begin failures++; $display("FAIL no relocation"); end
    if (stat_sum(5) == 0) begin failures++; $display("FAIL no rejected relocation"); end
    if (c_cong == 0 || stat_sum(7) == 0) begin failures++; $display("FAIL no congestion event or gossip"); end
    if (fc_sum(2) != stat_sum(4) || fc_sum(3) != stat_sum(4) || fc_sum(4) != stat_sum(4)) begin
      failures++; $display("FAIL hosted %0d shifted %0d killed %0d relocated %0d",
                           fc_sum(2), fc_sum(3), fc_sum(4), stat_sum(4));
    end
    if (fc_sum(0) != n_issued || n_exec != n_issued) begin failures++; $display("FAIL issue/exec counts"); end
    if (stat_sum(8) != 0) begin failures++; $display("FAIL %0d IIPs dropped", stat_sum(8)); end
    foreach (wr_count[i]) begin
      checks++;
      if (wr_count[i] != 1) begin failures++; $display("FAIL instruction %0d written %0d times", i, wr_count[i]); end
    end
    $display("issued %0d stall-cycles %0d L1 %0d tile %0d evaluated %0d relocated %0d rejected %0d",
             n_issued, n_stall_cycles, stat_sum(1), stat_sum(2), stat_sum(3), stat_sum(4), stat_sum(5));
    $display("hosted %0d killed %0d congestion-events %0d gossip-sent %0d searches %0d",
             fc_sum(2), fc_sum(4), c_cong, stat_sum(7), stat_sum(10));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  shift_noif_top dut (.*);
endmodule
