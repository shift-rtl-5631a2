// tb_fc_shift_agent: checks the FC side of SHIFT one scenario at a time.
//
// The agent sits at node {tile 1, place 0}. The testbench plays the UC, the
// other chiplets, the scratchpad (read data is a function of the requested
// {len, off, id}) and the FC core (exec_done after a random delay; result =
// op0 ^ op1 ^ instruction id). Scenarios are picked at random:
//   local    - core issues; the IIP must reach the tile UC with the source
//              fields filled in and the agent must stall; EXECUTE back to
//              the agent makes it fetch each used operand (RD_REQ), run the
//              core with the returned data, write the result to dst_fc_id
//              and COMMIT to the UC, which ends the stall;
//   shifted  - core issues; SHIFT_TO makes the agent send INSTR to the new
//              FC, KILL is absorbed, and only the remote COMMIT ends the stall;
//   hosted   - EXECUTE for another FC's instruction; operands and the
//              instruction arrive in random order, some before the EXECUTE;
//              the agent must run the core with the right operands, write
//              back, COMMIT to the source tile's UC and to the source FC;
//   holder   - RD_REQ and data SHIFT_TO for operands held here must be
//              answered with RD_DATA (operand index in aux) to the requester
//              or to the relocation target; WR_DATA must reach the
//              scratchpad write port.
// out_ready toggles at random. Each scenario must have run at least once.
module tb_fc_shift_agent;
  import shift_pkg::*;
  localparam node_id_t ME = {6'd1, 4'd0};
  localparam node_id_t MY_UC = {6'd1, 4'd4};

  logic clk = 0, rst_n = 0;
  logic issue_valid = 0, issue_ready, stalled;
  iip_t issue_iip;
  logic exec_valid, exec_done = 0;
  iip_t exec_iip;
  logic [PAYLOAD_W-1:0] exec_op [2];
  logic [PAYLOAD_W-1:0] exec_result = '0;
  logic spad_rd_valid, spad_wr_valid;
  logic [31:0] spad_rd_op;
  logic [PAYLOAD_W-1:0] spad_rd_data, spad_wr_data;
  tid_t spad_wr_tid;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  flit_t in_flit, out_flit;
  logic [15:0] n_issued, n_exec_home, n_exec_hosted, n_shifted_away, n_killed;
  int checks = 0, failures = 0;
  flit_t got [$];
  int n_sc [4];
  int wr_seen = 0;

  always #5 clk = ~clk;

  fc_shift_agent #(.SLOTS(4), .TASKQ(2)) dut (.*, .my_node(ME));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PAYLOAD_W-1:0] spad_val(logic [31:0] op);
    return {8{op ^ 32'h5a5a0000}};
  endfunction
  assign spad_rd_data = spad_val(spad_rd_op);

  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_flit);
  always @(negedge clk) out_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n && spad_wr_valid) wr_seen++;

  // core model
  initial forever begin
    @(negedge clk);
    if (exec_valid && !exec_done) begin
      repeat ($urandom % 4) @(negedge clk);
      exec_result = exec_op[0] ^ exec_op[1] ^ PAYLOAD_W'(exec_iip.instr_id);
      exec_done = 1;
      @(negedge clk);
      exec_done = 0;
    end
  end

  task automatic send(flit_t f);
    @(negedge clk);
    in_flit = f; in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic get(output flit_t f);
    int w;
    w = 0;
    while (got.size() == 0 && w < 2000) begin @(negedge clk); w++; end
    if (got.size() == 0) begin
      failures++; $display("FAIL no flit from the agent"); f = '0;
    end else f = got.pop_front();
  endtask

  task automatic expect_flit(pkt_type_e t, node_id_t d, tid_t id, string what, output flit_t f);
    get(f);
    checks++;
    if (f.ptype != t || f.dst != d || f.tid != id || f.src != ME) begin
      failures++;
      $display("FAIL %s: type %0d dst %h tid %0d, expected type %0d dst %h tid %0d",
               what, f.ptype, f.dst, f.tid, t, d, id);
    end
  endtask

  function automatic iip_t rand_iip(tid_t id);
    iip_t p;
    p = '0;
    p.instr_id = id;
    p.instr_type = 5'($urandom);
    p.dst_fc_id = {6'($urandom % 36), 4'($urandom % 3)};
    if ($urandom % 4) begin p.op0_id = 12'($urandom % 4000 + 1); p.op0_len = 8'($urandom % 255 + 1); end
    if ($urandom % 4) begin p.op1_id = 12'($urandom % 4000 + 1); p.op1_len = 8'($urandom % 255 + 1); end
    p.op0_off = 12'($urandom); p.op1_off = 12'($urandom);
    return p;
  endfunction

  function automatic logic [PAYLOAD_W-1:0] data_of(tid_t id, int k);
    return {8{id, 16'(k), 16'hbeef}} ^ {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // check the core's execution and the write-back / commit flits
  task automatic finish_exec(iip_t p, logic [PAYLOAD_W-1:0] d0, logic [PAYLOAD_W-1:0] d1,
                             bit remote_src);
    flit_t f;
    expect_flit(PK_WR_DATA, p.dst_fc_id, p.instr_id, "write-back", f);
    checks++;
    if (f.payload != (d0 ^ d1 ^ PAYLOAD_W'(p.instr_id))) begin
      failures++; $display("FAIL result of %0d", p.instr_id);
    end
    expect_flit(PK_COMMIT, {p.src_fc_id[9:4], 4'd4}, p.instr_id, "commit to UC", f);
    if (remote_src) expect_flit(PK_COMMIT, p.src_fc_id, p.instr_id, "commit to source", f);
  endtask

  task automatic issue(iip_t p, output iip_t sent);
    flit_t f;
    @(negedge clk);
    checks++;
    if (!issue_ready || stalled) begin failures++; $display("FAIL agent not idle before issue"); end
    issue_iip = p; issue_valid = 1;
    @(negedge clk);
    issue_valid = 0;
    expect_flit(PK_IIP, MY_UC, p.instr_id, "IIP", f);
    sent = iip_t'(f.payload[IIP_W-1:0]);
    checks += 2;
    if (sent.src_fc_id != ME || sent.src_uc_id != 6'd2 || sent.op0_id != p.op0_id ||
        sent.op1_id != p.op1_id || sent.dst_fc_id != p.dst_fc_id) begin
      failures++; $display("FAIL IIP contents");
    end
    if (!stalled) begin failures++; $display("FAIL not stalled after issue"); end
  endtask

  task automatic sc_local(tid_t id);
    iip_t p, s;
    flit_t f, r;
    logic [PAYLOAD_W-1:0] d [2];
    p = rand_iip(id);
    issue(p, s);
    r = '0; r.ptype = PK_EXECUTE; r.dst = ME; r.src = MY_UC; r.tid = id; r.aux = ME;
    r.payload[IIP_W-1:0] = s;
    send(r);
    d[0] = '0; d[1] = '0;
    for (int k = 0; k < 2; k++) begin
      bit u;
      u = k ? (s.op1_id != 0) : (s.op0_id != 0);
      if (!u) continue;
      expect_flit(PK_RD_REQ, k ? s.op1_id[11:2] : s.op0_id[11:2], id, "operand fetch", f);
      checks++;
      if (f.payload[32] != 1'(k) || f.payload[11:0] != (k ? s.op1_id : s.op0_id)) begin
        failures++; $display("FAIL fetch request contents");
      end
      d[k] = data_of(id, k);
      r = '0; r.ptype = PK_RD_DATA; r.dst = ME; r.src = f.dst; r.tid = id; r.aux = NODE_W'(k);
      r.payload = d[k];
      send(r);
    end
    finish_exec(s, d[0], d[1], 0);
    repeat (2) @(negedge clk);
    checks++;
    if (stalled) begin failures++; $display("FAIL still stalled after local commit"); end
  endtask

  task automatic sc_shifted(tid_t id);
    iip_t p, s;
    flit_t f, r;
    node_id_t x;
    p = rand_iip(id);
    issue(p, s);
    x = {6'($urandom % 36), 4'd7};
    r = '0; r.ptype = PK_SHIFT_TO; r.dst = ME; r.src = MY_UC; r.tid = id; r.aux = x;
    r.payload[IIP_W-1:0] = s;
    send(r);
    expect_flit(PK_INSTR, x, id, "instruction to new FC", f);
    checks++;
    if (f.payload[IIP_W-1:0] != s) begin failures++; $display("FAIL INSTR payload"); end
    r.ptype = PK_KILL;
    send(r);
    repeat (5) @(negedge clk);
    checks++;
    if (!stalled) begin failures++; $display("FAIL stall ended before remote commit"); end
    r.ptype = PK_COMMIT; r.src = x;
    send(r);
    repeat (2) @(negedge clk);
    checks++;
    if (stalled) begin failures++; $display("FAIL still stalled after remote commit"); end
  endtask

  task automatic sc_hosted(tid_t id);
    iip_t p;
    flit_t r [$];
    flit_t e, f;
    logic [PAYLOAD_W-1:0] d [2];
    p = rand_iip(id);
    p.src_fc_id = {6'($urandom % 36), 4'd2};
    p.src_uc_id = 6'(p.src_fc_id[9:4] + 1);
    e = '0; e.dst = ME; e.tid = id;
    e.ptype = PK_EXECUTE; e.src = MY_UC; e.aux = ME; e.payload[IIP_W-1:0] = p; r.push_back(e);
    e.ptype = PK_INSTR; e.src = p.src_fc_id; r.push_back(e);
    d[0] = '0; d[1] = '0;
    for (int k = 0; k < 2; k++) if (k ? p.op1_id != 0 : p.op0_id != 0) begin
      d[k] = data_of(id, k);
      e.ptype = PK_RD_DATA; e.src = 10'($urandom); e.aux = NODE_W'(k); e.payload = d[k];
      r.push_back(e);
    end
    r.shuffle();
    foreach (r[i]) send(r[i]);
    finish_exec(p, d[0], d[1], 1);
  endtask

  task automatic sc_holder(tid_t id);
    flit_t r, f;
    logic [31:0] op;
    bit shift;
    int k;
    node_id_t req;
    shift = $urandom % 2;
    k = $urandom % 2;
    op = {8'($urandom % 255 + 1), 12'($urandom), ME, 2'($urandom)};
    req = {6'($urandom % 36), 4'd6};
    r = '0; r.dst = ME; r.tid = id;
    r.payload[32:0] = {1'(k), op};
    if (shift) begin r.ptype = PK_SHIFT_TO; r.src = MY_UC; r.aux = req; end
    else begin r.ptype = PK_RD_REQ; r.src = req; r.aux = NODE_W'(k); end
    send(r);
    expect_flit(PK_RD_DATA, req, id, shift ? "pushed operand" : "read reply", f);
    checks++;
    if (f.payload != spad_val(op) || f.aux != NODE_W'(k)) begin
      failures++; $display("FAIL operand data/index");
    end
    r = '0; r.ptype = PK_WR_DATA; r.dst = ME; r.src = req; r.tid = id; r.payload = data_of(id, 3);
    k = wr_seen;
    send(r);
    checks++;
    if (wr_seen != k + 1) begin failures++; $display("FAIL write not passed to the scratchpad"); end
  endtask

  initial begin
    in_flit = '0; issue_iip = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int sc;
      sc = $urandom % 4;
      n_sc[sc]++;
      case (sc)
        0: sc_local(tid_t'(i + 1));
        1: sc_shifted(tid_t'(i + 1));
        2: sc_hosted(tid_t'(i + 1));
        default: sc_holder(tid_t'(i + 1));
      endcase
    end
    repeat (10) @(negedge clk);
    checks += 6;
    if (got.size() != 0) begin failures++; $display("FAIL %0d unexpected flits", got.size()); end
    if (n_issued != n_sc[0] + n_sc[1]) begin failures++; $display("FAIL n_issued"); end
    if (n_exec_home != n_sc[0]) begin failures++; $display("FAIL n_exec_home"); end
    if (n_exec_hosted != n_sc[2]) begin failures++; $display("FAIL n_exec_hosted"); end
    if (n_shifted_away != n_sc[1] || n_killed != n_sc[1]) begin failures++; $display("FAIL shift counters"); end
    if (n_sc[0] == 0 || n_sc[1] == 0 || n_sc[2] == 0 || n_sc[3] == 0) begin
      failures++; $display("FAIL a scenario never ran");
    end
    $display("local %0d shifted %0d hosted %0d holder %0d", n_sc[0], n_sc[1], n_sc[2], n_sc[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
