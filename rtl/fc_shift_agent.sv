// fc_shift_agent: the SHIFT side of a functional chiplet (FC).
//
// It sits between the FC's core and its short-range link to the tile UC and
// carries out the FC's part of compute relocation. Three independent parts:
//
// Issue side (the FC's own instruction): when the core offers an
// instruction (issue_valid), the agent sends its 128-bit intent packet to the
// tile UC and enters STALL (stalled = 1), keeping the instruction. A
// SHIFT_TO for that instruction makes it send the instruction (INSTR flit)
// to the FC named in the command; a KILL discards the local copy; the COMMIT
// of the FC that executed it (or the agent's own executor) ends the STALL.
//
// Executor: EXECUTE commands are queued. For an instruction that stayed
// home the executor fetches each used operand (RD_REQ to the holding node);
// for a relocated one the holders push the operands after their SHIFT_TO and
// the instruction arrives from the source FC. Arriving operands and
// instructions are collected per transaction id in SLOTS slots, so they may
// arrive before the EXECUTE. When all are present the instruction and its
// operands are handed to the FC core (exec_valid until exec_done); the result
// is written back (WR_DATA to the IIP's dst_fc_id node) and COMMIT is sent to
// the deciding UC and, if relocated, to the source FC.
//
// Data holder: RD_REQ and data SHIFT_TO requests for operands held in this
// FC's scratchpad are answered with RD_DATA read through the spad_rd port;
// WR_DATA arriving here is written through the spad_wr port.
//
// Outgoing flits are arbitrated by fixed priority: data holder, executor,
// issue side. All handshakes are valid/ready; exec_done and spad reads are
// taken in the cycle they are seen.
//
// Follows the source's FC steps (issue, STALL, SHIFT_TO/KILL, operand
// routing, execution, write-back, COMMIT to UC and to the source FC). This
// design's choices: operand transfers are one flit each, a home-executed
// instruction fetches its operands itself (also those in its own scratchpad,
// through the router), and the queue and slot sizes.
module fc_shift_agent
  import shift_pkg::*;
#(
  parameter int unsigned SLOTS = 4,
  parameter int unsigned TASKQ = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  node_id_t             my_node,
  // core: instruction dispatch
  input  logic                 issue_valid,
  input  iip_t                 issue_iip,
  output logic                 issue_ready,
  output logic                 stalled,
  // core: execution
  output logic                 exec_valid,
  output iip_t                 exec_iip,
  output logic [PAYLOAD_W-1:0] exec_op [2],
  input  logic                 exec_done,
  input  logic [PAYLOAD_W-1:0] exec_result,
  // scratchpad
  output logic                 spad_rd_valid,
  output logic [31:0]          spad_rd_op,      // {len, off, id}
  input  logic [PAYLOAD_W-1:0] spad_rd_data,
  output logic                 spad_wr_valid,
  output tid_t                 spad_wr_tid,
  output logic [PAYLOAD_W-1:0] spad_wr_data,
  // network
  input  logic                 in_valid,
  input  flit_t                in_flit,
  output logic                 in_ready,
  output logic                 out_valid,
  output flit_t                out_flit,
  input  logic                 out_ready,
  // statistics
  output logic [15:0]          n_issued,
  output logic [15:0]          n_exec_home,
  output logic [15:0]          n_exec_hosted,
  output logic [15:0]          n_shifted_away,
  output logic [15:0]          n_killed
);
  node_id_t my_uc;
  assign my_uc = make_node(node_tile(my_node), POS_UC);

  // ---------------- slots: operands and instructions by TID ----------------
  typedef struct packed {
    logic                 valid;
    tid_t                 tid;
    logic [1:0]           have;
    logic                 instr;
    logic [PAYLOAD_W-1:0] d1;
    logic [PAYLOAD_W-1:0] d0;
  } slot_t;
  slot_t slot [SLOTS];

  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  logic          in_slot_hit, in_slot_free;
  logic [SW-1:0] in_slot_idx, in_free_idx;
  logic          is_data, is_instr;
  assign is_data  = in_flit.ptype == PK_RD_DATA;
  assign is_instr = in_flit.ptype == PK_INSTR;

  always_comb begin
    in_slot_hit = 1'b0; in_slot_idx = '0; in_slot_free = 1'b0; in_free_idx = '0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (!slot[i].valid) begin in_slot_free = 1'b1; in_free_idx = SW'(i); end
    end
    for (int i = 0; i < SLOTS; i++)
      if (slot[i].valid && slot[i].tid == in_flit.tid) begin
        in_slot_hit = 1'b1; in_slot_idx = SW'(i);
      end
  end

  // ---------------- issue side ----------------
  typedef enum logic [1:0] {I_IDLE, I_SEND, I_STALL, I_INSTR} istate_e;
  istate_e  ist;
  iip_t     own;
  node_id_t shift_dst;
  logic     own_match, local_commit;
  assign own_match   = (ist == I_STALL) && (in_flit.tid == own.instr_id);
  assign issue_ready = (ist == I_IDLE);
  assign stalled     = (ist != I_IDLE);

  // ---------------- tsk queue ----------------
  logic tq_full, tq_empty, tq_pop;
  logic [IIP_W-1:0] tq_head;
  logic is_exec;
  iip_t tq_iip;
  assign tq_iip = iip_t'(tq_head);
  assign is_exec = in_flit.ptype == PK_EXECUTE;

  logic [$clog2(TASKQ+1)-1:0] unused_tq_count;
  sync_fifo #(.WIDTH(IIP_W), .DEPTH(TASKQ)) u_taskq (
    .clk, .rst_n, .wr_en(in_valid && is_exec && !tq_full), .wr_data(in_flit.payload[IIP_W-1:0]),
    .full(tq_full), .rd_en(tq_pop), .rd_data(tq_head), .empty(tq_empty), .count(unused_tq_count)
  );

  // ---------------- data holder ----------------
  logic     rsp_busy;
  node_id_t rsp_dst;
  tid_t     rsp_tid;
  logic     rsp_idx;
  logic [7:0]        rsp_op_len;
  logic [11:0]       rsp_op_off;
  logic [OPID_W-1:0] rsp_op_id;
  logic     is_req;
  assign is_req = (in_flit.ptype == PK_RD_REQ) || (in_flit.ptype == PK_SHIFT_TO && !own_match);
  assign spad_rd_valid = rsp_busy;

  // ---------------- inbound acceptance ----------------
  always_comb begin
    case (in_flit.ptype)
      PK_EXECUTE:            in_ready = !tq_full;
      PK_RD_DATA, PK_INSTR:  in_ready = in_slot_hit || in_slot_free;
      PK_RD_REQ:             in_ready = !rsp_busy;
      PK_SHIFT_TO:           in_ready = own_match || !rsp_busy;
      default:               in_ready = 1'b1;
    endcase
  end
  logic acc;
  assign acc = in_valid && in_ready;

  // ---------------- executor ----------------
  typedef enum logic [2:0] {X_IDLE, X_FETCH, X_WAIT, X_EXEC, X_WB, X_CUC, X_CSRC} xstate_e;
  xstate_e       xst;
  iip_t          tsk;
  logic          remote;
  logic [1:0]    need;
  logic          fetch_k;
  logic          x_hit;
  logic [SW-1:0] x_idx;
  logic [PAYLOAD_W-1:0] result;

  always_comb begin
    x_hit = 1'b0; x_idx = '0;
    for (int i = 0; i < SLOTS; i++)
      if (slot[i].valid && slot[i].tid == tsk.instr_id) begin x_hit = 1'b1; x_idx = SW'(i); end
  end

  logic ready_to_exec;
  assign ready_to_exec = (need == 2'b00 && !remote) ||
                         (x_hit && ((slot[x_idx].have & need) == need) && (slot[x_idx].instr || !remote));

  assign tq_pop    = (xst == X_IDLE) && !tq_empty;
  assign exec_valid = (xst == X_EXEC);
  assign exec_iip   = tsk;
  assign exec_op[0] = (x_hit && need[0]) ? slot[x_idx].d0 : '0;   // unused operand reads as zero
  assign exec_op[1] = (x_hit && need[1]) ? slot[x_idx].d1 : '0;
  assign spad_wr_valid = acc && in_flit.ptype == PK_WR_DATA;
  assign spad_wr_tid   = in_flit.tid;
  assign spad_wr_data  = in_flit.payload;
  assign local_commit  = (xst == X_CSRC) && !remote;

  // ---------------- outbound ----------------
  flit_t f_rsp, f_exe, f_iss;
  logic  v_rsp, v_exe, v_iss;

  always_comb begin
    f_rsp = '0;
    f_rsp.ptype = PK_RD_DATA; f_rsp.dst = rsp_dst; f_rsp.src = my_node;
    f_rsp.tid = rsp_tid; f_rsp.aux = NODE_W'(rsp_idx); f_rsp.payload = spad_rd_data;
    v_rsp = rsp_busy;

    f_exe = '0;
    f_exe.src = my_node; f_exe.tid = tsk.instr_id;
    v_exe = 1'b0;
    case (xst)
      X_FETCH: begin
        v_exe = need[fetch_k];
        f_exe.ptype = PK_RD_REQ;
        f_exe.dst   = fetch_k ? opid_home(tsk.op1_id) : opid_home(tsk.op0_id);
        f_exe.aux   = NODE_W'(fetch_k);
        f_exe.payload[32:0] = fetch_k ? {1'b1, tsk.op1_len, tsk.op1_off, tsk.op1_id}
                                      : {1'b0, tsk.op0_len, tsk.op0_off, tsk.op0_id};
      end
      X_WB:   begin v_exe = 1'b1; f_exe.ptype = PK_WR_DATA; f_exe.dst = tsk.dst_fc_id;
                    f_exe.payload = result; end
      X_CUC:  begin v_exe = 1'b1; f_exe.ptype = PK_COMMIT;
                    f_exe.dst = make_node(node_tile(tsk.src_fc_id), POS_UC); end
      X_CSRC: begin v_exe = remote; f_exe.ptype = PK_COMMIT; f_exe.dst = tsk.src_fc_id; end
      default: ;
    endcase

    f_iss = '0;
    f_iss.src = my_node; f_iss.tid = own.instr_id; f_iss.payload[IIP_W-1:0] = own;
    v_iss = 1'b0;
    if (ist == I_SEND)  begin v_iss = 1'b1; f_iss.ptype = PK_IIP;   f_iss.dst = my_uc; end
    if (ist == I_INSTR) begin v_iss = 1'b1; f_iss.ptype = PK_INSTR; f_iss.dst = shift_dst; end

    out_valid = v_rsp || v_exe || v_iss;
    out_flit  = v_rsp ? f_rsp : (v_exe ? f_exe : f_iss);
  end

  logic g_rsp, g_exe, g_iss;
  assign g_rsp = v_rsp && out_ready;
  assign g_exe = v_exe && !v_rsp && out_ready;
  assign g_iss = v_iss && !v_rsp && !v_exe && out_ready;

  assign spad_rd_op = rsp_busy ? {rsp_op_len, rsp_op_off, rsp_op_id} : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ist <= I_IDLE; own <= '0; shift_dst <= '0;
      xst <= X_IDLE; tsk <= '0; remote <= 1'b0; need <= '0; fetch_k <= 1'b0; result <= '0;
      rsp_busy <= 1'b0; rsp_dst <= '0; rsp_tid <= '0; rsp_idx <= 1'b0;
      rsp_op_len <= '0; rsp_op_off <= '0; rsp_op_id <= '0;
      for (int i = 0; i < SLOTS; i++) slot[i] <= '0;
      n_issued <= '0; n_exec_home <= '0; n_exec_hosted <= '0; n_shifted_away <= '0; n_killed <= '0;
    end else begin
      // ---- issue side
      case (ist)
        I_IDLE: if (issue_valid) begin
          own <= issue_iip;
          own.src_fc_id <= my_node;
          own.src_uc_id <= 6'(node_tile(my_node)) + 6'd1;
          n_issued <= n_issued + 1'b1;
          ist <= I_SEND;
        end
        I_SEND:  if (g_iss) ist <= I_STALL;
        I_INSTR: if (g_iss) ist <= I_STALL;
        I_STALL: begin
          if (acc && own_match && in_flit.ptype == PK_SHIFT_TO) begin
            shift_dst <= in_flit.aux;
            n_shifted_away <= n_shifted_away + 1'b1;
            ist <= I_INSTR;
          end
          if (acc && own_match && in_flit.ptype == PK_KILL) n_killed <= n_killed + 1'b1;
          if ((acc && own_match && in_flit.ptype == PK_COMMIT) ||
              (local_commit && tsk.instr_id == own.instr_id)) ist <= I_IDLE;
        end
        default: ist <= I_IDLE;
      endcase

      // ---- data holder
      if (g_rsp) rsp_busy <= 1'b0;
      if (acc && is_req) begin
        rsp_busy <= 1'b1;
        rsp_tid  <= in_flit.tid;
        rsp_dst  <= (in_flit.ptype == PK_RD_REQ) ? in_flit.src : in_flit.aux;
        rsp_idx  <= in_flit.payload[32];
        {rsp_op_len, rsp_op_off, rsp_op_id} <= in_flit.payload[31:0];
      end

      // ---- slots
      if (acc && (is_data || is_instr)) begin
        logic [SW-1:0] k;
        k = in_slot_hit ? in_slot_idx : in_free_idx;
        slot[k].valid <= 1'b1;
        slot[k].tid   <= in_flit.tid;
        if (is_instr) slot[k].instr <= 1'b1;
        if (is_data) begin
          slot[k].have[in_flit.aux[0]] <= 1'b1;
          if (in_flit.aux[0]) slot[k].d1 <= in_flit.payload;
          else                slot[k].d0 <= in_flit.payload;
        end
        if (!in_slot_hit) begin
          if (!is_instr) slot[k].instr <= 1'b0;
          if (!is_data)  slot[k].have  <= 2'b00;
          else           slot[k].have  <= 2'(1) << in_flit.aux[0];
        end
      end

      // ---- executor
      case (xst)
        X_IDLE: if (tq_pop) begin
          tsk    <= iip_t'(tq_head);
          remote  <= tq_iip.src_fc_id != my_node;
          need    <= {tq_iip.op1_id != '0 && tq_iip.op1_len != '0,
                      tq_iip.op0_id != '0 && tq_iip.op0_len != '0};
          fetch_k <= 1'b0;
          xst     <= (tq_iip.src_fc_id != my_node) ? X_WAIT : X_FETCH;
        end
        X_FETCH: begin
          if (!need[fetch_k]) begin
            if (fetch_k) xst <= X_WAIT; else fetch_k <= 1'b1;
          end else if (g_exe) begin
            if (fetch_k) xst <= X_WAIT; else fetch_k <= 1'b1;
          end
        end
        X_WAIT: if (ready_to_exec) xst <= X_EXEC;
        X_EXEC: if (exec_done) begin
          result <= exec_result;
          if (x_hit) slot[x_idx].valid <= 1'b0;
          if (remote) n_exec_hosted <= n_exec_hosted + 1'b1;
          else        n_exec_home   <= n_exec_home + 1'b1;
          xst <= X_WB;
        end
        X_WB:   if (g_exe) xst <= X_CUC;
        X_CUC:  if (g_exe) xst <= X_CSRC;
        X_CSRC: if (!remote || g_exe) xst <= X_IDLE;
        default: xst <= X_IDLE;
      endcase
    end
  end
  // fields the agent only forwards or never reads
  logic unused_fields;
  assign unused_fields = ^{tq_iip, in_flit.dst};
endmodule
