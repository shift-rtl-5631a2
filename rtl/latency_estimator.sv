// latency_estimator: relocation cost evaluation over candidate FCs.
//
// Given the source FC, up to two operand locations and a set of candidate
// FCs, it computes for each candidate X
//     C1 = hops(op0 -> X), C2 = hops(op1 -> X)   (0 for an unused operand)
//     C3 = 0 if X is the source, else hops(source -> X)
//     C_total = max(C1, C2, C3) + OVERHEAD
// and returns the candidate with the smallest C_total (c_shift, best_node),
// together with the cost of leaving the instruction where it is,
// c_base = max(hops(op0 -> source), hops(op1 -> source)). Every hop count
// comes from one bidir_search run; the candidates are taken lowest grid index
// first, the source itself is never a relocation candidate, and ties keep
// the earlier candidate. A candidate that cannot be reached from one of its
// ends costs COST_INF.
//
// Timing: start pulse while !busy; done pulses when all searches are over.
// Each candidate costs up to three searches, each about half its distance
// plus two cycles, and one further cycle to pick the candidate.
//
// Follows the source's latency-estimation algorithm (maximum of the three
// transfer costs plus the computation overhead). Its cost equation (1) sums
// the transfer costs instead; the maximum is used here, as in the algorithm
// and in the text that defines latency as the slowest of the transfers.
// OVERHEAD in hops is this design's value.
module latency_estimator
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X  = 6,
  parameter int unsigned TILES_Y  = 6,
  parameter cost_t       OVERHEAD = cost_t'(1),
  localparam int unsigned GX = 3 * TILES_X,
  localparam int unsigned GY = 3 * TILES_Y,
  localparam int unsigned N  = GX * GY,
  localparam int unsigned GI_W = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [GI_W-1:0] src,
  input  logic [1:0]      op_used,
  input  logic [GI_W-1:0] op_loc [2],
  input  logic [N-1:0]    cand,
  input  logic [N-1:0]    mask,
  output logic            busy,
  output logic            done,
  output cost_t           c_base,
  output cost_t           c_shift,
  output logic [GI_W-1:0] best_node,
  output logic [15:0]     searches
);
  typedef enum logic [2:0] {S_IDLE, S_BASE, S_PICK, S_RUN, S_WAIT, S_ACC, S_DONE} state_e;
  state_e state;

  logic [N-1:0]    remain;
  logic [GI_W-1:0] x;
  logic [1:0]      job;      // 0: op0, 1: op1, 2: source
  logic            base_phase;
  cost_t           c [3];
  logic            s_start, unused_s_busy, s_done, s_found;
  cost_t           s_hops;
  logic [GI_W-1:0] unused_s_inter, s_a, s_b;

  bidir_search #(.TILES_X(TILES_X), .TILES_Y(TILES_Y)) u_search (
    .clk, .rst_n, .start(s_start), .src(s_a), .dst(s_b), .mask,
    .busy(unused_s_busy), .done(s_done), .found(s_found), .hops(s_hops), .inter_node(unused_s_inter)
  );

  function automatic logic [GI_W-1:0] lowest(logic [N-1:0] v);
    logic [GI_W-1:0] r;
    r = '0;
    for (int i = N - 1; i >= 0; i--) if (v[i]) r = GI_W'(i);
    return r;
  endfunction

  function automatic cost_t cmax(cost_t a, cost_t b);
    return (a > b) ? a : b;
  endfunction

  function automatic cost_t cadd(cost_t a, cost_t b);
    logic [COST_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[COST_W] ? COST_INF : s[COST_W-1:0];
  endfunction

  // the search the current job needs, or none
  logic job_needed;
  always_comb begin
    job_needed = (job == 2'd2) ? (base_phase ? 1'b0 : (x != src)) : op_used[job[0]];
    s_a = (job == 2'd2) ? src : op_loc[job[0]];
    s_b = base_phase ? src : x;
    s_start = (state == S_RUN) && job_needed;
  end

  cost_t total;
  assign total = cadd(cmax(cmax(c[0], c[1]), c[2]), OVERHEAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; busy <= 1'b0;
      remain <= '0; x <= '0; job <= '0; base_phase <= 1'b0;
      c[0] <= '0; c[1] <= '0; c[2] <= '0;
      c_base <= '0; c_shift <= COST_INF; best_node <= '0; searches <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          busy <= 1'b1; base_phase <= 1'b1; job <= 2'd0; x <= src;
          remain <= cand & ~(N'(1) << src);
          c[0] <= '0; c[1] <= '0; c[2] <= '0;
          c_shift <= COST_INF; best_node <= src; searches <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (job_needed) begin
            searches <= searches + 1'b1;
            state <= S_WAIT;
          end else begin
            c[job] <= '0;
            state <= S_ACC;
          end
        end
        S_WAIT: if (s_done) begin
          c[job] <= s_found ? s_hops : COST_INF;
          state <= S_ACC;
        end
        S_ACC: begin
          if (job != 2'd2) begin
            job <= job + 1'b1;
            state <= S_RUN;
          end else begin
            if (base_phase) begin
              c_base <= cmax(c[0], c[1]);
              base_phase <= 1'b0;
            end else if (total < c_shift) begin
              c_shift <= total;
              best_node <= x;
            end
            state <= S_PICK;
          end
        end
        S_PICK: begin
          job <= 2'd0;
          c[0] <= '0; c[1] <= '0; c[2] <= '0;
          if (remain == '0) begin
            state <= S_DONE;
          end else begin
            x <= lowest(remain);
            remain[lowest(remain)] <= 1'b0;
            state <= S_RUN;
          end
        end
        S_DONE: begin
          busy <= 1'b0; done <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
