// tb_latency_estimator: checks candidate costing against a software model.
//
// 2 x 2 tiles. For random source FCs, random operand locations (each used
// with probability 3/4), random candidate sets and random masks, the
// reference computes with a plain BFS, for every candidate X other than the
// source, max(hops(op0,X), hops(op1,X), hops(src,X)) + OVERHEAD, and picks
// the first (lowest index) minimum; c_base is max over used operands of
// hops(op,src). An unreachable pair costs all ones. c_base, c_shift,
// best_node and the number of searches run must all match.
module tb_latency_estimator;
  import shift_pkg::*;
  import tb_ref_pkg::*;
  localparam int TX = 2, TY = 2, GX = 3 * TX, GY = 3 * TY, N = GX * GY;
  localparam int GI_W = $clog2(N);
  localparam int OVH = 2;

  logic clk = 0, rst_n = 0, start = 0;
  logic [GI_W-1:0] src, best;
  logic [1:0] op_used;
  logic [GI_W-1:0] op_loc [2];
  logic [N-1:0] cand, mask;
  logic busy, done;
  cost_t c_base, c_shift;
  logic [15:0] searches;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  latency_estimator #(.TILES_X(TX), .TILES_Y(TY), .OVERHEAD(cost_t'(OVH))) dut (
    .clk, .rst_n, .start, .src, .op_used, .op_loc, .cand, .mask,
    .busy, .done, .c_base, .c_shift, .best_node(best), .searches);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int h(int a, int b, logic [N-1:0] m);
    bit mk [];
    mk = new[N];
    for (int i = 0; i < N; i++) mk[i] = m[i];
    mk[a] = 0; mk[b] = 0;
    return ref_hops(GX, GY, a, b, mk);
  endfunction

  function automatic int cst(int v);
    return (v < 0) ? 4095 : v;
  endfunction

  initial begin
    src = '0; op_used = '0; op_loc[0] = '0; op_loc[1] = '0; cand = '0; mask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      int s, o0, o1, eb, es, ebest, ns, tot;
      s  = $urandom % N; o0 = $urandom % N; o1 = $urandom % N;
      @(negedge clk);
      src = GI_W'(s); op_loc[0] = GI_W'(o0); op_loc[1] = GI_W'(o1);
      op_used = 2'($urandom);
      if (k < 3) op_used = 2'b11;
      for (int i = 0; i < N; i++) begin
        cand[i] = ($urandom % 3) == 0;
        mask[i] = ($urandom % 8) == 0;
      end
      // reference
      eb = 0; ns = 0;
      if (op_used[0]) begin eb = cst(h(o0, s, mask)); ns++; end
      if (op_used[1] && cst(h(o1, s, mask)) > eb) eb = cst(h(o1, s, mask));
      if (op_used[1]) ns++;
      es = 4095; ebest = s;
      for (int x = 0; x < N; x++) begin
        int c1, c2, c3, m;
        if (!cand[x] || x == s) continue;
        c1 = op_used[0] ? cst(h(o0, x, mask)) : 0;
        c2 = op_used[1] ? cst(h(o1, x, mask)) : 0;
        c3 = cst(h(s, x, mask));
        ns += int'(op_used[0]) + int'(op_used[1]) + 1;
        m = (c1 > c2) ? c1 : c2;
        m = (m > c3) ? m : c3;
        tot = (m + OVH > 4095) ? 4095 : m + OVH;
        if (tot < es) begin es = tot; ebest = x; end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks += 4;
      if (int'(c_base) != eb) begin failures++; $display("FAIL c_base %0d exp %0d", c_base, eb); end
      if (int'(c_shift) != es) begin failures++; $display("FAIL c_shift %0d exp %0d", c_shift, es); end
      if (es != 4095 && int'(best) != ebest) begin failures++; $display("FAIL best %0d exp %0d", best, ebest); end
      if (int'(searches) != ns) begin failures++; $display("FAIL searches %0d exp %0d", searches, ns); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
