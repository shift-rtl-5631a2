// tb_bidir_search: checks the bidirectional search against a software BFS.
//
// A 2 x 2 tile grid (6 x 6 chiplets). Random source/destination pairs with
// random masks (about one node in five masked) and some fixed cases: same
// node, a long-range UC-UC path, a fully blocked destination. For each
// search the hop count and the found flag must equal the reference, the
// reported intersection node must be unmasked and inside the bounding box,
// and done must arrive within ceil(d/2)+2 cycles of start for reachable
// pairs at distance d.
module tb_bidir_search;
  import shift_pkg::*;
  import tb_ref_pkg::*;
  localparam int TX = 2, TY = 2, GX = 3 * TX, GY = 3 * TY, N = GX * GY;
  localparam int GI_W = $clog2(N);

  logic clk = 0, rst_n = 0, start = 0;
  logic [GI_W-1:0] src, dst, inter;
  logic [N-1:0] mask;
  logic busy, done, found;
  cost_t hops;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bidir_search #(.TILES_X(TX), .TILES_Y(TY)) dut (.*, .inter_node(inter));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int a, int b, logic [N-1:0] m);
    bit mk [];
    int ref_d, cyc, ix, iy;
    mk = new[N];
    for (int i = 0; i < N; i++) mk[i] = m[i];
    mk[a] = 0; mk[b] = 0;
    ref_d = ref_hops(GX, GY, a, b, mk);
    @(negedge clk);
    src = GI_W'(a); dst = GI_W'(b); mask = m; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (ref_d < 0) begin
      if (found) begin failures++; $display("FAIL %0d->%0d expected unreachable, got %0d", a, b, hops); end
    end else begin
      if (!found || int'(hops) != ref_d) begin
        failures++; $display("FAIL %0d->%0d hops %0d found %0d expected %0d", a, b, hops, found, ref_d);
      end
      checks++;
      if (cyc > (ref_d + 1) / 2 + 2) begin
        failures++; $display("FAIL %0d->%0d took %0d cycles for distance %0d", a, b, cyc, ref_d);
      end
      checks++;
      ix = int'(inter) % GX; iy = int'(inter) / GX;
      if ((int'(inter) != a && int'(inter) != b && m[inter]) ||
          ix < ((a % GX < b % GX) ? a % GX : b % GX) || ix > ((a % GX > b % GX) ? a % GX : b % GX) ||
          iy < ((a / GX < b / GX) ? a / GX : b / GX) || iy > ((a / GX > b / GX) ? a / GX : b / GX)) begin
        failures++; $display("FAIL %0d->%0d bad intersection %0d", a, b, inter);
      end
    end
  endtask

  initial begin
    mask = '0; src = '0; dst = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(7, 7, '0);                         // same node
    run(0, 35, '0);                        // corner to corner
    run(7, 10, '0);                        // UC to UC long-range: 1 hop
    checks++; if (hops != 1) begin failures++; $display("FAIL long-range hop"); end
    run(0, 7, '0);                         // corner to UC diagonal: 1 hop
    checks++; if (hops != 1) begin failures++; $display("FAIL mid-range hop"); end
    // destination walled in by masked neighbours
    begin
      logic [N-1:0] m;
      m = '0; m[28] = 1; m[34] = 1;  // neighbours of 35 are 29 (x-1) and 34? 35-1=34, 35-6=29
      m[29] = 1;
      run(0, 35, m);
    end
    for (int k = 0; k < 300; k++) begin
      logic [N-1:0] m;
      for (int i = 0; i < N; i++) m[i] = ($urandom % 5) == 0;
      run($urandom % N, $urandom % N, m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
