// tb_uc_router: delivery and port selection of the UC router.
//
// Router of the centre tile (4) of a 3 x 3 tile grid. Random flits with
// unique transaction ids enter on random ports (except the core port 4,
// which is still used as a destination) towards random nodes; outputs take
// flits with random backpressure. Every flit must leave exactly once, on the
// port the X-then-Y rule gives (worked out here from tile coordinates), with
// its contents intact, and flits from one input to one output keep their
// order. Also checks the one-cycle latency through an idle router.
module tb_uc_router;
  import shift_pkg::*;
  localparam int TX = 3, TY = 3;
  logic clk = 0, rst_n = 0;
  logic [12:0] in_valid = '0, in_ready, out_valid, out_ready = '1;
  flit_t in_flit [13], out_flit [13];
  logic [7:0] occupancy;
  int checks = 0, failures = 0, sent = 0, recvd = 0;
  int exp_port [int];
  flit_t exp_flit [int];
  int last_seq [int];
  always #5 clk = ~clk;

  uc_router #(.TILES_X(TX), .TILES_Y(TY), .DEPTH(4)) dut (.*, .my_tile(6'd4));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int port_for(node_id_t d);
    int dx, dy;
    dx = int'(d[9:4]) % TX; dy = int'(d[9:4]) / TX;
    if (dx > 1) return 10;
    if (dx < 1) return 12;
    if (dy > 1) return 11;
    if (dy < 1) return 9;
    return int'(d[3:0]);
  endfunction

  // receive side
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 13; p++) if (out_valid[p] && out_ready[p]) begin
      int id;
      id = int'(out_flit[p].tid);
      recvd++;
      checks++;
      if (!exp_port.exists(id)) begin failures++; $display("FAIL unknown/duplicate flit %0d", id); end
      else begin
        if (exp_port[id] != p || out_flit[p] != exp_flit[id]) begin
          failures++; $display("FAIL flit %0d on port %0d expected %0d", id, p, exp_port[id]);
        end
        // per (input,output) order: aux holds the input port, payload[15:0] its sequence
        if (last_seq.exists(int'(out_flit[p].aux) * 16 + p) &&
            last_seq[int'(out_flit[p].aux) * 16 + p] > int'(out_flit[p].payload[15:0])) begin
          failures++; $display("FAIL order on %0d->%0d", out_flit[p].aux, p);
        end
        last_seq[int'(out_flit[p].aux) * 16 + p] = int'(out_flit[p].payload[15:0]);
        exp_port.delete(id);
      end
    end
  end

  int seq_in [13];
  initial begin
    for (int p = 0; p < 13; p++) begin in_flit[p] = '0; seq_in[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // latency through an idle router: in at edge k, out valid right after
    in_flit[0] = '0; in_flit[0].dst = {6'd4, 4'd8}; in_flit[0].tid = 16'd60000;
    exp_port[60000] = 8; exp_flit[60000] = in_flit[0];
    in_valid[0] = 1; @(negedge clk); in_valid[0] = 0; sent++;
    checks++;
    if (!out_valid[8]) begin failures++; $display("FAIL latency: not out after one cycle"); end
    @(negedge clk);
    for (int k = 0; k < 3000; k++) begin
      logic [12:0] acc;
      out_ready = 13'($urandom) | 13'($urandom);
      for (int p = 0; p < 13; p++) begin
        if (p == 4 || in_valid[p] || ($urandom % 3) != 0) continue;
        in_flit[p] = '0;
        in_flit[p].ptype = pkt_type_e'($urandom % 10);
        in_flit[p].dst = {6'($urandom % 9), 4'($urandom % 9)};
        in_flit[p].tid = 16'(sent);
        in_flit[p].aux = 10'(p);
        in_flit[p].payload = {$urandom, $urandom, $urandom, 16'(seq_in[p])};
        seq_in[p]++;
        exp_port[sent] = port_for(in_flit[p].dst);
        exp_flit[sent] = in_flit[p];
        sent++;
        in_valid[p] = 1;
      end
      #1;
      acc = in_valid & in_ready;
      @(negedge clk);
      in_valid = in_valid & ~acc;
    end
    out_ready = '1;
    while (in_valid != 0) begin
      logic [12:0] acc2;
      #1; acc2 = in_valid & in_ready;
      @(negedge clk);
      in_valid = in_valid & ~acc2;
    end
    repeat (100) @(negedge clk);
    checks++;
    if (exp_port.num() != 0) begin failures++; $display("FAIL %0d flits lost", exp_port.num()); end
    $display("sent %0d received %0d", sent, recvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
