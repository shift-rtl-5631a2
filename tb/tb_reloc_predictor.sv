// tb_reloc_predictor: the memory-aware filter and the gain-margin test.
//
// MARGIN = 2. Directed cases for each branch of the filter (operand in the
// source FC, in the source tile, elsewhere, no operand) and random costs
// around the margin boundary; expected results are written out by hand from
// the rule c_shift < c_base - margin.
module tb_reloc_predictor;
  import shift_pkg::*;
  node_id_t src_node, best_node, op_home [2];
  logic [1:0] op_used;
  cost_t c_shift, c_base;
  pred_e pred;
  logic relocate;
  int checks = 0, failures = 0;

  reloc_predictor #(.MARGIN(cost_t'(2))) dut (.*);

  task automatic tcase(node_id_t s, node_id_t h0, node_id_t h1, logic [1:0] u,
                       int cs, int cb, node_id_t b, pred_e ep, bit er);
    src_node = s; op_home[0] = h0; op_home[1] = h1; op_used = u;
    c_shift = cost_t'(cs); c_base = cost_t'(cb); best_node = b;
    #1;
    checks++;
    if (pred != ep || relocate != er) begin
      failures++; $display("FAIL pred %s exp %s reloc %0d exp %0d", pred.name(), ep.name(), relocate, er);
    end
  endtask

  initial begin
    // operand 0 in the source FC itself
    tcase({6'd1, 4'd0}, {6'd1, 4'd0}, {6'd9, 4'd3}, 2'b11, 1, 20, {6'd9, 4'd2}, DEC_LOCAL_L1, 0);
    // no operand used
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd9, 4'd3}, 2'b00, 1, 20, {6'd9, 4'd2}, DEC_LOCAL_L1, 0);
    // operand 1 in the source tile's MC (operand 0 far away)
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd1, 4'd3}, 2'b11, 1, 20, {6'd9, 4'd2}, DEC_LOCAL_TILE, 0);
    // an unused operand in the tile does not count
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd1, 4'd3}, 2'b01, 3, 20, {6'd9, 4'd2}, DEC_EVALUATE, 1);
    // margin boundary: 17 + 2 < 20 yes, 18 + 2 < 20 no
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd9, 4'd3}, 2'b11, 17, 20, {6'd9, 4'd2}, DEC_EVALUATE, 1);
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd9, 4'd3}, 2'b11, 18, 20, {6'd9, 4'd2}, DEC_EVALUATE, 0);
    // best node is the source: no relocation
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd9, 4'd3}, 2'b11, 1, 20, {6'd1, 4'd0}, DEC_EVALUATE, 0);
    // unreachable candidate
    tcase({6'd1, 4'd0}, {6'd7, 4'd3}, {6'd9, 4'd3}, 2'b11, 4095, 4095, {6'd9, 4'd2}, DEC_EVALUATE, 0);
    for (int k = 0; k < 200; k++) begin
      int cs, cb;
      cs = $urandom % 40; cb = $urandom % 40;
      tcase({6'd2, 4'd1}, {6'd20, 4'd3}, {6'd30, 4'd5}, 2'b11, cs, cb, {6'd21, 4'd0},
            DEC_EVALUATE, cs + 2 < cb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
