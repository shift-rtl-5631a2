// reloc_predictor: memory-aware relocation filter and final relocation test.
//
// First stage (pred): if a used operand already sits in the source FC
// (DEC_LOCAL_L1) or anywhere in the source FC's own tile, i.e. its MC(s) or
// UC scratchpad (DEC_LOCAL_TILE), relocation is skipped and the instruction
// is marked local-preferred. An instruction with no used operand is also
// executed locally. Otherwise candidates must be evaluated (DEC_EVALUATE).
// Second stage (relocate): once the estimator has produced the best
// relocation cost c_shift at node best_node and the cost of staying c_base,
// relocation proceeds only if c_shift < c_base - margin and the best node is
// not the source itself. Purely combinational.
//
// Follows the memory-aware prediction algorithm of the source. The "AND/OR"
// of its operand test is taken as OR (any used operand local is enough), and
// the comparison is done as c_shift + margin < c_base to avoid underflow;
// both are this design's choices.
module reloc_predictor
  import shift_pkg::*;
#(
  parameter cost_t MARGIN = cost_t'(1)
) (
  input  node_id_t   src_node,
  input  logic [1:0] op_used,
  input  node_id_t   op_home [2],
  input  cost_t      c_shift,
  input  cost_t      c_base,
  input  node_id_t   best_node,
  output pred_e      pred,
  output logic       relocate
);
  logic [1:0] in_l1, in_tile;
  always_comb begin
    for (int k = 0; k < 2; k++) begin
      in_l1[k]   = op_used[k] && (op_home[k] == src_node);
      in_tile[k] = op_used[k] && (node_tile(op_home[k]) == node_tile(src_node));
    end
    if (|in_l1 || op_used == 2'b00) pred = DEC_LOCAL_L1;
    else if (|in_tile)              pred = DEC_LOCAL_TILE;
    else                            pred = DEC_EVALUATE;
    relocate = (pred == DEC_EVALUATE) && (best_node != src_node) && (c_shift != COST_INF)
            && ({1'b0, c_shift} + {1'b0, MARGIN} < {1'b0, c_base});
  end
endmodule
