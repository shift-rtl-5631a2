// iip_decoder: decode logic of the UC reception stage.
//
// Takes a raw 128-bit instruction intent packet and produces the fields the
// SHIFT engine works with: the IIP as a struct, the source FC node, the
// write-back node, for each of the two operands whether it is used
// (id != 0 and length != 0) and the node that holds it, and a well-formed
// flag (zero pad all zero, source FC inside the grid and not on a UC or MC
// place). It also converts node ids to grid coordinates of the chiplet mesh
// (3*TILES_X by 3*TILES_Y chiplets) and to the flat grid index used by the
// path search. Purely combinational.
//
// The bit map is the published one; the meaning of the node and operand id
// sub-fields is this design's reading (see shift_pkg).
module iip_decoder
  import shift_pkg::*;
#(
  parameter int unsigned TILES_X = 6,
  parameter int unsigned TILES_Y = 6,
  localparam int unsigned GX = 3 * TILES_X,
  localparam int unsigned GY = 3 * TILES_Y,
  localparam int unsigned GI_W = $clog2(GX * GY)
) (
  input  logic [IIP_W-1:0] raw,
  output iip_t             iip,
  output node_id_t         src_node,
  output node_id_t         wb_node,
  output logic [1:0]       op_used,
  output node_id_t         op_home [2],
  output logic [GI_W-1:0]  src_gidx,
  output logic [GI_W-1:0]  op_gidx [2],
  output logic             well_formed
);
  function automatic logic [GI_W-1:0] gidx_of(node_id_t n);
    int unsigned t, p, x, y;
    t = int'(node_tile(n));
    p = int'(node_pos(n));
    x = (t % TILES_X) * 3 + (p % 3);
    y = (t / TILES_X) * 3 + (p / 3);
    return GI_W'(y * GX + x);
  endfunction

  function automatic logic on_grid(node_id_t n);
    return (int'(node_tile(n)) < TILES_X * TILES_Y) && (node_pos(n) <= 4'd8);
  endfunction

  always_comb begin
    iip        = iip_t'(raw);
    src_node   = iip.src_fc_id;
    wb_node    = iip.dst_fc_id;
    op_used[0] = (iip.op0_id != '0) && (iip.op0_len != '0);
    op_used[1] = (iip.op1_id != '0) && (iip.op1_len != '0);
    op_home[0] = opid_home(iip.op0_id);
    op_home[1] = opid_home(iip.op1_id);
    src_gidx   = gidx_of(src_node);
    op_gidx[0] = gidx_of(op_home[0]);
    op_gidx[1] = gidx_of(op_home[1]);
    well_formed = (iip.zero_pad == '0) && on_grid(src_node)
               && (node_pos(src_node) != POS_UC) && (node_pos(src_node) != POS_MC)
               && (!op_used[0] || on_grid(op_home[0]))
               && (!op_used[1] || on_grid(op_home[1]));
  end
endmodule
