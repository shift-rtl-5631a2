// shift_pkg: types and constants shared by the SHIFT compute-relocation fabric.
//
// The instruction intent packet (IIP) is the 128-bit metadata record an FC
// sends to its utility chiplet (UC) before committing operands. Its field
// layout follows the published bit map: instruction_id [15:0],
// instruction_type [20:16], zero pad [31:21], src_fc_id [41:32],
// dst_fc_id [51:42], src_uc_id [57:52], dst_uc_id [63:58], op0 id/offset/length
// [75:64]/[87:76]/[95:88] and op1 id/offset/length [107:96]/[119:108]/[127:120].
// Bit k of the published map is bit k of the packed vector. The two FC-id
// fields are printed with typos in the source bit map; they are taken here as
// the 10-bit ranges [41:32] and [51:42].
//
// Node identifiers (10 bits) are {tile[5:0], pos[3:0]}: pos is the chiplet's
// place in its 3x3 tile (row-major 0..8, the UC in the centre at 4, the tile MC
// at 3, the second HBD MC at 5) and tile is the tile number in the grid. This
// split of the 10 bits is this design's reading of the "4'b tile - 6'b
// cluster" note. UC ids are tile+1 because UC id 0 means "any UC".
// Operand ids (12 bits, 0 = unused) are {tile[5:0], pos[3:0], region[1:0]} of
// the memory holding the operand; that encoding is this design's choice.
//
// All chiplet traffic travels as single flits (flit_t): a packet type, the
// destination and source nodes, the transaction id (the IIP instruction_id),
// an auxiliary node (the relocation target of SHIFT_TO) and a payload whose
// 256-bit width is the GPD packet width of the simulation parameters.
//
// Not every module uses every constant here; a module checked on its own
// therefore sees some of them as unused parameters. They are kept in one
// package so that all modules agree on the flit and IIP formats.
package shift_pkg;

  localparam int unsigned IIP_W     = 128;
  localparam int unsigned NODE_W    = 10;
  localparam int unsigned TILE_W    = 6;
  localparam int unsigned POS_W     = 4;
  localparam int unsigned TID_W     = 16;
  localparam int unsigned OPID_W    = 12;
  localparam int unsigned PAYLOAD_W = 256;  // GPD packet/memory payload width
  localparam int unsigned COST_W    = 12;   // hop-count cost width

  // Fixed places inside a 3x3 tile
  localparam logic [POS_W-1:0] POS_UC  = 4'd4;
  localparam logic [POS_W-1:0] POS_MC  = 4'd3;
  localparam logic [POS_W-1:0] POS_MC2 = 4'd5;   // second MC of an HBD tile

  typedef logic [NODE_W-1:0] node_id_t;
  typedef logic [TID_W-1:0]  tid_t;
  typedef logic [COST_W-1:0] cost_t;

  localparam cost_t COST_INF = '1;

  // 128-bit instruction intent packet; declared MSB first so that the packed
  // bit positions equal the published map.
  typedef struct packed {
    logic [7:0]        op1_len;   // [127:120] length in 64 B blocks, 0 = unused
    logic [11:0]       op1_off;   // [119:108] offset in 64 B blocks
    logic [OPID_W-1:0] op1_id;    // [107:96]  0 = unused
    logic [7:0]        op0_len;   // [95:88]
    logic [11:0]       op0_off;   // [87:76]
    logic [OPID_W-1:0] op0_id;    // [75:64]
    logic [5:0]        dst_uc_id; // [63:58]   0 = any
    logic [5:0]        src_uc_id; // [57:52]
    node_id_t          dst_fc_id; // [51:42]
    node_id_t          src_fc_id; // [41:32]
    logic [10:0]       zero_pad;  // [31:21]   11'b0
    logic [4:0]        instr_type;// [20:16]   32 categories
    tid_t              instr_id;  // [15:0]
  } iip_t;

  typedef enum logic [3:0] {
    PK_IIP      = 4'd0,  // FC -> UC: instruction intent packet (payload = iip_t)
    PK_EXECUTE  = 4'd1,  // UC -> FC: execute (payload = iip_t metadata)
    PK_SHIFT_TO = 4'd2,  // UC -> source FC / data holders: move to aux node
    PK_KILL     = 4'd3,  // UC -> source FC: discard local instruction copy
    PK_COMMIT   = 4'd4,  // executing FC -> UC and -> source FC
    PK_INSTR    = 4'd5,  // source FC -> relocated FC: the instruction itself
    PK_RD_REQ   = 4'd6,  // FC -> memory: operand read (payload = op id/off/len)
    PK_RD_DATA  = 4'd7,  // memory/FC -> FC: operand data
    PK_WR_DATA  = 4'd8,  // FC -> memory: result write-back
    PK_GOSSIP   = 4'd9   // UC -> UC: congestion state change
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e             ptype;
    node_id_t              dst;
    node_id_t              src;
    tid_t                  tid;
    node_id_t              aux;
    logic [PAYLOAD_W-1:0]  payload;
  } flit_t;

  localparam int unsigned FLIT_W = $bits(flit_t);

  // Commands a UC engine can decide on
  typedef enum logic [1:0] {
    DEC_LOCAL_L1   = 2'd0,  // operand in the source FC: relocation skipped
    DEC_LOCAL_TILE = 2'd1,  // operand in the source tile: relocation skipped
    DEC_EVALUATE   = 2'd2   // relocation candidates must be evaluated
  } pred_e;

  function automatic node_id_t make_node(logic [TILE_W-1:0] tile, logic [POS_W-1:0] pos);
    return {tile, pos};
  endfunction

  function automatic logic [TILE_W-1:0] node_tile(node_id_t n);
    return TILE_W'(n >> POS_W);
  endfunction

  function automatic logic [POS_W-1:0] node_pos(node_id_t n);
    return POS_W'(n - ((n >> POS_W) << POS_W));
  endfunction

  // Home node of an operand id {tile, pos, region}
  function automatic node_id_t opid_home(logic [OPID_W-1:0] id);
    return NODE_W'(id >> 2);
  endfunction

endpackage
