// tb_iip_decoder: field extraction and grid mapping of the intent packet.
//
// Builds random 128-bit packets by placing field values at the published bit
// positions with explicit part-selects (not through the struct), then checks
// every decoded field, the operand-used flags, the holder nodes, the grid
// indices computed from tile/place, and the well-formed flag (zero pad, FC
// place, on-grid operands). 2 x 2 tiles.
module tb_iip_decoder;
  import shift_pkg::*;
  localparam int TX = 2, TY = 2, GX = 6, N = 36, GI_W = 6;
  logic [127:0] raw;
  iip_t iip;
  node_id_t src_node, wb_node, op_home [2];
  logic [1:0] op_used;
  logic [GI_W-1:0] src_gidx, op_gidx [2];
  logic well_formed;
  int checks = 0, failures = 0;

  iip_decoder #(.TILES_X(TX), .TILES_Y(TY)) dut (.*);

  function automatic int gi(int tile, int pos);
    return ((tile / TX) * 3 + pos / 3) * GX + (tile % TX) * 3 + pos % 3;
  endfunction

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s raw=%h", what, raw); end
  endtask

  initial begin
    for (int k = 0; k < 500; k++) begin
      int id, ty, st, sp, dt, dp, o0t, o0p, o1t, o1p, l0, l1, pad;
      id = $urandom % 65536; ty = $urandom % 32;
      st = $urandom % 4; sp = $urandom % 9; dt = $urandom % 4; dp = $urandom % 9;
      o0t = $urandom % 4; o0p = $urandom % 9; o1t = $urandom % 4; o1p = $urandom % 9;
      l0 = $urandom % 3; l1 = $urandom % 3;
      pad = (($urandom % 8) == 0) ? 1 : 0;
      if (k == 0) begin sp = 0; l0 = 1; l1 = 1; pad = 0; end
      raw = '0;
      raw[15:0]   = 16'(id);
      raw[20:16]  = 5'(ty);
      raw[31:21]  = 11'(pad);
      raw[35:32]  = 4'(sp);  raw[41:36] = 6'(st);
      raw[45:42]  = 4'(dp);  raw[51:46] = 6'(dt);
      raw[57:52]  = 6'(st + 1);
      raw[75:64]  = {6'(o0t), 4'(o0p), 2'd1};
      raw[87:76]  = 12'($urandom);
      raw[95:88]  = 8'(l0);
      raw[107:96] = {6'(o1t), 4'(o1p), 2'd2};
      raw[127:120] = 8'(l1);
      #1;
      chk(iip.instr_id == 16'(id) && iip.instr_type == 5'(ty), "id/type");
      chk(src_node == {6'(st), 4'(sp)} && wb_node == {6'(dt), 4'(dp)}, "nodes");
      chk(iip.src_uc_id == 6'(st + 1), "src_uc");
      chk(op_used == {l1 != 0, l0 != 0}, "op_used");
      chk(op_home[0] == {6'(o0t), 4'(o0p)} && op_home[1] == {6'(o1t), 4'(o1p)}, "op_home");
      chk(int'(src_gidx) == gi(st, sp) && int'(op_gidx[0]) == gi(o0t, o0p) && int'(op_gidx[1]) == gi(o1t, o1p), "gidx");
      chk(well_formed == (pad == 0 && sp != 4 && sp != 3), "well_formed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
