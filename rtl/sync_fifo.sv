// sync_fifo: single-clock first-in first-out buffer.
//
// Used as the router's per-port input buffer (the "IN FIFO" of the UC router)
// and as the UC's IIP reception FIFO, where an arriving intent packet waits for
// the SHIFT engine. The head entry is always visible on rd_data; a pop
// (rd_en while !empty) and a push (wr_en while !full) may happen in the same
// cycle; a push into a full FIFO and a pop from an empty one are ignored,
// so callers may hold wr_en under a valid/ready stall. count reports the
// occupancy for traffic monitoring. Storage is a
// register array; depth and width are this design's choice, the source only
// says that packets are buffered in a FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= incr(wp);
      if (do_rd) rp <= incr(rp);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

endmodule
