// transaction_table: the UC's table of instructions in flight.
//
// One entry per dispatched instruction, keyed by its instruction id (the
// TID of the chiplet protocol) and holding the source FC, the FC chosen to
// execute it and whether it was relocated. An entry is written when the UC
// dispatches its commands (ins) and cleared when the executing FC's COMMIT
// arrives (rem). Lookup is associative over all ENTRIES. ins is refused
// (ins_ok = 0) when the table is full or already holds the TID; rem_hit
// tells whether a COMMIT found its entry. Insert and remove of different
// TIDs may happen in the same cycle. The results are combinational, the
// table state changes on the clock edge.
//
// Follows the source: a transaction table indexed by instruction id from
// which COMMIT removes the entry. Its size (16) is this design's choice.
module transaction_table
  import shift_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ins,
  input  tid_t        ins_tid,
  input  node_id_t    ins_src,
  input  node_id_t    ins_exec,
  input  logic        ins_reloc,
  output logic        ins_ok,
  input  logic        rem,
  input  tid_t        rem_tid,
  output logic        rem_hit,
  output node_id_t    rem_exec,
  output logic [$clog2(ENTRIES+1)-1:0] used,
  output logic        full
);
  typedef struct packed {
    logic     valid;
    tid_t     tid;
    node_id_t src;
    node_id_t exec;
    logic     reloc;
  } entry_t;

  entry_t tab [ENTRIES];
  logic [$clog2(ENTRIES)-1:0] free_idx, rem_idx;
  logic any_free, dup;

  always_comb begin
    any_free = 1'b0; free_idx = '0; dup = 1'b0;
    rem_hit = 1'b0; rem_idx = '0; rem_exec = '0;
    used = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!tab[i].valid) begin
        any_free = 1'b1;
        free_idx = $clog2(ENTRIES)'(i);
      end
    end
    for (int i = 0; i < ENTRIES; i++) begin
      if (tab[i].valid) used = used + 1'b1;
      if (tab[i].valid && tab[i].tid == ins_tid) dup = 1'b1;
      if (rem && tab[i].valid && tab[i].tid == rem_tid) begin
        rem_hit  = 1'b1;
        rem_idx  = $clog2(ENTRIES)'(i);
        rem_exec = tab[i].exec;
      end
    end
    full   = !any_free;
    ins_ok = any_free && !dup;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
    end else begin
      if (rem_hit) tab[rem_idx].valid <= 1'b0;
      if (ins && ins_ok) tab[free_idx] <= '{valid: 1'b1, tid: ins_tid, src: ins_src,
                                            exec: ins_exec, reloc: ins_reloc};
    end
  end
endmodule
