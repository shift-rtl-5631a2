// tb_transaction_table: insert/remove by TID against an associative model.
//
// ENTRIES = 4. Random inserts of fresh and duplicate TIDs and random COMMITs
// of present and absent TIDs. Checks ins_ok (refused when full or
// duplicate), rem_hit and rem_exec, the used count and full.
module tb_transaction_table;
  import shift_pkg::*;
  logic clk = 0, rst_n = 0, ins = 0, rem = 0, ins_reloc = 0;
  tid_t ins_tid = '0, rem_tid = '0;
  node_id_t ins_src = '0, ins_exec = '0, rem_exec;
  logic ins_ok, rem_hit, full;
  logic [2:0] used;
  int checks = 0, failures = 0;
  node_id_t model [tid_t];
  always #5 clk = ~clk;

  transaction_table #(.ENTRIES(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ins = $urandom % 2; rem = $urandom % 2;
      ins_tid = tid_t'($urandom % 8); rem_tid = tid_t'($urandom % 8);
      if (ins && rem && ins_tid == rem_tid) rem = 0;
      ins_exec = node_id_t'($urandom); ins_src = node_id_t'($urandom);
      #1;
      checks += 3;
      if (ins_ok != (model.num() < 4 && !model.exists(ins_tid))) begin
        failures++; $display("FAIL ins_ok %0d tid %0d n %0d", ins_ok, ins_tid, model.num());
      end
      if (rem_hit != (rem && model.exists(rem_tid))) begin failures++; $display("FAIL rem_hit"); end
      else if (rem_hit && rem_exec != model[rem_tid]) begin failures++; $display("FAIL rem_exec"); end
      if (int'(used) != model.num() || full != (model.num() == 4)) begin failures++; $display("FAIL used"); end
      if (rem && model.exists(rem_tid)) model.delete(rem_tid);
      if (ins && ins_ok) model[ins_tid] = ins_exec;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
