// tb_sync_fifo: random pushes and pops against a queue model.
//
// DEPTH 4, WIDTH 16. Each cycle pushes with probability 1/2 (only when not
// full) and pops with probability 1/2 (only when not empty). Checks the head
// data on every pop, the count and the full/empty flags every cycle.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, full, empty;
  logic [15:0] wr_data, rd_data;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  always #5 clk = ~clk;

  sync_fifo #(.WIDTH(16), .DEPTH(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || full != (q.size() == 4) || empty != (q.size() == 0)) begin
        failures++; $display("FAIL count %0d model %0d", count, q.size());
      end
      wr_en = !full && ($urandom % 2);
      rd_en = !empty && ($urandom % 2);
      wr_data = 16'($urandom);
      if (rd_en) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data %h exp %h", rd_data, q[0]); end
        void'(q.pop_front());
      end
      if (wr_en) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
