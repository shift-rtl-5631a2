// tb_rr_arbiter: grant rules of the round-robin arbiter.
//
// N = 5. Random request vectors and advance strobes. The model keeps the
// last granted index; the expected grant is the first requester after it in
// circular order. Also checks that with all inputs requesting and advancing
// every cycle each input is served exactly once in every 5 grants.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0, adv = 0;
  logic [N-1:0] req = '0, gnt, exp_g;
  int checks = 0, failures = 0, last = N - 1;
  int served [N];
  always #5 clk = ~clk;

  rr_arbiter #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      req = N'($urandom);
      adv = ($urandom % 4) != 0;
      #1;
      exp_g = '0;
      for (int k = 1; k <= N; k++) if (req[(last + k) % N]) begin exp_g[(last + k) % N] = 1; break; end
      checks++;
      if (gnt != exp_g) begin failures++; $display("FAIL req %b gnt %b exp %b", req, gnt, exp_g); end
      if (adv && req != 0) for (int k = 0; k < N; k++) if (exp_g[k]) last = k;
    end
    // fairness
    foreach (served[k]) served[k] = 0;
    for (int i = 0; i < 5 * N; i++) begin
      @(negedge clk);
      req = '1; adv = 1;
      #1;
      for (int k = 0; k < N; k++) if (gnt[k]) served[k]++;
    end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (served[k] != 5) begin failures++; $display("FAIL input %0d served %0d", k, served[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
