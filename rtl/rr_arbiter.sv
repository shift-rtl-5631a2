// rr_arbiter: round-robin arbiter for a router output port.
//
// Each cycle it grants one of the requesting inputs (one-hot gnt), searching
// from the input after the last one served so that every requester is served
// within N grants. The pointer only advances when the grant is used (adv), so
// a stalled output keeps its grant stable. Combinational grant, registered
// pointer. The source names an arbitration stage; round-robin is this
// design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         adv,
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;
  logic [IW-1:0] win;
  logic          any;

  always_comb begin
    gnt = '0;
    win = last;
    any = 1'b0;
    for (int k = 1; k <= N; k++) begin
      logic [IW-1:0] idx;
      idx = IW'((int'(last) + k) % N);
      if (!any && req[idx]) begin
        any = 1'b1;
        win = IW'(idx);
      end
    end
    if (any) gnt[win] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (adv && any) last <= win;
  end

  always_comb if (rst_n) a_onehot: assert ($onehot0(gnt));
endmodule
