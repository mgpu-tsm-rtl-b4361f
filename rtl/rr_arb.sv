// rr_arb: round-robin arbiter.
//
// Grants one of N requesters, searching upward from the requester after the
// last one granted, so every requester that keeps asking is served within N
// grants. gnt (one-hot) and gnt_idx (its index) are combinational from req and the pointer. When adv is high
// in a cycle with a grant, the pointer moves past the granted requester at
// the next clock edge. Reset puts the pointer at requester 0.
// The paper names no arbitration policy; round robin is this design's choice.
module rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         adv,
  output logic [N-1:0] gnt,
  output logic [(N > 1 ? $clog2(N) : 1)-1:0] gnt_idx
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr_q;
  logic [IW-1:0] win;
  logic          any;

  always_comb begin
    gnt = '0;
    win = '0;
    any = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr_q) + k) % N;
      if (!any && req[idx]) begin
        any      = 1'b1;
        win      = IW'(idx);
        gnt[idx] = 1'b1;
      end
    end
  end

  assign gnt_idx = win;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         ptr_q <= '0;
    else if (adv && any) ptr_q <= (int'(win) == N - 1) ? '0 : IW'(int'(win) + 1);
  end
endmodule
