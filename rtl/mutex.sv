// mutex: N-way mutual exclusion element used to arbitrate between router
// input ports that want the same output port.
//
// Each requester raises its req bit and holds it for as long as it needs
// the resource; the mutex grants at most one requester (gnt one-hot,
// registered) and keeps the grant until that requester lowers its req.
// When the resource is free and several requests are pending, the one
// after the last winner in round-robin order is granted, so a grant
// appears one clock after the request at the earliest. The paper says a
// mutex does the arbitration; the N-way clocked form and the round-robin
// choice between simultaneous requests are assumptions (an asynchronous
// mutex would resolve by arrival time).
module mutex #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] req,
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;     // index of the last winner
  logic [N-1:0]  pick;     // one-hot choice among pending requests
  logic [IW-1:0] pick_idx;
  logic          pick_any;

  always_comb begin
    pick     = '0;
    pick_idx = '0;
    pick_any = 1'b0;
    for (int k = 1; k <= int'(N); k++) begin
      logic [IW:0] idx;
      idx = {1'b0, last} + (IW+1)'(k);
      if (idx >= (IW+1)'(N)) idx = idx - (IW+1)'(N);
      if (!pick_any && req[idx[IW-1:0]]) begin
        pick[idx[IW-1:0]] = 1'b1;
        pick_idx  = idx[IW-1:0];
        pick_any  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gnt  <= '0;
      last <= IW'(N-1);
    end else if (gnt == '0) begin
      if (pick_any) begin
        gnt  <= pick;
        last <= pick_idx;
      end
    end else if ((gnt & req) == '0) begin
      gnt <= '0;           // holder released
    end
  end

  a_mutex: assert property (@(posedge clk) disable iff (rst) $onehot0(gnt));
endmodule
