// router_fifo: flit buffer placed on every router input and output port.
//
// A first-in first-out queue of DEPTH flits with valid/ready handshakes on
// both sides, written as a register array with read and write pointers.
// A flit written in one cycle can be read in the next. The paper shows a
// FIFO on each port of the router but gives neither its depth nor how it
// is built; DEPTH = 4 and the synchronous implementation are assumptions.
module router_fifo
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  flit_t in_flit,
  output logic  in_ready,
  output logic  out_valid,
  output flit_t out_flit,
  input  logic  out_ready
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t             mem [DEPTH];
  logic [AW-1:0]     wp, rp;
  logic [AW:0]       count;
  logic              push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_flit  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_flit;
endmodule
