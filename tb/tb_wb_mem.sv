// tb_wb_mem: behavioural WISHBONE classic slave standing in for a slave IP
// core in testbenches: a 64-word memory indexed by address bits 7:2, with
// byte selects. It ends each cycle after 0 to 3 wait states; addresses
// with bits 27:24 = 4'hE end with err and 4'hD with rty (memory untouched).
// Memory starts as mem[i] = INIT_BASE + i.
module tb_wb_mem
  import noc_pkg::*;
#(
  parameter logic [31:0] INIT_BASE = 32'h0
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [ADR_W-1:0]  adr,
  input  logic [FLIT_W-1:0] dat_w,
  input  logic              we,
  input  logic [SEL_W-1:0]  sel,
  input  logic              cyc,
  input  logic              stb,
  output logic              ack,
  output logic              err,
  output logic              rty,
  output logic [FLIT_W-1:0] dat_r
);
  logic [31:0] mem [64];
  int          wait_cnt;
  int          n_cycles;

  initial begin
    for (int i = 0; i < 64; i++) mem[i] = INIT_BASE + 32'(i);
    n_cycles = 0;
  end

  always @(posedge clk) begin
    if (rst) begin
      ack <= 1'b0; err <= 1'b0; rty <= 1'b0; dat_r <= '0; wait_cnt <= 0;
    end else begin
      ack <= 1'b0; err <= 1'b0; rty <= 1'b0;
      if (cyc && stb && !ack && !err && !rty) begin
        if (wait_cnt == 0) wait_cnt <= 1 + int'($urandom_range(3));
        else if (wait_cnt == 1) begin
          wait_cnt <= 0;
          n_cycles <= n_cycles + 1;
          if (adr[27:24] == 4'hE)      err <= 1'b1;
          else if (adr[27:24] == 4'hD) rty <= 1'b1;
          else begin
            ack <= 1'b1;
            dat_r <= mem[adr[7:2]];
            if (we)
              for (int b = 0; b < 4; b++)
                if (sel[b]) mem[adr[7:2]][8*b +: 8] <= dat_w[8*b +: 8];
          end
        end else wait_cnt <= wait_cnt - 1;
      end
    end
  end
endmodule
