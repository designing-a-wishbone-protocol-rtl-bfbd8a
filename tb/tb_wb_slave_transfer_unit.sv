// tb_wb_slave_transfer_unit: ends slave cycles with ack, err or rty and
// read data, then raises read_cmd_req with a reversed header, playing the
// slave receive unit and the asynchronous transmitter. Checks the response
// packet (header, control status, data), the transmit_req/tx_ack_s
// handshake and read_cmd_done.
module tb_wb_slave_transfer_unit;
  import noc_pkg::*;
  logic              clk = 1'b0, rst = 1'b1;
  logic              wb_ack_i = 1'b0, wb_err_i = 1'b0, wb_rty_i = 1'b0;
  logic [FLIT_W-1:0] wb_dat_i = '0;
  route_t            rev = '0;
  logic              read_cmd_req = 1'b0, read_cmd_done, transmit_req, tx_ack_s = 1'b0;
  logic [FLIT_W-1:0] hf, cf, df;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  wb_slave_transfer_unit dut (
    .clk_i(clk), .reset_i(rst), .wb_ack_i, .wb_err_i, .wb_rty_i, .wb_dat_i,
    .reversed_header(rev), .read_cmd_req, .read_cmd_done, .transmit_req,
    .transmit_header_flit(hf), .transmit_control_flit(cf), .transmit_data_flit(df), .tx_ack_s);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 30; t++) begin
      logic [31:0] d;
      ctrl_flit_t  c;
      int          how;
      how = t % 3;
      d   = $urandom;
      // the slave ends its cycle
      @(negedge clk);
      wb_dat_i = d; wb_ack_i = (how == 0); wb_err_i = (how == 1); wb_rty_i = (how == 2);
      @(negedge clk);
      wb_ack_i = 1'b0; wb_err_i = 1'b0; wb_rty_i = 1'b0; wb_dat_i = $urandom;
      check(!transmit_req, "nothing sent without read_cmd_req");
      rev = $urandom;
      read_cmd_req = 1'b1;
      @(negedge clk);
      while (!transmit_req) @(negedge clk);
      c = ctrl_flit_t'(cf);
      check(hf == rev, "response header is the reversed header");
      check(c.pkt == PKT_RESP && c.ack == (how == 0) && c.err == (how == 1) && c.rty == (how == 2),
            "response status");
      check(df == d, "response data");
      check(!read_cmd_done, "not done before the transmitter acknowledges");
      repeat ($urandom_range(3)) @(negedge clk);
      tx_ack_s = 1'b1;
      @(negedge clk);
      check(!transmit_req && read_cmd_done, "request dropped, done raised");
      read_cmd_req = 1'b0;
      repeat (2) @(negedge clk);
      check(read_cmd_done, "done held while tx_ack_s is high");
      tx_ack_s = 1'b0;
      repeat (2) @(negedge clk);
      check(!read_cmd_done && !transmit_req, "handshakes back to zero");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
