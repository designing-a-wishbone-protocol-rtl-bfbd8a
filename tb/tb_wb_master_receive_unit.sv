// tb_wb_master_receive_unit: presents response packets with rx_req_s and
// plays the transfer unit (read_cmd_req). Checks that read data and
// status are stored, that read_cmd_done is raised while the unit waits
// for the transfer unit to let go of read_cmd_req, that rx_ack is raised
// only after that and held until rx_req_s falls, and that a packet
// arriving with no read pending is acknowledged straight away.
module tb_wb_master_receive_unit;
  import noc_pkg::*;
  logic              clk = 1'b0, rst = 1'b1;
  logic              rx_req_s = 1'b0, rx_ack, read_cmd_req = 1'b0, read_cmd_done;
  logic [FLIT_W-1:0] crf = '0, dfl = '0, wb_dat_o;
  logic              rsp_err, rsp_rty;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  wb_master_receive_unit dut (
    .clk_i(clk), .reset_i(rst), .rx_req_s, .rx_ack, .cmd_response_flit(crf),
    .data_flit(dfl), .read_cmd_req, .read_cmd_done, .rsp_err, .rsp_rty, .wb_dat_o);

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
    check(!rx_ack && !read_cmd_done, "idle after reset");
    for (int t = 0; t < 30; t++) begin
      ctrl_flit_t c;
      logic [31:0] d;
      bit pending;
      pending = (t % 4 != 3);
      c = '0; c.pkt = PKT_RESP; c.err = (t % 3 == 1); c.rty = (t % 3 == 2); c.ack = (t % 3 == 0);
      d = $urandom;
      read_cmd_req = pending;
      repeat (3) @(negedge clk);
      crf = c; dfl = d; rx_req_s = 1'b1;
      repeat (2) @(negedge clk);
      check(wb_dat_o == d && rsp_err == c.err && rsp_rty == c.rty, "response stored");
      if (pending) begin
        repeat (3) @(negedge clk);
        check(read_cmd_done && !rx_ack, "read_cmd_done while the read is pending");
        read_cmd_req = 1'b0;
        repeat (2) @(negedge clk);
      end
      check(!read_cmd_done && rx_ack, "rx_ack after the transfer unit let go");
      repeat (3) @(negedge clk);
      check(rx_ack, "rx_ack held while rx_req_s is high");
      crf = $urandom; dfl = $urandom;   // bundled data may change now
      rx_req_s = 1'b0;
      repeat (2) @(negedge clk);
      check(!rx_ack, "rx_ack returns to zero");
      check(wb_dat_o == d, "read data held for the WISHBONE master");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
