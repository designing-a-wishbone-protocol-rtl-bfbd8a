// tb_async_transmitter: hands write, read and response packets to the
// transmitter with the four-phase transmit_req/tx_ack handshake and checks
// the flits on the link (kind and data, in order: header, control,
// address, data as the packet type needs), that tx_ack rises only after
// the last flit was taken and falls after transmit_req falls.
module tb_async_transmitter;
  import noc_pkg::*;
  logic              clk = 1'b0, rst = 1'b1;
  logic              transmit_req = 1'b0, tx_ack;
  pkt_type_e         ptype = PKT_READ;
  logic [FLIT_W-1:0] hf = '0, cf = '0, af = '0, df = '0;
  link_fwd_t         link;
  logic              ack_out;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  async_transmitter dut (
    .clk, .reset_i(rst), .transmit_req, .transmit_packet_type(ptype),
    .transmit_header_flit(hf), .transmit_control_flit(cf), .transmit_addr_flit(af),
    .transmit_data_flit(df), .tx_ack,
    .data_out(link.data), .rh_out(link.rh), .ri_out(link.ri), .re_out(link.re), .ack_out);

  tb_link_sink #(.MAX_DELAY(3)) sink (.clk, .link, .ack(ack_out));

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

  task automatic one(input pkt_type_e t);
    logic [33:0] want [$];
    hf = $urandom; cf = $urandom; af = $urandom; df = $urandom; ptype = t;
    want.push_back({FL_HEAD, hf});
    want.push_back({FL_BODY, cf});
    if (t == PKT_WRITE) begin want.push_back({FL_BODY, af}); want.push_back({FL_TAIL, df}); end
    else if (t == PKT_READ) want.push_back({FL_TAIL, af});
    else want.push_back({FL_TAIL, df});
    @(negedge clk) transmit_req = 1'b1;
    while (!tx_ack) @(negedge clk);
    check(sink.q.size() == want.size(), $sformatf("type %0d: tx_ack after all %0d flits (%0d)", t, want.size(), sink.q.size()));
    @(negedge clk) transmit_req = 1'b0;
    repeat (2) @(negedge clk);
    check(tx_ack == 1'b1, "tx_ack held until the request is seen low");
    repeat (3) @(negedge clk);
    check(tx_ack == 1'b0, "tx_ack returns to zero");
    repeat (6) @(negedge clk);
    check(sink.q.size() == want.size(), "flit count");
    foreach (want[i])
      if (i < sink.q.size()) check(sink.q[i] == want[i], $sformatf("type %0d flit %0d: %h want %h", t, i, sink.q[i], want[i]));
    sink.q.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (5) @(negedge clk);
    check(link.rh == 0 && link.ri == 0 && link.re == 0 && tx_ack == 0, "idle after reset");
    for (int i = 0; i < 12; i++) one(pkt_type_e'(i % 3));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
