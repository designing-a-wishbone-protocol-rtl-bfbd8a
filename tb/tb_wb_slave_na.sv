// tb_wb_slave_na: the whole slave network adapter between a model of the
// network (request packets sent on its input link, responses collected
// from its output link) and a behavioural WISHBONE memory. Core clock
// 10 ns, network clock 6 ns. Checks memory contents after writes, that
// only reads are answered, the response packet (reversed header, status,
// data) and err / rty responses.
module tb_wb_slave_na;
  import noc_pkg::*;
  logic              clk = 1'b0, nclk = 1'b0, rst = 1'b1;
  logic [ADR_W-1:0]  wb_adr_o;
  logic [FLIT_W-1:0] wb_dat_o, wb_dat_i;
  logic              wb_we_o, wb_cyc_o, wb_stb_o, wb_ack_i, wb_err_i, wb_rty_i;
  logic [SEL_W-1:0]  wb_sel_o;
  link_fwd_t         req_link, rsp_link;
  logic              req_ack, rsp_ack;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;
  always #3 nclk = ~nclk;

  wb_slave_na dut (
    .clk_i(clk), .net_clk(nclk), .reset_i(rst),
    .wb_adr_o, .wb_dat_o, .wb_we_o, .wb_sel_o, .wb_cyc_o, .wb_stb_o,
    .wb_ack_i, .wb_err_i, .wb_rty_i, .wb_dat_i,
    .data_in(req_link.data), .rh_in(req_link.rh), .ri_in(req_link.ri), .re_in(req_link.re),
    .ack_in(req_ack),
    .data_out(rsp_link.data), .rh_out(rsp_link.rh), .ri_out(rsp_link.ri), .re_out(rsp_link.re),
    .ack_out(rsp_ack));

  tb_wb_mem #(.INIT_BASE(32'h3300_0000)) mem (
    .clk, .rst, .adr(wb_adr_o), .dat_w(wb_dat_o), .we(wb_we_o), .sel(wb_sel_o),
    .cyc(wb_cyc_o), .stb(wb_stb_o), .ack(wb_ack_i), .err(wb_err_i), .rty(wb_rty_i),
    .dat_r(wb_dat_i));

  tb_link_src  src  (.clk(nclk), .link(req_link), .ack(req_ack));
  tb_link_sink #(.MAX_DELAY(2)) sink (.clk(nclk), .link(rsp_link), .ack(rsp_ack));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] shadow [64];
    int n_rsp = 0, n_err = 0, n_rty = 0;
    for (int i = 0; i < 64; i++) shadow[i] = 32'h3300_0000 + 32'(i);
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (4) @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      logic [FLIT_W-1:0] f [];
      ctrl_flit_t c;
      logic [31:0] a, d, h;
      bit we;
      we = ($urandom_range(1) == 1);
      a  = {4'h2, (t % 9 == 4) ? 4'hE : ((t % 9 == 6) ? 4'hD : 4'h0), 16'h0, 6'($urandom), 2'b0};
      d  = $urandom;
      h  = $urandom;
      c  = '0; c.pkt = we ? PKT_WRITE : PKT_READ; c.we = we; c.sel = 4'b1111;
      f  = new[we ? 4 : 3];
      f[0] = h; f[1] = c; f[2] = a;
      if (we) f[3] = d;
      src.send_packet(f, we ? 4 : 3);
      if (we) begin
        if (a[27:24] == 4'h0) shadow[a[7:2]] = d;
      end else begin
        int w;
        w = 0;
        while (!(sink.q.size() > 0 && sink.q[$][33:32] == FL_TAIL) && w < 2000) begin
          @(negedge nclk); w++;
        end
        check(sink.q.size() == 3, $sformatf("response of 3 flits, got %0d", sink.q.size()));
        if (sink.q.size() == 3) begin
          ctrl_flit_t r;
          r = ctrl_flit_t'(sink.q[1][31:0]);
          n_rsp++;
          check(sink.q[0] == {FL_HEAD, reverse_route(h)}, "response header reversed");
          check(r.pkt == PKT_RESP, "response type");
          if (a[27:24] == 4'hE)      begin check(r.err && !r.ack, "err response"); n_err++; end
          else if (a[27:24] == 4'hD) begin check(r.rty && !r.ack, "rty response"); n_rty++; end
          else begin
            check(r.ack && !r.err && !r.rty, "ack response");
            check(sink.q[2] == {FL_TAIL, shadow[a[7:2]]}, $sformatf("read data %h", sink.q[2][31:0]));
          end
        end
        sink.q.delete();
      end
    end
    repeat (100) @(negedge clk);
    check(sink.q.size() == 0, "writes get no response");
    for (int i = 0; i < 64; i++) check(mem.mem[i] == shadow[i], $sformatf("memory word %0d", i));
    check(n_rsp > 0 && n_err > 0 && n_rty > 0, "reads, err and rty seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
