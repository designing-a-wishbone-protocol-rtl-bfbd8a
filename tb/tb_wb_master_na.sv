// tb_wb_master_na: the whole master network adapter between a WISHBONE
// master (testbench tasks) and a model of the network with a remote
// memory behind it. Core clock 10 ns, network clock 7 ns. Checks request
// packets on the link (route header from the table, control, address,
// data), posted writes, reads answered with the remote memory's data, and
// err / rty responses turned into wb_err_o / wb_rty_o.
module tb_wb_master_na;
  import noc_pkg::*;

  function automatic route_lut_t test_lut();
    route_lut_t l;
    for (int i = 0; i < int'(LUT_SIZE); i++) l[i] = 32'hA000_0000 | 32'(i * 7 + 1);
    return l;
  endfunction
  localparam route_lut_t LUT = test_lut();

  logic              clk = 1'b0, nclk = 1'b0, rst = 1'b1;
  logic [ADR_W-1:0]  wb_adr_i = '0;
  logic [FLIT_W-1:0] wb_dat_i = '0, wb_dat_o;
  logic              wb_we_i = 1'b0, wb_cyc_i = 1'b0, wb_stb_i = 1'b0;
  logic [SEL_W-1:0]  wb_sel_i = '1;
  logic              wb_ack_o, wb_err_o, wb_rty_o;
  link_fwd_t         req_link, rsp_link;
  logic              req_ack, rsp_ack;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;
  always #3.5 nclk = ~nclk;

  wb_master_na #(.ROUTE_LUT(LUT)) dut (
    .clk_i(clk), .net_clk(nclk), .reset_i(rst),
    .wb_adr_i, .wb_dat_i, .wb_we_i, .wb_sel_i, .wb_cyc_i, .wb_stb_i,
    .wb_ack_o, .wb_err_o, .wb_rty_o, .wb_dat_o,
    .data_out(req_link.data), .rh_out(req_link.rh), .ri_out(req_link.ri), .re_out(req_link.re),
    .ack_out(req_ack),
    .data_in(rsp_link.data), .rh_in(rsp_link.rh), .ri_in(rsp_link.ri), .re_in(rsp_link.re),
    .ack_in(rsp_ack));

  tb_link_sink #(.MAX_DELAY(3)) sink (.clk(nclk), .link(req_link), .ack(req_ack));
  tb_link_src  src  (.clk(nclk), .link(rsp_link), .ack(rsp_ack));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // remote end: a memory indexed by address bits 7:2; addresses with
  // bits 27:24 = E answer err, = D answer rty
  logic [31:0] rmem [64];
  int          n_req = 0;
  initial begin
    for (int i = 0; i < 64; i++) rmem[i] = 32'h7700_0000 + 32'(i);
    forever begin
      @(negedge nclk);
      if (sink.q.size() > 0 && sink.q[$][33:32] == FL_TAIL) begin
        logic [33:0] p [$];
        ctrl_flit_t  c;
        logic [31:0] a;
        p = sink.q;
        sink.q.delete();
        n_req++;
        c = ctrl_flit_t'(p[1][31:0]);
        a = p[2][31:0];
        check(p[0][33:32] == FL_HEAD && p[0][31:0] == LUT[a[31:28]], "request header = table entry");
        check(p.size() == (c.we ? 4 : 3), "request length");
        check(c.pkt == (c.we ? PKT_WRITE : PKT_READ), "request type");
        if (c.we) rmem[a[7:2]] = p[3][31:0];
        else begin
          ctrl_flit_t r;
          logic [FLIT_W-1:0] f [];
          r = '0; r.pkt = PKT_RESP;
          r.err = (a[27:24] == 4'hE); r.rty = (a[27:24] == 4'hD); r.ack = !(r.err || r.rty);
          f = new[3];
          f[0] = $urandom; f[1] = r; f[2] = rmem[a[7:2]];
          repeat ($urandom_range(20)) @(negedge nclk);
          src.send_packet(f, 3);
        end
      end
    end
  end

  logic [2:0]  term;
  logic [31:0] rdata;
  task automatic wb_cycle(input logic we, input logic [31:0] adr, input logic [31:0] dat);
    @(negedge clk);
    wb_cyc_i = 1'b1; wb_stb_i = 1'b1; wb_we_i = we; wb_adr_i = adr; wb_dat_i = dat;
    @(posedge clk);
    while (!(wb_ack_o || wb_err_o || wb_rty_o)) @(posedge clk);
    term  = {wb_ack_o, wb_err_o, wb_rty_o};
    rdata = wb_dat_o;
    @(negedge clk);
    wb_cyc_i = 1'b0; wb_stb_i = 1'b0;
  endtask

  initial begin
    logic [31:0] shadow [64];
    int n_wr = 0, n_rd = 0, n_err = 0, n_rty = 0;
    for (int i = 0; i < 64; i++) shadow[i] = 32'h7700_0000 + 32'(i);
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    repeat (4) @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      logic [31:0] a, d;
      bit we;
      we = ($urandom_range(2) == 0);
      a  = {4'($urandom), (t % 10 == 4) ? 4'hE : ((t % 10 == 7) ? 4'hD : 4'h0), 16'h0, 6'($urandom), 2'b0};
      d  = $urandom;
      wb_cycle(we, a, d);
      if (we) begin
        n_wr++;
        check(term == 3'b100, "write acknowledged");
        shadow[a[7:2]] = d;   // the remote model stores every write
      end else begin
        n_rd++;
        if (a[27:24] == 4'hE)      begin check(term == 3'b010, "read ended with err"); n_err++; end
        else if (a[27:24] == 4'hD) begin check(term == 3'b001, "read ended with rty"); n_rty++; end
        else begin
          check(term == 3'b100, "read acknowledged");
          check(rdata == shadow[a[7:2]], $sformatf("read data %h want %h", rdata, shadow[a[7:2]]));
        end
      end
    end
    repeat (50) @(posedge clk);
    check(n_req == 60, $sformatf("60 request packets, got %0d", n_req));
    check(n_wr > 0 && n_rd > 0 && n_err > 0 && n_rty > 0, "writes, reads, err and rty all seen");
    $display("writes %0d reads %0d err %0d rty %0d", n_wr, n_rd, n_err, n_rty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
