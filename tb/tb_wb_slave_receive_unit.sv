// tb_wb_slave_receive_unit: presents request packets with rx_req_s, runs
// them against a behavioural WISHBONE memory and plays the slave transfer
// unit (read_cmd_done). Checks the WISHBONE cycle (address, data, write
// enable, selects), memory contents after writes, that a read raises
// read_cmd_req with the reversed header and a write does not, and the
// receive_ack handshake.
module tb_wb_slave_receive_unit;
  import noc_pkg::*;
  logic              clk = 1'b0, rst = 1'b1;
  logic              rx_req_s = 1'b0, receive_ack;
  logic [FLIT_W-1:0] hf = '0, cf = '0, af = '0, df = '0;
  logic [ADR_W-1:0]  wb_adr_o;
  logic [FLIT_W-1:0] wb_dat_o, mem_dat;
  logic              wb_we_o, wb_cyc_o, wb_stb_o, wb_ack_i, wb_err_i, wb_rty_i;
  logic [SEL_W-1:0]  wb_sel_o;
  route_t            reversed_header;
  logic              read_cmd_req, read_cmd_done = 1'b0;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  wb_slave_receive_unit dut (
    .clk_i(clk), .reset_i(rst), .rx_req_s, .receive_ack,
    .receive_header_flit(hf), .receive_control_flit(cf), .receive_addr_flit(af),
    .receive_data_flit(df), .wb_adr_o, .wb_dat_o, .wb_we_o, .wb_sel_o, .wb_cyc_o,
    .wb_stb_o, .wb_ack_i, .wb_err_i, .wb_rty_i, .reversed_header, .read_cmd_req,
    .read_cmd_done);

  tb_wb_mem #(.INIT_BASE(32'h5000_0000)) mem (
    .clk, .rst, .adr(wb_adr_o), .dat_w(wb_dat_o), .we(wb_we_o), .sel(wb_sel_o),
    .cyc(wb_cyc_o), .stb(wb_stb_o), .ack(wb_ack_i), .err(wb_err_i), .rty(wb_rty_i),
    .dat_r(mem_dat));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] shadow [64];
  int          bus_cycles = 0;
  always @(posedge clk) if (wb_cyc_o && wb_stb_o && (wb_ack_i || wb_err_i || wb_rty_i)) bus_cycles++;

  initial begin
    for (int i = 0; i < 64; i++) shadow[i] = 32'h5000_0000 + 32'(i);
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int t = 0; t < 60; t++) begin
      ctrl_flit_t c;
      logic [31:0] a, d, h;
      bit we;
      int n_before;
      we = ($urandom_range(1) == 1);
      a  = {4'h3, 4'(t % 8 == 7 ? 4'hE : 4'h0), 16'h0, 6'($urandom), 2'b00};
      d  = $urandom;
      h  = $urandom;
      c  = '0; c.pkt = we ? PKT_WRITE : PKT_READ; c.we = we; c.sel = 4'($urandom);
      hf = h; cf = c; af = a; df = d;
      n_before = bus_cycles;
      @(negedge clk) rx_req_s = 1'b1;
      @(posedge wb_stb_o);
      #1 check(wb_adr_o == a && wb_we_o == we && wb_sel_o == c.sel && (!we || wb_dat_o == d),
               "WISHBONE cycle carries the request");
      if (we) begin
        while (!receive_ack) @(negedge clk);
        check(read_cmd_req == 1'b0, "no response for a write");
        if (a[27:24] != 4'hE)
          for (int b = 0; b < 4; b++) if (c.sel[b]) shadow[a[7:2]][8*b +: 8] = d[8*b +: 8];
      end else begin
        while (!read_cmd_req) @(negedge clk);
        check(reversed_header == reverse_route(h), "reversed header");
        check(!receive_ack, "receive_ack waits for the response");
        repeat (3) @(negedge clk);
        read_cmd_done = 1'b1;
        while (read_cmd_req) @(negedge clk);
        read_cmd_done = 1'b0;
        @(negedge clk);
        check(receive_ack, "receive_ack after the response");
      end
      check(bus_cycles == n_before + 1, "exactly one WISHBONE cycle");
      rx_req_s = 1'b0;
      repeat (2) @(negedge clk);
      check(!receive_ack, "receive_ack returns to zero");
    end
    for (int i = 0; i < 64; i++) check(mem.mem[i] == shadow[i], $sformatf("memory word %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
