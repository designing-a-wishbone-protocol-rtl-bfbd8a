// tb_wb_master_transfer_unit: a WISHBONE master issues writes and reads;
// the testbench plays the asynchronous transmitter (tx_ack_s answers
// transmit_req after a random delay) and the receive unit (read_cmd_done
// with a response status). Checks: route header taken from the table
// entry chosen by address bits 31:28, control/address/data flits, packet
// type, transmit_req three clocks after the strobe is seen (wait, store,
// one-clock route look-up), that a write is acknowledged without waiting
// for a response, that a read waits for read_cmd_done and ends with ack,
// err or rty as the response says, and that the termination lasts one
// clock.
module tb_wb_master_transfer_unit;
  import noc_pkg::*;

  function automatic route_lut_t test_lut();
    route_lut_t l;
    for (int i = 0; i < int'(LUT_SIZE); i++) l[i] = 32'hC0DE_0000 + 32'(i * 32'h111);
    return l;
  endfunction
  localparam route_lut_t LUT = test_lut();

  logic              clk = 1'b0, rst = 1'b1;
  logic [ADR_W-1:0]  wb_adr_i = '0;
  logic [FLIT_W-1:0] wb_dat_i = '0;
  logic              wb_we_i = 1'b0, wb_cyc_i = 1'b0, wb_stb_i = 1'b0;
  logic [SEL_W-1:0]  wb_sel_i = '0;
  logic              wb_ack_o, wb_err_o, wb_rty_o;
  logic              transmit_req, tx_ack_s = 1'b0;
  pkt_type_e         transmit_packet_type;
  logic [FLIT_W-1:0] hf, cf, af, df;
  logic              read_cmd_req, read_cmd_done = 1'b0, rsp_err = 1'b0, rsp_rty = 1'b0;
  int                checks = 0, failures = 0;

  always #5 clk = ~clk;

  wb_master_transfer_unit #(.ROUTE_LUT(LUT)) dut (
    .clk_i(clk), .reset_i(rst), .wb_adr_i, .wb_dat_i, .wb_we_i, .wb_sel_i, .wb_cyc_i,
    .wb_stb_i, .wb_ack_o, .wb_err_o, .wb_rty_o, .transmit_req, .transmit_packet_type,
    .transmit_header_flit(hf), .transmit_control_flit(cf), .transmit_addr_flit(af),
    .transmit_data_flit(df), .tx_ack_s, .read_cmd_req, .read_cmd_done, .rsp_err, .rsp_rty);

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

  // transmitter model: 4-phase on transmit_req / tx_ack_s; flit check
  logic [ADR_W-1:0] exp_adr;
  logic [31:0]      exp_dat;
  logic             exp_we;
  logic [3:0]       exp_sel;
  int               n_pkts = 0;
  initial forever begin
    @(negedge clk);
    if (transmit_req && !tx_ack_s) begin
      ctrl_flit_t c;
      c = ctrl_flit_t'(cf);
      n_pkts++;
      check(hf == LUT[exp_adr[31:28]], $sformatf("route header %h for adr %h", hf, exp_adr));
      check(af == exp_adr, "address flit");
      check(c.we == exp_we && c.sel == exp_sel && c.pkt == (exp_we ? PKT_WRITE : PKT_READ), "control flit");
      check(transmit_packet_type == (exp_we ? PKT_WRITE : PKT_READ), "packet type");
      if (exp_we) check(df == exp_dat, "data flit");
      repeat ($urandom_range(4)) @(negedge clk);
      tx_ack_s = 1'b1;
      while (transmit_req) @(negedge clk);
      repeat ($urandom_range(3)) @(negedge clk);
      tx_ack_s = 1'b0;
    end
  end

  // WISHBONE master cycle; returns {ack, err, rty} and the clocks from the
  // strobe to transmit_req (in term and lat)
  logic [2:0] term;
  int         lat;
  task automatic wb_cycle(input logic we, input logic [31:0] adr, input logic [31:0] dat,
                          input logic [3:0] sel);
    exp_adr = adr; exp_dat = dat; exp_we = we; exp_sel = sel;
    // let the previous handshakes return to zero so the unit is waiting
    while (tx_ack_s || read_cmd_done) @(negedge clk);
    @(negedge clk);
    wb_cyc_i = 1'b1; wb_stb_i = 1'b1; wb_we_i = we; wb_adr_i = adr; wb_dat_i = dat; wb_sel_i = sel;
    lat = 0;
    fork
      begin
        while (!transmit_req) begin @(posedge clk); lat++; #1; end
      end
    join_none
    @(posedge clk);
    while (!(wb_ack_o || wb_err_o || wb_rty_o)) @(posedge clk);
    term = {wb_ack_o, wb_err_o, wb_rty_o};
    @(negedge clk);
    wb_cyc_i = 1'b0; wb_stb_i = 1'b0;
    wb_adr_i = $urandom; wb_dat_i = $urandom;   // the unit must have stored them
    check(!(wb_ack_o || wb_err_o || wb_rty_o), "termination lasts one clock");
  endtask

  // receive unit model: answers a pending read after a delay
  logic [1:0] next_status;   // 0 ack, 1 err, 2 rty
  int         reads_answered = 0;
  initial forever begin
    @(negedge clk);
    if (read_cmd_req && !read_cmd_done) begin
      repeat (5 + $urandom_range(10)) @(negedge clk);
      rsp_err = (next_status == 2'd1);
      rsp_rty = (next_status == 2'd2);
      read_cmd_done = 1'b1;
      reads_answered++;
      while (read_cmd_req) @(negedge clk);
      @(negedge clk) read_cmd_done = 1'b0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int i = 0; i < 40; i++) begin
      logic        we;
      logic [31:0] adr;
      we  = 1'(i % 2);
      adr = {4'(i % 16), 28'($urandom)};
      next_status = 2'(i % 3);
      wb_cycle(we, adr, $urandom, 4'($urandom));
      check(lat == 3, $sformatf("transmit_req %0d clocks after strobe, want 3", lat));
      if (we) check(term == 3'b100, "write acknowledged");
      else    check(term == (next_status == 0 ? 3'b100 : (next_status == 1 ? 3'b010 : 3'b001)),
                    $sformatf("read termination %b, status %0d", term, next_status));
      repeat ($urandom_range(3)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    check(n_pkts == 40, $sformatf("40 packets handed over, got %0d", n_pkts));
    check(reads_answered == 20, "20 reads waited for their response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
