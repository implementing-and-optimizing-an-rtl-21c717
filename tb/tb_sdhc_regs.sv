// tb_sdhc_regs: checks the SDHCI register file with the command and data channels replaced by
// testbench signals: reset values, capabilities and version, byte-strobed writes, command issue
// and its decoding (and suppression while Command Inhibit is set), response capture, buffer data
// port reads that wait for the head word and writes that push, interrupt status set only when
// enabled and cleared by writing 1, the error summary bit, the interrupt pin, block count
// decrement, clock control, software reset pulses, present-state bit positions, and Auto CMD12:
// issued on request as CMD12 with R1b, holding off software commands, its response in RESP3
// only, no command-complete, and its timeout in the Auto CMD12 error status and error bit 8;
// block gap control (stop request output, continue bit reading 0, block gap event status).
module tb_sdhc_regs;
  import sdhc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  reg_req_t req = '0;
  reg_rsp_t rsp;
  logic irq, cmd_start, cmd_srst, dat_start, dat_srst, host_wr, host_rd, clk_en, led, pwr;
  sd_cmd_t cmd;
  xfer_cfg_t cfg;
  logic [31:0] host_wdata;
  logic [7:0] clk_div;
  logic cmd_busy = 0, cmd_done = 0, host_rvalid = 0, host_rd_avail = 0;
  cmd_err_t cmd_err = '0;
  logic [127:0] cmd_resp = '0;
  logic [31:0] host_rdata = '0;
  logic dat_busy = 0, dat_active = 0, rd_active = 0, wr_active = 0, buf_rd_en = 0, buf_wr_en = 0;
  logic block_done = 0, xfer_done = 0, e_tmo = 0, e_crc = 0, e_end = 0;
  logic card = 1'b1, wp = 1'b0, cmd_lvl = 1'b1, acmd_req = 1'b0, gap_ev = 1'b0, gap_stop;
  logic [3:0] dat_lvl = 4'hA;

  sdhc_regs dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(req), .reg_rsp_o(rsp), .irq_o(irq),
    .cmd_start_o(cmd_start), .cmd_o(cmd), .cmd_srst_o(cmd_srst), .cmd_busy_i(cmd_busy),
    .cmd_done_i(cmd_done), .cmd_err_i(cmd_err), .cmd_resp_i(cmd_resp),
    .dat_start_o(dat_start), .xfer_cfg_o(cfg), .dat_srst_o(dat_srst), .host_wr_o(host_wr),
    .host_wdata_o(host_wdata), .host_rd_o(host_rd), .host_rdata_i(host_rdata),
    .host_rvalid_i(host_rvalid), .host_rd_avail_i(host_rd_avail), .dat_busy_i(dat_busy),
    .dat_active_i(dat_active), .rd_active_i(rd_active), .wr_active_i(wr_active),
    .buf_rd_en_i(buf_rd_en), .buf_wr_en_i(buf_wr_en), .block_done_i(block_done),
    .xfer_done_i(xfer_done), .dat_err_timeout_i(e_tmo), .dat_err_crc_i(e_crc),
    .dat_err_end_i(e_end), .acmd12_req_i(acmd_req),
    .gap_stop_o(gap_stop), .gap_event_i(gap_ev), .clk_en_o(clk_en), .clk_div_o(clk_div), .card_present_i(card),
    .write_prot_i(wp), .dat_level_i(dat_lvl), .cmd_level_i(cmd_lvl), .led_o(led),
    .bus_power_o(pwr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // pulse counters
  int n_cmd_start = 0, n_dat_start = 0, n_rd = 0, n_wr = 0, n_csrst = 0, n_dsrst = 0;
  logic [31:0] last_wdata;
  always @(posedge clk) if (rst_n) begin
    if (cmd_start) n_cmd_start++;
    if (dat_start) n_dat_start++;
    if (host_rd) n_rd++;
    if (host_wr) begin n_wr++; last_wdata <= host_wdata; end
    if (cmd_srst) n_csrst++;
    if (dat_srst) n_dsrst++;
  end

  int lat;
  task automatic access(input bit wr, input logic [7:0] a, input logic [31:0] d,
                        input logic [3:0] be, output logic [31:0] q);
    @(negedge clk);
    req = '{valid: 1'b1, write: wr, addr: a, wdata: d, wstrb: be};
    lat = 0;
    do begin @(negedge clk); lat++; end while (!rsp.ready);
    q = rsp.rdata;
    req.valid = 1'b0;
    @(negedge clk);      // let pulses issued by the access be counted
  endtask
  task automatic wr32(input logic [7:0] a, input logic [31:0] d, input logic [3:0] be = 4'hF);
    logic [31:0] q;
    access(1, a, d, be, q);
  endtask
  task automatic rd32(input logic [7:0] a, output logic [31:0] q);
    access(0, a, 32'h0, 4'h0, q);
  endtask
  task automatic pulse(ref logic s);
    @(negedge clk) s = 1'b1;
    @(negedge clk) s = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] q;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    rd32(8'hFC, q); check(q[31:16] == 16'h0000, "version 1.0");
    rd32(8'h40, q); check(q == 32'h0100_32B2, $sformatf("capabilities %08x", q));
    rd32(8'h04, q); check(q == 0, "block register resets to 0");
    check(lat == 1, "register read answers after one cycle");

    // byte strobes
    wr32(8'h04, 32'h0010_0200);
    wr32(8'h04, 32'hFFFF_0000, 4'h4);
    rd32(8'h04, q); check(q == 32'h00FF_0200, $sformatf("byte strobe merge %08x", q));
    wr32(8'h08, 32'h1234_5678);
    rd32(8'h08, q); check(q == 32'h1234_5678, "argument");
    check(cfg.block_size == 12'h200 && cfg.block_count == 16'h00FF, "transfer config");

    // host control, power, clock
    wr32(8'h28, 32'h0000_0F03);
    check(led && pwr && cfg.wide_bus, "LED, power, 4-bit");
    wr32(8'h2C, 32'h0007_0401);
    check(!clk_en, "SD clock off until SD clock enable");
    rd32(8'h2C, q); check(q[1] && q[0], "internal clock stable");
    wr32(8'h2C, 32'h0007_0405);
    check(clk_en && clk_div == 8'h04 && cfg.timeout_exp == 4'd7, "clock enable, divider, timeout");

    // command issue: CMD18, R1, CRC+index check, data present; transfer mode read multi cnt
    wr32(8'h0C, {2'b0, 6'd18, 2'b00, 1'b1, 1'b1, 1'b1, 1'b0, 2'b10, 16'h0032});
    check(n_cmd_start == 1 && n_dat_start == 1, "command and data start");
    check(cmd.index == 6'd18 && cmd.arg == 32'h1234_5678 && cmd.rsp_type == RSP_48 &&
          cmd.crc_check && cmd.index_check && cmd.data_present, "command fields");
    check(cfg.read && cfg.multi_block && cfg.block_count_en, "transfer mode fields");
    rd32(8'h24, q); check(q[1] == 1'b1, "inhibit DAT after data command");
    cmd_busy = 1'b1;
    rd32(8'h24, q); check(q[0] == 1'b1, "inhibit CMD while command runs");
    wr32(8'h0C, {2'b0, 6'd5, 8'b0, 16'h0});
    check(n_cmd_start == 1, "command write ignored while inhibited");
    // completion without enabled status: nothing latched in status
    cmd_resp = {32'hA, 32'hB, 32'hC, 32'hD};
    cmd_busy = 1'b0;
    pulse(cmd_done);
    rd32(8'h30, q); check(q == 0, "status stays clear when not enabled");
    rd32(8'h10, q); check(q == 32'hD, "response 0");
    rd32(8'h1C, q); check(q == 32'hA, "response 3");

    // enable status and signals
    wr32(8'h34, 32'hFFFF_FFFF);
    wr32(8'h38, 32'h0001_0002);     // signal: transfer complete, command timeout
    pulse(cmd_done);
    rd32(8'h30, q); check(q == 32'h0000_0001 && !irq, "command complete, no irq");
    pulse(xfer_done);
    check(irq, "irq on transfer complete");
    wr32(8'h30, 32'h0000_0002);
    rd32(8'h30, q); check(q == 32'h1 && !irq, "write-1-to-clear");
    cmd_err = '{timeout: 1'b1, default: 1'b0};
    pulse(cmd_done);
    cmd_err = '0;
    rd32(8'h30, q); check(q == 32'h0001_8001, $sformatf("timeout error and summary %08x", q));
    check(irq, "irq on command timeout");
    pulse(e_crc); pulse(e_end); pulse(e_tmo);
    rd32(8'h30, q); check(q[31:16] == 16'h0071, "data error bits");
    wr32(8'h30, 32'hFFFF_FFFF);
    rd32(8'h30, q); check(q == 0, "all cleared");

    // buffer ready edges
    @(negedge clk) buf_rd_en = 1'b1;
    repeat (3) @(negedge clk);
    rd32(8'h30, q); check(q == 32'h20, "buffer read ready on rising edge");
    wr32(8'h30, 32'h20);
    rd32(8'h30, q); check(q == 0, "no repeat while level stays high");
    buf_rd_en = 1'b0;

    // buffer data port read waits for the head word
    host_rd_avail = 1'b1; host_rdata = 32'hCAFE_F00D;
    fork
      rd32(8'h20, q);
      begin repeat (4) @(negedge clk); host_rvalid = 1'b1; end
    join
    check(q == 32'hCAFE_F00D && n_rd == 1 && lat >= 4, "buffer read waits and pops once");
    host_rvalid = 1'b0; host_rd_avail = 1'b0;
    rd32(8'h20, q); check(q == 0 && n_rd == 1, "empty buffer reads 0 without popping");
    wr32(8'h20, 32'h0BAD_BEEF);
    check(n_wr == 1 && last_wdata == 32'h0BAD_BEEF, "buffer write pushes");

    // block count decrement in multi-block with block count enable
    wr32(8'h04, 32'h0003_0200);
    pulse(block_done);
    rd32(8'h04, q); check(q[31:16] == 16'd2, "block count decrement");

    // present state bits
    dat_busy = 1'b1; dat_active = 1'b1; rd_active = 1'b1; buf_wr_en = 1'b0; wp = 1'b1;
    repeat (3) @(negedge clk);
    rd32(8'h24, q);
    check(q == {7'b0, 1'b1, 4'hA, 1'b1, 1'b1, 1'b1, 1'b1, 4'b0, 1'b0, 1'b0, 1'b1, 1'b0, 5'b0,
                1'b1, 1'b1, 1'b0}, $sformatf("present state %08x", q));
    dat_busy = 1'b0; dat_active = 1'b0; rd_active = 1'b0;

    // card removal interrupt
    @(negedge clk) card = 1'b0;
    repeat (4) @(negedge clk);
    rd32(8'h30, q); check(q[7], "card removal");

    // Auto CMD12: issued by the register file when the data logic asks for it
    wr32(8'h30, 32'hFFFF_FFFF);
    wr32(8'h0C, {2'b0, 6'd18, 2'b00, 1'b1, 1'b1, 1'b1, 1'b0, 2'b10, 16'h0036});
    check(cfg.auto_cmd12, "Auto CMD12 enable reaches the data logic");
    cmd_resp = {96'h0, 32'h0000_0900};
    pulse(cmd_done);
    wr32(8'h30, 32'hFFFF_FFFF);
    begin
      int c0;
      c0 = n_cmd_start;
      pulse(acmd_req);
      @(negedge clk);                 // issued at the edge after the request was taken
      cmd_busy = 1'b1;
      @(negedge clk);
      check(n_cmd_start == c0 + 1 && cmd.index == 6'd12 && cmd.arg == 32'h0 &&
            cmd.rsp_type == RSP_48_BUSY && cmd.crc_check && cmd.index_check && !cmd.data_present,
            $sformatf("Auto CMD12 issued as CMD12 with R1b (starts %0d, index %0d)", n_cmd_start - c0, cmd.index));
      rd32(8'h24, q); check(q[0], "Command Inhibit (CMD) during Auto CMD12");
      wr32(8'h0C, {2'b0, 6'd13, 2'b00, 1'b1, 1'b1, 1'b0, 1'b0, 2'b10, 16'h0});
      check(n_cmd_start == c0 + 1, "software command held off during Auto CMD12");
      cmd_resp = {96'h0, 32'h0000_0B00};
      cmd_busy = 1'b0;
      pulse(cmd_done);
      rd32(8'h1C, q); check(q == 32'h0000_0B00, "Auto CMD12 response in RESP3");
      rd32(8'h10, q); check(q == 32'h0000_0900, "RESP0 keeps the data command's response");
      rd32(8'h30, q); check(q == 0, "no command-complete for Auto CMD12");
      rd32(8'h3C, q); check(q == 0, "Auto CMD12 error status clear");
      pulse(acmd_req);
      repeat (2) @(negedge clk);
      cmd_err = '{timeout: 1'b1, default: 1'b0};
      pulse(cmd_done);
      cmd_err = '0;
      rd32(8'h3C, q); check(q == 32'h2, $sformatf("Auto CMD12 timeout status %08x", q));
      rd32(8'h30, q); check(q == 32'h0100_8000, $sformatf("Auto CMD12 error interrupt %08x", q));
      wr32(8'h30, 32'hFFFF_FFFF);
    end

    // block gap control: stop request drives the data logic, continue reads back 0, the data
    // logic's gap event sets normal status bit 2
    wr32(8'h28, 32'h0003_0000, 4'h4);
    rd32(8'h28, q); check(q[17:16] == 2'b01 && gap_stop, "stop at block gap set, continue clear");
    check(q[11:8] == 4'hF && q[1:0] == 2'b11, "other host control bytes kept");
    pulse(gap_ev);
    rd32(8'h30, q); check(q == 32'h0000_0004, $sformatf("block gap event %08x", q));
    wr32(8'h28, 32'h0002_0000, 4'h4);
    check(!gap_stop, "continue: stop request withdrawn");
    wr32(8'h30, 32'hFFFF_FFFF);

    // software resets
    wr32(8'h2C, 32'h0200_0000, 4'h8);
    check(n_csrst == 1 && n_dsrst == 0, "CMD reset pulse");
    wr32(8'h2C, 32'h0400_0000, 4'h8);
    check(n_dsrst == 1, "DAT reset pulse");
    rd32(8'h2C, q); check(q[26:24] == 0, "reset bits self-clear");
    wr32(8'h2C, 32'h0100_0000, 4'h8);
    rd32(8'h08, q); check(q == 0 && n_csrst == 2 && n_dsrst == 2, "reset all");
    rd32(8'h34, q); check(q == 0, "reset all clears enables");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
