// tb_sdhc_data: checks the data channel with the DAT lines emulated in the testbench.
// The SD clock (half the system clock) is made here and honours clk_stop_o. Checked: 4-bit and
// 1-bit block reads into the buffer with CRC16 computed here by polynomial division, data order
// in buffer words, Buffer Read Enable per block, transfer completion after the host has drained
// the buffer; clock stop with a slow host and a 3-block read; CRC and end-bit errors; a 2-block
// 4-bit write (frame contents, CRC16, at least two clocks before the start bit, CRC status token,
// busy); a rejected CRC status; the read data timeout of 2^13 cycles; an R1b busy wait; and the
// Auto CMD12 request after the last block of a 2-block write and read, with completion held
// until the stop command's response and busy; stop at block gap for a read (SD clock held
// before the next block, even with an empty buffer) and a write (next block not started).
module tb_sdhc_data;
  import sdhc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic clk_stop, ph = 1'b0, rise, fall;
  always @(posedge clk) if (rst_n && (ph || !clk_stop)) ph <= !ph;
  assign rise = rst_n && !ph && !clk_stop;
  assign fall = rst_n && ph;

  logic start = 1'b0, cmd_done = 1'b0, cmd_fail = 1'b0, cmd_busy = 1'b0;
  xfer_cfg_t cfg = '0;
  logic host_wr = 1'b0, host_rd = 1'b0, host_rvalid, host_rd_avail;
  logic [31:0] host_wdata = '0, host_rdata;
  logic busy, dat_active, rd_active, wr_active, buf_rd_en, buf_wr_en, block_done, xfer_done;
  logic err_tmo, err_crc, err_end, acmd_req, gap_event, gap_stop = 1'b0;
  logic [3:0] dat_o, dat_oe, card_dat = 4'hF, card_oe = 4'h0, line;
  for (genvar l = 0; l < 4; l++) begin : g_l
    assign line[l] = dat_oe[l] ? dat_o[l] : (card_oe[l] ? card_dat[l] : 1'b1);
  end

  sdhc_data dut (
    .clk_i(clk), .rst_ni(rst_n), .srst_i(1'b0), .rise_i(rise), .fall_i(fall),
    .clk_stop_o(clk_stop), .start_i(start), .cfg_i(cfg), .cmd_done_i(cmd_done),
    .cmd_fail_i(cmd_fail), .cmd_busy_i(cmd_busy), .host_wr_i(host_wr), .host_wdata_i(host_wdata),
    .host_rd_i(host_rd), .host_rdata_o(host_rdata), .host_rvalid_o(host_rvalid),
    .host_rd_avail_o(host_rd_avail), .busy_o(busy), .dat_active_o(dat_active),
    .rd_active_o(rd_active), .wr_active_o(wr_active), .buf_rd_en_o(buf_rd_en),
    .buf_wr_en_o(buf_wr_en), .block_done_o(block_done), .xfer_done_o(xfer_done),
    .err_timeout_o(err_tmo), .err_crc_o(err_crc), .err_end_o(err_end), .acmd12_req_o(acmd_req),
    .gap_stop_i(gap_stop), .gap_event_o(gap_event),
    .dat_i(line), .dat_o(dat_o), .dat_oe_o(dat_oe));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // event counters
  int n_acmd = 0, n_gap = 0;
  int n_xfer = 0, n_blk = 0, n_crc = 0, n_end = 0, n_tmo = 0, n_stop = 0, n_rd_rise = 0;
  logic buf_rd_en_d = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (xfer_done) n_xfer++;
    if (acmd_req) n_acmd++;
    if (gap_event) n_gap++;
    if (block_done) n_blk++;
    if (err_crc) n_crc++;
    if (err_end) n_end++;
    if (err_tmo) n_tmo++;
    if (clk_stop) n_stop++;
    buf_rd_en_d <= buf_rd_en;
    if (buf_rd_en && !buf_rd_en_d) n_rd_rise++;
  end

  // reference CRC16 of one line's bit string by long division by x^16 + x^12 + x^5 + 1
  function automatic logic [15:0] crc16_ref(input logic bits [], input int n);
    logic [16:0] r = '0;
    for (int i = 0; i < n + 16; i++) begin
      r = {r[15:0], (i < n) ? bits[i] : 1'b0};
      if (r[16]) r = r ^ 17'h1_1021;
    end
    return r[15:0];
  endfunction

  logic [7:0] data [2048];

  task automatic on_fall();
    do @(posedge clk); while (!fall);
  endtask
  task automatic on_rise();
    do @(posedge clk); while (!rise);
  endtask

  // card sends one block of `bs` bytes starting at data[off]
  task automatic card_send_block(input int off, input int bs, input bit wide, input bit bad_crc,
                                 input bit bad_end);
    logic lb [4][];
    int nb = wide ? bs * 2 : bs * 8;
    logic [3:0][15:0] c;
    logic [3:0] oe = wide ? 4'hF : 4'h1;
    for (int l = 0; l < 4; l++) lb[l] = new[nb];
    for (int i = 0; i < bs; i++)
      for (int s = 0; s < (wide ? 2 : 8); s++)
        for (int l = 0; l < 4; l++)
          if (wide) lb[l][i*2 + s] = data[off + i][(s == 0 ? 4 : 0) + l];
          else      lb[l][i*8 + s] = (l == 0) ? data[off + i][7 - s] : 1'b1;
    for (int l = 0; l < 4; l++) c[l] = crc16_ref(lb[l], nb);
    if (bad_crc) c[0][3] = !c[0][3];
    on_fall(); card_oe <= oe; card_dat <= 4'h0;
    for (int k = 0; k < nb; k++) begin
      on_fall();
      card_dat <= {lb[3][k], lb[2][k], lb[1][k], lb[0][k]};
    end
    for (int k = 15; k >= 0; k--) begin
      on_fall(); card_dat <= {c[3][k], c[2][k], c[1][k], c[0][k]};
    end
    on_fall(); card_dat <= bad_end ? 4'h0 : 4'hF;
    on_fall(); card_oe <= 4'h0; card_dat <= 4'hF;
  endtask

  // host reads `nw` words, optionally slowly, and compares with data[off..]
  int host_bad = 0;
  task automatic host_read(input int off, input int nw, input int slow);
    for (int w = 0; w < nw; w++) begin
      logic [31:0] e;
      @(negedge clk);
      while (!host_rvalid) @(negedge clk);
      for (int k = 0; k < 4; k++) e[8*k +: 8] = data[off + 4*w + k];
      if (host_rdata != e) host_bad++;
      host_rd = 1'b1;
      @(negedge clk) host_rd = 1'b0;
      repeat (slow) @(negedge clk);
    end
  endtask

  task automatic arm(input int bs, input int nblk, input bit rd, input bit wide,
                     input bit a12 = 1'b0);
    @(negedge clk);
    cfg = '{block_size: 12'(bs), block_count: 16'(nblk), block_count_en: 1'b1,
            multi_block: nblk > 1, auto_cmd12: a12, read: rd, wide_bus: wide,
            timeout_exp: 4'd0};
    start = 1'b1;
    @(negedge clk) start = 1'b0;
  endtask

  task automatic pulse_cmd_done(input bit fail, input bit busy_rsp);
    @(negedge clk);
    cmd_done = 1'b1; cmd_fail = fail; cmd_busy = busy_rsp;
    @(negedge clk);
    cmd_done = 1'b0; cmd_fail = 1'b0; cmd_busy = 1'b0;
  endtask

  // card receives one written block and answers with a status token and busy
  logic [7:0] got [2048];
  int nwr_gap;
  task automatic card_recv_block(input int off, input int bs, input bit wide, input bit reject,
                                 output bit crc_ok);
    logic lb [4][];
    int nb = wide ? bs * 2 : bs * 8;
    logic [3:0][15:0] rc;
    for (int l = 0; l < 4; l++) lb[l] = new[nb];
    nwr_gap = 0;
    on_rise();
    while (line[0]) begin nwr_gap++; on_rise(); end
    for (int k = 0; k < nb; k++) begin
      on_rise();
      for (int l = 0; l < 4; l++) lb[l][k] = line[l];
    end
    for (int k = 15; k >= 0; k--) begin
      on_rise();
      for (int l = 0; l < 4; l++) rc[l][k] = line[l];
    end
    on_rise();
    crc_ok = wide ? (line == 4'hF) : line[0];
    for (int l = 0; l < (wide ? 4 : 1); l++) if (rc[l] != crc16_ref(lb[l], nb)) crc_ok = 0;
    for (int i = 0; i < bs; i++)
      got[off + i] = wide ? {lb[3][2*i], lb[2][2*i], lb[1][2*i], lb[0][2*i],
                             lb[3][2*i+1], lb[2][2*i+1], lb[1][2*i+1], lb[0][2*i+1]}
                          : {lb[0][8*i], lb[0][8*i+1], lb[0][8*i+2], lb[0][8*i+3],
                             lb[0][8*i+4], lb[0][8*i+5], lb[0][8*i+6], lb[0][8*i+7]};
    on_fall(); on_fall();
    on_fall(); card_oe <= 4'h1; card_dat <= 4'hE;          // token start
    on_fall(); card_dat <= {3'b111, reject};
    on_fall(); card_dat <= {3'b111, !reject};
    on_fall(); card_dat <= {3'b111, reject};
    on_fall(); card_dat <= 4'hF;                           // token end
    repeat (10) begin on_fall(); card_dat <= 4'hE; end     // busy
    on_fall(); card_dat <= 4'hF;
    on_fall(); card_oe <= 4'h0;
  endtask

  task automatic host_write(input int off, input int nw);
    for (int w = 0; w < nw; w++) begin
      @(negedge clk);
      while (!(buf_wr_en || (w % 16 != 0))) @(negedge clk);
      host_wdata = {data[off + 4*w + 3], data[off + 4*w + 2], data[off + 4*w + 1], data[off + 4*w]};
      host_wr = 1'b1;
      @(negedge clk) host_wr = 1'b0;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ok;
    int x0, b0, s0;
    for (int i = 0; i < 2048; i++) data[i] = 8'($urandom);
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (10) @(posedge clk);

    // 1: single 64-byte block, 4-bit
    x0 = n_xfer; b0 = n_rd_rise;
    arm(64, 1, 1, 1);
    check(busy && rd_active, "read armed");
    card_send_block(0, 64, 1, 0, 0);
    repeat (4) @(posedge clk);
    check(buf_rd_en && n_rd_rise == b0 + 1, "buffer read enable after block");
    check(n_xfer == x0, "no completion before host read");
    host_read(0, 16, 0);
    repeat (4) @(posedge clk);
    check(n_xfer == x0 + 1 && !busy, "read transfer complete after drain");
    check(host_bad == 0, "4-bit read data");

    // 2: 1-bit, 512-byte blocks x3, slow host: the buffer (two blocks) fills, clock stops
    host_bad = 0; x0 = n_xfer; s0 = n_stop;
    arm(512, 3, 1, 0);
    fork
      begin
        card_send_block(0, 512, 0, 0, 0);
        repeat (2) on_rise();
        card_send_block(512, 512, 0, 0, 0);
        repeat (2) on_rise();
        card_send_block(1024, 512, 0, 0, 0);
      end
      begin
        do @(posedge clk); while (!buf_rd_en);
        // wait until the card has delivered two blocks before draining slowly
        do @(posedge clk); while (n_blk < 3);
        repeat (2000) @(posedge clk);
        host_read(0, 384, 3);
      end
    join
    repeat (4) @(posedge clk);
    check(n_stop > s0, "SD clock stopped while buffer full");
    check(host_bad == 0, "1-bit 3-block read data");
    check(n_xfer == x0 + 1, "3-block read complete");

    // 3: CRC error
    s0 = n_crc;
    arm(64, 1, 1, 1);
    card_send_block(0, 64, 1, 1, 0);
    repeat (4) @(posedge clk);
    check(n_crc == s0 + 1 && !busy, "data CRC error");

    // 4: end bit error
    s0 = n_end;
    arm(64, 1, 1, 1);
    card_send_block(0, 64, 1, 0, 1);
    repeat (4) @(posedge clk);
    check(n_end == s0 + 1, "data end bit error");

    // 5: write two 64-byte blocks, 4-bit
    x0 = n_xfer; b0 = n_blk;
    arm(64, 2, 0, 1);
    fork
      host_write(100, 32);
      begin
        repeat (20) @(posedge clk);
        check(!dat_oe[0], "no write before command completion");
        pulse_cmd_done(0, 0);
        card_recv_block(100, 64, 1, 0, ok);
        check(ok, "block 1 CRC16 and end bit");
        check(nwr_gap >= 2, $sformatf("Nwr gap %0d clocks", nwr_gap));
        card_recv_block(164, 64, 1, 0, ok);
        check(ok, "block 2 CRC16 and end bit");
      end
    join
    repeat (10) on_rise();
    check(n_xfer == x0 + 1 && n_blk == b0 + 2 && !busy, "write complete after busy");
    begin
      int bad;
      bad = 0;
      for (int i = 100; i < 228; i++) if (got[i] != data[i]) bad++;
      check(bad == 0, "written data on the bus");
    end

    // 6: 1-bit write rejected by the card
    s0 = n_crc;
    arm(16, 1, 0, 0);
    fork
      host_write(300, 4);
      begin
        pulse_cmd_done(0, 0);
        card_recv_block(300, 16, 0, 1, ok);
        check(ok, "1-bit write CRC16");
      end
    join
    repeat (10) on_rise();
    check(n_crc == s0 + 1 && !busy, "negative CRC status reported");

    // 7: read timeout: nothing comes; 2^13 cycles
    s0 = n_tmo;
    arm(64, 1, 1, 1);
    x0 = 0;
    while (n_tmo == s0 && x0 < 20000) begin @(posedge clk); x0++; end
    check(n_tmo == s0 + 1 && x0 >= 8190 && x0 <= 8194, $sformatf("data timeout after %0d cycles", x0));

    // 8: R1b busy without data
    x0 = n_xfer;
    fork
      pulse_cmd_done(0, 1);
      begin
        on_fall(); card_oe <= 4'h1; card_dat <= 4'hE;
        repeat (20) on_fall();
        check(busy && n_xfer == x0, "busy held during R1b");
        card_dat <= 4'hF;
        on_fall(); card_oe <= 4'h0;
      end
    join
    repeat (6) on_rise();
    check(!busy && n_xfer == x0 + 1, "R1b busy end");

    // 9: Auto CMD12 after a 2-block write: requested once the last block's busy ends; the
    //    transfer completes only after the CMD12 response and its busy
    x0 = n_xfer; s0 = n_acmd;
    arm(64, 2, 0, 1, 1);
    fork
      host_write(400, 32);
      begin
        pulse_cmd_done(0, 0);
        card_recv_block(400, 64, 1, 0, ok);
        card_recv_block(464, 64, 1, 0, ok);
      end
    join
    repeat (10) on_rise();
    check(n_acmd == s0 + 1 && busy && n_xfer == x0, "write: Auto CMD12 requested, transfer held");
    fork
      pulse_cmd_done(0, 1);
      begin
        on_fall(); card_oe <= 4'h1; card_dat <= 4'hE;
        repeat (8) on_fall();
        check(busy && n_xfer == x0, "write: held during CMD12 busy");
        card_dat <= 4'hF;
        on_fall(); card_oe <= 4'h0;
      end
    join
    repeat (6) on_rise();
    check(!busy && n_xfer == x0 + 1 && n_acmd == s0 + 1, "write: complete after Auto CMD12");

    // 10: Auto CMD12 after a 2-block read: requested right after the last block arrives
    host_bad = 0; x0 = n_xfer; s0 = n_acmd;
    arm(64, 2, 1, 1, 1);
    card_send_block(0, 64, 1, 0, 0);
    repeat (2) on_rise();
    check(n_acmd == s0, "read: no Auto CMD12 before the last block");
    card_send_block(64, 64, 1, 0, 0);
    repeat (4) @(posedge clk);
    check(n_acmd == s0 + 1, "read: Auto CMD12 requested after the last block");
    host_read(0, 32, 0);
    repeat (10) @(posedge clk);
    check(busy && n_xfer == x0, "read: transfer held until the CMD12 response");
    pulse_cmd_done(0, 1);
    repeat (6) on_rise();
    check(!busy && n_xfer == x0 + 1 && host_bad == 0, "read: complete after Auto CMD12");

    // 11: stop at block gap, read: the first block passes, then the SD clock is held before the
    //     second until the request is withdrawn, even with an empty buffer
    host_bad = 0; x0 = n_xfer; s0 = n_gap;
    gap_stop = 1'b1;
    arm(64, 2, 1, 1);
    card_send_block(0, 64, 1, 0, 0);
    repeat (50) @(posedge clk);
    check(clk_stop && n_gap == s0 + 1, "read: SD clock held at the block gap");
    host_read(0, 16, 0);
    repeat (50) @(posedge clk);
    check(clk_stop && n_gap == s0 + 1 && busy, "read: still held with an empty buffer");
    gap_stop = 1'b0;
    card_send_block(64, 64, 1, 0, 0);
    host_read(64, 16, 0);
    repeat (4) @(posedge clk);
    check(n_xfer == x0 + 1 && host_bad == 0, "read: continues after the block gap");

    // 12: stop at block gap, write: the second block is not started while the request is set
    x0 = n_xfer; s0 = n_gap;
    gap_stop = 1'b1;
    arm(64, 2, 0, 1);
    fork
      host_write(600, 32);
      begin
        pulse_cmd_done(0, 0);
        card_recv_block(600, 64, 1, 0, ok);
        repeat (40) on_rise();
        check(!dat_oe[0] && busy && n_gap == s0 + 1, "write: second block held at the gap");
        gap_stop = 1'b0;
        card_recv_block(664, 64, 1, 0, ok);
        check(ok, "write: block after the gap");
      end
    join
    repeat (10) on_rise();
    check(n_xfer == x0 + 1 && !busy, "write: complete after the block gap");
    begin
      int bad;
      bad = 0;
      for (int i = 600; i < 728; i++) if (got[i] != data[i]) bad++;
      check(bad == 0, "write: data around the block gap");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
