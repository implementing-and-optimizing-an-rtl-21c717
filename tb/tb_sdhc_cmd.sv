// tb_sdhc_cmd: checks the command channel against a card emulated in the testbench.
// The SD clock runs at half the system clock (strobes made here). Checked: the 48-bit frame on
// CMD (start, transmission bit, index, argument, CRC7 computed here by polynomial division, end
// bit) taking 48 SD clocks; the response layouts for 48- and 136-bit answers; the CRC, index and
// end-bit error flags; the 64-clock response timeout; and the 8-clock gap before a new frame.
module tb_sdhc_cmd;
  import sdhc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic ph = 1'b0;
  always @(posedge clk) if (rst_n) ph <= !ph;
  logic rise, fall;
  assign rise = rst_n && !ph;
  assign fall = rst_n && ph;

  logic start = 1'b0, cmd_o, cmd_oe, busy, done, card_cmd = 1'b1, card_oe = 1'b0, line;
  sd_cmd_t cmd;
  cmd_err_t err;
  logic [127:0] resp;
  assign line = cmd_oe ? cmd_o : (card_oe ? card_cmd : 1'b1);

  sdhc_cmd dut (.clk_i(clk), .rst_ni(rst_n), .srst_i(1'b0), .rise_i(rise), .fall_i(fall),
                .start_i(start), .cmd_i(cmd), .cmd_in_i(line), .cmd_o(cmd_o), .cmd_oe_o(cmd_oe),
                .busy_o(busy), .done_o(done), .err_o(err), .resp_o(resp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference CRC7 by long division of msg * x^7 by x^7 + x^3 + 1
  function automatic logic [6:0] crc7_ref(input logic [119:0] msg, input int n);
    logic [127:0] m;
    m = {msg, 7'b0} & ((128'd1 << (n + 7)) - 1);
    for (int i = n + 6; i >= 7; i--) if (m[i]) m[i -: 8] = m[i -: 8] ^ 8'h89;
    return m[6:0];
  endfunction

  int unsigned cyc = 0, sdclk = 0;
  always @(posedge clk) begin cyc++; if (rise) sdclk++; end

  // card side: receive a frame, sampling at rising SD edges
  task automatic card_recv(output logic [47:0] f, output int t_start, output int t_end);
    do @(posedge clk); while (!(rise && line == 1'b0));
    t_start = sdclk;
    f[47] = 1'b0;
    for (int i = 46; i >= 0; i--) begin
      do @(posedge clk); while (!rise);
      f[i] = line;
    end
    t_end = sdclk;
  endtask

  // card side: send n bits, changing at falling SD edges
  task automatic card_send(input logic [135:0] bits, input int n, input int delay);
    repeat (delay) do @(posedge clk); while (!rise);
    for (int i = n - 1; i >= 0; i--) begin
      do @(posedge clk); while (!fall);
      card_oe <= 1'b1; card_cmd <= bits[i];
    end
    do @(posedge clk); while (!fall);
    card_oe <= 1'b0; card_cmd <= 1'b1;
  endtask

  task automatic issue(input logic [5:0] idx, input logic [31:0] arg, input rsp_type_e rt,
                       input bit crc_chk, input bit idx_chk);
    @(negedge clk);
    cmd = '{index: idx, arg: arg, rsp_type: rt, crc_check: crc_chk, index_check: idx_chk,
            data_present: 1'b0};
    start = 1'b1;
    @(negedge clk) start = 1'b0;
  endtask

  task automatic wait_done();
    do @(posedge clk); while (!done);
  endtask

  function automatic logic [47:0] r48(input logic [5:0] idx, input logic [31:0] p);
    logic [39:0] b = {2'b00, idx, p};
    return {b, crc7_ref(120'(b), 40), 1'b1};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [47:0] f;
    int t0, t1, tdone;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (40) @(posedge clk);

    // 1: no response
    fork
      issue(6'd0, 32'h0, RSP_NONE, 0, 0);
      card_recv(f, t0, t1);
    join
    check(f == {2'b01, 6'd0, 32'h0, crc7_ref(120'({2'b01, 6'd0, 32'h0}), 40), 1'b1}, "CMD0 frame");
    check(t1 - t0 == 47, "frame is 48 SD clocks");
    wait_done();
    check(err == '0 && !cmd_oe, "no-response command completes, line released");

    // 2: R1 with good CRC
    fork
      issue(6'd17, 32'hDEAD_BEEF, RSP_48, 1, 1);
      begin card_recv(f, t0, t1); card_send({88'h0, r48(6'd17, 32'h0000_0900)}, 48, 2); end
    join_any
    wait_done();
    check(f == {2'b01, 6'd17, 32'hDEAD_BEEF, crc7_ref(120'({2'b01, 6'd17, 32'hDEAD_BEEF}), 40), 1'b1},
          "CMD17 frame with argument and CRC7");
    check(err == '0 && resp[31:0] == 32'h0000_0900 && resp[127:32] == '0, "R1 response");

    // 3: bad CRC
    fork
      issue(6'd13, 32'h1, RSP_48, 1, 1);
      begin card_recv(f, t0, t1); card_send({88'h0, r48(6'd13, 32'h55) ^ 48'h2}, 48, 2); end
    join_any
    wait_done();
    check(err.crc && !err.index && !err.timeout, "CRC error flagged");

    // 4: wrong index
    fork
      issue(6'd13, 32'h1, RSP_48, 1, 1);
      begin card_recv(f, t0, t1); card_send({88'h0, r48(6'd12, 32'h55)}, 48, 2); end
    join_any
    wait_done();
    check(err.index && !err.crc, "index error flagged");

    // 5: index and CRC not checked (R3)
    fork
      issue(6'd41, 32'h1, RSP_48, 0, 0);
      begin card_recv(f, t0, t1); card_send({88'h0, 2'b00, 6'h3F, 32'h80FF_8000, 7'h7F, 1'b1}, 48, 2); end
    join_any
    wait_done();
    check(err == '0 && resp[31:0] == 32'h80FF_8000, "R3 without checks");

    // 6: end bit 0
    fork
      issue(6'd13, 32'h1, RSP_48, 1, 1);
      begin card_recv(f, t0, t1); card_send({88'h0, r48(6'd13, 32'h55) & ~48'h1}, 48, 2); end
    join_any
    wait_done();
    check(err.end_bit, "end bit error flagged");

    // 7: timeout, 64 SD clocks after the end bit
    fork
      issue(6'd5, 32'h0, RSP_48, 1, 1);
      card_recv(f, t0, t1);
    join
    wait_done();
    tdone = sdclk;
    check(err.timeout, "timeout flagged");
    check(tdone - t1 >= 64 && tdone - t1 <= 66, $sformatf("timeout after %0d SD clocks", tdone - t1));

    // 8: R2 136-bit
    begin
      logic [119:0] p;
      logic [135:0] fr;
      p = {$urandom, $urandom, $urandom, $urandom};
      fr = {2'b00, 6'h3F, p, crc7_ref(p, 120), 1'b1};
      fork
        issue(6'd2, 32'h0, RSP_136, 1, 0);
        begin card_recv(f, t0, t1); card_send(fr, 136, 3); end
      join_any
      wait_done();
      check(err == '0 && resp == {8'h00, p}, "R2 payload in response");
    end

    // 9: gap, a new command right after completion starts >= 8 SD clocks after the response end
    fork
      issue(6'd7, 32'h0, RSP_48, 1, 1);
      begin card_recv(f, t0, t1); card_send({88'h0, r48(6'd7, 32'h0)}, 48, 2); end
    join_any
    wait_done();
    t1 = sdclk;
    fork
      issue(6'd9, 32'h0, RSP_NONE, 0, 0);
      card_recv(f, t0, tdone);
    join
    check(t0 - t1 >= 7, $sformatf("gap before next command %0d SD clocks", t0 - t1));
    check(f[45:40] == 6'd9, "second command index");
    wait_done();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
