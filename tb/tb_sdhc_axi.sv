// tb_sdhc_axi: checks the AXI4 port against a register-bus model held in the testbench (64
// words, answering after a random 1-3 cycles; reads of offset 0x20 return a running count, like
// the buffer data port). Checked: 32-bit writes to either half of a beat by strobes, 64-bit
// writes and reads covering two registers, narrow reads selecting by addr[2], INCR bursts,
// a FIXED burst streaming one register, IDs, RLAST, OKAY responses, B after the last beat, and the
// read latency from AR to R with a one-cycle register bus.
module tb_sdhc_axi;
  import sdhc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  axi_req_t req;
  axi_rsp_t rsp;
  reg_req_t rreq;
  reg_rsp_t rrsp;
  sdhc_axi dut (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(req), .axi_rsp_o(rsp),
                .reg_req_o(rreq), .reg_rsp_i(rrsp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // register model
  logic [31:0] regs [64];
  int fifo_cnt = 0, delay = 0, fixed_lat = -1, n_acc = 0;
  always @(posedge clk) begin
    rrsp.ready <= 1'b0;
    if (rst_n && rreq.valid && !rrsp.ready) begin
      if (delay == 0) begin
        n_acc++;
        rrsp.ready <= 1'b1;
        if (rreq.write) begin
          for (int i = 0; i < 4; i++)
            if (rreq.wstrb[i]) regs[rreq.addr[7:2]][8*i +: 8] <= rreq.wdata[8*i +: 8];
        end else if (rreq.addr == 8'h20) begin
          rrsp.rdata <= 32'(fifo_cnt);
          fifo_cnt++;
        end else begin
          rrsp.rdata <= regs[rreq.addr[7:2]];
        end
        delay <= (fixed_lat >= 0) ? fixed_lat : int'($urandom % 3);
      end else begin
        delay <= delay - 1;
      end
    end
  end

  task automatic aw(input logic [7:0] id, input logic [7:0] a, input logic [7:0] len,
                    input logic [2:0] size, input logic [1:0] burst);
    @(negedge clk);
    req.aw = '{id: id, addr: 48'h0300_0000 | 48'(a), len: len, size: size, burst: burst};
    req.aw_valid = 1'b1;
    do @(posedge clk); while (!rsp.aw_ready);
    @(negedge clk) req.aw_valid = 1'b0;
  endtask
  task automatic wbeat(input logic [63:0] d, input logic [7:0] s, input bit last);
    req.w = '{data: d, strb: s, last: last};
    req.w_valid = 1'b1;
    do @(posedge clk); while (!rsp.w_ready);
    @(negedge clk) req.w_valid = 1'b0;
  endtask
  task automatic bresp(input logic [7:0] id);
    req.b_ready = 1'b1;
    while (!rsp.b_valid) @(negedge clk);
    check(rsp.b.id == id && rsp.b.resp == RESP_OKAY, "B id and OKAY");
    @(negedge clk);
  endtask
  task automatic ar(input logic [7:0] id, input logic [7:0] a, input logic [7:0] len,
                    input logic [2:0] size, input logic [1:0] burst);
    @(negedge clk);
    req.ar = '{id: id, addr: 48'h0300_0000 | 48'(a), len: len, size: size, burst: burst};
    req.ar_valid = 1'b1;
    req.r_ready  = 1'b1;
    do @(posedge clk); while (!rsp.ar_ready);
    @(negedge clk) req.ar_valid = 1'b0;
  endtask
  task automatic rbeat(input logic [7:0] id, input bit last, output logic [63:0] d);
    while (!rsp.r_valid) @(negedge clk);
    check(rsp.r.id == id && rsp.r.resp == RESP_OKAY && rsp.r.last == last, "R id, OKAY, last");
    d = rsp.r.data;
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    req = '0;
    for (int i = 0; i < 64; i++) regs[i] = 32'h1000_0000 + i;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 32-bit write to the high half of a beat (offset 0x0C)
    aw(8'h11, 8'h0C, 0, 3'd2, 2'b01);
    wbeat({32'hAABB_CCDD, 32'h0}, 8'hF0, 1);
    bresp(8'h11);
    check(regs[3] == 32'hAABB_CCDD && regs[2] == 32'h1000_0002, "32-bit write to upper lane");

    // 32-bit write with partial strobes to the low half (offset 0x08)
    aw(8'h12, 8'h08, 0, 3'd2, 2'b01);
    wbeat({32'h0, 32'h5566_7788}, 8'h03, 1);
    bresp(8'h12);
    check(regs[2] == 32'h1000_7788, "byte strobes on lower lane");

    // 64-bit write covers two registers
    aw(8'h13, 8'h30, 0, 3'd3, 2'b01);
    wbeat({32'h2222_2222, 32'h1111_1111}, 8'hFF, 1);
    bresp(8'h13);
    check(regs[12] == 32'h1111_1111 && regs[13] == 32'h2222_2222, "64-bit write");

    // narrow reads select by addr[2]
    ar(8'h21, 8'h34, 0, 3'd2, 2'b01);
    rbeat(8'h21, 1, d);
    check(d[63:32] == 32'h2222_2222, "narrow read upper lane");
    ar(8'h22, 8'h30, 0, 3'd3, 2'b01);
    rbeat(8'h22, 1, d);
    check(d == {32'h2222_2222, 32'h1111_1111}, "64-bit read");

    // INCR write burst of 4 x 64 bits from 0x40, then read it back as a burst
    aw(8'h31, 8'h40, 3, 3'd3, 2'b01);
    for (int b = 0; b < 4; b++) wbeat({32'(b * 2 + 1) | 32'hB000_0000, 32'(b * 2) | 32'hB000_0000}, 8'hFF, b == 3);
    bresp(8'h31);
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < 8; i++) if (regs[16 + i] != (32'hB000_0000 | 32'(i))) bad++;
      check(bad == 0, "INCR write burst");
    end
    ar(8'h32, 8'h40, 3, 3'd3, 2'b01);
    begin
      int bad;
      bad = 0;
      for (int b = 0; b < 4; b++) begin
        rbeat(8'h32, b == 3, d);
        if (d != {32'hB000_0000 | 32'(b * 2 + 1), 32'hB000_0000 | 32'(b * 2)}) bad++;
      end
      check(bad == 0, "INCR read burst");
    end

    // FIXED burst of 32-bit reads streams the data port: 0, 1, 2, ... 5
    fifo_cnt = 0;
    ar(8'h33, 8'h20, 5, 3'd2, 2'b00);
    begin
      int bad;
      bad = 0;
      for (int b = 0; b < 6; b++) begin
        rbeat(8'h33, b == 5, d);
        if (d[31:0] != 32'(b)) bad++;
      end
      check(bad == 0 && fifo_cnt == 6, "FIXED read burst of the data port");
    end

    // latency with a one-cycle register bus
    fixed_lat = 0;
    repeat (5) @(negedge clk);
    delay = 0;
    begin
      int t;
      @(negedge clk);
      req.ar = '{id: 8'h44, addr: 48'h0300_0008, len: 8'd0, size: 3'd2, burst: 2'b01};
      req.ar_valid = 1'b1;
      @(negedge clk);
      req.ar_valid = 1'b0;
      t = 0;
      while (!rsp.r_valid) begin @(negedge clk); t++; end
      check(t == 3, $sformatf("R valid %0d cycles after AR acceptance", t));
      @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
