// tb_sdhc_sram: checks the buffer SRAM: every word written reads back one cycle after the read
// request, the output holds while no read is requested, and a read of the address being written
// in the same cycle returns the old word.
module tb_sdhc_sram;
  localparam int unsigned WORDS = 256;
  logic clk = 1'b0;
  always #5 clk = !clk;
  logic we = 1'b0, re = 1'b0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [WORDS];
  int checks = 0, failures = 0;

  sdhc_sram #(.WORDS(WORDS), .WIDTH(32)) dut (
    .clk_i(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .re_i(re), .raddr_i(raddr),
    .rdata_o(rdata));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = 8'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    // read back in a scrambled order
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      re = 1'b1; raddr = 8'(i * 37 + 11);
      @(negedge clk);
      re = 1'b0;
      check(rdata == model[8'(i * 37 + 11)], $sformatf("read %0d", 8'(i * 37 + 11)));
    end
    // hold: output keeps its word with re low
    @(negedge clk);
    raddr = 8'd3;
    repeat (3) @(negedge clk);
    check(rdata == model[8'(255 * 37 + 11)], "output held while idle");
    // read-during-write to one address returns the old word
    @(negedge clk);
    we = 1'b1; re = 1'b1; waddr = 8'd9; raddr = 8'd9; wdata = ~model[9];
    @(negedge clk);
    we = 1'b0; re = 1'b0;
    check(rdata == model[9], "read during write returns old word");
    model[9] = ~model[9];
    @(negedge clk) re = 1'b1;
    @(negedge clk) re = 1'b0;
    check(rdata == model[9], "new word after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
