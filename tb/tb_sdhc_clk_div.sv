// tb_sdhc_clk_div: checks the SD clock divider. For several divider settings the SD clock period
// must be 2*max(1,div) system cycles with a 50% duty cycle, rise_o/fall_o must announce exactly
// the edges that follow, the clock must not run while disabled, and stop_i must hold it low
// (after finishing a high phase) and release it again.
module tb_sdhc_clk_div;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;
  logic en = 1'b0, stop = 1'b0, sd_clk, rise, fall;
  logic [7:0] div = 8'd1;
  int checks = 0, failures = 0;

  sdhc_clk_div dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .div_i(div), .stop_i(stop),
                    .sd_clk_o(sd_clk), .rise_o(rise), .fall_o(fall));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // strobes must predict the next edge
  logic prev_clk, prev_rise, prev_fall;
  int strobe_bad = 0;
  always @(posedge clk) begin
    prev_clk  <= sd_clk;
    prev_rise <= rise;
    prev_fall <= fall;
  end
  always @(negedge clk) if (rst_n) begin
    if ((sd_clk && !prev_clk) != prev_rise) strobe_bad++;
    if ((!sd_clk && prev_clk) != prev_fall) strobe_bad++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input int d);
    int t_rise[3], t_fall;
    div = 8'(d);
    repeat (4 * (d + 1)) @(posedge clk);
    @(posedge sd_clk); t_rise[0] = $time;
    @(negedge sd_clk); t_fall = $time;
    @(posedge sd_clk); t_rise[1] = $time;
    @(posedge sd_clk); t_rise[2] = $time;
    begin
      int exp = 2 * (d == 0 ? 1 : d) * 10;
      check(t_rise[1] - t_rise[0] == exp && t_rise[2] - t_rise[1] == exp,
            $sformatf("period for div %0d: %0d", d, t_rise[1] - t_rise[0]));
      check(t_fall - t_rise[0] == exp / 2, $sformatf("duty for div %0d", d));
    end
  endtask

  initial begin
    int highs;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // disabled: no clock
    highs = 0;
    repeat (50) @(posedge clk) if (sd_clk) highs++;
    check(highs == 0, "no clock while disabled");
    en = 1'b1;
    measure(1);
    measure(0);
    measure(2);
    measure(3);
    measure(8);
    // stop: clock must settle low within one half period and stay there
    div = 8'd4;
    repeat (37) @(posedge clk);
    stop = 1'b1;
    repeat (5) @(posedge clk);
    highs = 0;
    repeat (100) @(posedge clk) if (sd_clk) highs++;
    check(highs == 0, "held low while stopped");
    stop = 1'b0;
    highs = 0;
    repeat (20) @(posedge clk) if (sd_clk) highs++;
    check(highs > 0, "runs again after stop");
    en = 1'b0;
    repeat (10) @(posedge clk);
    check(!sd_clk, "low after disable");
    check(strobe_bad == 0, $sformatf("rise/fall strobes (%0d mismatches)", strobe_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
