// sdhc_fifo: word FIFO around the buffer SRAM, with the head word shown ahead.
//
// push_i writes wdata_i at the tail. The head word is always on rdata_o while rvalid_o is high;
// pop_i (only with rvalid_o) removes it. The head is the SRAM's registered read port itself: a
// read is issued whenever the SRAM holds unread words and the head is empty or being popped, so a
// pushed word reaches the head two cycles after push_i and back-to-back pops run at one word per
// cycle. level_o counts all stored words, head included. flush_i empties the FIFO. The owner must
// not push when level_o equals DEPTH.
module sdhc_fifo #(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          flush_i,
  input  logic          push_i,
  input  logic [31:0]   wdata_i,
  input  logic          pop_i,
  output logic [31:0]   rdata_o,
  output logic          rvalid_o,
  output logic [AW:0]   level_o
);

  logic [AW:0] wptr_q, rptr_q, mem_cnt;
  logic        fetch;

  assign mem_cnt  = wptr_q - rptr_q;
  assign fetch    = (mem_cnt != '0) && (!rvalid_o || pop_i);
  assign level_o  = mem_cnt + (AW+1)'(rvalid_o);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q   <= '0;
      rptr_q   <= '0;
      rvalid_o <= 1'b0;
    end else if (flush_i) begin
      wptr_q   <= '0;
      rptr_q   <= '0;
      rvalid_o <= 1'b0;
    end else begin
      if (push_i) wptr_q <= wptr_q + 1'b1;
      if (fetch) rptr_q <= rptr_q + 1'b1;
      if (fetch) rvalid_o <= 1'b1;
      else if (pop_i) rvalid_o <= 1'b0;
    end
  end

  sdhc_sram #(.WORDS(DEPTH), .WIDTH(32)) i_sram (
    .clk_i,
    .we_i    (push_i && !flush_i),
    .waddr_i (wptr_q[AW-1:0]),
    .wdata_i,
    .re_i    (fetch && !flush_i),
    .raddr_i (rptr_q[AW-1:0]),
    .rdata_o
  );

endmodule
