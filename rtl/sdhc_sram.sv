// sdhc_sram: the controller's data buffer, a simple dual-port memory (one write port, one read
// port, one system clock).
//
// A write stores wdata_i at waddr_i at the clock edge where we_i is high. A read with re_i high
// presents the word at raddr_i on rdata_o one cycle later (synchronous read, as an SRAM macro
// would); rdata_o holds its value while re_i is low. A read and a write to the same address in
// one cycle return the old word.
//
// Following the paper: the data logic keeps its blocks in an internal SRAM. This design's choice:
// 32-bit words (the width of the buffer data port register) and a depth of two 512-byte blocks,
// so one block can be read by the host while the next arrives from the card.
module sdhc_sram #(
  parameter int unsigned WORDS = 256,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic             clk_i,
  input  logic             we_i,
  input  logic [AW-1:0]    waddr_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             re_i,
  input  logic [AW-1:0]    raddr_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk_i) begin
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
