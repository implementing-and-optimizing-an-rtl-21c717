// sd_card_model: behavioural model of an SD memory card (SDHC addressing) for simulation only.
//
// Samples CMD/DAT on the rising edge of sd_clk and drives them on the falling edge, as a card in
// default-speed mode does. It decodes the commands a driver needs to bring a card up and move
// blocks: CMD0, CMD2 (R2 CID), CMD3 (R6), CMD7 (R1b), CMD8 (R7), CMD12 (R1b reporting the data
// state, stops a multi-block transfer), CMD16, CMD17/18 (single/multiple block read), CMD24/25
// (single/multiple block write), CMD55, ACMD6 (bus width), ACMD41 (R3). Every command's CRC7 is checked (bad_cmd_crc
// counts failures). Reads send start bit, data, CRC16 per line and end bit, with a two-clock gap
// between blocks; writes are checked for CRC16 and answered with a CRC status token and a
// BUSY_CLKS busy phase on DAT0 (bad_dat_crc counts bad blocks). The memory holds MEM_BLOCKS
// blocks of 512 bytes, block address taken modulo MEM_BLOCKS. corrupt_i makes the next read block
// carry a wrong CRC. A stopped sd_clk simply halts the card.
module sd_card_model #(
  parameter int unsigned MEM_BLOCKS = 8,
  parameter int unsigned NCR        = 2,   // clocks from command end bit to response start bit
  parameter int unsigned NAC        = 4,   // clocks from command end bit to first read block
  parameter int unsigned BUSY_CLKS  = 12
) (
  input  logic       sd_clk,
  input  logic       cmd_i,
  output logic       cmd_o,
  output logic       cmd_oe,
  input  logic [3:0] dat_i,
  output logic [3:0] dat_o,
  output logic [3:0] dat_oe,
  input  logic       corrupt_i
);
  import sdhc_pkg::crc7_step;
  import sdhc_pkg::crc16_step;

  logic [7:0] mem [MEM_BLOCKS*512];
  logic       wide = 1'b0;
  logic       app_cmd = 1'b0;
  logic       stop_req = 1'b0;
  int         bad_cmd_crc = 0;
  int         bad_dat_crc = 0;
  int         cmds_seen = 0;
  int         blocks_read = 0;
  int         blocks_written = 0;
  logic [15:0] rca = 16'h1234;
  logic [127:0] cid = 128'h0353_4453_4330_3847_8012_3456_7801_2300;

  initial begin
    cmd_o = 1'b1; cmd_oe = 1'b0; dat_o = 4'hF; dat_oe = 4'h0;
    for (int i = 0; i < MEM_BLOCKS*512; i++) mem[i] = 8'(i * 7 + 3);
  end

  // ---------------- command line ----------------
  task automatic send_frame(input logic [135:0] bits, input int n);
    for (int i = n - 1; i >= 0; i--) begin
      @(negedge sd_clk);
      cmd_oe <= 1'b1;
      cmd_o  <= bits[i];
    end
    @(negedge sd_clk);
    cmd_oe <= 1'b0;
    cmd_o  <= 1'b1;
  endtask

  function automatic logic [47:0] r48(logic [5:0] idx, logic [31:0] payload);
    logic [6:0] c = '0;
    logic [39:0] b = {2'b00, idx, payload};
    for (int i = 39; i >= 0; i--) c = crc7_step(c, b[i]);
    return {b, c, 1'b1};
  endfunction

  task automatic wait_clocks(input int n);
    repeat (n) @(posedge sd_clk);
  endtask

  logic       rd_go = 1'b0, rd_multi = 1'b0, wr_go = 1'b0, wr_multi = 1'b0, busy_go = 1'b0;
  int         xfer_addr = 0;

  initial begin : cmd_proc
    logic [47:0] f;
    logic [6:0]  c;
    logic [5:0]  idx;
    logic [31:0] arg;
    logic        was_app;
    forever begin
      @(posedge sd_clk);
      if (cmd_oe || cmd_i) continue;
      f = '0;
      f[47] = 1'b0;
      for (int i = 46; i >= 0; i--) begin
        @(posedge sd_clk);
        f[i] = cmd_i;
      end
      c = '0;
      for (int i = 47; i >= 8; i--) c = crc7_step(c, f[i]);
      cmds_seen++;
      if (c != f[7:1] || !f[0] || !f[46]) begin
        bad_cmd_crc++;
        continue;
      end
      begin
        idx     = f[45:40];
        arg     = f[39:8];
        was_app = app_cmd;
        app_cmd = 1'b0;
        wait_clocks(NCR - 1);
        if (was_app && idx == 6'd41) begin
          send_frame({88'h0, 2'b00, 6'h3F, 32'hC0FF_8000, 7'h7F, 1'b1}, 48);   // R3
        end else if (was_app && idx == 6'd6) begin
          wide = (arg[1:0] == 2'b10);
          send_frame({88'h0, r48(idx, 32'h0000_0920)}, 48);
        end else begin
          case (idx)
            6'd0:  ;
            6'd2:  begin
              c = '0;
              for (int i = 127; i >= 8; i--) c = crc7_step(c, cid[i]);
              send_frame({2'b00, 6'h3F, cid[127:8], c, 1'b1}, 136);
            end
            6'd3:  send_frame({88'h0, r48(idx, {rca, 16'h0500})}, 48);
            6'd8:  send_frame({88'h0, r48(idx, {20'h0, arg[11:0]})}, 48);
            6'd55: begin app_cmd = 1'b1; send_frame({88'h0, r48(idx, 32'h0000_0120)}, 48); end
            6'd7, 6'd12: begin
              if (idx == 6'd12) stop_req = 1'b1;
              // CMD12 reports the data state (5), CMD7 the transfer state (4)
              send_frame({88'h0, r48(idx, idx == 6'd12 ? 32'h0000_0B00 : 32'h0000_0900)}, 48);
              busy_go = 1'b1;
            end
            6'd17, 6'd18: begin
              xfer_addr = int'(arg) % MEM_BLOCKS;
              rd_multi  = (idx == 6'd18);
              stop_req  = 1'b0;
              rd_go     = 1'b1;
              send_frame({88'h0, r48(idx, 32'h0000_0900)}, 48);
            end
            6'd24, 6'd25: begin
              xfer_addr = int'(arg) % MEM_BLOCKS;
              wr_multi  = (idx == 6'd25);
              stop_req  = 1'b0;
              send_frame({88'h0, r48(idx, 32'h0000_0900)}, 48);
              wr_go     = 1'b1;
            end
            default: send_frame({88'h0, r48(idx, 32'h0000_0900)}, 48);
          endcase
        end
      end
    end
  end

  // ---------------- data lines ----------------
  task automatic drive_dat(input logic [3:0] v, input logic [3:0] oe);
    @(negedge sd_clk);
    dat_oe <= oe;
    dat_o  <= v;
  endtask

  task automatic send_block(input int blk, input logic bad);
    logic [3:0][15:0] crc = '0;
    logic [3:0] v;
    logic [3:0] oe = wide ? 4'hF : 4'h1;
    drive_dat(4'h0, oe);
    for (int i = 0; i < 512; i++) begin
      logic [7:0] b = mem[blk*512 + i];
      for (int s = 0; s < (wide ? 2 : 8); s++) begin
        if (stop_req) return;
        v = wide ? (s == 0 ? b[7:4] : b[3:0]) : {3'b111, b[7-s]};
        for (int l = 0; l < 4; l++) crc[l] = crc16_step(crc[l], v[l]);
        drive_dat(v, oe);
      end
    end
    if (bad) crc[0] = crc[0] ^ 16'h0001;
    for (int k = 15; k >= 0; k--) drive_dat({crc[3][k], crc[2][k], crc[1][k], crc[0][k]}, oe);
    drive_dat(4'hF, oe);
    drive_dat(4'hF, 4'h0);
    blocks_read++;
  endtask

  task automatic recv_block(input int blk);
    logic [3:0][15:0] crc = '0;
    logic [3:0][15:0] rx;
    logic [7:0] b;
    // wait for start bit
    do @(posedge sd_clk); while (dat_i[0] !== 1'b0 && !stop_req);
    if (stop_req) return;
    for (int i = 0; i < 512; i++) begin
      b = '0;
      for (int s = 0; s < (wide ? 2 : 8); s++) begin
        @(posedge sd_clk);
        for (int l = 0; l < 4; l++) if (wide || l == 0) crc[l] = crc16_step(crc[l], dat_i[l]);
        b = wide ? {b[3:0], dat_i} : {b[6:0], dat_i[0]};
      end
      mem[blk*512 + i] = b;
    end
    for (int k = 15; k >= 0; k--) begin
      @(posedge sd_clk);
      for (int l = 0; l < 4; l++) rx[l][k] = dat_i[l];
    end
    @(posedge sd_clk);   // end bit
    begin
      logic ok = (rx[0] == crc[0]) && (!wide || (rx[1] == crc[1] && rx[2] == crc[2] &&
                                                 rx[3] == crc[3]));
      if (!ok) bad_dat_crc++;
      blocks_written++;
      @(negedge sd_clk);                // Ncrc: two clocks after the end bit
      drive_dat(4'hF, 4'h0);
      drive_dat(4'hE, 4'h1);            // token start
      drive_dat({3'b111, 1'b0}, 4'h1);
      drive_dat({3'b111, ok}, 4'h1);
      drive_dat({3'b111, !ok}, 4'h1);
      drive_dat(4'hF, 4'h1);            // token end
      for (int k = 0; k < BUSY_CLKS; k++) drive_dat(4'hE, 4'h1);
      drive_dat(4'hF, 4'h1);
      drive_dat(4'hF, 4'h0);
    end
  endtask

  initial begin : dat_proc
    forever begin
      @(posedge sd_clk);
      if (rd_go) begin
        rd_go = 1'b0;
        wait_clocks(NAC);
        do begin
          send_block(xfer_addr, corrupt_i);
          xfer_addr = (xfer_addr + 1) % MEM_BLOCKS;
          if (rd_multi && !stop_req) wait_clocks(2);
        end while (rd_multi && !stop_req);
        dat_oe <= 4'h0;
      end else if (wr_go) begin
        wr_go = 1'b0;
        do begin
          recv_block(xfer_addr);
          xfer_addr = (xfer_addr + 1) % MEM_BLOCKS;
        end while (wr_multi && !stop_req);
      end else if (busy_go) begin
        busy_go = 1'b0;
        drive_dat(4'hE, 4'h1);
        for (int k = 0; k < BUSY_CLKS; k++) drive_dat(4'hE, 4'h1);
        drive_dat(4'hF, 4'h1);
        drive_dat(4'hF, 4'h0);
      end
    end
  end

endmodule
