// sdhc_pkg: types, constants and helper functions shared by the SD host controller.
//
// Holds the AXI4 channel structs of the controller's bus port (64-bit data, 48-bit address,
// as on the SoC crossbar it attaches to), the internal 32-bit register request/response
// structs, the SDHCI 1.0 register offsets and bit positions, and bit-serial CRC7/CRC16 steps
// used on the CMD and DAT lines. The register offsets and the CRC polynomials are those of the
// public SD Host Controller and SD Physical Layer specifications; the ID width and the internal
// register-bus format are this design's choice.
package sdhc_pkg;

  // ---------------- AXI4 port ----------------
  localparam int unsigned AXI_AW = 48;
  localparam int unsigned AXI_DW = 64;
  localparam int unsigned AXI_IW = 8;
  localparam int unsigned AXI_SW = AXI_DW / 8;

  typedef logic [AXI_AW-1:0] axi_addr_t;
  typedef logic [AXI_DW-1:0] axi_data_t;
  typedef logic [AXI_SW-1:0] axi_strb_t;
  typedef logic [AXI_IW-1:0] axi_id_t;

  typedef enum logic [1:0] {RESP_OKAY = 2'b00, RESP_EXOKAY = 2'b01,
                            RESP_SLVERR = 2'b10, RESP_DECERR = 2'b11} axi_resp_e;

  typedef struct packed {
    axi_id_t   id;
    axi_addr_t addr;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
  } axi_ax_t;

  typedef struct packed {
    axi_data_t data;
    axi_strb_t strb;
    logic      last;
  } axi_w_t;

  typedef struct packed {
    axi_id_t   id;
    axi_resp_e resp;
  } axi_b_t;

  typedef struct packed {
    axi_id_t   id;
    axi_data_t data;
    axi_resp_e resp;
    logic      last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_rsp_t;

  // ---------------- internal 32-bit register bus ----------------
  // A request is held (valid high) until the response's ready; one access at a time.
  typedef struct packed {
    logic        valid;
    logic        write;
    logic [7:0]  addr;   // byte address, bits [1:0] ignored
    logic [31:0] wdata;
    logic [3:0]  wstrb;
  } reg_req_t;

  typedef struct packed {
    logic        ready;
    logic [31:0] rdata;
  } reg_rsp_t;

  // ---------------- SDHCI 1.0 register word offsets ----------------
  localparam logic [7:0] REG_SDMA_ADDR   = 8'h00;
  localparam logic [7:0] REG_BLK         = 8'h04; // block size [15:0], block count [31:16]
  localparam logic [7:0] REG_ARG         = 8'h08;
  localparam logic [7:0] REG_XFER_CMD    = 8'h0C; // transfer mode [15:0], command [31:16]
  localparam logic [7:0] REG_RESP0       = 8'h10;
  localparam logic [7:0] REG_RESP1       = 8'h14;
  localparam logic [7:0] REG_RESP2       = 8'h18;
  localparam logic [7:0] REG_RESP3       = 8'h1C;
  localparam logic [7:0] REG_BUF_DATA    = 8'h20;
  localparam logic [7:0] REG_PRESENT     = 8'h24;
  localparam logic [7:0] REG_HOST_CTRL   = 8'h28; // host ctrl, power ctrl, block gap, wakeup
  localparam logic [7:0] REG_CLK_CTRL    = 8'h2C; // clock ctrl [15:0], timeout [23:16], sw reset [31:24]
  localparam logic [7:0] REG_INT_STATUS  = 8'h30; // normal [15:0], error [31:16]
  localparam logic [7:0] REG_INT_STS_EN  = 8'h34;
  localparam logic [7:0] REG_INT_SIG_EN  = 8'h38;
  localparam logic [7:0] REG_ACMD12_ERR  = 8'h3C;
  localparam logic [7:0] REG_CAPS        = 8'h40;
  localparam logic [7:0] REG_MAX_CURRENT = 8'h48;
  localparam logic [7:0] REG_VERSION     = 8'hFC; // slot int status [15:0], version [31:16]

  // Normal interrupt status bits
  localparam int unsigned INT_CMD_COMPLETE  = 0;
  localparam int unsigned INT_XFER_COMPLETE = 1;
  localparam int unsigned INT_BLOCK_GAP     = 2;
  localparam int unsigned INT_BUF_WR_READY  = 4;
  localparam int unsigned INT_BUF_RD_READY  = 5;
  localparam int unsigned INT_CARD_INSERT   = 6;
  localparam int unsigned INT_CARD_REMOVE   = 7;
  localparam int unsigned INT_ERROR         = 15;
  // Error interrupt status bits
  localparam int unsigned ERR_CMD_TIMEOUT  = 0;
  localparam int unsigned ERR_CMD_CRC      = 1;
  localparam int unsigned ERR_CMD_END_BIT  = 2;
  localparam int unsigned ERR_CMD_INDEX    = 3;
  localparam int unsigned ERR_DATA_TIMEOUT = 4;
  localparam int unsigned ERR_DATA_CRC     = 5;
  localparam int unsigned ERR_DATA_END_BIT = 6;
  localparam int unsigned ERR_AUTO_CMD12   = 8;

  // Command register response type select
  typedef enum logic [1:0] {
    RSP_NONE    = 2'b00,
    RSP_136     = 2'b01,
    RSP_48      = 2'b10,
    RSP_48_BUSY = 2'b11
  } rsp_type_e;

  // A command as handed from the register file to the command logic.
  typedef struct packed {
    logic [5:0]  index;
    logic [31:0] arg;
    rsp_type_e   rsp_type;
    logic        crc_check;
    logic        index_check;
    logic        data_present;
  } sd_cmd_t;

  // Transfer setup as handed from the register file to the data logic.
  typedef struct packed {
    logic [11:0] block_size;   // bytes
    logic [15:0] block_count;
    logic        block_count_en;
    logic        multi_block;
    logic        auto_cmd12;   // send CMD12 after the last block (counted multi-block only)
    logic        read;         // 1 = card to host
    logic        wide_bus;     // 1 = 4-bit DAT, 0 = 1-bit
    logic [3:0]  timeout_exp;  // data timeout = 2^(13+n) system clocks
  } xfer_cfg_t;

  // Errors reported by the command logic.
  typedef struct packed {
    logic timeout;
    logic crc;
    logic end_bit;
    logic index;
  } cmd_err_t;

  // ---------------- CRCs ----------------
  // CRC7, generator x^7 + x^3 + 1, one bit per call (MSB first).
  function automatic logic [6:0] crc7_step(logic [6:0] crc, logic bit_in);
    logic fb;
    fb = crc[6] ^ bit_in;
    crc7_step = {crc[5:3], crc[2] ^ fb, crc[1:0], fb};
  endfunction

  // CRC16-CCITT, generator x^16 + x^12 + x^5 + 1, one bit per call (MSB first).
  function automatic logic [15:0] crc16_step(logic [15:0] crc, logic bit_in);
    logic fb;
    fb = crc[15] ^ bit_in;
    crc16_step = {crc[14:12], crc[11] ^ fb, crc[10:5], crc[4] ^ fb, crc[3:0], fb};
  endfunction

endpackage
