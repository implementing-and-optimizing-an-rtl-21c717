// sdhc_axi: AXI4 subordinate port of the SD host controller.
//
// The controller sits directly on the SoC's main AXI crossbar (64-bit data, 48-bit address)
// rather than behind a narrow peripheral bus, so that register accesses - in particular the
// buffer data port, which carries every byte of a transfer - see as little latency as possible.
// This adapter serves one AXI transaction at a time and turns each beat into one or two 32-bit
// register accesses on the internal register bus (sdhc_pkg::reg_req_t / reg_rsp_t): the low word
// of a 64-bit beat addresses offset {addr[7:3],3'b000}, the high word the next one. A write beat
// accesses each word whose four strobes are not all zero; a read beat of size 8 bytes reads both
// words, a narrower one only the word its addr[2] selects. INCR and WRAP bursts advance the address
// by the beat size (WRAP is treated as INCR), FIXED bursts keep it, which lets a burst stream the
// buffer data port. Only address bits [7:0] are decoded; the crossbar selects the controller.
// All responses are OKAY, so the two-bit BRESP and RRESP fields are constant.
//
// Timing: a single 32-bit read answers on R three cycles after AR is accepted; a write answers on
// B three cycles after its W beat is accepted.
//
// Following the paper: direct attachment to the AXI crossbar, 64-bit data and 48-bit address
// (the crossbar's widths in the SoC figure). This design's choices: the ID width, one transaction
// at a time, and the read/write arbitration (reads first).
//
// The handshake assertions at the end are disabled while rst_ni is low; lint tools then report
// rst_ni as used both asynchronously (flip-flop resets) and synchronously (the assertions'
// disable condition). No logic samples rst_ni synchronously.
module sdhc_axi
  import sdhc_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output reg_req_t reg_req_o,
  input  reg_rsp_t reg_rsp_i
);

  typedef enum logic [2:0] {S_IDLE, S_W_BEAT, S_W_ACC, S_B, S_R_ACC, S_R} state_e;

  state_e      state_q;
  axi_id_t     id_q;
  axi_addr_t   addr_q;
  logic [7:0]  len_q;         // beats left after the current one
  logic [2:0]  size_q;
  logic [1:0]  burst_q;
  axi_data_t   wdata_q;
  axi_strb_t   wstrb_q;
  logic        lane_q;        // 0: low word, 1: high word
  axi_data_t   rdata_q;

  // does this beat touch the given 32-bit lane?
  logic lane_needed;
  always_comb begin
    if (state_q == S_W_ACC) lane_needed = (wstrb_q[4*lane_q +: 4] != '0);
    else                    lane_needed = (size_q == 3'd3) || (addr_q[2] == lane_q);
  end

  logic acc_state;
  assign acc_state = (state_q == S_W_ACC) || (state_q == S_R_ACC);

  assign reg_req_o = '{valid: acc_state && lane_needed,
                       write: (state_q == S_W_ACC),
                       addr:  {addr_q[7:3], lane_q, 2'b00},
                       wdata: wdata_q[32*lane_q +: 32],
                       wstrb: wstrb_q[4*lane_q +: 4]};

  logic lane_finished;
  assign lane_finished = acc_state && (!lane_needed || reg_rsp_i.ready);

  axi_addr_t next_addr;
  always_comb begin
    next_addr = addr_q;
    if (burst_q != 2'b00) next_addr = addr_q + (axi_addr_t'(1) << size_q);
  end

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.ar_ready = (state_q == S_IDLE);
    axi_rsp_o.aw_ready = (state_q == S_IDLE) && !axi_req_i.ar_valid;
    axi_rsp_o.w_ready  = (state_q == S_W_BEAT);
    axi_rsp_o.b_valid  = (state_q == S_B);
    axi_rsp_o.b        = '{id: id_q, resp: RESP_OKAY};
    axi_rsp_o.r_valid  = (state_q == S_R);
    axi_rsp_o.r        = '{id: id_q, data: rdata_q, resp: RESP_OKAY, last: (len_q == '0)};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      id_q    <= '0;
      addr_q  <= '0;
      len_q   <= '0;
      size_q  <= '0;
      burst_q <= '0;
      wdata_q <= '0;
      wstrb_q <= '0;
      lane_q  <= 1'b0;
      rdata_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (axi_req_i.ar_valid) begin
            id_q    <= axi_req_i.ar.id;
            addr_q  <= axi_req_i.ar.addr;
            len_q   <= axi_req_i.ar.len;
            size_q  <= axi_req_i.ar.size;
            burst_q <= axi_req_i.ar.burst;
            lane_q  <= 1'b0;
            rdata_q <= '0;
            state_q <= S_R_ACC;
          end else if (axi_req_i.aw_valid) begin
            id_q    <= axi_req_i.aw.id;
            addr_q  <= axi_req_i.aw.addr;
            len_q   <= axi_req_i.aw.len;
            size_q  <= axi_req_i.aw.size;
            burst_q <= axi_req_i.aw.burst;
            state_q <= S_W_BEAT;
          end
        end
        S_W_BEAT: begin
          if (axi_req_i.w_valid) begin
            wdata_q <= axi_req_i.w.data;
            wstrb_q <= axi_req_i.w.strb;
            lane_q  <= 1'b0;
            state_q <= S_W_ACC;
          end
        end
        S_W_ACC: begin
          if (lane_finished) begin
            lane_q <= 1'b1;
            if (lane_q) begin
              if (len_q == '0) begin
                state_q <= S_B;
              end else begin
                len_q   <= len_q - 8'd1;
                addr_q  <= next_addr;
                state_q <= S_W_BEAT;
              end
            end
          end
        end
        S_B: begin
          if (axi_req_i.b_ready) state_q <= S_IDLE;
        end
        S_R_ACC: begin
          if (lane_finished) begin
            if (lane_needed) rdata_q[32*lane_q +: 32] <= reg_rsp_i.rdata;
            lane_q <= 1'b1;
            if (lane_q) state_q <= S_R;
          end
        end
        S_R: begin
          if (axi_req_i.r_ready) begin
            if (len_q == '0) begin
              state_q <= S_IDLE;
            end else begin
              len_q   <= len_q - 8'd1;
              addr_q  <= next_addr;
              lane_q  <= 1'b0;
              rdata_q <= '0;
              state_q <= S_R_ACC;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI handshake rules on the manager's side: a request, once valid, stays until accepted.
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_i.ar_valid && !axi_rsp_o.ar_ready |=> axi_req_i.ar_valid && $stable(axi_req_i.ar));
  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_i.aw_valid && !axi_rsp_o.aw_ready |=> axi_req_i.aw_valid && $stable(axi_req_i.aw));
  a_w_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    axi_req_i.w_valid && !axi_rsp_o.w_ready |=> axi_req_i.w_valid && $stable(axi_req_i.w));
  // The last W beat of a burst carries WLAST.
  a_w_last: assert property (@(posedge clk_i) disable iff (!rst_ni)
    state_q == S_W_BEAT && axi_req_i.w_valid |-> axi_req_i.w.last == (len_q == '0));

endmodule
