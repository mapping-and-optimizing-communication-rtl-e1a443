// gateway_core -- the state machine that keeps a software-mapped and a
// hardware-mapped ROS 2 topic in step.
//
// One gateway serves one topic that has publishers or subscribers both in
// software and in hardware. The software side is a software-mapped topic (SMT)
// whose messages live in main memory; the core reaches it through two FIFO
// interfaces of a hardware thread: the OSIF, a command/reply channel to a
// software delegate thread that performs the ROS 2 calls, and the MEMIF, a
// command/data channel to main memory. The hardware side is a hardware-mapped
// topic (HMT), reached through one publisher and one subscriber stream. Every
// message crosses the hardware/software boundary once, however many hardware
// nodes subscribe on the HMT.
//
// Behaviour (each named state below is one of the runtime FSM; the ST_* steps
// of gw_pkg split it into single-word transfers):
//  1. Get SMT Output Message Location: send GET_OUT_LOC on the OSIF and keep
//     the returned address; HMT messages are written there for publishing.
//  2. Start SMT Message Request: send SUB_REQUEST. The delegate blocks in a
//     ROS 2 take and answers later with a message pointer.
//  3. Check SMT / Check HMT: poll the OSIF reply FIFO and the HMT subscriber
//     stream in turn, one cycle each, until one of them has a message.
//  4. SMT message: Transfer Main Memory -> HMT. Read the 2-word header through
//     the MEMIF. If its publisher ID is SMT_PUB_ID the message is this gateway's
//     own publication coming back: discard it (SMT-side filter). Otherwise
//     publish {HMT_PUB_ID, length} and stream the payload from the MEMIF read
//     straight into the HMT. Then back to 2.
//  5. HMT message: Transfer HMT -> Main Memory. Write {SMT_PUB_ID, length,
//     payload} to the output location through the MEMIF. Then Cancel and Check
//     SMT Message Request + Publish to SMT: send SUB_CANCEL; the one-word reply
//     is 0, or a pointer to an SMT message that arrived before the cancel. Send
//     PUBLISH and wait for its acknowledgement. If the cancel returned a pointer,
//     go to 4 with it, else to 2.
//
// Interface: valid/ready FIFO ports, 32-bit words. OSIF replies are one word
// each; MEMIF transfers are {op, byte count} + address + data words (see
// gw_pkg). HMT streams carry {publisher ID, length N, N payload words} with
// 'last' on the final word. The ev_* outputs pulse once per event.
// Timing: one OSIF/MEMIF/HMT word per cycle at most; payload words move at one
// per cycle when both sides are ready. An idle gateway alternates between Check
// SMT and Check HMT every cycle, so a new message is seen within 2 cycles.
//
// From the paper: the states and transitions, the order publish/cancel, the
// possible pointer returned by the cancel, and the publisher-ID filters. This
// design's own: the OSIF command codes and reply format, the message framing,
// one MEMIF command per transfer (limits a message to MEMIF_MAX_WORDS - 2
// payload words, 16 MiB), and that the header is read before the payload so an
// own message is discarded without reading its payload.
module gateway_core
  import gw_pkg::*;
#(
  parameter word_t SMT_PUB_ID = 32'h0000_0B01,  // ID this gateway publishes under on the SMT
  parameter word_t HMT_PUB_ID = 32'h0000_0A01   // ID this gateway publishes under on the HMT
) (
  input  logic      clk,
  input  logic      rst_n,
  // OSIF: hardware -> delegate and delegate -> hardware
  output word_t     osif_hw2sw_data,
  output logic      osif_hw2sw_valid,
  input  logic      osif_hw2sw_ready,
  input  word_t     osif_sw2hw_data,
  input  logic      osif_sw2hw_valid,
  output logic      osif_sw2hw_ready,
  // MEMIF: thread -> memory (commands, addresses, write data) and memory -> thread (read data)
  output word_t     memif_hwt2mem_data,
  output logic      memif_hwt2mem_valid,
  input  logic      memif_hwt2mem_ready,
  input  word_t     memif_mem2hwt_data,
  input  logic      memif_mem2hwt_valid,
  output logic      memif_mem2hwt_ready,
  // HMT publisher port
  output word_t     hmt_pub_data,
  output logic      hmt_pub_last,
  output logic      hmt_pub_valid,
  input  logic      hmt_pub_ready,
  // HMT subscriber port (after the HMT-side filter)
  input  word_t     hmt_sub_data,
  input  logic      hmt_sub_last,
  input  logic      hmt_sub_valid,
  output logic      hmt_sub_ready,
  // status
  output gw_state_e state,
  output logic      ev_smt2hmt,       // SMT message delivered to the HMT
  output logic      ev_hmt2smt,       // HMT message published to the SMT
  output logic      ev_cancel_hit,    // the cancel returned a raced SMT message
  output logic      ev_smt_filtered   // own SMT message discarded
);

  gw_state_e state_q, state_d;
  word_t     out_addr_q, out_addr_d;   // SMT output message location
  word_t     ptr_q, ptr_d;             // SMT message being read
  word_t     pend_q, pend_d;           // pointer returned by the cancel
  word_t     len_q, len_d;             // payload length in words
  word_t     cnt_q, cnt_d;             // payload words still to move
  logic      own_q, own_d;             // header ID is SMT_PUB_ID

  assign state = state_q;

  always_comb begin
    state_d    = state_q;
    out_addr_d = out_addr_q;
    ptr_d      = ptr_q;
    pend_d     = pend_q;
    len_d      = len_q;
    cnt_d      = cnt_q;
    own_d      = own_q;

    osif_hw2sw_data     = '0;
    osif_hw2sw_valid    = 1'b0;
    osif_sw2hw_ready    = 1'b0;
    memif_hwt2mem_data  = '0;
    memif_hwt2mem_valid = 1'b0;
    memif_mem2hwt_ready = 1'b0;
    hmt_pub_data        = '0;
    hmt_pub_last        = 1'b0;
    hmt_pub_valid       = 1'b0;
    hmt_sub_ready       = 1'b0;

    ev_smt2hmt      = 1'b0;
    ev_hmt2smt      = 1'b0;
    ev_cancel_hit   = 1'b0;
    ev_smt_filtered = 1'b0;

    unique case (state_q)
      ST_START: state_d = ST_LOC_CMD;

      // ---------------------------------------- Get SMT Output Message Location
      ST_LOC_CMD: begin
        osif_hw2sw_data  = OSIF_CMD_GET_OUT_LOC;
        osif_hw2sw_valid = 1'b1;
        if (osif_hw2sw_ready) state_d = ST_LOC_RSP;
      end
      ST_LOC_RSP: begin
        osif_sw2hw_ready = 1'b1;
        if (osif_sw2hw_valid) begin
          out_addr_d = osif_sw2hw_data;
          state_d    = ST_REQ_CMD;
        end
      end

      // ---------------------------------------- Start SMT Message Request
      ST_REQ_CMD: begin
        osif_hw2sw_data  = OSIF_CMD_SUB_REQUEST;
        osif_hw2sw_valid = 1'b1;
        if (osif_hw2sw_ready) state_d = ST_CHECK_SMT;
      end

      // ---------------------------------------- Check SMT / Check HMT
      ST_CHECK_SMT: begin
        osif_sw2hw_ready = 1'b1;
        if (osif_sw2hw_valid) begin
          ptr_d   = osif_sw2hw_data;
          state_d = ST_M2H_HCMD;
        end else begin
          state_d = ST_CHECK_HMT;
        end
      end
      ST_CHECK_HMT: begin
        hmt_sub_ready = 1'b1;           // consumes the publisher-ID word
        state_d = hmt_sub_valid ? ST_H2M_LEN : ST_CHECK_SMT;
      end

      // ---------------------------------------- Transfer Main Memory -> HMT
      ST_M2H_HCMD: begin
        memif_hwt2mem_data  = memif_cmd(1'b0, MEMIF_LEN_W'(4 * HDR_WORDS));
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = ST_M2H_HADDR;
      end
      ST_M2H_HADDR: begin
        memif_hwt2mem_data  = ptr_q;
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = ST_M2H_HID;
      end
      ST_M2H_HID: begin
        memif_mem2hwt_ready = 1'b1;
        if (memif_mem2hwt_valid) begin
          own_d   = (memif_mem2hwt_data == SMT_PUB_ID);
          state_d = ST_M2H_HLEN;
        end
      end
      ST_M2H_HLEN: begin
        memif_mem2hwt_ready = 1'b1;
        if (memif_mem2hwt_valid) begin
          len_d = memif_mem2hwt_data;
          if (own_q) begin
            ev_smt_filtered = 1'b1;     // SMT-side filter: own publication
            state_d         = ST_REQ_CMD;
          end else begin
            state_d = ST_M2H_PID;
          end
        end
      end
      ST_M2H_PID: begin
        hmt_pub_data  = HMT_PUB_ID;
        hmt_pub_valid = 1'b1;
        if (hmt_pub_ready) state_d = ST_M2H_PLEN;
      end
      ST_M2H_PLEN: begin
        hmt_pub_data  = len_q;
        hmt_pub_last  = (len_q == '0);
        hmt_pub_valid = 1'b1;
        if (hmt_pub_ready) begin
          if (len_q == '0) begin
            ev_smt2hmt = 1'b1;
            state_d    = ST_REQ_CMD;
          end else begin
            state_d = ST_M2H_DCMD;
          end
        end
      end
      ST_M2H_DCMD: begin
        memif_hwt2mem_data  = memif_cmd(1'b0, MEMIF_LEN_W'(len_q << 2));
        memif_hwt2mem_valid = 1'b1;
        cnt_d               = len_q;
        if (memif_hwt2mem_ready) state_d = ST_M2H_DADDR;
      end
      ST_M2H_DADDR: begin
        memif_hwt2mem_data  = ptr_q + word_t'(4 * HDR_WORDS);
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = ST_M2H_DATA;
      end
      ST_M2H_DATA: begin
        hmt_pub_data        = memif_mem2hwt_data;
        hmt_pub_last        = (cnt_q == word_t'(1));
        hmt_pub_valid       = memif_mem2hwt_valid;
        memif_mem2hwt_ready = hmt_pub_ready;
        if (memif_mem2hwt_valid && hmt_pub_ready) begin
          cnt_d = cnt_q - 1'b1;
          if (cnt_q == word_t'(1)) begin
            ev_smt2hmt = 1'b1;
            state_d    = ST_REQ_CMD;
          end
        end
      end

      // ---------------------------------------- Transfer HMT -> Main Memory
      ST_H2M_LEN: begin
        hmt_sub_ready = 1'b1;
        if (hmt_sub_valid) begin
          len_d   = hmt_sub_data;
          cnt_d   = hmt_sub_data;
          state_d = ST_H2M_CMD;
        end
      end
      ST_H2M_CMD: begin
        memif_hwt2mem_data  = memif_cmd(1'b1, MEMIF_LEN_W'((len_q + word_t'(HDR_WORDS)) << 2));
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = ST_H2M_ADDR;
      end
      ST_H2M_ADDR: begin
        memif_hwt2mem_data  = out_addr_q;
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = ST_H2M_WID;
      end
      ST_H2M_WID: begin
        memif_hwt2mem_data  = SMT_PUB_ID;
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = ST_H2M_WLEN;
      end
      ST_H2M_WLEN: begin
        memif_hwt2mem_data  = len_q;
        memif_hwt2mem_valid = 1'b1;
        if (memif_hwt2mem_ready) state_d = (len_q == '0) ? ST_CAN_CMD : ST_H2M_DATA;
      end
      ST_H2M_DATA: begin
        memif_hwt2mem_data  = hmt_sub_data;
        memif_hwt2mem_valid = hmt_sub_valid;
        hmt_sub_ready       = memif_hwt2mem_ready;
        if (hmt_sub_valid && memif_hwt2mem_ready) begin
          cnt_d = cnt_q - 1'b1;
          if (cnt_q == word_t'(1)) state_d = ST_CAN_CMD;
        end
      end

      // ---------------------------------------- Cancel and Check SMT Message Request + Publish to SMT
      ST_CAN_CMD: begin
        osif_hw2sw_data  = OSIF_CMD_SUB_CANCEL;
        osif_hw2sw_valid = 1'b1;
        if (osif_hw2sw_ready) state_d = ST_CAN_RSP;
      end
      ST_CAN_RSP: begin
        osif_sw2hw_ready = 1'b1;
        if (osif_sw2hw_valid) begin
          pend_d        = osif_sw2hw_data;
          ev_cancel_hit = (osif_sw2hw_data != OSIF_NO_MSG);
          state_d       = ST_PUB_CMD;
        end
      end
      ST_PUB_CMD: begin
        osif_hw2sw_data  = OSIF_CMD_PUBLISH;
        osif_hw2sw_valid = 1'b1;
        if (osif_hw2sw_ready) state_d = ST_PUB_RSP;
      end
      ST_PUB_RSP: begin
        osif_sw2hw_ready = 1'b1;
        if (osif_sw2hw_valid) begin
          ev_hmt2smt = 1'b1;
          if (pend_q != OSIF_NO_MSG) begin
            ptr_d   = pend_q;
            state_d = ST_M2H_HCMD;     // New SMT message available
          end else begin
            state_d = ST_REQ_CMD;      // No SMT message available
          end
        end
      end

      default: state_d = ST_START;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q    <= ST_START;
      out_addr_q <= '0;
      ptr_q      <= '0;
      pend_q     <= '0;
      len_q      <= '0;
      cnt_q      <= '0;
      own_q      <= 1'b0;
    end else begin
      state_q    <= state_d;
      out_addr_q <= out_addr_d;
      ptr_q      <= ptr_d;
      pend_q     <= pend_d;
      len_q      <= len_d;
      cnt_q      <= cnt_d;
      own_q      <= own_d;
    end
  end

  // OSIF and MEMIF command words, once offered, stay until taken.
  a_osif_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (osif_hw2sw_valid && !osif_hw2sw_ready) |=> (osif_hw2sw_valid && $stable(osif_hw2sw_data)));
  a_memif_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (memif_hwt2mem_valid && !memif_hwt2mem_ready && state_q != ST_H2M_DATA)
      |=> (memif_hwt2mem_valid && $stable(memif_hwt2mem_data)));
  // A message must fit one MEMIF command (header + payload bytes in 24 bits).
  a_len_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_H2M_CMD || state_q == ST_M2H_DCMD)
      |-> (len_q <= word_t'(MEMIF_MAX_WORDS - HDR_WORDS)));
  // The HMT framing must agree with the length word.
  a_sub_last: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_H2M_DATA && hmt_sub_valid && hmt_sub_ready)
      |-> (hmt_sub_last == (cnt_q == word_t'(1))));

endmodule
