// gw_pkg -- shared types and constants of the ROS 2 topic gateway.
//
// The gateway connects a software-mapped topic (SMT, message buffers in main
// memory, served by a software delegate thread) with a hardware-mapped topic
// (HMT, a streaming channel inside the programmable logic). This package holds
// what the gateway core, the HMT, the message filter and the testbenches agree on:
//
//  * OSIF command words. The OSIF is the FIFO pair between a hardware thread
//    and its software delegate. The command codes below are this design's own;
//    the four operations (get output-message location, request an SMT message,
//    cancel that request, publish to the SMT) are the ones the gateway needs.
//  * MEMIF command words. The MEMIF is the FIFO pair to the memory subsystem.
//    A transfer is a command word {write, 7'b0, length in bytes (24 bits)},
//    then the address word, then the data words (write) or the data returned
//    on the memory-to-thread FIFO (read), following the ReconOS convention.
//  * Message framing. A message, in memory and on the HMT stream alike, is
//    word 0 = publisher ID, word 1 = payload length N in 32-bit words, then N
//    payload words. On the stream, 'last' marks the final word.
package gw_pkg;

  localparam int unsigned WORD_W = 32;
  typedef logic [WORD_W-1:0] word_t;

  // ---------------------------------------------------------------- OSIF
  typedef enum logic [WORD_W-1:0] {
    OSIF_CMD_GET_OUT_LOC = 32'h0000_00A1,  // reply: address of the SMT output message
    OSIF_CMD_SUB_REQUEST = 32'h0000_00A2,  // reply (later): pointer to a new SMT message
    OSIF_CMD_SUB_CANCEL  = 32'h0000_00A3,  // reply: 0, or the pointer that raced the cancel
    OSIF_CMD_PUBLISH     = 32'h0000_00A4   // reply: any word, acknowledges the publish
  } osif_cmd_e;

  // A cancel reply of OSIF_NO_MSG means "no message arrived, request cancelled".
  localparam word_t OSIF_NO_MSG = '0;

  // ---------------------------------------------------------------- MEMIF
  localparam int unsigned MEMIF_LEN_W = 24;           // byte count field
  localparam word_t       MEMIF_WRITE = 32'h8000_0000;
  localparam word_t       MEMIF_READ  = 32'h0000_0000;

  // Largest transfer one MEMIF command can describe, in 32-bit words.
  localparam int unsigned MEMIF_MAX_WORDS = (1 << MEMIF_LEN_W) / 4 - 1;

  function automatic word_t memif_cmd(input logic write, input logic [MEMIF_LEN_W-1:0] bytes);
    return (write ? MEMIF_WRITE : MEMIF_READ) | word_t'(bytes);
  endfunction

  // ---------------------------------------------------------------- messages
  localparam int unsigned HDR_WORDS = 2;   // publisher ID, payload length

  // Gateway core states, named after the states of the runtime FSM
  // (Start, Get SMT Output Message Location, Start SMT Message Request,
  // Check SMT, Check HMT, Transfer Main Memory -> HMT, Transfer HMT -> Main
  // Memory, Cancel and Check SMT Message Request + Publish to SMT), each split
  // into the single-word steps its OSIF / MEMIF / HMT traffic needs.
  typedef enum logic [4:0] {
    ST_START,
    ST_LOC_CMD,      // Get SMT Output Message Location
    ST_LOC_RSP,
    ST_REQ_CMD,      // Start SMT Message Request
    ST_CHECK_SMT,    // Check SMT for new message
    ST_CHECK_HMT,    // Check HMT for new message
    ST_M2H_HCMD,     // Transfer Message from Main Memory to HMT
    ST_M2H_HADDR,
    ST_M2H_HID,
    ST_M2H_HLEN,
    ST_M2H_PID,
    ST_M2H_PLEN,
    ST_M2H_DCMD,
    ST_M2H_DADDR,
    ST_M2H_DATA,
    ST_H2M_LEN,      // Transfer Message from HMT to Main Memory
    ST_H2M_CMD,
    ST_H2M_ADDR,
    ST_H2M_WID,
    ST_H2M_WLEN,
    ST_H2M_DATA,
    ST_CAN_CMD,      // Cancel and Check SMT Message Request + Publish to SMT
    ST_CAN_RSP,
    ST_PUB_CMD,
    ST_PUB_RSP
  } gw_state_e;

endpackage
