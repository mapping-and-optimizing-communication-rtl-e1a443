// ros_gateway -- a complete gateway for one ROS 2 topic: gateway core, its
// hardware-mapped topic and the HMT-side publisher-ID filter.
//
// The topic has nodes on both sides of the hardware/software boundary. Software
// nodes use the software-mapped topic (SMT) in main memory; hardware nodes use
// the hardware-mapped topic (HMT) built here. The gateway core is a member of
// both: it subscribes to each and republishes on the other, so a message
// crosses the boundary once and is then fanned out in hardware to all
// NUM_HW_SUB hardware subscribers.
//
// Structure:
//
//   hw_pub[0..NUM_HW_PUB-1] --\                    /--> hw_sub[0..NUM_HW_SUB-1]
//                              +-- hmt_topic ------+
//   gateway_core HMT pub ----/   (NUM_HW_PUB+1 ->  \--> msg_filter --> gateway_core HMT sub
//                                 NUM_HW_SUB+1)
//   gateway_core <--> OSIF ports (software delegate thread, SMT)
//   gateway_core <--> MEMIF ports (memory subsystem, main memory)
//
// The gateway core's publisher is the HMT's last publisher port and its
// subscriber the HMT's last subscriber port. The filter discards messages that
// carry HMT_PUB_ID, i.e. those the core itself published; the core discards
// SMT messages that carry SMT_PUB_ID.
//
// Interface: every port is a plain valid/ready signal group; the hardware
// node ports are packed arrays indexed by node. Words are 32 bits. Messages
// are {publisher ID, payload length N, N payload words}, 'last' on the final
// word. The delegate thread, the SMT and the memory subsystem are outside this
// module and are reached through the OSIF and MEMIF ports.
// Timing: see gateway_core and hmt_topic; there is no buffering between them.
//
// The partition into SMT, HMT and gateway core, and the filters on both
// sides, follow the paper. NUM_HW_SUB defaults to 8, the largest number of
// hardware subscribers in the paper's measurements; NUM_HW_PUB = 1 matches
// their single publisher. Everything about ports and framing is this design's
// own choice.
module ros_gateway
  import gw_pkg::*;
#(
  parameter int unsigned NUM_HW_PUB = 1,
  parameter int unsigned NUM_HW_SUB = 8,
  parameter word_t       SMT_PUB_ID = 32'h0000_0B01,
  parameter word_t       HMT_PUB_ID = 32'h0000_0A01,
  localparam int unsigned NP        = NUM_HW_PUB + 1,
  localparam int unsigned NS        = NUM_HW_SUB + 1,
  localparam int unsigned SRC_W     = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // OSIF to the delegate thread
  output word_t                            osif_hw2sw_data,
  output logic                             osif_hw2sw_valid,
  input  logic                             osif_hw2sw_ready,
  input  word_t                            osif_sw2hw_data,
  input  logic                             osif_sw2hw_valid,
  output logic                             osif_sw2hw_ready,
  // MEMIF to the memory subsystem
  output word_t                            memif_hwt2mem_data,
  output logic                             memif_hwt2mem_valid,
  input  logic                             memif_hwt2mem_ready,
  input  word_t                            memif_mem2hwt_data,
  input  logic                             memif_mem2hwt_valid,
  output logic                             memif_mem2hwt_ready,
  // hardware publisher nodes on the HMT
  input  logic [NUM_HW_PUB-1:0][WORD_W-1:0] hw_pub_data,
  input  logic [NUM_HW_PUB-1:0]            hw_pub_last,
  input  logic [NUM_HW_PUB-1:0]            hw_pub_valid,
  output logic [NUM_HW_PUB-1:0]            hw_pub_ready,
  // hardware subscriber nodes on the HMT (shared data and last)
  output word_t                            hw_sub_data,
  output logic                             hw_sub_last,
  output logic [NUM_HW_SUB-1:0]            hw_sub_valid,
  input  logic [NUM_HW_SUB-1:0]            hw_sub_ready,
  // status
  output gw_state_e                        core_state,
  output logic                             ev_smt2hmt,
  output logic                             ev_hmt2smt,
  output logic                             ev_cancel_hit,
  output logic                             ev_smt_filtered,
  output logic                             ev_hmt_filtered,
  output logic                             ev_hmt_msg_done,
  output logic [SRC_W-1:0]                 ev_hmt_msg_src
);

  // gateway core <-> HMT
  word_t             gw_pub_data;
  logic              gw_pub_last, gw_pub_valid, gw_pub_ready;
  word_t             gw_sub_data_raw, gw_sub_data;
  logic              gw_sub_last_raw, gw_sub_valid_raw, gw_sub_ready_raw;
  logic              gw_sub_last, gw_sub_valid, gw_sub_ready;

  logic [NP-1:0][WORD_W-1:0] t_pub_data;
  logic [NP-1:0]             t_pub_last, t_pub_valid, t_pub_ready;
  logic [NS-1:0]             t_sub_valid, t_sub_ready;

  assign t_pub_data  = {gw_pub_data,  hw_pub_data};
  assign t_pub_last  = {gw_pub_last,  hw_pub_last};
  assign t_pub_valid = {gw_pub_valid, hw_pub_valid};
  assign hw_pub_ready = t_pub_ready[NUM_HW_PUB-1:0];
  assign gw_pub_ready = t_pub_ready[NP-1];

  assign t_sub_ready      = {gw_sub_ready_raw, hw_sub_ready};
  assign hw_sub_valid     = t_sub_valid[NUM_HW_SUB-1:0];
  assign gw_sub_valid_raw = t_sub_valid[NS-1];
  assign hw_sub_data      = gw_sub_data_raw;
  assign hw_sub_last      = gw_sub_last_raw;

  hmt_topic #(
    .DATA_W  (WORD_W),
    .NUM_PUB (NP),
    .NUM_SUB (NS)
  ) u_hmt (
    .clk       (clk),
    .rst_n     (rst_n),
    .pub_data  (t_pub_data),
    .pub_last  (t_pub_last),
    .pub_valid (t_pub_valid),
    .pub_ready (t_pub_ready),
    .sub_data  (gw_sub_data_raw),
    .sub_last  (gw_sub_last_raw),
    .sub_valid (t_sub_valid),
    .sub_ready (t_sub_ready),
    .msg_done  (ev_hmt_msg_done),
    .msg_src   (ev_hmt_msg_src)
  );

  msg_filter #(
    .DATA_W (WORD_W),
    .OWN_ID (HMT_PUB_ID)
  ) u_hmt_filter (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_data   (gw_sub_data_raw),
    .in_last   (gw_sub_last_raw),
    .in_valid  (gw_sub_valid_raw),
    .in_ready  (gw_sub_ready_raw),
    .out_data  (gw_sub_data),
    .out_last  (gw_sub_last),
    .out_valid (gw_sub_valid),
    .out_ready (gw_sub_ready),
    .dropped   (ev_hmt_filtered)
  );

  gateway_core #(
    .SMT_PUB_ID (SMT_PUB_ID),
    .HMT_PUB_ID (HMT_PUB_ID)
  ) u_core (
    .clk                 (clk),
    .rst_n               (rst_n),
    .osif_hw2sw_data     (osif_hw2sw_data),
    .osif_hw2sw_valid    (osif_hw2sw_valid),
    .osif_hw2sw_ready    (osif_hw2sw_ready),
    .osif_sw2hw_data     (osif_sw2hw_data),
    .osif_sw2hw_valid    (osif_sw2hw_valid),
    .osif_sw2hw_ready    (osif_sw2hw_ready),
    .memif_hwt2mem_data  (memif_hwt2mem_data),
    .memif_hwt2mem_valid (memif_hwt2mem_valid),
    .memif_hwt2mem_ready (memif_hwt2mem_ready),
    .memif_mem2hwt_data  (memif_mem2hwt_data),
    .memif_mem2hwt_valid (memif_mem2hwt_valid),
    .memif_mem2hwt_ready (memif_mem2hwt_ready),
    .hmt_pub_data        (gw_pub_data),
    .hmt_pub_last        (gw_pub_last),
    .hmt_pub_valid       (gw_pub_valid),
    .hmt_pub_ready       (gw_pub_ready),
    .hmt_sub_data        (gw_sub_data),
    .hmt_sub_last        (gw_sub_last),
    .hmt_sub_valid       (gw_sub_valid),
    .hmt_sub_ready       (gw_sub_ready),
    .state               (core_state),
    .ev_smt2hmt          (ev_smt2hmt),
    .ev_hmt2smt          (ev_hmt2smt),
    .ev_cancel_hit       (ev_cancel_hit),
    .ev_smt_filtered     (ev_smt_filtered)
  );

endmodule
