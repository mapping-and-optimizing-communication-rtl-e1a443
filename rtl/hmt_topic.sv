// hmt_topic -- hardware-mapped topic: a streaming publish-subscribe channel.
//
// A hardware-mapped topic (HMT) carries the messages of one ROS 2 topic between
// nodes that are all inside the programmable logic, without touching main
// memory. NUM_PUB publishers offer messages; every message is delivered, word by
// word, to all NUM_SUB subscribers. In a gateway, one publisher port and one
// subscriber port belong to the gateway core; the rest serve hardware nodes.
//
// How it works:
//  * Arbitration is per message. While no word of a message has moved, the
//    topic offers the first word of one waiting publisher, chosen round-robin,
//    and moves on to the next waiting publisher every cycle the word is not
//    taken. Once the first word is taken the topic locks onto that publisher
//    until its 'last' word has gone. So a subscriber that is not ready for a new
//    message never holds the topic for a publisher it is not ready for; this is
//    what lets the gateway publish while its own subscriber port is busy.
//  * Delivery is lock-step: a word moves when the selected publisher is valid
//    and every subscriber is ready, and then it moves to all of them in the same
//    cycle. Subscriber i sees valid only when all the others are ready; a word
//    is taken in the cycle valid and ready are both high. valid may drop again
//    before that (when another subscriber stops being ready), which a plain
//    FIFO-style consumer does not mind. A subscriber's ready must not depend
//    on its own valid, or a combinational loop forms.
//
// Interface: publishers and subscribers use valid/ready streams with 'last'.
// The data and 'last' lines are shared by all subscribers.
// Timing: purely combinational data path (no buffering, no added latency),
// one word per cycle when everyone is ready. 'msg_done' pulses with 'msg_src'
// when the last word of a message has been delivered.
//
// The topic's role (streaming, many publishers and subscribers, inside the
// logic) follows the paper; its arbitration and lock-step delivery are this
// design's own, as the internal structure of such topics is not given there.
module hmt_topic #(
  parameter int unsigned DATA_W  = 32,
  parameter int unsigned NUM_PUB = 2,
  parameter int unsigned NUM_SUB = 9,
  localparam int unsigned IDX_W  = (NUM_PUB > 1) ? $clog2(NUM_PUB) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // publishers
  input  logic [NUM_PUB-1:0][DATA_W-1:0]  pub_data,
  input  logic [NUM_PUB-1:0]              pub_last,
  input  logic [NUM_PUB-1:0]              pub_valid,
  output logic [NUM_PUB-1:0]              pub_ready,
  // subscribers
  output logic [DATA_W-1:0]               sub_data,
  output logic                            sub_last,
  output logic [NUM_SUB-1:0]              sub_valid,
  input  logic [NUM_SUB-1:0]              sub_ready,
  // status
  output logic                            msg_done,
  output logic [IDX_W-1:0]                msg_src
);

  logic             locked_q;
  logic [IDX_W-1:0] lock_idx_q, rr_q;
  logic [IDX_W-1:0] sel;
  logic             sel_valid;
  logic             all_ready;
  logic             fire;

  // Round-robin pick of the first waiting publisher at or after rr_q.
  always_comb begin
    sel       = lock_idx_q;
    sel_valid = 1'b0;
    if (locked_q) begin
      sel_valid = pub_valid[lock_idx_q];
    end else begin
      for (int k = NUM_PUB - 1; k >= 0; k--) begin
        if (pub_valid[(int'(rr_q) + k) % NUM_PUB]) begin
          sel       = IDX_W'((int'(rr_q) + k) % NUM_PUB);
          sel_valid = 1'b1;
        end
      end
    end
  end

  assign all_ready = &sub_ready;
  assign fire      = sel_valid && all_ready;
  assign sub_data  = pub_data[sel];
  assign sub_last  = pub_last[sel];

  always_comb begin
    for (int i = 0; i < NUM_SUB; i++) begin
      logic others_ready;
      others_ready = 1'b1;
      for (int j = 0; j < NUM_SUB; j++)
        if (j != i) others_ready &= sub_ready[j];
      sub_valid[i] = sel_valid && others_ready;
    end
    pub_ready      = '0;
    pub_ready[sel] = sel_valid && all_ready;
  end

  assign msg_done = fire && pub_last[sel];
  assign msg_src  = sel;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      locked_q   <= 1'b0;
      lock_idx_q <= '0;
      rr_q       <= '0;
    end else if (fire) begin
      if (pub_last[sel]) begin
        locked_q <= 1'b0;
        rr_q     <= IDX_W'((int'(sel) + 1) % NUM_PUB);
      end else begin
        locked_q   <= 1'b1;
        lock_idx_q <= sel;
      end
    end else if (!locked_q && sel_valid) begin
      // first word not taken: give the next waiting publisher a turn
      rr_q <= IDX_W'((int'(sel) + 1) % NUM_PUB);
    end
  end

  // Stream rule for publishers: a word once offered stays offered until taken.
  for (genvar p = 0; p < NUM_PUB; p++) begin : g_chk
    a_pub_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (pub_valid[p] && !pub_ready[p]) |=> pub_valid[p]);
  end

endmodule
