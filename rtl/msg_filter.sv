// msg_filter -- publisher-ID filter on a message stream.
//
// A gateway republishes every SMT message on its HMT and every HMT message on
// its SMT, and it also subscribes to both topics. Without a filter, a message
// it republished would come straight back to it and circulate for ever. This
// module sits in the gateway's HMT subscriber and discards every message whose
// publisher ID (word 0 of the message) equals OWN_ID, the ID under which this
// gateway publishes; all other messages pass unchanged.
//
// How it works: at a message boundary the filter looks at the first word
// offered on the input. If it carries OWN_ID the filter accepts it on its own,
// whatever the output side does, and keeps consuming until the word flagged
// 'last'; nothing appears on the output. Otherwise it becomes a wire (valid,
// ready, data and last straight through) until 'last' has passed. Because it
// drains its own messages without help, the gateway can publish to the HMT
// while its core is busy elsewhere without blocking the topic's broadcast.
//
// Interface: valid/ready streams with a 'last' flag, DATA_W bits wide.
// Timing: no added latency and no storage; the drop decision is combinational
// on the first word. 'dropped' pulses for one cycle when a dropped message's
// first word is consumed.
//
// The filter itself, and that it compares publisher IDs, follows the paper;
// framing (ID in word 0), width and the pass-through structure are this
// design's choices.
module msg_filter #(
  parameter int unsigned            DATA_W = 32,
  parameter logic [DATA_W-1:0]      OWN_ID = DATA_W'(32'h0000_0A01)
) (
  input  logic              clk,
  input  logic              rst_n,
  // upstream (from the topic)
  input  logic [DATA_W-1:0] in_data,
  input  logic              in_last,
  input  logic              in_valid,
  output logic              in_ready,
  // downstream (to the subscriber)
  output logic [DATA_W-1:0] out_data,
  output logic              out_last,
  output logic              out_valid,
  input  logic              out_ready,
  // one-cycle pulse per discarded message
  output logic              dropped
);

  typedef enum logic [1:0] {F_HEAD, F_PASS, F_DROP} fstate_e;
  fstate_e state_q, state_d;

  logic own_head;
  assign own_head = (state_q == F_HEAD) && (in_data == OWN_ID);

  always_comb begin
    out_data  = in_data;
    out_last  = in_last;
    out_valid = 1'b0;
    in_ready  = 1'b0;
    dropped   = 1'b0;
    state_d   = state_q;
    unique case (state_q)
      F_HEAD: begin
        if (own_head) begin
          in_ready = 1'b1;
          if (in_valid) begin
            dropped = 1'b1;
            state_d = in_last ? F_HEAD : F_DROP;
          end
        end else begin
          out_valid = in_valid;
          in_ready  = out_ready;
          if (in_valid && out_ready && !in_last) state_d = F_PASS;
        end
      end
      F_PASS: begin
        out_valid = in_valid;
        in_ready  = out_ready;
        if (in_valid && out_ready && in_last) state_d = F_HEAD;
      end
      F_DROP: begin
        in_ready = 1'b1;
        if (in_valid && in_last) state_d = F_HEAD;
      end
      default: state_d = F_HEAD;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state_q <= F_HEAD;
    else        state_q <= state_d;
  end

  // A dropped message never reaches the output.
  a_no_own_out: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == F_HEAD && out_valid) |-> (out_data != OWN_ID));

endmodule
