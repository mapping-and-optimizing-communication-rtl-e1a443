// hw_sub_model -- behavioural hardware subscriber node for the testbenches.
// It takes words with a ready that is random (not ready on STALL percent of
// cycles) and independent of valid, splits the stream into messages and checks
// each one: 'last' exactly on the final word, and every payload word against
// the tb_pkg pattern. It logs publisher ID, seed and length of every message,
// and the time the latest message completed.
module hw_sub_model #(
  parameter int unsigned STALL = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] data,
  input  logic        last,
  input  logic        valid,
  output logic        ready
);
  import tb_pkg::*;

  int unsigned rx_msgs, rx_errors, rx_words;
  longint unsigned rx_last_time;   // $time at the last word of the latest message
  logic [31:0] rx_id[$];
  logic [31:0] rx_seed[$];
  int unsigned rx_len[$];

  int unsigned pos, len;
  logic [31:0] id, seed;

  always @(posedge clk) begin
    if (!rst_n) begin
      ready <= 1'b0;
      pos   = 0;
    end else begin
      if (valid && ready) begin
        rx_words++;
        if (pos == 0) begin
          id = data;
          if (last) rx_errors++;
        end else if (pos == 1) begin
          len  = data;
          seed = 0;
          if (last != (len == 0)) rx_errors++;
        end else begin
          if (pos == 2) seed = data;
          else if (data != payload_word(seed, pos - 2)) rx_errors++;
          if (last != (pos == len + 1)) rx_errors++;
        end
        if (last) begin
          rx_msgs++;
          rx_last_time = $time;
          rx_id.push_back(id);
          rx_seed.push_back(seed);
          rx_len.push_back(pos >= 1 ? len : 0);
          pos = 0;
        end else begin
          pos++;
        end
      end
      ready <= (int'($urandom_range(99)) >= int'(STALL));
    end
  end
endmodule
