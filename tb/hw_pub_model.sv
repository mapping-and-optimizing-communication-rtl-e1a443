// hw_pub_model -- behavioural hardware publisher node for the testbenches.
// send() queues one message {id, len, payload pattern of tb_pkg}; the model
// offers the words on a valid/ready stream, holding valid back on STALL percent
// of the cycles between words (never withdrawing a word once offered).
module hw_pub_model #(
  parameter int unsigned STALL = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] data,
  output logic        last,
  output logic        valid,
  input  logic        ready
);
  import tb_pkg::*;

  logic [32:0] q[$];   // {last, data}
  int unsigned sent_msgs;

  task automatic send(input logic [31:0] id, input int unsigned len, input logic [31:0] seed);
    q.push_back({1'b0, id});
    q.push_back({len == 0, 32'(len)});
    for (int unsigned i = 0; i < len; i++) q.push_back({i == len - 1, payload_word(seed, i)});
  endtask

  function automatic bit idle();
    return q.size() == 0 && !valid;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      valid <= 1'b0;
      data  <= '0;
      last  <= 1'b0;
    end else begin
      if (valid && ready) begin
        begin logic [32:0] w; w = q.pop_front(); if (w[32]) sent_msgs++; end
      end
      if (q.size() > 0 && ((valid && !ready) || (int'($urandom_range(99)) >= int'(STALL)))) begin
        valid <= 1'b1;
        {last, data} <= q[0];
      end else begin
        valid <= 1'b0;
      end
    end
  end
endmodule
