// tb_msg_filter -- self-checking test of the publisher-ID filter.
// A publisher model sends a random mix of messages, some with the filter's own
// ID; a subscriber model checks what comes out. Checks: exactly the foreign
// messages arrive, in order and intact; one 'dropped' pulse per own message;
// and, with the output side blocked, own messages are still drained while a
// foreign message waits.
module tb_msg_filter;
  import tb_pkg::*;

  localparam logic [31:0] OWN = 32'h0000_0A01;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] in_data, out_data;
  logic in_last, in_valid, in_ready, out_last, out_valid, out_ready, dropped;
  logic sink_ready, en;

  int checks = 0, failures = 0;
  int unsigned drops = 0;

  hw_pub_model #(.STALL(20)) src (.clk, .rst_n, .data(in_data), .last(in_last), .valid(in_valid), .ready(in_ready));

  msg_filter #(.DATA_W(32), .OWN_ID(OWN)) dut (
    .clk, .rst_n, .in_data, .in_last, .in_valid, .in_ready,
    .out_data, .out_last, .out_valid, .out_ready, .dropped);

  assign out_ready = sink_ready & en;
  hw_sub_model #(.STALL(30)) snk (.clk, .rst_n, .data(out_data), .last(out_last), .valid(out_valid & en), .ready(sink_ready));

  always @(posedge clk) if (rst_n && dropped) drops++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] exp_id[$], exp_seed[$];
  int unsigned exp_len[$];
  int unsigned n_own;

  initial begin
    en = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: random mix
    n_own = 0;
    for (int m = 0; m < 60; m++) begin
      logic [31:0] id, seed;
      int unsigned len;
      id   = ($urandom_range(2) == 0) ? OWN : (HW_PUB_ID0 + 32'($urandom_range(3)));
      len  = $urandom_range(6);
      seed = $urandom;
      src.send(id, len, seed);
      if (id == OWN) n_own++;
      else begin exp_id.push_back(id); exp_seed.push_back(len > 0 ? seed : 0); exp_len.push_back(len); end
    end
    while (!src.idle()) @(posedge clk);
    repeat (20) @(posedge clk);
    check(snk.rx_msgs == exp_id.size(), $sformatf("received %0d foreign messages, expected %0d", snk.rx_msgs, exp_id.size()));
    check(snk.rx_errors == 0, "no framing or payload errors at the output");
    check(drops == n_own, $sformatf("dropped %0d, expected %0d", drops, n_own));
    for (int i = 0; i < exp_id.size() && i < snk.rx_id.size(); i++) begin
      check(snk.rx_id[i] == exp_id[i] && snk.rx_seed[i] == exp_seed[i] && snk.rx_len[i] == exp_len[i],
            $sformatf("message %0d matches", i));
    end
    // phase 2: output blocked; own messages must drain on their own
    @(negedge clk);
    en = 0;
    drops = 0;
    for (int m = 0; m < 5; m++) src.send(OWN, 8, $urandom);
    repeat (200) @(posedge clk);
    check(src.idle(), "own messages drained while the output is blocked");
    check(drops == 5, "five drops while the output is blocked");
    // a foreign message waits while blocked, then passes
    @(negedge clk);
    src.send(HW_PUB_ID0, 3, 32'h1234);
    repeat (50) @(posedge clk);
    check(!src.idle(), "foreign message held while the output is blocked");
    @(negedge clk);
    en = 1;
    repeat (100) @(posedge clk);
    check(src.idle() && snk.rx_msgs == exp_id.size() + 1, "foreign message delivered after unblocking");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
