// tb_hmt_topic -- self-checking test of the hardware-mapped topic.
// Three publisher models send random messages at the same time into a topic
// with three subscriber models, all stalling at random. Checks: every
// subscriber receives every message, intact and not interleaved with another
// (words and 'last' are checked by the subscriber models), in the order each
// publisher sent them; the topic saw contention; msg_done pulses once per
// message. A second, stall-free instance checks the rate: a message of N
// payload words passes in N + 2 cycles.
module tb_hmt_topic;
  import tb_pkg::*;

  localparam int NP = 3, NS = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- contention instance
  logic [NP-1:0][31:0] pub_data;
  logic [NP-1:0] pub_last, pub_valid, pub_ready;
  logic [31:0] sub_data;
  logic sub_last;
  logic [NS-1:0] sub_valid, sub_ready;
  logic msg_done;
  logic [1:0] msg_src;

  hmt_topic #(.DATA_W(32), .NUM_PUB(NP), .NUM_SUB(NS)) dut (
    .clk, .rst_n, .pub_data, .pub_last, .pub_valid, .pub_ready,
    .sub_data, .sub_last, .sub_valid, .sub_ready, .msg_done, .msg_src);

  for (genvar p = 0; p < NP; p++) begin : g_pub
    hw_pub_model #(.STALL(25)) m (.clk, .rst_n, .data(pub_data[p]), .last(pub_last[p]),
                                  .valid(pub_valid[p]), .ready(pub_ready[p]));
  end
  for (genvar s = 0; s < NS; s++) begin : g_sub
    hw_sub_model #(.STALL(15)) m (.clk, .rst_n, .data(sub_data), .last(sub_last),
                                  .valid(sub_valid[s]), .ready(sub_ready[s]));
  end

  int unsigned done_cnt = 0, contention = 0;
  int unsigned done_by_src[NP];
  always @(posedge clk) if (rst_n) begin
    if (msg_done) begin done_cnt++; done_by_src[msg_src]++; end
    if ($countones(pub_valid) > 1 && !dut.locked_q) contention++;
  end

  // ---------------- rate instance (no stalls)
  logic [0:0][31:0] r_pub_data;
  logic [0:0] r_pub_last, r_pub_valid, r_pub_ready;
  logic [31:0] r_sub_data;
  logic r_sub_last;
  logic [1:0] r_sub_valid, r_sub_ready;
  logic r_done;
  logic [0:0] r_src;
  hmt_topic #(.DATA_W(32), .NUM_PUB(1), .NUM_SUB(2)) dut_rate (
    .clk, .rst_n, .pub_data(r_pub_data), .pub_last(r_pub_last), .pub_valid(r_pub_valid),
    .pub_ready(r_pub_ready), .sub_data(r_sub_data), .sub_last(r_sub_last),
    .sub_valid(r_sub_valid), .sub_ready(r_sub_ready), .msg_done(r_done), .msg_src(r_src));
  hw_pub_model #(.STALL(0)) r_pub (.clk, .rst_n, .data(r_pub_data[0]), .last(r_pub_last[0]),
                                   .valid(r_pub_valid[0]), .ready(r_pub_ready[0]));
  for (genvar s = 0; s < 2; s++) begin : g_rsub
    hw_sub_model #(.STALL(0)) m (.clk, .rst_n, .data(r_sub_data), .last(r_sub_last),
                                 .valid(r_sub_valid[s]), .ready(r_sub_ready[s]));
  end

  logic [31:0] exp_seed[NP][$];
  int unsigned exp_len[NP][$];
  localparam int MSGS = 25;

  initial begin
    longint unsigned t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < MSGS; m++) begin
      logic [31:0] seed;
      int unsigned len;
      seed = $urandom; len = $urandom_range(12);
      g_pub[0].m.send(HW_PUB_ID0 + 0, len, seed); exp_seed[0].push_back(len > 0 ? seed : 0); exp_len[0].push_back(len);
      seed = $urandom; len = $urandom_range(12);
      g_pub[1].m.send(HW_PUB_ID0 + 1, len, seed); exp_seed[1].push_back(len > 0 ? seed : 0); exp_len[1].push_back(len);
      seed = $urandom; len = $urandom_range(12);
      g_pub[2].m.send(HW_PUB_ID0 + 2, len, seed); exp_seed[2].push_back(len > 0 ? seed : 0); exp_len[2].push_back(len);
    end
    while (!(g_pub[0].m.idle() && g_pub[1].m.idle() && g_pub[2].m.idle())) @(posedge clk);
    repeat (5) @(posedge clk);
    check(done_cnt == NP * MSGS, $sformatf("msg_done count %0d", done_cnt));
    for (int p = 0; p < NP; p++) check(done_by_src[p] == MSGS, $sformatf("msg_src count for publisher %0d", p));
    check(contention > 0, "publishers contended for the topic");
    // per subscriber: all messages, per-publisher order preserved
    for (int s = 0; s < NS; s++) begin
      int unsigned idx[NP];
      logic [31:0] ids[$], seeds[$];
      int unsigned lens[$];
      idx = '{default: 0};
      if (s == 0) begin ids = g_sub[0].m.rx_id; seeds = g_sub[0].m.rx_seed; lens = g_sub[0].m.rx_len; check(g_sub[0].m.rx_errors == 0, "sub0 no errors"); end
      if (s == 1) begin ids = g_sub[1].m.rx_id; seeds = g_sub[1].m.rx_seed; lens = g_sub[1].m.rx_len; check(g_sub[1].m.rx_errors == 0, "sub1 no errors"); end
      if (s == 2) begin ids = g_sub[2].m.rx_id; seeds = g_sub[2].m.rx_seed; lens = g_sub[2].m.rx_len; check(g_sub[2].m.rx_errors == 0, "sub2 no errors"); end
      check(ids.size() == NP * MSGS, $sformatf("subscriber %0d got %0d messages", s, ids.size()));
      for (int i = 0; i < ids.size(); i++) begin
        int p;
        p = int'(ids[i] - HW_PUB_ID0);
        if (p < 0 || p >= NP) begin check(0, "bad publisher id"); continue; end
        check(idx[p] < MSGS && seeds[i] == exp_seed[p][idx[p]] && lens[i] == exp_len[p][idx[p]],
              $sformatf("subscriber %0d message %0d in publisher order", s, i));
        idx[p]++;
      end
    end
    // rate: N payload words in N + 2 cycles
    @(negedge clk);
    r_pub.send(HW_PUB_ID0, 40, 32'hABCD);
    while (!r_pub_valid[0]) @(posedge clk);
    t0 = $time;
    while (!(r_done)) @(posedge clk);
    t1 = $time;
    @(posedge clk);
    check((t1 - t0) / 10 + 1 == 42, $sformatf("42 words took %0d cycles", (t1 - t0) / 10 + 1));
    check(g_rsub[0].m.rx_msgs == 1 && g_rsub[1].m.rx_msgs == 1 && g_rsub[0].m.rx_errors == 0, "rate message intact");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
