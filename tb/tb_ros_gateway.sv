// tb_ros_gateway -- end-to-end test of a complete gateway at its default size:
// one hardware publisher node and eight hardware subscriber nodes on the HMT,
// a software publisher and a software subscriber on the SMT (software-side
// model), all ports stalling at random.
//
// Traffic: software messages, hardware messages, both at once (so the gateway
// and the hardware publisher contend for the HMT), a long hardware message
// with a software message arriving in the middle of it (cancel hit), and
// zero-length messages.
// Checks:
//  * every hardware subscriber receives every message of both origins, intact,
//    in order per origin, software ones with the gateway's HMT ID;
//  * the software subscriber receives every hardware message once, with the
//    gateway's SMT ID;
//  * main-memory traffic: each message crosses the MEMIF once, whatever the
//    number of hardware subscribers: read words = sum(len + 2) over software
//    messages + 2 per discarded echo, written words = sum(len + 2) over
//    hardware messages;
//  * each mechanism happened at least once: SMT->HMT, HMT->SMT, cancel hit,
//    SMT-side filter, HMT-side filter, HMT contention, idle polling.
module tb_ros_gateway;
  import tb_pkg::*;
  import gw_pkg::*;

  localparam int NSUB = 8;
  localparam word_t SMT_ID = 32'h0000_0B01, HMT_ID = 32'h0000_0A01;  // top defaults

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  word_t o_h2s_d, o_s2h_d, m_h2m_d, m_m2h_d;
  logic  o_h2s_v, o_h2s_r, o_s2h_v, o_s2h_r, m_h2m_v, m_h2m_r, m_m2h_v, m_m2h_r;
  logic [0:0][31:0] hp_d;
  logic [0:0] hp_l, hp_v, hp_r;
  word_t hs_d;
  logic hs_l;
  logic [NSUB-1:0] hs_v, hs_r;
  gw_state_e st;
  logic e_s2h, e_h2s, e_hit, e_sfilt, e_hfilt, e_done;
  logic [0:0] e_src;

  ros_gateway dut (
    .clk, .rst_n,
    .osif_hw2sw_data(o_h2s_d), .osif_hw2sw_valid(o_h2s_v), .osif_hw2sw_ready(o_h2s_r),
    .osif_sw2hw_data(o_s2h_d), .osif_sw2hw_valid(o_s2h_v), .osif_sw2hw_ready(o_s2h_r),
    .memif_hwt2mem_data(m_h2m_d), .memif_hwt2mem_valid(m_h2m_v), .memif_hwt2mem_ready(m_h2m_r),
    .memif_mem2hwt_data(m_m2h_d), .memif_mem2hwt_valid(m_m2h_v), .memif_mem2hwt_ready(m_m2h_r),
    .hw_pub_data(hp_d), .hw_pub_last(hp_l), .hw_pub_valid(hp_v), .hw_pub_ready(hp_r),
    .hw_sub_data(hs_d), .hw_sub_last(hs_l), .hw_sub_valid(hs_v), .hw_sub_ready(hs_r),
    .core_state(st), .ev_smt2hmt(e_s2h), .ev_hmt2smt(e_h2s), .ev_cancel_hit(e_hit),
    .ev_smt_filtered(e_sfilt), .ev_hmt_filtered(e_hfilt), .ev_hmt_msg_done(e_done), .ev_hmt_msg_src(e_src));

  sw_side_model #(.MEM_WORDS(1 << 16), .STALL(25)) sw (
    .clk, .rst_n,
    .osif_hw2sw_data(o_h2s_d), .osif_hw2sw_valid(o_h2s_v), .osif_hw2sw_ready(o_h2s_r),
    .osif_sw2hw_data(o_s2h_d), .osif_sw2hw_valid(o_s2h_v), .osif_sw2hw_ready(o_s2h_r),
    .memif_hwt2mem_data(m_h2m_d), .memif_hwt2mem_valid(m_h2m_v), .memif_hwt2mem_ready(m_h2m_r),
    .memif_mem2hwt_data(m_m2h_d), .memif_mem2hwt_valid(m_m2h_v), .memif_mem2hwt_ready(m_m2h_r));

  hw_pub_model #(.STALL(20)) hwp (.clk, .rst_n, .data(hp_d[0]), .last(hp_l[0]), .valid(hp_v[0]), .ready(hp_r[0]));
  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    hw_sub_model #(.STALL(10)) m (.clk, .rst_n, .data(hs_d), .last(hs_l), .valid(hs_v[s]), .ready(hs_r[s]));
  end

  // mechanism counters
  int unsigned n_s2h = 0, n_h2s = 0, n_hit = 0, n_sfilt = 0, n_hfilt = 0, n_contend = 0, n_poll = 0;
  always @(posedge clk) if (rst_n) begin
    n_s2h   += int'(e_s2h);
    n_h2s   += int'(e_h2s);
    n_hit   += int'(e_hit);
    n_sfilt += int'(e_sfilt);
    n_hfilt += int'(e_hfilt);
    if (dut.u_hmt.pub_valid == 2'b11 && !dut.u_hmt.locked_q) n_contend++;
    if (st == ST_CHECK_HMT && !dut.u_core.hmt_sub_valid) n_poll++;
  end

  word_t sw_seed[$], hw_seed[$];
  int unsigned sw_len[$], hw_len[$];
  longint unsigned exp_rd, exp_wr;

  task automatic sw_msg(input int unsigned len);
    word_t seed; seed = $urandom;
    sw.sw_publish(SW_PUB_ID, len, seed);
    sw_seed.push_back(len > 0 ? seed : 0); sw_len.push_back(len);
  endtask
  task automatic hw_msg(input int unsigned len);
    word_t seed; seed = $urandom;
    hwp.send(HW_PUB_ID0, len, seed);
    hw_seed.push_back(len > 0 ? seed : 0); hw_len.push_back(len);
  endtask

  task automatic wait_quiet();
    int unsigned t;
    t = 0;
    while (!(n_s2h == sw_seed.size() && n_h2s == hw_seed.size() && n_sfilt == hw_seed.size()
             && hwp.idle()) && t < 20000) begin
      @(posedge clk);
      t++;
    end
    check(t < 20000, $sformatf("traffic drained (s2h %0d/%0d, h2s %0d/%0d)", n_s2h, sw_seed.size(), n_h2s, hw_seed.size()));
    repeat (40) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    @(negedge clk);
    // software -> hardware, then hardware -> software
    for (int m = 0; m < 4; m++) sw_msg(1 + $urandom_range(24));
    wait_quiet();
    @(negedge clk);
    for (int m = 0; m < 4; m++) hw_msg(1 + $urandom_range(24));
    wait_quiet();
    // both at once: gateway and hardware publisher contend for the HMT
    @(negedge clk);
    for (int m = 0; m < 8; m++) begin sw_msg($urandom_range(30)); hw_msg($urandom_range(30)); end
    wait_quiet();
    // a software message arrives during a long HMT -> SMT transfer
    @(negedge clk);
    hw_msg(300);
    while (st != ST_H2M_DATA) @(posedge clk);
    @(negedge clk);
    sw_msg(17);
    wait_quiet();
    // zero-length messages
    @(negedge clk);
    sw_msg(0); hw_msg(0);
    wait_quiet();

    // every hardware subscriber: all messages of both origins, in order per origin
    for (int s = 0; s < NSUB; s++) begin
      logic [31:0] ids[$], seeds[$];
      int unsigned lens[$], errs, i_sw, i_hw;
      bit ok;
      case (s)
        0: begin ids = g_sub[0].m.rx_id; seeds = g_sub[0].m.rx_seed; lens = g_sub[0].m.rx_len; errs = g_sub[0].m.rx_errors; end
        1: begin ids = g_sub[1].m.rx_id; seeds = g_sub[1].m.rx_seed; lens = g_sub[1].m.rx_len; errs = g_sub[1].m.rx_errors; end
        2: begin ids = g_sub[2].m.rx_id; seeds = g_sub[2].m.rx_seed; lens = g_sub[2].m.rx_len; errs = g_sub[2].m.rx_errors; end
        3: begin ids = g_sub[3].m.rx_id; seeds = g_sub[3].m.rx_seed; lens = g_sub[3].m.rx_len; errs = g_sub[3].m.rx_errors; end
        4: begin ids = g_sub[4].m.rx_id; seeds = g_sub[4].m.rx_seed; lens = g_sub[4].m.rx_len; errs = g_sub[4].m.rx_errors; end
        5: begin ids = g_sub[5].m.rx_id; seeds = g_sub[5].m.rx_seed; lens = g_sub[5].m.rx_len; errs = g_sub[5].m.rx_errors; end
        6: begin ids = g_sub[6].m.rx_id; seeds = g_sub[6].m.rx_seed; lens = g_sub[6].m.rx_len; errs = g_sub[6].m.rx_errors; end
        default: begin ids = g_sub[7].m.rx_id; seeds = g_sub[7].m.rx_seed; lens = g_sub[7].m.rx_len; errs = g_sub[7].m.rx_errors; end
      endcase
      check(errs == 0, $sformatf("subscriber %0d: no framing/payload errors", s));
      check(ids.size() == sw_seed.size() + hw_seed.size(), $sformatf("subscriber %0d: %0d messages", s, ids.size()));
      i_sw = 0; i_hw = 0; ok = 1;
      foreach (ids[i]) begin
        if (ids[i] == HMT_ID) begin
          if (i_sw >= sw_seed.size() || seeds[i] != sw_seed[i_sw] || lens[i] != sw_len[i_sw]) ok = 0;
          i_sw++;
        end else if (ids[i] == HW_PUB_ID0) begin
          if (i_hw >= hw_seed.size() || seeds[i] != hw_seed[i_hw] || lens[i] != hw_len[i_hw]) ok = 0;
          i_hw++;
        end else ok = 0;
      end
      check(ok, $sformatf("subscriber %0d: contents and order", s));
    end
    // software subscriber
    check(sw.sw_rx_count == hw_seed.size() && sw.sw_rx_errors == 0, "software subscriber got every hardware message");
    for (int i = 0; i < hw_seed.size() && i < sw.sw_rx_id.size(); i++)
      check(sw.sw_rx_id[i] == SMT_ID && sw.sw_rx_seed[i] == hw_seed[i] && sw.sw_rx_len[i] == hw_len[i],
            $sformatf("SMT message %0d", i));
    // memory traffic: one crossing per message
    exp_rd = 0; exp_wr = 0;
    foreach (sw_len[i]) exp_rd += longint'(sw_len[i]) + 2;
    foreach (hw_len[i]) exp_wr += longint'(hw_len[i]) + 2;
    exp_rd += 2 * longint'(hw_len.size());   // header of each discarded echo
    check(sw.memif_rd_words == exp_rd, $sformatf("MEMIF read words %0d, expected %0d", sw.memif_rd_words, exp_rd));
    check(sw.memif_wr_words == exp_wr, $sformatf("MEMIF written words %0d, expected %0d", sw.memif_wr_words, exp_wr));
    // mechanisms
    $display("mechanisms: smt2hmt=%0d hmt2smt=%0d cancel_hit=%0d smt_filtered=%0d hmt_filtered=%0d contention=%0d idle_polls=%0d",
             n_s2h, n_h2s, n_hit, n_sfilt, n_hfilt, n_contend, n_poll);
    check(n_s2h > 0, "SMT->HMT transfer happened");
    check(n_h2s > 0, "HMT->SMT transfer happened");
    check(n_hit > 0, "cancel returned a raced message");
    check(n_sfilt == n_h2s, "SMT-side filter discarded every echo");
    check(n_hfilt == n_s2h, "HMT-side filter discarded every echo");
    check(n_contend > 0, "gateway and hardware publisher contended for the HMT");
    check(n_poll > 0, "idle polling happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
