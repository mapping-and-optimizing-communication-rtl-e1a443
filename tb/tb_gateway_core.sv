// tb_gateway_core -- self-checking test of the gateway core on its own.
// The core talks to the software-side model (delegate thread, SMT, main memory
// behind the MEMIF). A publisher model drives the core's HMT subscriber port
// and a subscriber model takes its HMT publisher port. Checks:
//  * idle polling alternates Check SMT / Check HMT every cycle;
//  * software messages reach the HMT once each, in order, intact, with the
//    gateway's HMT ID;
//  * hardware messages reach the SMT once each, in order, intact, with the
//    gateway's SMT ID; every one of them comes back on the SMT and is
//    discarded by the SMT-side filter after reading only its header;
//  * an SMT message that arrives during an HMT->SMT transfer is returned by
//    the cancel and delivered to the HMT (cancel hit);
//  * the startup reads the output location once.
module tb_gateway_core;
  import tb_pkg::*;
  import gw_pkg::*;

  localparam word_t SMT_ID = 32'h0000_0B01, HMT_ID = 32'h0000_0A01;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  word_t o_h2s_d, o_s2h_d, m_h2m_d, m_m2h_d, p_d, s_d;
  logic  o_h2s_v, o_h2s_r, o_s2h_v, o_s2h_r, m_h2m_v, m_h2m_r, m_m2h_v, m_m2h_r;
  logic  p_l, p_v, p_r, s_l, s_v, s_r;
  gw_state_e st;
  logic e_s2h, e_h2s, e_hit, e_filt;

  gateway_core #(.SMT_PUB_ID(SMT_ID), .HMT_PUB_ID(HMT_ID)) dut (
    .clk, .rst_n,
    .osif_hw2sw_data(o_h2s_d), .osif_hw2sw_valid(o_h2s_v), .osif_hw2sw_ready(o_h2s_r),
    .osif_sw2hw_data(o_s2h_d), .osif_sw2hw_valid(o_s2h_v), .osif_sw2hw_ready(o_s2h_r),
    .memif_hwt2mem_data(m_h2m_d), .memif_hwt2mem_valid(m_h2m_v), .memif_hwt2mem_ready(m_h2m_r),
    .memif_mem2hwt_data(m_m2h_d), .memif_mem2hwt_valid(m_m2h_v), .memif_mem2hwt_ready(m_m2h_r),
    .hmt_pub_data(p_d), .hmt_pub_last(p_l), .hmt_pub_valid(p_v), .hmt_pub_ready(p_r),
    .hmt_sub_data(s_d), .hmt_sub_last(s_l), .hmt_sub_valid(s_v), .hmt_sub_ready(s_r),
    .state(st), .ev_smt2hmt(e_s2h), .ev_hmt2smt(e_h2s), .ev_cancel_hit(e_hit), .ev_smt_filtered(e_filt));

  sw_side_model #(.MEM_WORDS(1 << 16), .STALL(30)) sw (
    .clk, .rst_n,
    .osif_hw2sw_data(o_h2s_d), .osif_hw2sw_valid(o_h2s_v), .osif_hw2sw_ready(o_h2s_r),
    .osif_sw2hw_data(o_s2h_d), .osif_sw2hw_valid(o_s2h_v), .osif_sw2hw_ready(o_s2h_r),
    .memif_hwt2mem_data(m_h2m_d), .memif_hwt2mem_valid(m_h2m_v), .memif_hwt2mem_ready(m_h2m_r),
    .memif_mem2hwt_data(m_m2h_d), .memif_mem2hwt_valid(m_m2h_v), .memif_mem2hwt_ready(m_m2h_r));

  hw_pub_model #(.STALL(20)) hwp (.clk, .rst_n, .data(s_d), .last(s_l), .valid(s_v), .ready(s_r));
  hw_sub_model #(.STALL(20)) hws (.clk, .rst_n, .data(p_d), .last(p_l), .valid(p_v), .ready(p_r));

  int unsigned n_s2h = 0, n_h2s = 0, n_hit = 0, n_filt = 0;
  always @(posedge clk) if (rst_n) begin
    n_s2h  += int'(e_s2h);
    n_h2s  += int'(e_h2s);
    n_hit  += int'(e_hit);
    n_filt += int'(e_filt);
  end

  word_t sw_seed[$], hw_seed[$];
  int unsigned sw_len[$], hw_len[$];

  task automatic wait_quiet(input int unsigned s2h, input int unsigned h2s, input int unsigned filt);
    int unsigned t;
    t = 0;
    while (!(n_s2h == s2h && n_h2s == h2s && n_filt == filt && hwp.idle()) && t < 8000) begin
      @(posedge clk);
      t++;
    end
    check(t < 8000, $sformatf("reached s2h=%0d h2s=%0d filtered=%0d", s2h, h2s, filt));
    repeat (30) @(posedge clk);
  endtask

  initial begin
    int unsigned alt;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // startup and idle polling
    repeat (60) @(posedge clk);
    check(sw.osif_cmds[0] == 1, "one GET_OUT_LOC at startup");
    check(sw.osif_cmds[1] == 1, "one SUB_REQUEST outstanding");
    alt = 0;
    #1;
    for (int i = 0; i < 20; i++) begin
      gw_state_e a;
      a = st;
      @(posedge clk); #1;
      if ((a == ST_CHECK_SMT && st == ST_CHECK_HMT) || (a == ST_CHECK_HMT && st == ST_CHECK_SMT)) alt++;
    end
    check(alt == 20, $sformatf("idle polling alternates every cycle (%0d of 20)", alt));

    // software -> hardware
    @(negedge clk);
    for (int m = 0; m < 6; m++) begin
      word_t seed; int unsigned len;
      seed = $urandom; len = 1 + $urandom_range(30);
      sw.sw_publish(SW_PUB_ID, len, seed); sw_seed.push_back(seed); sw_len.push_back(len);
    end
    wait_quiet(6, 0, 0);
    check(hws.rx_msgs == 6 && hws.rx_errors == 0, $sformatf("6 SMT messages on the HMT (%0d, %0d errors)", hws.rx_msgs, hws.rx_errors));

    // hardware -> software (each echo filtered)
    @(negedge clk);
    for (int m = 0; m < 6; m++) begin
      word_t seed; int unsigned len;
      seed = $urandom; len = 1 + $urandom_range(30);
      hwp.send(HW_PUB_ID0, len, seed); hw_seed.push_back(seed); hw_len.push_back(len);
    end
    wait_quiet(6, 6, 6);
    check(sw.sw_rx_count == 6 && sw.sw_rx_errors == 0, "6 HMT messages on the SMT, intact");
    check(hws.rx_msgs == 6, "no echo reached the HMT");

    // cancel race: an SMT message arrives during a long HMT->SMT transfer
    @(negedge clk);
    begin
      word_t seed; seed = $urandom;
      hwp.send(HW_PUB_ID0, 400, seed); hw_seed.push_back(seed); hw_len.push_back(400);
    end
    while (st != ST_H2M_DATA) @(posedge clk);
    @(negedge clk);
    begin
      word_t seed; seed = $urandom;
      sw.sw_publish(SW_PUB_ID, 9, seed); sw_seed.push_back(seed); sw_len.push_back(9);
    end
    wait_quiet(7, 7, 7);
    check(n_hit == 1, $sformatf("cancel returned the raced SMT message (%0d)", n_hit));

    // random mix of both directions
    @(negedge clk);
    for (int m = 0; m < 20; m++) begin
      word_t seed; int unsigned len;
      seed = $urandom; len = $urandom_range(20);
      if (m % 2 == 0) begin sw.sw_publish(SW_PUB_ID, len, seed); sw_seed.push_back(len > 0 ? seed : 0); sw_len.push_back(len); end
      else            begin hwp.send(HW_PUB_ID0, len, seed);    hw_seed.push_back(len > 0 ? seed : 0); hw_len.push_back(len); end
      repeat ($urandom_range(40)) @(negedge clk);
    end
    wait_quiet(17, 17, 17);

    // contents and order, both directions
    check(hws.rx_msgs == sw_seed.size() && hws.rx_errors == 0, "all SMT messages on the HMT");
    for (int i = 0; i < sw_seed.size() && i < hws.rx_id.size(); i++)
      check(hws.rx_id[i] == HMT_ID && hws.rx_seed[i] == sw_seed[i] && hws.rx_len[i] == sw_len[i],
            $sformatf("SMT->HMT message %0d", i));
    check(sw.sw_rx_count == hw_seed.size() && sw.sw_rx_errors == 0, "all HMT messages on the SMT");
    for (int i = 0; i < hw_seed.size() && i < sw.sw_rx_id.size(); i++)
      check(sw.sw_rx_id[i] == SMT_ID && sw.sw_rx_seed[i] == hw_seed[i] && sw.sw_rx_len[i] == hw_len[i],
            $sformatf("HMT->SMT message %0d", i));
    check(n_filt == n_h2s, "every own SMT publication filtered");
    check(sw.osif_cmds[2] == n_h2s && sw.osif_cmds[3] == n_h2s, "one cancel and one publish per HMT message");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired: s2h=%0d h2s=%0d filt=%0d hit=%0d state=%s", n_s2h, n_h2s, n_filt, n_hit, st.name());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
