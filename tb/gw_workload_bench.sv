// gw_workload_bench -- one gateway with NSUB hardware subscriber nodes, one
// hardware publisher node and the software side, all without stalls, for
// timing messages the way the gateway measurements do: one publisher (hardware
// or software), NSUB hardware subscribers and one software subscriber.
// run() publishes one message of 'words' payload words and returns
//  t_hw: cycles from publishing to the last word at the slowest hardware
//        subscriber (the maximum over all of them),
//  t_sw: cycles to the publish on the SMT (hardware publisher only, else 0),
//  rd/wr: words read from / written to main memory through the MEMIF,
//  errors: checks that failed inside (payload, framing, counts, memory traffic).
module gw_workload_bench #(
  parameter int unsigned NSUB      = 8,
  parameter int unsigned MEM_WORDS = 1 << 16,
  parameter int unsigned OUT_WORDS = 1 << 14
) (
  input logic clk,
  input logic rst_n
);
  import tb_pkg::*;
  import gw_pkg::*;

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

  ros_gateway #(.NUM_HW_PUB(1), .NUM_HW_SUB(NSUB)) dut (
    .clk, .rst_n,
    .osif_hw2sw_data(o_h2s_d), .osif_hw2sw_valid(o_h2s_v), .osif_hw2sw_ready(o_h2s_r),
    .osif_sw2hw_data(o_s2h_d), .osif_sw2hw_valid(o_s2h_v), .osif_sw2hw_ready(o_s2h_r),
    .memif_hwt2mem_data(m_h2m_d), .memif_hwt2mem_valid(m_h2m_v), .memif_hwt2mem_ready(m_h2m_r),
    .memif_mem2hwt_data(m_m2h_d), .memif_mem2hwt_valid(m_m2h_v), .memif_mem2hwt_ready(m_m2h_r),
    .hw_pub_data(hp_d), .hw_pub_last(hp_l), .hw_pub_valid(hp_v), .hw_pub_ready(hp_r),
    .hw_sub_data(hs_d), .hw_sub_last(hs_l), .hw_sub_valid(hs_v), .hw_sub_ready(hs_r),
    .core_state(st), .ev_smt2hmt(e_s2h), .ev_hmt2smt(e_h2s), .ev_cancel_hit(e_hit),
    .ev_smt_filtered(e_sfilt), .ev_hmt_filtered(e_hfilt), .ev_hmt_msg_done(e_done), .ev_hmt_msg_src(e_src));

  sw_side_model #(.MEM_WORDS(MEM_WORDS), .STALL(0), .OUT_WORDS(OUT_WORDS)) sw (
    .clk, .rst_n,
    .osif_hw2sw_data(o_h2s_d), .osif_hw2sw_valid(o_h2s_v), .osif_hw2sw_ready(o_h2s_r),
    .osif_sw2hw_data(o_s2h_d), .osif_sw2hw_valid(o_s2h_v), .osif_sw2hw_ready(o_s2h_r),
    .memif_hwt2mem_data(m_h2m_d), .memif_hwt2mem_valid(m_h2m_v), .memif_hwt2mem_ready(m_h2m_r),
    .memif_mem2hwt_data(m_m2h_d), .memif_mem2hwt_valid(m_m2h_v), .memif_mem2hwt_ready(m_m2h_r));

  hw_pub_model #(.STALL(0)) hwp (.clk, .rst_n, .data(hp_d[0]), .last(hp_l[0]), .valid(hp_v[0]), .ready(hp_r[0]));

  int unsigned     s_msgs[NSUB], s_errs[NSUB];
  longint unsigned s_time[NSUB];
  word_t           s_seed[NSUB];
  int unsigned     s_len[NSUB];
  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    hw_sub_model #(.STALL(0)) m (.clk, .rst_n, .data(hs_d), .last(hs_l), .valid(hs_v[s]), .ready(hs_r[s]));
    always @(negedge clk) begin
      s_msgs[s] = m.rx_msgs;
      s_errs[s] = m.rx_errors;
      s_time[s] = m.rx_last_time;
      s_seed[s] = (m.rx_seed.size() > 0) ? m.rx_seed[m.rx_seed.size() - 1] : '0;
      s_len[s]  = (m.rx_len.size() > 0) ? m.rx_len[m.rx_len.size() - 1] : 0;
    end
  end

  int unsigned n_sfilt = 0, n_hfilt = 0;
  always @(posedge clk) if (rst_n) begin
    n_sfilt += int'(e_sfilt);
    n_hfilt += int'(e_hfilt);
  end

  task automatic run(input bit hw_pub, input int unsigned words,
                     output longint unsigned t_hw, output longint unsigned t_sw,
                     output longint unsigned rd, output longint unsigned wr,
                     output int unsigned errors);
    longint unsigned t0, rd0, wr0;
    int unsigned msgs0[NSUB], sw0, sf0, hf0, t;
    word_t seed;
    bit done;
    errors = 0;
    seed = $urandom;
    @(negedge clk);
    for (int s = 0; s < int'(NSUB); s++) msgs0[s] = s_msgs[s];
    sw0 = sw.sw_rx_count; sf0 = n_sfilt; hf0 = n_hfilt;
    rd0 = sw.memif_rd_words; wr0 = sw.memif_wr_words;
    t0 = $time;
    if (hw_pub) hwp.send(HW_PUB_ID0, words, seed);
    else        sw.sw_publish(SW_PUB_ID, words, seed);
    t = 0;
    do begin
      @(negedge clk);
      t++;
      done = 1;
      for (int s = 0; s < int'(NSUB); s++) if (s_msgs[s] != msgs0[s] + 1) done = 0;
      if (hw_pub && (sw.sw_rx_count != sw0 + 1 || n_sfilt != sf0 + 1)) done = 0;
      if (!hw_pub && n_hfilt != hf0 + 1) done = 0;
    end while (!done && t < 4 * words + 10000);
    if (!done) errors++;
    repeat (20) @(negedge clk);
    t_hw = 0;
    for (int s = 0; s < int'(NSUB); s++) begin
      if (s_time[s] - t0 > t_hw) t_hw = s_time[s] - t0;
      if (s_errs[s] != 0 || s_seed[s] != seed || s_len[s] != words) errors++;
    end
    t_hw /= 10;
    t_sw = hw_pub ? (sw.sw_rx_time - t0) / 10 : 0;
    if (hw_pub && (sw.sw_rx_errors != 0 || sw.sw_rx_seed[sw.sw_rx_seed.size() - 1] != seed)) errors++;
    rd = sw.memif_rd_words - rd0;
    wr = sw.memif_wr_words - wr0;
    // one crossing of the hardware/software boundary per message
    if (hw_pub  && !(wr == longint'(words) + 2 && rd == 2)) errors++;
    if (!hw_pub && !(rd == longint'(words) + 2 && wr == 0)) errors++;
  endtask
endmodule
