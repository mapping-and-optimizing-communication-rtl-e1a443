// tb_workload_transfer -- the gateway measurement setup: one publisher
// (hardware or software) and 2, 4 or 8 hardware subscribers plus one software
// subscriber on a topic served by a gateway, with image messages of 10 kB,
// 100 kB, 1 MB and 10 MB (2,500 to 2,500,000 payload words). Three gateways
// (2, 4 and 8 hardware subscribers) run the same sequence side by side.
// For every run it checks that all subscribers got the message intact, that
// the message crossed main memory once (MEMIF words = payload + 2-word header,
// whatever the number of subscribers), and that the HMT delivered at one word
// per cycle: t_hw <= words + 64 cycles, and for a hardware publisher also
// t_sw <= words + 64 cycles. It prints the cycle counts, and the MEMIF words a
// topic kept only in main memory would need instead (one read per hardware
// subscriber), for comparison.
module tb_workload_transfer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int unsigned MAXW = 2_500_000;
  localparam int NSIZES = 4;

  localparam int unsigned SIZES[NSIZES] = '{2_500, 25_000, 250_000, 2_500_000};

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  gw_workload_bench #(.NSUB(2), .MEM_WORDS(1 << 23), .OUT_WORDS(MAXW + 16)) b2 (.clk, .rst_n);
  gw_workload_bench #(.NSUB(4), .MEM_WORDS(1 << 23), .OUT_WORDS(MAXW + 16)) b4 (.clk, .rst_n);
  gw_workload_bench #(.NSUB(8), .MEM_WORDS(1 << 23), .OUT_WORDS(MAXW + 16)) b8 (.clk, .rst_n);

  task automatic report(input int n, input bit hw, input int unsigned w,
                        input longint unsigned th, input longint unsigned ts,
                        input longint unsigned rd, input longint unsigned wr, input int unsigned e);
    check(e == 0, $sformatf("N=%0d %s pub %0d words: delivery and memory traffic", n, hw ? "HW" : "SW", w));
    check(th <= longint'(w) + 64, $sformatf("N=%0d %s pub %0d words: t_hw %0d cycles", n, hw ? "HW" : "SW", w, th));
    if (hw) check(ts <= longint'(w) + 64, $sformatf("N=%0d HW pub %0d words: t_sw %0d cycles", n, w, ts));
    $display("N=%0d pub=%s words=%0d t_hw=%0d t_sw=%0d memif_words=%0d smt_only_memif_words=%0d",
             n, hw ? "HW" : "SW", w, th, ts, rd + wr,
             hw ? longint'(n + 1) * (longint'(w) + 2) : longint'(n) * (longint'(w) + 2));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (50) @(posedge clk);
    for (int z = 0; z < NSIZES; z++) begin
      for (int h = 1; h >= 0; h--) begin
        fork
          begin longint unsigned th, ts, rd, wr; int unsigned e;
            b2.run(h[0], SIZES[z], th, ts, rd, wr, e); report(2, h[0], SIZES[z], th, ts, rd, wr, e); end
          begin longint unsigned th, ts, rd, wr; int unsigned e;
            b4.run(h[0], SIZES[z], th, ts, rd, wr, e); report(4, h[0], SIZES[z], th, ts, rd, wr, e); end
          begin longint unsigned th, ts, rd, wr; int unsigned e;
            b8.run(h[0], SIZES[z], th, ts, rd, wr, e); report(8, h[0], SIZES[z], th, ts, rd, wr, e); end
        join
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
