// tb_link_bandwidth: point-to-point latency and bandwidth between two
// full-size nodes joined by one link (node A X+ to node B X-), the set-up of
// the published latency and bandwidth curves.
//  1. Latency sweep: single messages of 32 B to 4 KB, one at a time; the
//     time from command acceptance at A to the last host-bound word at B.
//     Latency must not fall as the size grows, and every payload is checked.
//  2. Round trip: the same sizes as a ping-pong; B answers as soon as the
//     last word of A's message has reached its host. The round trip must be
//     no less than two one-way latencies and at most 10 cycles more.
//  3. Bandwidth: a 128 KB buffer sent as 32 messages of 4 KB queued back to
//     back, twice. The first pass misses the receiver TLB on every page (the
//     embedded processor resolves each miss); the second pass hits. Sustained
//     words per cycle are reported for both; the warm pass must reach 0.75
//     words per cycle and must beat the cold pass.
//  4. Hidden diagnostics: the watchdog period is cut to DIAG_PER cycles on
//     both nodes, so every link carries a diagnostic word that often. The
//     4 KB latency and the warm 128 KB bandwidth are measured again and must
//     stay within 2% of the figures without diagnostics.
// Figures are in cycles of the 256-bit datapath; at 250 MHz one word per
// cycle is 8 GB/s.
module tb_link_bandwidth;
  import apenet_pkg::*;
  localparam int PER = 100000, DIAG_PER = 150, NMSG = 32, BIG = 128;
  logic [31:0] per = 32'(PER);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] cv, cr, hv, hl;
  word_t cd [2];
  word_t hd [2];
  logic [NLINK-1:0] ltv [2], lrv [2];
  word_t ltd [2][NLINK];
  word_t lrd [2][NLINK];
  int misses [2];

  for (genvar n = 0; n < 2; n++) begin : g_n
    logic ev, hf;
    word_t ed;
    logic [NLINK-1:0] nbf, nbd;
    word_t td [NLINK], rd [NLINK];
    for (genvar i = 0; i < NLINK; i++) begin : g_l
      assign ltd[n][i] = td[i];
      assign rd[i] = lrd[n][i];
    end
    apenet_node_model node (
      .clk, .rst_n, .cfg_period(per), .hb_en(1'b1),
      .cmd_valid(cv[n]), .cmd_ready(cr[n]), .cmd_data(cd[n]),
      .host_valid(hv[n]), .host_data(hd[n]), .host_last(hl[n]),
      .eq_valid(ev), .eq_data(ed),
      .link_tx_valid(ltv[n]), .link_tx_data(td),
      .link_rx_valid(lrv[n]), .link_rx_data(rd),
      .host_fault(hf), .nb_host_fault(nbf), .nb_dead(nbd), .misses(misses[n]));
  end
  // A link 0 <-> B link 1; the other links are idle
  always_comb begin
    lrv[0] = '0; lrv[1] = '0;
    for (int i = 0; i < NLINK; i++) begin lrd[0][i] = '0; lrd[1][i] = '0; end
    lrv[1][1] = ltv[0][0]; lrd[1][1] = ltd[0][0];
    lrv[0][0] = ltv[1][1]; lrd[0][0] = ltd[1][1];
  end

  // diagnostic words sent by A on the link to B
  int diag_words = 0;
  always @(posedge clk)
    if (rst_n && ltv[0][0] && is_ctrl(ltd[0][0]) && ctrl_type(ltd[0][0]) == C_DIAG) diag_words <= diag_words + 1;

  // receive side at B: payload check against A's memory, timestamps
  logic [ADDR_W-1:0] exp_src;
  int w = 0, pkts = 0, words = 0;
  longint t_first = 0, t_last = 0;
  always @(posedge clk) if (rst_n && hv[1]) begin
    if (w != 0) begin
      checks++;
      if (hd[1] != g_n[0].node.mem.mem_pat(exp_src + 64'(32 * (w - 1)))) begin
        failures++; $display("word %0d of packet %0d wrong", w, pkts);
      end
      if (words == 0) t_first = $time / 10;
      words <= words + 1;
    end
    if (hl[1]) begin
      w <= 0; pkts <= pkts + 1; t_last = $time / 10;
      exp_src <= exp_src + 64'(32 * (w));
    end else w <= w + 1;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [ADDR_W-1:0] src, input logic [ADDR_W-1:0] va, input int len);
    cmd_t c;
    c = '0; c.port = 3'd0; c.len = 16'(len); c.dst_vaddr = va; c.src_addr = src;
    @(negedge clk);
    cv[0] = 1; cd[0] = word_t'(c);
    @(posedge clk);
    while (!cr[0]) @(posedge clk);
    @(negedge clk);
    cv[0] = 0;
  endtask

  task automatic send_b(input logic [ADDR_W-1:0] src, input logic [ADDR_W-1:0] va, input int len);
    cmd_t c;
    c = '0; c.port = 3'd1; c.len = 16'(len); c.dst_vaddr = va; c.src_addr = src;
    @(negedge clk);
    cv[1] = 1; cd[1] = word_t'(c);
    @(posedge clk);
    while (!cr[1]) @(posedge clk);
    @(negedge clk);
    cv[1] = 0;
  endtask

  // receive side at A (round-trip replies): payload check against B's memory
  logic [ADDR_W-1:0] exp_src_a;
  int wa = 0, pkts_a = 0;
  longint t_last_a = 0;
  always @(posedge clk) if (rst_n && hv[0]) begin
    if (wa != 0) begin
      checks++;
      if (hd[0] != g_n[1].node.mem.mem_pat(exp_src_a + 64'(32 * (wa - 1)))) begin
        failures++; $display("reply word %0d wrong", wa);
      end
    end
    if (hl[0]) begin wa <= 0; pkts_a <= pkts_a + 1; t_last_a = $time / 10; end
    else wa <= wa + 1;
  end

  task automatic roundtrip(input int len, output longint rt);
    int p0, pa0;
    logic [ADDR_W-1:0] b_src;
    p0 = pkts; pa0 = pkts_a;
    exp_src = 64'h2_0000_0000 + 64'(len) * 64'h1000;
    b_src = 64'h6_0000_0000 + 64'(len) * 64'h1000;
    exp_src_a = b_src;
    send(exp_src, 64'h4000_0000 + 64'(len) * 64'h1000, len);
    t0 = $time / 10;
    wait (pkts == p0 + 1);
    send_b(b_src, 64'h7000_0000 + 64'(len) * 64'h1000, len);
    wait (pkts_a == pa0 + 1);
    rt = t_last_a - t0;
  endtask

  task automatic latency(input int len, input logic [ADDR_W-1:0] base, output longint lat);
    int p0;
    p0 = pkts;
    exp_src = base;
    send(base, base - 64'h2_0000_0000 + 64'h4000_0000, len);
    t0 = $time / 10;
    wait (pkts == p0 + 1);
    lat = t_last - t0;
  endtask
  longint t0;

  initial begin
    longint lat, prev, lat4k, lat_diag, rt;
    longint one_way [int];
    int p0, m0, diag0;
    int rate_x1000 [3];
    string mode;
    cv = '0; cd[0] = '0; cd[1] = '0; exp_src_a = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (200) @(posedge clk);
    // 1. latency sweep
    prev = 0;
    for (int len = 1; len <= BIG; len *= 2) begin
      p0 = pkts;
      exp_src = 64'h2_0000_0000 + 64'(len) * 64'h1000;
      // warm the receiver TLB so the sweep measures the hit path
      send(exp_src, 64'h4000_0000 + 64'(len) * 64'h1000, len);
      wait (pkts == p0 + 1);
      repeat (20) @(posedge clk);
      latency(len, 64'h2_0000_0000 + 64'(len) * 64'h1000, lat);
      $display("latency %6d B: %4d cycles = %5d ns at 250 MHz", len * 32, lat, lat * 4);
      checks++;
      if (lat < prev) begin failures++; $display("latency fell with size"); end
      prev = lat;
      lat4k = lat;
      one_way[len] = lat;
      repeat (20) @(posedge clk);
    end
    // 2. round trip, after one unmeasured exchange to warm both TLBs
    for (int len = 1; len <= BIG; len *= 2) begin
      roundtrip(len, rt);
      repeat (20) @(posedge clk);
      roundtrip(len, rt);
      $display("round trip %6d B: %4d cycles = %5d ns at 250 MHz", len * 32, rt, rt * 4);
      checks++;
      if (rt < 2 * one_way[len] || rt > 2 * one_way[len] + 10) begin
        failures++; $display("round trip %0d against one way %0d", rt, one_way[len]);
      end
      repeat (20) @(posedge clk);
    end
    // 3. bandwidth, cold then warm TLB
    for (int pass = 0; pass < 3; pass++) begin
      if (pass == 2) begin
        per = 32'(DIAG_PER);
        repeat (400) @(posedge clk);
        diag0 = diag_words;
        // a page that the warm pass left in the TLB
        latency(BIG, 64'h2_1000_0000, lat_diag);
        $display("latency   4096 B with diagnostics every %0d cycles: %0d cycles", DIAG_PER, lat_diag);
        checks++;
        if (lat_diag * 100 > lat4k * 102) begin failures++; $display("diagnostics slow latency"); end
        repeat (20) @(posedge clk);
      end
      mode = pass == 0 ? "cold TLB" : pass == 1 ? "warm TLB" : "warm TLB, diagnostics on";
      p0 = pkts; m0 = misses[1];
      @(negedge clk);
      words = 0;
      exp_src = 64'h3_0000_0000;
      fork
        for (int k = 0; k < NMSG; k++)
          send(64'h3_0000_0000 + 64'(k) * 64'h1000, 64'h5000_0000 + 64'(k) * 64'h1000, BIG);
      join_none
      wait (pkts == p0 + NMSG);
      wait fork;
      rate_x1000[pass] = int'(64'(words) * 1000 / (t_last - t_first + 1));
      $display("128 KB pass %0d (%0s, %0d misses): %0d words in %0d cycles = %0d.%03d words/cycle",
               pass, mode, misses[1] - m0, words, t_last - t_first + 1,
               rate_x1000[pass] / 1000, rate_x1000[pass] % 1000);
      checks++;
      if (words != NMSG * BIG) begin failures++; $display("words %0d", words); end
      repeat (50) @(posedge clk);
    end
    checks++;
    if (rate_x1000[1] < 750) begin failures++; $display("warm bandwidth too low"); end
    checks++;
    if (rate_x1000[2] * 100 < rate_x1000[1] * 98) begin failures++; $display("diagnostics cut bandwidth"); end
    checks++;
    if (diag_words - diag0 < 20) begin failures++; $display("too few diagnostic words: %0d", diag_words - diag0); end
    $display("diagnostic words carried by A's link during the diagnostic phase: %0d", diag_words - diag0);
    checks++;
    if (rate_x1000[1] <= rate_x1000[0]) begin failures++; $display("warm TLB not faster"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
