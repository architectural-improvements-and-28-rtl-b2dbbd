// tb_apenet_top: end-to-end test of two nodes, A and B, at full size (every
// parameter at its default). Link i of A is wired to link i of B in both
// directions, as two neighbours in a torus would be along each axis. Each
// node has a host memory model behind its PCIe read port and an embedded
// processor model that resolves TLB misses.
//
// Sequence:
//  1. Both hosts start writing their watchdog register and set a 400-cycle
//     watchdog period.
//  2. A's host queues one message per link; B must write each payload, read
//     from A's memory, to the physical address its processor model assigns,
//     and post an event. Destinations lie on three pages, so the first packet
//     to each page misses in B's TLB and later ones hit.
//  3. A GPU-sourced packet whose words look like link control words is sent
//     through A's GPU TX FIFO; the link must escape them.
//  4. B's host stops accepting writes while A sends 12 long messages on one
//     link, so A's link must run out of credits and stall; then B drains.
//  5. B's CTRL register switches the host-bound stream to the NIOS FIFO and a
//     processor packet must come out; then it switches back.
//  6. A's host stops its watchdog: B must see a host fault on all six links.
//     Then link 5 from A to B is cut: B must declare that neighbour dead.
// Every mechanism (two outstanding reads, TLB hit, TLB miss, escape, credit
// stall, multiplexer switch, host fault, dead neighbour) is counted and each
// must occur at least once.
module tb_apenet_top;
  import apenet_pkg::*;
  localparam int NL = NLINK, PS = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NL-1:0] cut = '0;

  function automatic logic [ADDR_W-1:0] xlat(logic [ADDR_W-1:0] va);
    return {va[ADDR_W-1:PS] + 52'h100, va[PS-1:0]};
  endfunction

  for (genvar n = 0; n < 2; n++) begin : g_node
    logic awv, awr, wv, wr, bv, br, arv, arr, rv, rr;
    logic [7:0] awa, ara;
    logic [31:0] wd, rd;
    logic [1:0] bresp, rresp;
    logic cmd_valid, cmd_ready;
    word_t cmd_data;
    logic rq_v, rq_r, cv;
    logic [ADDR_W-1:0] rq_a;
    logic [LEN_W-1:0] rq_l;
    logic [7:0] rq_t, ct;
    word_t cd;
    logic gtv, gtr, gtl;
    word_t gtd;
    logic hv, hr, hl;
    word_t hd;
    logic niv, nir, nil;
    word_t nid;
    logic mv, mr, ncv, ncg, trv, trg;
    logic [ADDR_W-1:0] mva, ncp;
    logic [ADDR_W-PS-1:0] trvp, trpp;
    logic ev, er;
    word_t edat;
    logic [NL-1:0] ltv, ltr, lrv;
    word_t ltd [NL];
    word_t lrd [NL];
    logic hf;
    logic [NL-1:0] nbf, nbd;

    apenet_top dut (
      .clk, .rst_n,
      .s_awvalid(awv), .s_awready(awr), .s_awaddr(awa), .s_wvalid(wv), .s_wready(wr),
      .s_wdata(wd), .s_bvalid(bv), .s_bready(br), .s_bresp(bresp),
      .s_arvalid(arv), .s_arready(arr), .s_araddr(ara), .s_rvalid(rv), .s_rready(rr),
      .s_rdata(rd), .s_rresp(rresp),
      .cmd_valid, .cmd_ready, .cmd_data,
      .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a), .rd_req_len(rq_l),
      .rd_req_tag(rq_t), .cpl_valid(cv), .cpl_tag(ct), .cpl_data(cd),
      .gpu_tx_valid(gtv), .gpu_tx_ready(gtr), .gpu_tx_data(gtd), .gpu_tx_last(gtl),
      .host_valid(hv), .host_ready(hr), .host_data(hd), .host_last(hl),
      .nios_in_valid(niv), .nios_in_ready(nir), .nios_in_data(nid), .nios_in_last(nil),
      .miss_valid(mv), .miss_ready(mr), .miss_vaddr(mva),
      .nios_cmd_valid(ncv), .nios_cmd_paddr(ncp), .nios_cmd_gpu(ncg),
      .tlb_reg_valid(trv), .tlb_reg_vpage(trvp), .tlb_reg_ppage(trpp), .tlb_reg_gpu(trg),
      .eq_valid(ev), .eq_ready(er), .eq_data(edat),
      .link_tx_valid(ltv), .link_tx_ready(ltr), .link_tx_data(ltd),
      .link_rx_valid(lrv), .link_rx_data(lrd),
      .host_fault(hf), .nb_host_fault(nbf), .nb_dead(nbd));

    host_mem_model #(.LAT(100)) mem (
      .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
      .rd_req_len(rq_l), .rd_req_tag(rq_t), .cpl_valid(cv), .cpl_tag(ct), .cpl_data(cd));

    // links: this node's TX goes to the other node's RX (cut only A -> B)
    for (genvar i = 0; i < NL; i++) begin : g_l
      assign lrv[i] = g_node[1-n].ltv[i] && g_node[1-n].ltr[i] && !(n == 1 && cut[i]);
      assign lrd[i] = g_node[1-n].ltd[i];
    end
    always @(negedge clk) ltr = {NL{1'b1}} & NL'($urandom) | NL'($urandom);

    // embedded processor model: resolve a miss after 30 cycles
    int misses = 0;
    initial begin
      mr = 0; ncv = 0; ncp = 0; ncg = 0; trv = 0; trvp = 0; trpp = 0; trg = 0;
      forever begin
        logic [ADDR_W-1:0] va;
        @(posedge clk);
        if (rst_n && mv) begin
          va = mva;
          misses++;
          @(negedge clk); mr = 1; @(negedge clk); mr = 0;
          repeat (30) @(negedge clk);
          trv = 1; trvp = va[ADDR_W-1:PS]; trpp = xlat(va) >> PS; trg = 0;
          ncv = 1; ncp = xlat(va); ncg = 0;
          @(negedge clk); trv = 0; ncv = 0;
        end
      end
    end

    // AXI4-Lite master shared by the main sequence and the heartbeat
    logic busy = 0;
    task automatic axw(input logic [7:0] a, input logic [31:0] d);
      while (busy) @(negedge clk);
      busy = 1;
      @(negedge clk); awv = 1; awa = a; wv = 1; wd = d;
      @(negedge clk); awv = 0; wv = 0;
      while (!bv) @(negedge clk);
      br = 1; @(negedge clk); br = 0;
      busy = 0;
    endtask
    task automatic axr(input logic [7:0] a, output logic [31:0] d);
      while (busy) @(negedge clk);
      busy = 1;
      @(negedge clk); arv = 1; ara = a;
      @(negedge clk); arv = 0;
      while (!rv) @(negedge clk);
      d = rd;
      rr = 1; @(negedge clk); rr = 0;
      busy = 0;
    endtask

    logic hb_en = 0;
    initial begin
      awv = 0; wv = 0; br = 0; arv = 0; rr = 0; awa = 0; ara = 0; wd = 0;
      forever begin
        repeat (150) @(negedge clk);
        if (hb_en) axw(8'h04, 32'h1);
      end
    end
  end

  // watchdog
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- expected traffic at B ----------------
  typedef struct { logic [ADDR_W-1:0] src; int len; logic gpu_src; } exp_t;
  exp_t expq [logic [ADDR_W-1:0]];
  word_t gpu_words [4];
  int rx_pkts = 0, rx_words = 0, events = 0, ev_hits = 0, ev_miss = 0, nios_pkts = 0;
  int n_esc = 0, n_stall = 0, max_out = 0;
  logic b_hold = 0;

  function automatic word_t gpu_word(int k);
    word_t w;
    w = {8{32'hC0DE_0000 + 32'(k)}};
    w[DATA_W-1 -: 16] = CTRL_MAGIC;
    return w;
  endfunction

  // B host-bound stream checker
  logic in_pkt = 0, is_nios = 0;
  logic [ADDR_W-1:0] cur_va;
  int cur_w = 0, cur_len = 0;
  always @(negedge clk) g_node[1].hr = !b_hold && (($urandom % 8) != 0);
  always @(negedge clk) g_node[1].er = ($urandom % 2);
  always @(negedge clk) begin g_node[0].hr = 1; g_node[0].er = 1; end
  always @(posedge clk) if (rst_n) begin
    if (g_node[1].hv && g_node[1].hr) begin
      word_t d;
      d = g_node[1].hd;
      if (!in_pkt) begin
        if (d[DATA_W-1 -: 32] == 32'h4E105000) begin
          is_nios = 1;
          cur_len = 1;
        end else begin
          wrhdr_t w;
          w = wrhdr_t'(d);
          is_nios = 0;
          cur_va = {w.paddr[ADDR_W-1:PS] - 52'h100, w.paddr[PS-1:0]};
          checks++;
          if (!expq.exists(cur_va) || expq[cur_va].len != int'(w.len)) begin
            failures++;
            $display("B: unexpected write to %h (va %h) len %0d", w.paddr, cur_va, w.len);
          end
          cur_len = int'(w.len);
        end
        cur_w = 0;
        in_pkt = !g_node[1].hl;
        if (g_node[1].hl) begin
          if (is_nios) nios_pkts++; else begin rx_pkts++; expq.delete(cur_va); end
        end
      end else begin
        word_t e;
        if (is_nios) e = {8{32'h4E10_0001}};
        else if (expq[cur_va].gpu_src) e = gpu_word(cur_w);
        else e = g_node[0].mem.mem_pat(expq[cur_va].src + 64'(32 * cur_w));
        checks++;
        if (d != e || g_node[1].hl != (cur_w == cur_len - 1)) begin
          failures++;
          $display("B: word %0d of va %h wrong", cur_w, cur_va);
        end
        rx_words++;
        cur_w++;
        if (g_node[1].hl) begin
          in_pkt = 0;
          if (is_nios) nios_pkts++; else begin rx_pkts++; expq.delete(cur_va); end
        end
      end
    end
    if (g_node[1].ev && g_node[1].er) begin
      event_t e;
      e = event_t'(g_node[1].edat);
      events++;
      if (e.tlb_hit) ev_hits++; else ev_miss++;
    end
    for (int i = 0; i < NL; i++)
      if (g_node[0].ltv[i] && g_node[0].ltr[i] && is_ctrl(g_node[0].ltd[i]) &&
          ctrl_type(g_node[0].ltd[i]) == C_ESC) n_esc++;
    if (g_node[0].dut.g_link[2].u_ch.credits == 0 && g_node[0].dut.g_link[2].u_ch.tq_valid) n_stall++;
    if (int'(g_node[0].dut.u_dma.outstanding) > max_out) max_out = int'(g_node[0].dut.u_dma.outstanding);
  end

  // A command sender
  int ncmd = 0;
  task automatic send_cmd(input int port, input int len, input logic [ADDR_W-1:0] va);
    cmd_t c;
    c = '0;
    c.port = 3'(port);
    c.len = 16'(len);
    c.dst_vaddr = va;
    c.src_addr = 64'h10_0000 + 64'(ncmd) * 64'h2000;
    expq[va] = '{src: c.src_addr, len: len, gpu_src: 1'b0};
    ncmd++;
    @(negedge clk);
    g_node[0].cmd_valid = 1; g_node[0].cmd_data = word_t'(c);
    @(posedge clk);
    while (!g_node[0].cmd_ready) @(posedge clk);
    @(negedge clk);
    g_node[0].cmd_valid = 0;
  endtask

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_drained(input int timeout);
    int t;
    t = 0;
    while ((expq.size() != 0 || events != rx_pkts) && t < timeout) begin @(posedge clk); t++; end
    chk(expq.size() == 0, "all packets delivered to B");
  endtask

  initial begin
    logic [31:0] r;
    for (int n = 0; n < 2; n++) ;
    g_node[0].cmd_valid = 0; g_node[1].cmd_valid = 0;
    g_node[0].cmd_data = 0; g_node[1].cmd_data = 0;
    g_node[0].gtv = 0; g_node[1].gtv = 0; g_node[0].gtd = 0; g_node[1].gtd = 0;
    g_node[0].gtl = 0; g_node[1].gtl = 0;
    g_node[0].niv = 0; g_node[1].niv = 0; g_node[0].nid = 0; g_node[1].nid = 0;
    g_node[0].nil = 0; g_node[1].nil = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // 1. watchdogs
    g_node[0].hb_en = 1; g_node[1].hb_en = 1;
    repeat (20) @(posedge clk);
    fork
      g_node[0].axw(8'h10, 32'd400);
      g_node[1].axw(8'h10, 32'd400);
    join
    // 2. one message per link, three destination pages
    for (int k = 0; k < 12; k++)
      send_cmd(k % NL, 2 + k, 64'h8000_0000 + 64'((k % 3) * 'h1000) + 64'(k * 64));
    wait_drained(20000);
    // 3. GPU packet with control-looking words, to link 4
    begin
      hdr_t h;
      h = '0; h.port = 3'd4; h.len = 16'd4; h.vaddr = 64'h8000_0F00;
      expq[h.vaddr] = '{src: 0, len: 4, gpu_src: 1'b1};
      for (int k = 0; k <= 4; k++) begin
        @(negedge clk);
        g_node[0].gtv = 1;
        g_node[0].gtd = (k == 0) ? word_t'(h) : gpu_word(k - 1);
        g_node[0].gtl = (k == 4);
        @(posedge clk);
        while (!g_node[0].gtr) @(posedge clk);
      end
      @(negedge clk); g_node[0].gtv = 0;
    end
    wait_drained(5000);
    // 4. credit stall on link 2
    b_hold = 1;
    for (int k = 0; k < 12; k++)
      send_cmd(2, MAX_WORDS_TB, 64'h8000_1000 + 64'(k * 'h100));
    while (n_stall == 0 && g_node[0].dut.u_dma.cmd_ready == 0) @(posedge clk);
    repeat (3000) @(posedge clk);
    b_hold = 0;
    wait_drained(30000);
    // 5. host-bound multiplexer to the NIOS FIFO and back
    g_node[1].axw(8'h00, 32'h1);
    @(negedge clk);
    g_node[1].niv = 1; g_node[1].nid = {32'h4E105000, 224'd0}; g_node[1].nil = 0;
    @(negedge clk);
    g_node[1].nid = {8{32'h4E10_0001}}; g_node[1].nil = 1;
    @(negedge clk);
    g_node[1].niv = 0;
    repeat (50) @(posedge clk);
    chk(nios_pkts == 1, "NIOS packet delivered through the multiplexer");
    g_node[1].axw(8'h00, 32'h0);
    // register checks at B
    g_node[1].axr(8'h14, r);
    chk(r[15:0] == 16'(ev_hits) && r[31:16] == 16'(ev_miss), "TLB statistics register");
    g_node[1].axr(8'h1C, r);
    chk(r == 0, "no link errors or overflows at B");
    g_node[0].axr(8'h08, r);
    chk(r[0] == 0 && r[31:16] != 0, "A's card heartbeat running, host alive");
    // 6. host fault at A, then cut link 5
    g_node[0].hb_en = 0;
    repeat (4 * 400) @(posedge clk);
    chk(g_node[0].hf, "A detects its host fault");
    chk(g_node[1].nbf == {NL{1'b1}}, "B sees A's host fault on every link");
    g_node[1].axr(8'h0C, r);
    chk(r[5:0] == 6'h3F && r[13:8] == 0, "B neighbour status register");
    cut[5] = 1;
    repeat (3 * 400) @(posedge clk);
    chk(g_node[1].nbd == 6'b100000, "B declares the neighbour on the cut link dead");
    g_node[1].axr(8'h0C, r);
    chk(r[13] == 1'b1, "dead bit in neighbour status register");
    // mechanisms
    $display("mechanisms: two_outstanding=%0d tlb_hits=%0d tlb_misses=%0d escapes=%0d credit_stall_cycles=%0d nios_mux=%0d packets=%0d words=%0d",
             max_out, ev_hits, ev_miss, n_esc, n_stall, nios_pkts, rx_pkts, rx_words);
    chk(max_out >= 2, "two DMA reads outstanding");
    chk(ev_hits > 0, "TLB hit");
    chk(ev_miss > 0 && ev_miss == g_node[1].misses, "TLB miss resolved by the processor");
    chk(n_esc > 0, "word stuffing escape");
    chk(n_stall > 0, "credit stall");
    chk(events == rx_pkts, "one event per packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  localparam int MAX_WORDS_TB = 128;
endmodule
