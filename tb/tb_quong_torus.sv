// tb_quong_torus: a 4 x 4 x 1 torus of sixteen full-size nodes, the shape of
// the QUonG cluster. Links 0/1 are X+/X-, 2/3 are Y+/Y-, 4/5 are Z+/Z-; with
// one plane in Z, a node's Z+ link is wired to its own Z- link.
//  1. Every node sends one message to its X+ neighbour and one to its Y+
//     neighbour (32 messages at once); every payload is checked at the
//     receiver against the sender's memory.
//  2. Global fault awareness, as in the LO|FA|MO example: the host of node 5
//     stops updating its watchdog. A master process, standing in for the
//     service network, polls the neighbour status of all nodes and must name
//     node 5 and no other node. The time from the host's last write to that
//     moment is reported in watchdog periods; it must stay within three
//     periods (the published example is 0.9 s for a 500 ms period).
// The 4 x 4 x 1 shape is the published cluster's; the 300-cycle watchdog
// period and the 24-word messages are chosen to keep the run short.
module tb_quong_torus;
  import apenet_pkg::*;
  localparam int NX = 4, NY = 4, NN = NX * NY, PER = 300, FAILED = 5, MLEN = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [NN-1:0] hb_en = '1;

  logic [NLINK-1:0] ltv [NN];
  word_t ltd [NN][NLINK];
  logic [NLINK-1:0] nbf [NN];
  logic [NN-1:0] cmd_valid, cmd_ready, hv, hl;
  word_t cmd_data [NN];
  word_t hd [NN];

  function automatic int nb(int n, int dir);
    int x, y;
    x = n % NX; y = n / NX;
    case (dir)
      0: x = (x + 1) % NX;
      1: x = (x + NX - 1) % NX;
      2: y = (y + 1) % NY;
      3: y = (y + NY - 1) % NY;
      default: ;
    endcase
    return x + NX * y;
  endfunction

  function automatic logic [ADDR_W-1:0] src_of(int n, int port);
    return 64'h1_0000_0000 + 64'(n) * 64'h10_0000 + 64'(port) * 64'h1_0000;
  endfunction
  function automatic logic [ADDR_W-1:0] va_of(int n, int port);
    return 64'h8000_0000 + 64'(n) * 64'h100 + 64'(port) * 64'h10;
  endfunction

  for (genvar n = 0; n < NN; n++) begin : g_n
    logic [NLINK-1:0] lrv;
    word_t lrd [NLINK];
    for (genvar i = 0; i < NLINK; i++) begin : g_l
      localparam int SRC = (i >= 4) ? n : nb(n, i);
      assign lrv[i] = ltv[SRC][i ^ 1];
      assign lrd[i] = ltd[SRC][i ^ 1];
    end
    logic ev, hf;
    word_t ed, ltd_n [NLINK];
    logic [NLINK-1:0] nbd;
    int misses;
    apenet_node_model node (
      .clk, .rst_n, .cfg_period(32'(PER)), .hb_en(hb_en[n]),
      .cmd_valid(cmd_valid[n]), .cmd_ready(cmd_ready[n]), .cmd_data(cmd_data[n]),
      .host_valid(hv[n]), .host_data(hd[n]), .host_last(hl[n]),
      .eq_valid(ev), .eq_data(ed),
      .link_tx_valid(ltv[n]), .link_tx_data(ltd_n),
      .link_rx_valid(lrv), .link_rx_data(lrd),
      .host_fault(hf), .nb_host_fault(nbf[n]), .nb_dead(nbd), .misses);
    for (genvar i = 0; i < NLINK; i++) begin : g_o
      assign ltd[n][i] = ltd_n[i];
    end

    // receive checker: words of the message from the node behind link 1 or 3
    int got = 0, w = 0, from = -1, port = 0;
    always @(posedge clk) if (rst_n && hv[n]) begin
      if (w == 0) begin
        wrhdr_t h;
        logic [ADDR_W-1:0] va;
        h = wrhdr_t'(hd[n]);
        va = {h.paddr[ADDR_W-1:12] - 52'h100, h.paddr[11:0]};
        from = int'((va - 64'h8000_0000) >> 8);
        port = int'(va[7:4]);
        checks++;
        if (!((port == 0 && nb(from, 0) == n) || (port == 2 && nb(from, 2) == n)) || int'(h.len) != MLEN) begin
          failures++; $display("node %0d: unexpected packet va %h", n, va);
        end
      end else begin
        checks++;
        if (hd[n] != node.mem.mem_pat(src_of(from, port) + 64'(32 * (w - 1)))) begin
          failures++; $display("node %0d: word %0d from %0d wrong", n, w, from);
        end
      end
      if (hl[n]) begin w <= 0; got <= got + 1; end else w <= w + 1;
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int n, int port);
    cmd_t c;
    c = '0; c.port = 3'(port); c.len = 16'(MLEN); c.dst_vaddr = va_of(n, port); c.src_addr = src_of(n, port);
    @(negedge clk);
    cmd_valid[n] = 1; cmd_data[n] = word_t'(c);
    @(posedge clk);
    while (!cmd_ready[n]) @(posedge clk);
    @(negedge clk);
    cmd_valid[n] = 0;
  endtask

  initial begin
    int t_stop, t_aware;
    logic [NN-1:0] suspects;
    cmd_valid = '0;
    for (int n = 0; n < NN; n++) cmd_data[n] = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (10 * PER / 3) @(posedge clk);
    // 1. traffic
    for (int n = 0; n < NN; n++) fork
      automatic int k = n;
      begin send(k, 0); send(k, 2); end
    join_none
    wait fork;
    begin
      int t;
      t = 0;
      do begin
        @(posedge clk); t++;
      end while (t < 20000 && !all_got());
    end
    checks++;
    if (!all_got()) begin failures++; $display("not all messages arrived"); end
    // 2. global fault awareness
    @(negedge clk);
    hb_en[FAILED] = 0;
    t_stop = $time / 10;
    forever begin
      @(posedge clk);
      suspects = '0;
      for (int m = 0; m < NN; m++)
        for (int i = 0; i < 4; i++)
          if (nbf[m][i]) suspects[nb(m, i)] = 1'b1;
      if (suspects != 0) break;
    end
    // let every neighbour catch up, then check the picture is exact
    t_aware = $time / 10;
    repeat (2 * PER) @(posedge clk);
    suspects = '0;
    for (int m = 0; m < NN; m++)
      for (int i = 0; i < 4; i++)
        if (nbf[m][i]) suspects[nb(m, i)] = 1'b1;
    checks++;
    if (suspects != (NN'(1) << FAILED)) begin failures++; $display("suspects %b", suspects); end
    checks++;
    for (int d = 0; d < 4; d++)
      if (!nbf[nb(FAILED, d)][d ^ 1]) begin failures++; $display("neighbour %0d missed it", nb(FAILED, d)); end
    $display("awareness after %0d cycles = %0d.%0d watchdog periods",
             t_aware - t_stop, (t_aware - t_stop) / PER, ((t_aware - t_stop) % PER) * 10 / PER);
    checks++;
    if (t_aware - t_stop > 3 * PER) begin failures++; $display("awareness too slow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic all_got();
    all_got = 1'b1;
    for (int n = 0; n < NN; n++) if (got_of(n) != 2) all_got = 1'b0;
  endfunction
  int got_arr [NN];
  for (genvar n = 0; n < NN; n++) begin : g_cnt
    assign got_arr[n] = g_n[n].got;
  end
  function automatic int got_of(int n);
    return got_arr[n];
  endfunction
endmodule
