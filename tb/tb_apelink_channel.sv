// tb_apelink_channel: two channels wired back to back (A's link TX into B's
// link RX and the reverse), with 16-word receive buffers, random link stalls
// and slow, random draining of both receive sides. Packets flow both ways at
// once, so credit returns travel interleaved with data. Diagnostic messages
// are sent both ways. Checks every packet word, all diagnostics, that the
// credit stall happened, that no receive buffer overflowed and that no
// framing error occurred.
module tb_apelink_channel;
  import apenet_pkg::*;
  localparam int NPK = 40, RXD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] tv, tr, tl, rv, rr, rl, ltv, ltr, dtv, dtr, drv, ovf, er;
  word_t td [2], rd [2], ltd [2];
  logic [31:0] dtd [2], drd [2];

  function automatic word_t pw(int c, int p, int w);
    word_t x;
    x = {8{32'(c * 100000 + p * 100 + w)}};
    if (w == 2) x[DATA_W-1 -: 16] = CTRL_MAGIC;
    return x;
  endfunction
  function automatic int plen(int c, int p);
    return 1 + (p * 5 + c) % 12;
  endfunction

  for (genvar c = 0; c < 2; c++) begin : g_ch
    apelink_channel #(.TX_DEPTH(8), .RX_DEPTH(RXD)) u_ch (
      .clk, .rst_n,
      .tx_valid(tv[c]), .tx_ready(tr[c]), .tx_data(td[c]), .tx_last(tl[c]),
      .rx_valid(rv[c]), .rx_ready(rr[c]), .rx_data(rd[c]), .rx_last(rl[c]),
      .link_tx_valid(ltv[c]), .link_tx_ready(ltr[c]), .link_tx_data(ltd[c]),
      .link_rx_valid(ltv[1-c] && ltr[1-c]), .link_rx_data(ltd[1-c]),
      .diag_tx_valid(dtv[c]), .diag_tx_ready(dtr[c]), .diag_tx_data(dtd[c]),
      .diag_rx_valid(drv[c]), .diag_rx_data(drd[c]),
      .overflow(ovf[c]), .err(er[c]));

    int sp = 0, sw = 0, rp = 0, rw = 0, ds = 0, dr = 0, errs = 0;
    always @(negedge clk) begin
      tv[c] = rst_n && sp < NPK;
      td[c] = pw(c, sp, sw);
      tl[c] = (sw == plen(c, sp) - 1);
      ltr[c] = ($urandom % 5) != 0;
      rr[c] = ($urandom % 4) == 0;
      if (!dtv[c] && rst_n && ds < 10 && ($urandom % 50) == 0) begin
        dtv[c] = 1; dtd[c] = 32'(c * 256 + ds);
      end
    end
    always @(posedge clk) begin
      if (rst_n && tv[c] && tr[c]) begin
        if (tl[c]) begin sp <= sp + 1; sw <= 0; end else sw <= sw + 1;
      end
      if (rst_n && dtv[c] && dtr[c]) begin ds <= ds + 1; #1 dtv[c] = 0; end
    end
    // receive side of channel c carries what the other channel sent
    always @(posedge clk) if (rst_n) begin
      if (rv[c] && rr[c]) begin
        checks++;
        if (rd[c] != pw(1 - c, rp, rw) || rl[c] != (rw == plen(1 - c, rp) - 1)) begin
          failures++; $display("ch%0d pkt %0d word %0d wrong got %h last %b t=%0t", c, rp, rw, rd[c][31:0], rl[c], $time);
        end
        if (rl[c]) begin rp <= rp + 1; rw <= 0; end else rw <= rw + 1;
      end
      if (drv[c]) begin
        checks++;
        if (drd[c] != 32'((1 - c) * 256 + dr)) begin failures++; $display("ch%0d diag wrong", c); end
        dr <= dr + 1;
      end
      if (er[c]) errs++;
    end
  end

  int stalls = 0;
  for (genvar c = 0; c < 2; c++) begin : g_stall
    always @(posedge clk) if (rst_n && g_ch[c].u_ch.credits == 0 && g_ch[c].u_ch.tq_valid) stalls++;
  end

  initial begin
    dtv = 0; dtd[0] = 0; dtd[1] = 0;
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (g_ch[0].rp == NPK && g_ch[1].rp == NPK && g_ch[0].dr == 10 && g_ch[1].dr == 10);
    repeat (10) @(posedge clk);
    checks += 3;
    if (stalls == 0) begin failures++; $display("no credit stall"); end
    if (ovf != 0) begin failures++; $display("overflow"); end
    if (g_ch[0].errs + g_ch[1].errs != 0) begin failures++; $display("framing errors"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
