// tb_apelink: apelink_tx looped back into apelink_rx. The receiver's output
// goes into a model buffer drained slowly; each word drained is reported to
// the transmitter (ret_inc) and travels back as CREDIT control words, which
// the receiver decodes into the transmitter's credit input. The transmitter
// starts with 8 credits, so it must stall for credit. Packets contain words
// that look like control words and must be escaped; diagnostic messages are
// injected at random times, also in the middle of frames. Checks every packet
// word and last flag, every diagnostic message, that the model buffer never
// exceeds 8 words, that stalls and escapes happened and no framing error.
module tb_apelink;
  import apenet_pkg::*;
  localparam int CR = 8, NPK = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last, cav, ret_inc, dv, dr, lv, lr, ov, ol, rcv, rdv, err;
  word_t in_data, ld, od;
  logic [15:0] ca, rcc, credits;
  logic [31:0] dd, rdd;

  apelink_tx #(.CREDITS(CR), .RET_THRESH(4)) u_tx (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .in_last,
    .credit_add_valid(rcv), .credit_add(rcc), .ret_inc,
    .diag_valid(dv), .diag_ready(dr), .diag_data(dd),
    .link_valid(lv), .link_ready(lr), .link_data(ld), .credits);
  apelink_rx u_rx (
    .clk, .rst_n, .link_valid(lv && lr), .link_data(ld),
    .out_valid(ov), .out_data(od), .out_last(ol),
    .credit_valid(rcv), .credit_cnt(rcc), .diag_valid(rdv), .diag_data(rdd), .err);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t pw(int p, int w);
    word_t x;
    x = {8{32'(p * 1000 + w)}};
    if ((p + w) % 4 == 1) x[DATA_W-1 -: 16] = CTRL_MAGIC;   // must be escaped
    return x;
  endfunction
  function automatic int plen(int p);
    return 1 + (p * 7) % 9;
  endfunction

  // source
  int sp = 0, sw = 0;
  always @(negedge clk) begin
    in_valid = rst_n && sp < NPK;
    in_data = pw(sp, sw);
    in_last = (sw == plen(sp) - 1);
    lr = ($urandom % 6) != 0;
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    if (in_last) begin sp <= sp + 1; sw <= 0; end else sw <= sw + 1;
  end

  // diagnostics
  int dsent = 0, drecv = 0;
  always @(negedge clk) begin
    if (!dv && rst_n && dsent < 20 && ($urandom % 40) == 0) begin dv = 1; dd = 32'hD000 + 32'(dsent); end
  end
  always @(posedge clk) if (rst_n && dv && dr) begin dsent <= dsent + 1; #1 dv = 0; end
  always @(posedge clk) if (rst_n && rdv) begin
    checks++;
    if (rdd != 32'hD000 + 32'(drecv)) begin failures++; $display("diag %0d wrong %h t=%0t rst=%b", drecv, rdd, $time, rst_n); end
    drecv++;
  end

  // receive buffer model, drained slowly
  word_t bq [$];
  logic  lq [$];
  int rp = 0, rw = 0, maxq = 0, stalls = 0, escapes = 0, errs = 0;
  always @(posedge clk) begin
    if (rst_n && ov) begin bq.push_back(od); lq.push_back(ol); end
    if (bq.size() > maxq) maxq = bq.size();
    if (in_valid && !in_ready && credits == 0) stalls++;
    if (lv && lr && is_ctrl(ld) && ctrl_type(ld) == C_ESC) escapes++;
    if (rst_n && err) errs++;
  end
  always @(negedge clk) begin
    ret_inc = 0;
    if (bq.size() > 0 && ($urandom % 3) == 0) begin
      word_t w; logic l;
      w = bq.pop_front(); l = lq.pop_front();
      ret_inc = 1;
      checks++;
      if (w != pw(rp, rw) || l != (rw == plen(rp) - 1)) begin
        failures++; $display("pkt %0d word %0d wrong", rp, rw);
      end
      if (l) begin rp++; rw = 0; end else rw++;
    end
  end

  initial begin
    dv = 0; dd = 0; ret_inc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (rp == NPK && dsent == 20);
    repeat (50) @(posedge clk);
    checks += 5;
    if (drecv != 20) begin failures++; $display("diag received %0d", drecv); end
    if (maxq > CR) begin failures++; $display("buffer overrun %0d", maxq); end
    if (stalls == 0) begin failures++; $display("no credit stall"); end
    if (escapes == 0) begin failures++; $display("no escapes"); end
    if (errs != 0) begin failures++; $display("framing errors %0d", errs); end
    $display("stalls=%0d escapes=%0d maxq=%0d", stalls, escapes, maxq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
