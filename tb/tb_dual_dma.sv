// tb_dual_dma: runs the same sequence of TX commands through a one-engine and
// a two-engine DMA, each reading from its own host memory model with a long
// request-to-completion latency. Checks every packet (header fields and
// payload against the memory pattern), the clamp to MAX_WORDS, a zero-length
// message, that two requests were outstanding at once, and that the
// two-engine version finishes the sequence in clearly less time (the gain the
// double-DMA scheme is meant to give: with latency 60 and 16-word messages
// the ideal gain is about 40 %, at least 25 % is required here).
module tb_dual_dma;
  import apenet_pkg::*;
  localparam int MW = 32, NCMD = 10, LAT = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cmd_t cmds [NCMD];
  longint tdone [2];
  int max_out = 0;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_dut
    logic cmd_valid, cmd_ready, rq_v, rq_r, cv, pv, pr, pl;
    word_t cmd_data, cd, pd;
    logic [ADDR_W-1:0] ra;
    logic [LEN_W-1:0] rl;
    logic [7:0] rt, ct;
    logic [1:0] outst;
    int ci, pk, wi;
    dual_dma #(.N_ENG(g + 1), .MAX_WORDS(MW)) dut (
      .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
      .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(ra), .rd_req_len(rl), .rd_req_tag(rt),
      .cpl_valid(cv), .cpl_tag(ct), .cpl_data(cd),
      .pkt_valid(pv), .pkt_ready(pr), .pkt_data(pd), .pkt_last(pl), .outstanding(outst));
    host_mem_model #(.LAT(LAT)) mem (
      .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(ra), .rd_req_len(rl),
      .rd_req_tag(rt), .cpl_valid(cv), .cpl_tag(ct), .cpl_data(cd));
    assign pr = 1'b1;
    assign cmd_valid = rst_n && (ci < NCMD);
    assign cmd_data = word_t'(cmds[ci < NCMD ? ci : 0]);
    initial begin ci = 0; pk = 0; wi = 0; end
    always @(posedge clk) begin
      if (cmd_valid && cmd_ready) ci <= ci + 1;
      if (32'(outst) > max_out) max_out = 32'(outst);
      if (rst_n && pv && pr && pk < NCMD) begin
        int elen;
        hdr_t h;
        elen = (cmds[pk].len > MW) ? MW : int'(cmds[pk].len);
        checks++;
        if (wi == 0) begin
          h = hdr_t'(pd);
          if (h.port != cmds[pk].port || h.vaddr != cmds[pk].dst_vaddr || int'(h.len) != elen) begin
            failures++;
            $display("dut%0d pkt %0d bad header", g, pk);
          end
        end else if (pd != mem.mem_pat(cmds[pk].src_addr + 64'(32 * (wi - 1)))) begin
          failures++;
          $display("dut%0d pkt %0d word %0d bad data", g, pk, wi);
        end
        if (pl != (wi == elen)) begin
          failures++;
          $display("dut%0d pkt %0d word %0d bad last", g, pk, wi);
        end
        if (pl) begin
          pk <= pk + 1;
          wi <= 0;
          if (pk == NCMD - 1) tdone[g] = $time / 10;
        end else wi <= wi + 1;
      end
    end
  end

  initial begin
    for (int i = 0; i < NCMD; i++) begin
      cmds[i] = '0;
      cmds[i].src_addr = 64'h1000_0000 + 64'(i) * 64'h1000;
      cmds[i].dst_vaddr = 64'h7000_0000 + 64'(i) * 64'h40;
      cmds[i].len = 16;
      cmds[i].port = 3'(i % 6);
    end
    cmds[3].len = 0;          // header-only packet
    cmds[5].len = 100;        // longer than MAX_WORDS: clamped
    tdone[0] = 0; tdone[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (g_dut[0].pk == NCMD && g_dut[1].pk == NCMD);
    repeat (5) @(posedge clk);
    $display("single engine: %0d cycles, two engines: %0d cycles", tdone[0], tdone[1]);
    checks++;
    if (max_out < 2) begin failures++; $display("never two requests outstanding"); end
    checks++;
    if (tdone[1] * 4 > tdone[0] * 3) begin failures++; $display("two engines not faster enough"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
