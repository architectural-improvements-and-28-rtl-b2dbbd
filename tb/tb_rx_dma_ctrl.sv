// tb_rx_dma_ctrl: the RX DMA controller with a real TLB and a behavioural
// embedded-processor model. Packets to a page not yet known miss: the model
// sees the miss request, answers after a delay with the physical address and
// registers the page, so later packets to that page hit and bypass it. Every
// PCIe write header (physical address, length, memory type), every payload
// word and every completion event is checked against values computed here,
// header-only packets included, with random back-pressure on the write
// stream. With no back-pressure a hit must produce its write header two
// cycles after the packet header is taken.
module tb_rx_dma_ctrl;
  import apenet_pkg::*;
  localparam int PS = 12, NP = 24;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, in_last;
  word_t in_data;
  logic lk_valid, res_valid, res_hit, res_gpu;
  logic [ADDR_W-1:0] lk_vaddr, res_paddr;
  logic miss_valid, miss_ready, nc_valid, nc_gpu;
  logic [ADDR_W-1:0] miss_vaddr, nc_paddr;
  logic wr_valid, wr_ready, wr_last, ev_valid, ev_ready;
  word_t wr_data, ev_data;
  logic reg_valid, reg_gpu;
  logic [ADDR_W-PS-1:0] reg_vpage, reg_ppage;

  rx_dma_ctrl dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .in_last,
    .tlb_lk_valid(lk_valid), .tlb_lk_vaddr(lk_vaddr), .tlb_res_valid(res_valid),
    .tlb_res_hit(res_hit), .tlb_res_paddr(res_paddr), .tlb_res_gpu(res_gpu),
    .miss_valid, .miss_ready, .miss_vaddr, .nios_cmd_valid(nc_valid),
    .nios_cmd_paddr(nc_paddr), .nios_cmd_gpu(nc_gpu),
    .wr_valid, .wr_ready, .wr_data, .wr_last, .ev_valid, .ev_ready, .ev_data);
  tlb #(.ENTRIES(8), .PAGE_SHIFT(PS)) u_tlb (
    .clk, .rst_n, .lk_valid, .lk_vaddr, .res_valid, .res_hit, .res_paddr, .res_gpu,
    .reg_valid, .reg_vpage, .reg_ppage, .reg_gpu, .flush(1'b0), .hit_cnt(), .miss_cnt());

  // translation known to the processor model: ppage = vpage + 0x100, GPU if bit 4
  function automatic logic [ADDR_W-1:0] xlat(logic [ADDR_W-1:0] va);
    return {va[ADDR_W-1:PS] + 52'h100, va[PS-1:0]};
  endfunction
  function automatic logic isgpu(logic [ADDR_W-1:0] va);
    return va[PS+4];
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // processor model
  int misses_seen = 0;
  initial begin
    miss_ready = 0; nc_valid = 0; nc_paddr = 0; nc_gpu = 0;
    reg_valid = 0; reg_vpage = 0; reg_ppage = 0; reg_gpu = 0;
    forever begin
      logic [ADDR_W-1:0] va;
      @(posedge clk);
      if (rst_n && miss_valid) begin
        va = miss_vaddr;
        misses_seen++;
        @(negedge clk); miss_ready = 1; @(negedge clk); miss_ready = 0;
        repeat (20) @(negedge clk);
        reg_valid = 1; reg_vpage = va[ADDR_W-1:PS]; reg_ppage = xlat(va) >> PS; reg_gpu = isgpu(va);
        nc_valid = 1; nc_paddr = xlat(va); nc_gpu = isgpu(va);
        @(negedge clk);
        reg_valid = 0; nc_valid = 0;
      end
    end
  end

  // packet list
  logic [ADDR_W-1:0] pva [NP+1];
  int plen [NP+1];
  logic exp_hit [NP+1];
  int n_hit_exp = 0;

  // driver
  initial begin
    in_valid = 0; in_data = 0; in_last = 0;
    for (int p = 0; p < NP; p++) begin
      pva[p] = 64'h4000_0000 + 64'((p % 3) * 'h1_0000) + 64'(p * 32);
      plen[p] = (p % 5 == 4) ? 0 : 1 + (p % 7);
      exp_hit[p] = (p >= 3);
      if (exp_hit[p]) n_hit_exp++;
    end
    pva[NP] = pva[5]; plen[NP] = 0; exp_hit[NP] = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) begin
      for (int w = 0; w <= plen[p]; w++) begin
        hdr_t h;
        h = '0; h.vaddr = pva[p]; h.len = 16'(plen[p]);
        @(negedge clk);
        in_valid = 1;
        in_data = (w == 0) ? word_t'(h) : {8{32'(p * 256 + w)}};
        in_last = (w == plen[p]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
  end

  // write stream checker with random back-pressure
  int wp = 0, ww = 0, ep = 0, lat_checked = 0;
  logic free_run = 0;
  always @(negedge clk) wr_ready = free_run ? 1'b1 : (($urandom % 4) != 0);
  always @(negedge clk) ev_ready = ($urandom % 2);
  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) begin
      checks++;
      if (ww == 0) begin
        wrhdr_t w;
        w = wrhdr_t'(wr_data);
        if (w.paddr != xlat(pva[wp]) || w.gpu != isgpu(pva[wp]) || int'(w.len) != plen[wp]) begin
          failures++;
          $display("pkt %0d bad write header %h", wp, w.paddr);
        end
      end else if (wr_data != {8{32'(wp * 256 + ww)}}) begin
        failures++;
        $display("pkt %0d word %0d bad data", wp, ww);
      end
      if (wr_last != (ww == plen[wp])) begin
        failures++;
        $display("pkt %0d bad last", wp);
      end
      if (wr_last) begin wp <= wp + 1; ww <= 0; end
      else ww <= ww + 1;
    end
    if (rst_n && ev_valid && ev_ready) begin
      event_t e;
      e = event_t'(ev_data);
      checks++;
      if (e.vaddr != pva[ep] || int'(e.len) != plen[ep] || e.tlb_hit != exp_hit[ep]) begin
        failures++;
        $display("event %0d wrong (hit=%b)", ep, e.tlb_hit);
      end
      ep <= ep + 1;
    end
  end

  initial begin
    int t0;
    wait (ep == NP);
    // latency of a hit with a free write stream
    free_run = 1;
    repeat (5) @(posedge clk);
    @(negedge clk);
    begin
      hdr_t h;
      h = '0; h.vaddr = pva[5]; h.len = 0;
      in_valid = 1; in_data = word_t'(h); in_last = 1;
    end
    @(posedge clk); t0 = $time;
    @(negedge clk); in_valid = 0;
    while (!wr_valid) @(posedge clk);
    checks++;
    if (($time - t0) / 10 != 2) begin failures++; $display("hit latency %0d", ($time - t0) / 10); end
    repeat (5) @(posedge clk);
    checks++;
    if (misses_seen != 3) begin failures++; $display("misses seen %0d", misses_seen); end
    checks++;
    if (wp != NP + 1) begin failures++; $display("writes %0d", wp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
