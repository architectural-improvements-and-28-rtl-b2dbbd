// apenet_top: core of an APEnet+ 3D-torus network interface.
// The card sits on the host's PCIe bus and drives six off-board links (X+,
// X-, Y+, Y-, Z+, Z-) to the neighbouring nodes of a 3D torus. This module
// holds the card's own logic between the PCIe controller (outside, reached
// through the rd_req/cpl, stream and AXI4-Lite ports) and the transceivers
// (outside, reached through the link_* ports):
//
//  transmit   host commands enter the command FIFO (CMD INST); the dual DMA
//             engine reads each message from host memory with two requests
//             in flight and writes packets into the HOST TX FIFO; packets
//             written by the GPU side arrive in the GPU TX FIFO. The two are
//             merged packet by packet and steered to a link by the header's
//             port field.
//  links      each link channel frames packets with word stuffing, runs credit
//             flow control and carries fault-monitor messages.
//  receive    packets from all links are merged into the packet queue; the RX
//             DMA controller translates the destination through the TLB (the
//             embedded processor, outside, is asked only on a miss: miss_*,
//             nios_cmd_*, tlb_reg_*), emits PCIe writes into the HOST RX FIFO
//             and completion events into the EQ FIFO.
//  host path  a multiplexer, set by the CTRL register, chooses whether the
//             host-bound stream (host_*) is fed from HOST RX or from the NIOS
//             FIFO (nios_in_*); it only switches between packets.
//  registers  AXI4-Lite external registers, including the watchdog registers
//             of the local fault monitor (LO|FA|MO).
//
// All interfaces use valid/ready; data words are 256 bits, registers 32 bits.
// The block partition and names follow the published block diagrams; FIFO
// depths, word formats and the port-field link choice are this
// implementation's own. The torus router, the PCIe controller, the embedded
// processor and the transceivers are not part of this module.
module apenet_top
  import apenet_pkg::*;
#(
  parameter int N_LINKS   = NLINK,
  parameter int N_ENG     = 2,
  parameter int MAX_WORDS = 128,
  parameter int TLB_ENTRIES = 32,
  parameter int PAGE_SHIFT  = 12,
  parameter int LINK_TX_DEPTH = 256,
  parameter int LINK_RX_DEPTH = 1024,
  parameter int HOST_FIFO_DEPTH = 64,
  parameter int CTRL_FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave (from the PCIe-side AXI4-Lite master)
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [7:0]  s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [7:0]  s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  // TX commands (into FIFO CMD INST)
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  word_t       cmd_data,
  // PCIe reads of the TX DMA engines
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic [LEN_W-1:0]  rd_req_len,
  output logic [7:0]        rd_req_tag,
  input  logic              cpl_valid,
  input  logic [7:0]        cpl_tag,
  input  word_t             cpl_data,
  // GPU-sourced TX packets (into FIFO GPU TX)
  input  logic        gpu_tx_valid,
  output logic        gpu_tx_ready,
  input  word_t       gpu_tx_data,
  input  logic        gpu_tx_last,
  // host-bound stream (PCIe writes), from HOST RX or NIOS FIFO
  output logic        host_valid,
  input  logic        host_ready,
  output word_t       host_data,
  output logic        host_last,
  // embedded processor side
  input  logic        nios_in_valid,
  output logic        nios_in_ready,
  input  word_t       nios_in_data,
  input  logic        nios_in_last,
  output logic              miss_valid,
  input  logic              miss_ready,
  output logic [ADDR_W-1:0] miss_vaddr,
  input  logic              nios_cmd_valid,
  input  logic [ADDR_W-1:0] nios_cmd_paddr,
  input  logic              nios_cmd_gpu,
  input  logic              tlb_reg_valid,
  input  logic [ADDR_W-PAGE_SHIFT-1:0] tlb_reg_vpage,
  input  logic [ADDR_W-PAGE_SHIFT-1:0] tlb_reg_ppage,
  input  logic              tlb_reg_gpu,
  // event queue (FIFO EQ)
  output logic        eq_valid,
  input  logic        eq_ready,
  output word_t       eq_data,
  // off-board links
  output logic [N_LINKS-1:0] link_tx_valid,
  input  logic [N_LINKS-1:0] link_tx_ready,
  output word_t              link_tx_data [N_LINKS],
  input  logic [N_LINKS-1:0] link_rx_valid,
  input  word_t              link_rx_data [N_LINKS],
  // fault monitor status
  output logic               host_fault,
  output logic [N_LINKS-1:0] nb_host_fault,
  output logic [N_LINKS-1:0] nb_dead
);
  localparam int PW = 257;

  // ---------------- registers and fault monitor ----------------
  logic        rx_sel_nios, host_wd_wr, tlb_flush;
  logic [31:0] wd_period, apenet_wd, neigh_status, tlb_stats, link_status;
  logic [15:0] hit_cnt, miss_cnt;
  logic [N_LINKS-1:0] ch_overflow, ch_err, err_seen;

  ext_regs u_regs (
    .clk, .rst_n,
    .awvalid(s_awvalid), .awready(s_awready), .awaddr(s_awaddr),
    .wvalid(s_wvalid), .wready(s_wready), .wdata(s_wdata),
    .bvalid(s_bvalid), .bready(s_bready), .bresp(s_bresp),
    .arvalid(s_arvalid), .arready(s_arready), .araddr(s_araddr),
    .rvalid(s_rvalid), .rready(s_rready), .rdata(s_rdata), .rresp(s_rresp),
    .rx_sel_nios, .host_wd_wr, .wd_period, .tlb_flush,
    .apenet_wd, .neigh_status, .tlb_stats, .link_status);

  assign tlb_stats = {miss_cnt, hit_cnt};
  always_comb begin
    link_status = '0;
    for (int i = 0; i < N_LINKS && i < 8; i++) begin
      link_status[i]     = err_seen[i];
      link_status[8 + i] = ch_overflow[i];
    end
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) err_seen <= '0;
    else        err_seen <= err_seen | ch_err;

  logic [N_LINKS-1:0] diag_tx_valid, diag_tx_ready, diag_rx_valid;
  logic [31:0]        diag_tx_data;
  logic [31:0]        diag_rx_data [N_LINKS];

  lofamo #(.N_LINKS(N_LINKS)) u_lofamo (
    .clk, .rst_n, .wd_period, .host_wd_wr,
    .diag_tx_valid, .diag_tx_ready, .diag_tx_data,
    .diag_rx_valid, .diag_rx_data,
    .host_fault, .nb_host_fault, .nb_dead, .apenet_wd, .neigh_status, .tick());

  // ---------------- transmit path ----------------
  logic  cq_valid, cq_ready;
  word_t cq_data;
  sync_fifo #(.W(DATA_W), .DEPTH(CTRL_FIFO_DEPTH)) u_fifo_cmd (
    .clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd_data),
    .out_valid(cq_valid), .out_ready(cq_ready), .out_data(cq_data), .count());

  logic  dp_valid, dp_ready, dp_last;
  word_t dp_data;
  dual_dma #(.N_ENG(N_ENG), .MAX_WORDS(MAX_WORDS)) u_dma (
    .clk, .rst_n,
    .cmd_valid(cq_valid), .cmd_ready(cq_ready), .cmd_data(cq_data),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_len, .rd_req_tag,
    .cpl_valid, .cpl_tag, .cpl_data,
    .pkt_valid(dp_valid), .pkt_ready(dp_ready), .pkt_data(dp_data), .pkt_last(dp_last),
    .outstanding());

  logic [1:0] tx_src_valid, tx_src_ready, tx_src_last;
  word_t      tx_src_data [2];
  sync_fifo #(.W(PW), .DEPTH(HOST_FIFO_DEPTH)) u_fifo_host_tx (
    .clk, .rst_n, .in_valid(dp_valid), .in_ready(dp_ready), .in_data({dp_last, dp_data}),
    .out_valid(tx_src_valid[0]), .out_ready(tx_src_ready[0]),
    .out_data({tx_src_last[0], tx_src_data[0]}), .count());
  sync_fifo #(.W(PW), .DEPTH(HOST_FIFO_DEPTH)) u_fifo_gpu_tx (
    .clk, .rst_n, .in_valid(gpu_tx_valid), .in_ready(gpu_tx_ready),
    .in_data({gpu_tx_last, gpu_tx_data}),
    .out_valid(tx_src_valid[1]), .out_ready(tx_src_ready[1]),
    .out_data({tx_src_last[1], tx_src_data[1]}), .count());

  logic  ta_valid, ta_ready, ta_last;
  word_t ta_data;
  pkt_arbiter #(.N(2)) u_tx_arb (
    .clk, .rst_n,
    .in_valid(tx_src_valid), .in_ready(tx_src_ready), .in_data(tx_src_data), .in_last(tx_src_last),
    .out_valid(ta_valid), .out_ready(ta_ready), .out_data(ta_data), .out_last(ta_last),
    .out_sel());

  logic [N_LINKS-1:0] ch_tx_valid, ch_tx_ready;
  word_t              ch_tx_data;
  logic               ch_tx_last;
  pkt_demux #(.N(N_LINKS)) u_tx_demux (
    .clk, .rst_n,
    .in_valid(ta_valid), .in_ready(ta_ready), .in_data(ta_data), .in_last(ta_last),
    .out_valid(ch_tx_valid), .out_ready(ch_tx_ready), .out_data(ch_tx_data), .out_last(ch_tx_last));

  // ---------------- link channels ----------------
  logic [N_LINKS-1:0] ch_rx_valid, ch_rx_ready, ch_rx_last;
  word_t              ch_rx_data [N_LINKS];

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    apelink_channel #(.TX_DEPTH(LINK_TX_DEPTH), .RX_DEPTH(LINK_RX_DEPTH)) u_ch (
      .clk, .rst_n,
      .tx_valid(ch_tx_valid[i]), .tx_ready(ch_tx_ready[i]), .tx_data(ch_tx_data), .tx_last(ch_tx_last),
      .rx_valid(ch_rx_valid[i]), .rx_ready(ch_rx_ready[i]), .rx_data(ch_rx_data[i]), .rx_last(ch_rx_last[i]),
      .link_tx_valid(link_tx_valid[i]), .link_tx_ready(link_tx_ready[i]), .link_tx_data(link_tx_data[i]),
      .link_rx_valid(link_rx_valid[i]), .link_rx_data(link_rx_data[i]),
      .diag_tx_valid(diag_tx_valid[i]), .diag_tx_ready(diag_tx_ready[i]), .diag_tx_data(diag_tx_data),
      .diag_rx_valid(diag_rx_valid[i]), .diag_rx_data(diag_rx_data[i]),
      .overflow(ch_overflow[i]), .err(ch_err[i]));
  end

  // ---------------- receive path ----------------
  logic  ra_valid, ra_ready, ra_last;
  word_t ra_data;
  pkt_arbiter #(.N(N_LINKS)) u_rx_arb (
    .clk, .rst_n,
    .in_valid(ch_rx_valid), .in_ready(ch_rx_ready), .in_data(ch_rx_data), .in_last(ch_rx_last),
    .out_valid(ra_valid), .out_ready(ra_ready), .out_data(ra_data), .out_last(ra_last),
    .out_sel());

  logic  pq_valid, pq_ready, pq_last;
  word_t pq_data;
  sync_fifo #(.W(PW), .DEPTH(HOST_FIFO_DEPTH)) u_packet_queue (
    .clk, .rst_n, .in_valid(ra_valid), .in_ready(ra_ready), .in_data({ra_last, ra_data}),
    .out_valid(pq_valid), .out_ready(pq_ready), .out_data({pq_last, pq_data}), .count());

  logic              lk_valid, res_valid, res_hit, res_gpu;
  logic [ADDR_W-1:0] lk_vaddr, res_paddr;
  tlb #(.ENTRIES(TLB_ENTRIES), .PAGE_SHIFT(PAGE_SHIFT)) u_tlb (
    .clk, .rst_n,
    .lk_valid, .lk_vaddr, .res_valid, .res_hit, .res_paddr, .res_gpu,
    .reg_valid(tlb_reg_valid), .reg_vpage(tlb_reg_vpage), .reg_ppage(tlb_reg_ppage),
    .reg_gpu(tlb_reg_gpu), .flush(tlb_flush), .hit_cnt, .miss_cnt);

  logic  wr_valid, wr_ready, wr_last, ev_valid, ev_ready;
  word_t wr_data, ev_data;
  rx_dma_ctrl u_rxdma (
    .clk, .rst_n,
    .in_valid(pq_valid), .in_ready(pq_ready), .in_data(pq_data), .in_last(pq_last),
    .tlb_lk_valid(lk_valid), .tlb_lk_vaddr(lk_vaddr),
    .tlb_res_valid(res_valid), .tlb_res_hit(res_hit), .tlb_res_paddr(res_paddr), .tlb_res_gpu(res_gpu),
    .miss_valid, .miss_ready, .miss_vaddr,
    .nios_cmd_valid, .nios_cmd_paddr, .nios_cmd_gpu,
    .wr_valid, .wr_ready, .wr_data, .wr_last,
    .ev_valid, .ev_ready, .ev_data);

  sync_fifo #(.W(DATA_W), .DEPTH(CTRL_FIFO_DEPTH)) u_fifo_eq (
    .clk, .rst_n, .in_valid(ev_valid), .in_ready(ev_ready), .in_data(ev_data),
    .out_valid(eq_valid), .out_ready(eq_ready), .out_data(eq_data), .count());

  // ---------------- host-bound multiplexer ----------------
  logic  hr_valid, hr_ready, hr_last, nf_valid, nf_ready, nf_last;
  word_t hr_data, nf_data;
  sync_fifo #(.W(PW), .DEPTH(HOST_FIFO_DEPTH)) u_fifo_host_rx (
    .clk, .rst_n, .in_valid(wr_valid), .in_ready(wr_ready), .in_data({wr_last, wr_data}),
    .out_valid(hr_valid), .out_ready(hr_ready), .out_data({hr_last, hr_data}), .count());
  sync_fifo #(.W(PW), .DEPTH(CTRL_FIFO_DEPTH)) u_fifo_nios (
    .clk, .rst_n, .in_valid(nios_in_valid), .in_ready(nios_in_ready),
    .in_data({nios_in_last, nios_in_data}),
    .out_valid(nf_valid), .out_ready(nf_ready), .out_data({nf_last, nf_data}), .count());

  logic mux_sel, mux_mid, cur_sel;
  assign cur_sel    = mux_mid ? mux_sel : rx_sel_nios;
  assign host_valid = cur_sel ? nf_valid : hr_valid;
  assign host_data  = cur_sel ? nf_data  : hr_data;
  assign host_last  = cur_sel ? nf_last  : hr_last;
  assign hr_ready   = !cur_sel && host_ready;
  assign nf_ready   =  cur_sel && host_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mux_sel <= 1'b0;
      mux_mid <= 1'b0;
    end else if (host_valid && host_ready) begin
      mux_sel <= cur_sel;
      mux_mid <= !host_last;
    end
  end
endmodule
