// apenet_node_model: one complete network node for system-level testbenches:
// an apenet_top at its default parameters, with a host memory model behind
// its PCIe read port, a behavioural embedded-processor model that resolves
// TLB misses (physical page = virtual page + 0x100), and a host model that
// programs the watchdog period after reset (and again whenever cfg_period
// changes) and then, while hb_en is high, writes the Host Watchdog Register
// every HB cycles. The host accepts every host-bound write and event at
// once. Commands, the host-bound stream, the links and the LO|FA|MO status
// are ports; the links' ready inputs are tied high. The node itself is the
// design at its defaults; the 100-cycle memory latency, the 30-cycle miss
// delay and the heartbeat interval are this model's own choices, since the
// published figures give none of them in cycles.
module apenet_node_model
  import apenet_pkg::*;
#(
  parameter int HB = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       cfg_period,
  input  logic              hb_en,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  word_t             cmd_data,
  output logic              host_valid,
  output word_t             host_data,
  output logic              host_last,
  output logic              eq_valid,
  output word_t             eq_data,
  output logic [NLINK-1:0]  link_tx_valid,
  output word_t             link_tx_data [NLINK],
  input  logic [NLINK-1:0]  link_rx_valid,
  input  word_t             link_rx_data [NLINK],
  output logic              host_fault,
  output logic [NLINK-1:0]  nb_host_fault,
  output logic [NLINK-1:0]  nb_dead,
  output int                misses
);
  localparam int PS = 12;
  logic awv, awr, wv, wr, bv, br, arv, arr, rv, rr;
  logic [7:0] awa, ara;
  logic [31:0] wd, rd;
  logic rq_v, rq_r, cv, mv, mr, ncv, trv;
  logic [ADDR_W-1:0] rq_a, mva, ncp;
  logic [LEN_W-1:0] rq_l;
  logic [7:0] rq_t, ct;
  word_t cd;
  logic [ADDR_W-PS-1:0] trvp, trpp;

  apenet_top dut (
    .clk, .rst_n,
    .s_awvalid(awv), .s_awready(awr), .s_awaddr(awa), .s_wvalid(wv), .s_wready(wr),
    .s_wdata(wd), .s_bvalid(bv), .s_bready(br), .s_bresp(),
    .s_arvalid(arv), .s_arready(arr), .s_araddr(ara), .s_rvalid(rv), .s_rready(rr),
    .s_rdata(rd), .s_rresp(),
    .cmd_valid, .cmd_ready, .cmd_data,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a), .rd_req_len(rq_l),
    .rd_req_tag(rq_t), .cpl_valid(cv), .cpl_tag(ct), .cpl_data(cd),
    .gpu_tx_valid(1'b0), .gpu_tx_ready(), .gpu_tx_data('0), .gpu_tx_last(1'b0),
    .host_valid, .host_ready(1'b1), .host_data, .host_last,
    .nios_in_valid(1'b0), .nios_in_ready(), .nios_in_data('0), .nios_in_last(1'b0),
    .miss_valid(mv), .miss_ready(mr), .miss_vaddr(mva),
    .nios_cmd_valid(ncv), .nios_cmd_paddr(ncp), .nios_cmd_gpu(1'b0),
    .tlb_reg_valid(trv), .tlb_reg_vpage(trvp), .tlb_reg_ppage(trpp), .tlb_reg_gpu(1'b0),
    .eq_valid, .eq_ready(1'b1), .eq_data,
    .link_tx_valid, .link_tx_ready({NLINK{1'b1}}), .link_tx_data,
    .link_rx_valid, .link_rx_data,
    .host_fault, .nb_host_fault, .nb_dead);

  host_mem_model #(.LAT(100)) mem (
    .clk, .rst_n, .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_req_len(rq_l), .rd_req_tag(rq_t), .cpl_valid(cv), .cpl_tag(ct), .cpl_data(cd));

  initial begin
    misses = 0;
    mr = 0; ncv = 0; ncp = 0; trv = 0; trvp = 0; trpp = 0;
    forever begin
      logic [ADDR_W-1:0] va;
      @(posedge clk);
      if (rst_n && mv) begin
        va = mva;
        misses++;
        @(negedge clk); mr = 1; @(negedge clk); mr = 0;
        repeat (30) @(negedge clk);
        trv = 1; trvp = va[ADDR_W-1:PS]; trpp = va[ADDR_W-1:PS] + 52'h100;
        ncv = 1; ncp = {va[ADDR_W-1:PS] + 52'h100, va[PS-1:0]};
        @(negedge clk); trv = 0; ncv = 0;
      end
    end
  end

  task automatic axw(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awv = 1; awa = a; wv = 1; wd = d;
    @(negedge clk); awv = 0; wv = 0;
    while (!bv) @(negedge clk);
    br = 1; @(negedge clk); br = 0;
  endtask

  initial begin
    awv = 0; wv = 0; br = 0; arv = 0; rr = 0; awa = 0; ara = 0; wd = 0;
    @(posedge rst_n);
    axw(8'h04, 32'h1);
    axw(8'h10, cfg_period);
    forever begin
      logic [31:0] per;
      per = cfg_period;
      repeat (HB) @(negedge clk);
      if (hb_en) axw(8'h04, 32'h1);
      if (cfg_period != per) axw(8'h10, cfg_period);
    end
  end
endmodule
