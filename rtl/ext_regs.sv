// ext_regs: external register file on the 32-bit AXI4-Lite bus.
// Host software reaches the core's control and status registers through an
// AXI4-Lite master on the PCIe side. Map (byte addresses):
//   0x00 CTRL         rw  bit 0: host-bound stream source, 0 = HOST RX FIFO,
//                         1 = NIOS FIFO
//   0x04 HOST_WD      rw  Host Watchdog Register; every write is a heartbeat
//   0x08 APENET_WD    ro  APEnet Watchdog Register (from the fault monitor)
//   0x0C NEIGH_STATUS ro  neighbour host-fault and silent-card bits
//   0x10 WD_PERIOD    rw  watchdog period in clock cycles
//   0x14 TLB_STATS    ro  {TLB misses[15:0], TLB hits[15:0]}
//   0x18 TLB_FLUSH    wo  any write invalidates the TLB
//   0x1C LINK_STATUS  ro  {link overflow bits, link error bits} (8 + 8)
// Unmapped addresses read 0 and ignore writes; responses are always OKAY.
// Timing: a write is taken when AW and W are both valid and no response is
// pending, the response follows the next cycle; a read is answered the cycle
// after AR. The register that selects between HOST RX and NIOS and the
// watchdog registers follow the published design; the map, the other
// registers and the reset value of WD_PERIOD (500 ms at 250 MHz) are this
// implementation's choices.
module ext_regs #(
  parameter logic [31:0] WD_PERIOD_RST = 32'd125_000_000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        awvalid,
  output logic        awready,
  input  logic [7:0]  awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  output logic [1:0]  bresp,
  input  logic        arvalid,
  output logic        arready,
  input  logic [7:0]  araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rx_sel_nios,
  output logic        host_wd_wr,
  output logic [31:0] wd_period,
  output logic        tlb_flush,
  input  logic [31:0] apenet_wd,
  input  logic [31:0] neigh_status,
  input  logic [31:0] tlb_stats,
  input  logic [31:0] link_status
);
  logic        wr_go;
  logic [31:0] host_wd;

  assign wr_go   = awvalid && wvalid && !bvalid;
  assign awready = wr_go;
  assign wready  = wr_go;
  assign arready = !rvalid;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;

  function automatic logic [31:0] rd_mux(logic [7:0] a, logic sel, logic [31:0] hwd,
                                         logic [31:0] awd, logic [31:0] ns, logic [31:0] per,
                                         logic [31:0] ts, logic [31:0] ls);
    unique case (a[7:2])
      6'h00:   return {31'd0, sel};
      6'h01:   return hwd;
      6'h02:   return awd;
      6'h03:   return ns;
      6'h04:   return per;
      6'h05:   return ts;
      6'h07:   return ls;
      default: return 32'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata <= '0;
      rx_sel_nios <= 1'b0;
      host_wd <= '0;
      wd_period <= WD_PERIOD_RST;
      host_wd_wr <= 1'b0;
      tlb_flush <= 1'b0;
    end else begin
      host_wd_wr <= 1'b0;
      tlb_flush <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (wr_go) begin
        bvalid <= 1'b1;
        unique case (awaddr[7:2])
          6'h00: rx_sel_nios <= wdata[0];
          6'h01: begin host_wd <= wdata; host_wd_wr <= 1'b1; end
          6'h04: wd_period <= wdata;
          6'h06: tlb_flush <= 1'b1;
          default: ;
        endcase
      end
      if (rvalid && rready) rvalid <= 1'b0;
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        rdata <= rd_mux(araddr, rx_sel_nios, host_wd, apenet_wd, neigh_status, wd_period,
                        tlb_stats, link_status);
      end
    end
  end

  // AXI4-Lite: a response stays valid until it is taken
  property p_hold(v, r);
    @(posedge clk) disable iff (!rst_n) v && !r |=> v;
  endproperty
  a_bhold: assert property (p_hold(bvalid, bready));
  a_rhold: assert property (p_hold(rvalid, rready));
endmodule
