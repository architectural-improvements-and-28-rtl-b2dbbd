// rx_dma_ctrl: RX DMA controller of the receive path.
// Takes each received packet from the packet queue, translates its virtual
// destination address and emits a PCIe write toward host or GPU memory. The
// translation is asked of the TLB first; on a hit the packet is forwarded at
// once, bypassing the embedded processor. On a miss the virtual address is
// handed to the processor (miss_*), which searches the registered buffers,
// translates the address, registers the page in the TLB and returns a
// prepared command (nios_cmd_*) with the physical address. After the payload
// a completion event is posted to the event queue.
//
// Interface: in_* is the packet stream (first word hdr_t, last flag on the
// final word). tlb_lk_* / tlb_res_* is the lookup port of the TLB (result one
// or more cycles after the request). wr_* is the write stream: a wrhdr_t word
// (physical address, length, GPU flag) followed by the payload words. ev_*
// carries one event_t word per packet. Timing on a hit: header accepted,
// result next cycle, write header the cycle after, then one payload word per
// cycle while wr_ready is high. The miss/hit split follows the published
// receive-path diagram; the word formats and the assumption that a packet
// does not cross a page boundary are this implementation's own.
module rx_dma_ctrl
  import apenet_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  word_t             in_data,
  input  logic              in_last,
  output logic              tlb_lk_valid,
  output logic [ADDR_W-1:0] tlb_lk_vaddr,
  input  logic              tlb_res_valid,
  input  logic              tlb_res_hit,
  input  logic [ADDR_W-1:0] tlb_res_paddr,
  input  logic              tlb_res_gpu,
  output logic              miss_valid,
  input  logic              miss_ready,
  output logic [ADDR_W-1:0] miss_vaddr,
  input  logic              nios_cmd_valid,
  input  logic [ADDR_W-1:0] nios_cmd_paddr,
  input  logic              nios_cmd_gpu,
  output logic              wr_valid,
  input  logic              wr_ready,
  output word_t             wr_data,
  output logic              wr_last,
  output logic              ev_valid,
  input  logic              ev_ready,
  output word_t             ev_data
);
  typedef enum logic [2:0] {S_HDR, S_LOOK, S_MISS, S_NIOS, S_WHDR, S_DATA, S_EV} st_e;
  st_e st;
  hdr_t hdr_q, hin;
  logic no_payload;
  logic [ADDR_W-1:0] paddr_q;
  logic gpu_q, hit_q;

  assign hin = hdr_t'(in_data);
  assign tlb_lk_valid = (st == S_HDR) && in_valid;
  assign tlb_lk_vaddr = hin.vaddr;
  assign miss_valid   = (st == S_MISS);
  assign miss_vaddr   = hdr_q.vaddr;

  always_comb begin
    wrhdr_t w;
    event_t e;
    w = '0;
    w.gpu = gpu_q;
    w.len = no_payload ? '0 : hdr_q.len;
    w.paddr = paddr_q;
    e = '0;
    e.tlb_hit = hit_q;
    e.gpu = gpu_q;
    e.len = w.len;
    e.vaddr = hdr_q.vaddr;
    in_ready = (st == S_HDR) || ((st == S_DATA) && wr_ready);
    wr_valid = (st == S_WHDR) || ((st == S_DATA) && in_valid);
    wr_data  = (st == S_WHDR) ? word_t'(w) : in_data;
    wr_last  = (st == S_WHDR) ? no_payload : in_last;
    ev_valid = (st == S_EV);
    ev_data  = word_t'(e);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_HDR;
      hdr_q <= '0;
      no_payload <= 1'b0;
      paddr_q <= '0;
      gpu_q <= 1'b0;
      hit_q <= 1'b0;
    end else begin
      unique case (st)
        S_HDR: if (in_valid) begin
          hdr_q <= hin;
          no_payload <= in_last;
          st <= S_LOOK;
        end
        S_LOOK: if (tlb_res_valid) begin
          hit_q <= tlb_res_hit;
          if (tlb_res_hit) begin
            paddr_q <= tlb_res_paddr;
            gpu_q   <= tlb_res_gpu;
            st      <= S_WHDR;
          end else begin
            st <= S_MISS;
          end
        end
        S_MISS: if (miss_ready) st <= S_NIOS;
        S_NIOS: if (nios_cmd_valid) begin
          paddr_q <= nios_cmd_paddr;
          gpu_q   <= nios_cmd_gpu;
          st      <= S_WHDR;
        end
        S_WHDR: if (wr_ready) st <= no_payload ? S_EV : S_DATA;
        S_DATA: if (in_valid && wr_ready && in_last) st <= S_EV;
        S_EV:   if (ev_ready) st <= S_HDR;
        default: st <= S_HDR;
      endcase
    end
  end
endmodule
