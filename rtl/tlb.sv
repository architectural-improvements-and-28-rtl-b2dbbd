// tlb: translation look-aside buffer for the receive path.
// Received payloads carry a virtual destination address that must be turned
// into a physical address of host or GPU memory. The TLB keeps a small number
// of page entries in registers and compares a lookup against all of them in
// parallel (a content-addressable memory). On a hit the physical page is
// returned at once and the embedded processor is not involved; on a miss the
// processor resolves the address and registers the page here.
//
// Interface: lk_valid/lk_vaddr start a lookup; one cycle later res_valid is
// high with res_hit, res_paddr (physical page joined with the page offset)
// and res_gpu (page lies in GPU memory). reg_valid writes an entry
// (reg_vpage -> reg_ppage, reg_gpu); an existing entry for the same virtual
// page is overwritten, otherwise the entry at a round-robin victim pointer is
// replaced. flush invalidates every entry. Hit and miss counters are kept.
// That a hardware TLB with a limited number of entries bypasses the processor
// on a hit follows the published design; the entry count, page size,
// replacement policy and one-cycle latency are this implementation's choices.
module tlb
  import apenet_pkg::*;
#(
  parameter int ENTRIES    = 32,
  parameter int PAGE_SHIFT = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lk_valid,
  input  logic [ADDR_W-1:0] lk_vaddr,
  output logic              res_valid,
  output logic              res_hit,
  output logic [ADDR_W-1:0] res_paddr,
  output logic              res_gpu,
  input  logic              reg_valid,
  input  logic [ADDR_W-PAGE_SHIFT-1:0] reg_vpage,
  input  logic [ADDR_W-PAGE_SHIFT-1:0] reg_ppage,
  input  logic              reg_gpu,
  input  logic              flush,
  output logic [15:0]       hit_cnt,
  output logic [15:0]       miss_cnt
);
  localparam int PW = ADDR_W - PAGE_SHIFT;
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic          valid [ENTRIES];
  logic [PW-1:0] vpage [ENTRIES];
  logic [PW-1:0] ppage [ENTRIES];
  logic          gpu   [ENTRIES];
  logic [IW-1:0] victim;

  logic          m_hit, r_hit;
  logic [IW-1:0] m_idx, r_idx;
  logic [PW-1:0] lk_page;
  assign lk_page = lk_vaddr[ADDR_W-1:PAGE_SHIFT];

  always_comb begin
    m_hit = 1'b0;
    m_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--)
      if (valid[i] && vpage[i] == lk_page) begin
        m_hit = 1'b1;
        m_idx = IW'(i);
      end
  end

  always_comb begin
    r_hit = 1'b0;
    r_idx = victim;
    for (int i = ENTRIES-1; i >= 0; i--)
      if (valid[i] && vpage[i] == reg_vpage) begin
        r_hit = 1'b1;
        r_idx = IW'(i);
      end
  end

  logic [PAGE_SHIFT-1:0] off_q;
  logic [IW-1:0]         idx_q;
  assign res_paddr = {ppage[idx_q], off_q};
  assign res_gpu   = gpu[idx_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_hit   <= 1'b0;
      off_q     <= '0;
      idx_q     <= '0;
      victim    <= '0;
      hit_cnt   <= '0;
      miss_cnt  <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        valid[i] <= 1'b0;
        vpage[i] <= '0;
        ppage[i] <= '0;
        gpu[i]   <= 1'b0;
      end
    end else begin
      res_valid <= lk_valid;
      if (lk_valid) begin
        res_hit <= m_hit;
        idx_q   <= m_idx;
        off_q   <= lk_vaddr[PAGE_SHIFT-1:0];
        if (m_hit) hit_cnt  <= hit_cnt + 1'b1;
        else       miss_cnt <= miss_cnt + 1'b1;
      end
      if (flush) begin
        for (int i = 0; i < ENTRIES; i++) valid[i] <= 1'b0;
      end else if (reg_valid) begin
        valid[r_idx] <= 1'b1;
        vpage[r_idx] <= reg_vpage;
        ppage[r_idx] <= reg_ppage;
        gpu[r_idx]   <= reg_gpu;
        if (!r_hit) victim <= (victim == IW'(ENTRIES-1)) ? '0 : victim + 1'b1;
      end
    end
  end
endmodule
