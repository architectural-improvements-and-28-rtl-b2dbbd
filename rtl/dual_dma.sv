// dual_dma: TX DMA with several concurrent engines fed by a prefetchable
// command queue.
// Reading a message from host memory over PCIe takes a long, system dependent
// time between the read request and its completion. With one engine each
// request waits for the previous message to come back; with N_ENG engines
// (2 in the published design) up to N_ENG read requests are outstanding on the
// bus and their completions overlap, shortening a sequence of transfers.
//
// How it works: commands (cmd_t) are taken from the queue in order and handed
// round-robin to the engines; an engine takes its next command as soon as it
// is free, so the queue is prefetched. Each busy engine issues one read
// request (tag = engine index) for its message; completions for different
// tags may interleave but arrive in order within a tag. Completion words are
// written into the engine's slot of a shared RAM. A drain pointer, also
// round-robin, emits packets in command order: a header word (hdr_t) followed
// by the payload, streaming a word as soon as it is in the RAM. When the last
// word has left, the engine is free again.
//
// Interface: cmd_* is a valid/ready stream of cmd_t words; rd_req_* issues a
// read of rd_req_len 256-bit words at rd_req_addr; cpl_* delivers completion
// words (always accepted); pkt_* is the packet stream toward the link side.
// Timing: a command is accepted one cycle after the engine frees, the read
// request is presented the cycle after, and a payload word can leave the
// cycle after it was written. Messages longer than MAX_WORDS are cut to
// MAX_WORDS (software splits long messages into packets). The number of
// engines follows the published design; slot size, request format and the
// in-order drain are this implementation's own choices.
module dual_dma
  import apenet_pkg::*;
#(
  parameter int N_ENG     = 2,
  parameter int MAX_WORDS = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  // command queue
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  word_t             cmd_data,
  // PCIe read requests
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  output logic [LEN_W-1:0]  rd_req_len,
  output logic [7:0]        rd_req_tag,
  // PCIe read completions
  input  logic              cpl_valid,
  input  logic [7:0]        cpl_tag,
  input  word_t             cpl_data,
  // packets out
  output logic              pkt_valid,
  input  logic              pkt_ready,
  output word_t             pkt_data,
  output logic              pkt_last,
  // number of engines waiting for completions (for observation)
  output logic [$clog2(N_ENG+1)-1:0] outstanding
);
  localparam int EW = (N_ENG > 1) ? $clog2(N_ENG) : 1;
  localparam int SW = $clog2(MAX_WORDS + 1);
  localparam int RW = $clog2(N_ENG * MAX_WORDS);

  typedef enum logic [1:0] {E_IDLE, E_REQ, E_DATA} est_e;

  est_e              est   [N_ENG];
  cmd_t              ecmd  [N_ENG];
  logic [SW-1:0]     elen  [N_ENG];
  logic [SW-1:0]     ercv  [N_ENG];
  word_t             ram   [N_ENG*MAX_WORDS];

  logic [EW-1:0]     disp, drn;
  logic [SW:0]       didx;     // 0 = header, k = payload word k-1
  logic              req_found;
  logic [EW-1:0]     req_eng;
  cmd_t              cin;
  cmd_t              dcmd;

  function automatic logic [EW-1:0] nxt(logic [EW-1:0] p);
    return (p == EW'(N_ENG-1)) ? '0 : p + 1'b1;
  endfunction

  assign cin       = cmd_t'(cmd_data);
  assign cmd_ready = (est[disp] == E_IDLE);

  // lowest-index engine with a request to issue
  always_comb begin
    req_found = 1'b0;
    req_eng   = '0;
    for (int e = N_ENG-1; e >= 0; e--)
      if (est[e] == E_REQ) begin
        req_found = 1'b1;
        req_eng   = EW'(e);
      end
  end
  assign rd_req_valid = req_found;
  assign rd_req_addr  = ecmd[req_eng].src_addr;
  assign rd_req_len   = LEN_W'(elen[req_eng]);
  assign rd_req_tag   = 8'(req_eng);

  always_comb begin
    outstanding = '0;
    for (int e = 0; e < N_ENG; e++)
      if (est[e] == E_DATA && ercv[e] != elen[e]) outstanding = outstanding + 1'b1;
  end

  // drain in command order
  logic busy_drn, word_avail, hdr_phase;
  hdr_t hdr;
  assign dcmd      = ecmd[drn];
  assign busy_drn  = (est[drn] == E_DATA) || (est[drn] == E_REQ);
  assign hdr_phase = (didx == '0);
  assign word_avail = hdr_phase ? busy_drn
                                : (est[drn] == E_DATA) && ({1'b0, ercv[drn]} >= didx);
  always_comb begin
    hdr       = '0;
    hdr.port  = dcmd.port;
    hdr.len   = LEN_W'(elen[drn]);
    hdr.vaddr = dcmd.dst_vaddr;
  end
  assign pkt_valid = word_avail;
  assign pkt_data  = hdr_phase ? word_t'(hdr)
                               : ram[RW'(drn) * RW'(MAX_WORDS) + RW'(didx - 1'b1)];
  assign pkt_last  = (didx == {1'b0, elen[drn]});

  always_ff @(posedge clk) begin
    if (cpl_valid)
      ram[RW'(cpl_tag) * RW'(MAX_WORDS) + RW'(ercv[EW'(cpl_tag)])] <= cpl_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp <= '0;
      drn  <= '0;
      didx <= '0;
      for (int e = 0; e < N_ENG; e++) begin
        est[e]  <= E_IDLE;
        ecmd[e] <= '0;
        elen[e] <= '0;
        ercv[e] <= '0;
      end
    end else begin
      if (cmd_valid && cmd_ready) begin
        est[disp]  <= (cin.len == '0) ? E_DATA : E_REQ;
        ecmd[disp] <= cin;
        elen[disp] <= (cin.len > LEN_W'(MAX_WORDS)) ? SW'(MAX_WORDS) : SW'(cin.len);
        ercv[disp] <= '0;
        disp       <= nxt(disp);
      end
      if (rd_req_valid && rd_req_ready) begin
        est[req_eng] <= E_DATA;
      end
      if (cpl_valid) ercv[EW'(cpl_tag)] <= ercv[EW'(cpl_tag)] + 1'b1;
      if (pkt_valid && pkt_ready) begin
        if (pkt_last) begin
          didx     <= '0;
          est[drn] <= E_IDLE;
          drn      <= nxt(drn);
        end else begin
          didx <= didx + 1'b1;
        end
      end
    end
  end

  // an engine must never get more completion words than it asked for
  always_ff @(posedge clk)
    if (rst_n && cpl_valid)
      assert (est[EW'(cpl_tag)] == E_DATA && ercv[EW'(cpl_tag)] < elen[EW'(cpl_tag)])
        else $error("dual_dma: unexpected completion for tag %0d", cpl_tag);
endmodule
