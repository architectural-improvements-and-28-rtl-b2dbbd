// host_mem_model: behavioural model of host memory behind the PCIe bus, for
// testbenches only. Every read request is answered after LAT cycles; words of
// requests that are ready are returned one per cycle, round-robin between
// requests, so completions of different tags interleave. Word k of a request
// at address A holds pat(A + 32*k), see mem_pat below.
module host_mem_model
  import apenet_pkg::*;
#(
  parameter int LAT = 50
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [ADDR_W-1:0] rd_req_addr,
  input  logic [LEN_W-1:0]  rd_req_len,
  input  logic [7:0]        rd_req_tag,
  output logic              cpl_valid,
  output logic [7:0]        cpl_tag,
  output word_t             cpl_data
);
  localparam int NQ = 16;
  logic [ADDR_W-1:0] q_addr [NQ];
  int                q_len  [NQ];
  int                q_sent [NQ];
  logic [7:0]        q_tag  [NQ];
  longint            q_time [NQ];
  logic              q_act  [NQ];
  longint            now;
  int                rr;

  assign rd_req_ready = 1'b1;

  initial begin
    for (int i = 0; i < NQ; i++) q_act[i] = 1'b0;
    now = 0;
    rr = 0;
    cpl_valid = 1'b0;
    cpl_tag = '0;
    cpl_data = '0;
  end

  always @(posedge clk) begin
    int pick;
    now <= now + 1;
    cpl_valid <= 1'b0;
    pick = -1;
    for (int k = 0; k < NQ; k++) begin
      int i;
      i = (rr + k) % NQ;
      if (pick < 0 && q_act[i] && q_time[i] <= now) pick = i;
    end
    if (pick >= 0) begin
      cpl_valid <= 1'b1;
      cpl_tag   <= q_tag[pick];
      cpl_data  <= mem_pat(q_addr[pick] + 64'(32 * q_sent[pick]));
      q_sent[pick] = q_sent[pick] + 1;
      if (q_sent[pick] == q_len[pick]) q_act[pick] = 1'b0;
      rr = (pick + 1) % NQ;
    end
    if (rst_n && rd_req_valid && rd_req_len != 0) begin
      int slot;
      slot = -1;
      for (int i = 0; i < NQ; i++) if (slot < 0 && !q_act[i]) slot = i;
      if (slot < 0) $fatal(1, "host_mem_model: too many requests");
      q_act[slot]  = 1'b1;
      q_addr[slot] = rd_req_addr;
      q_len[slot]  = int'(rd_req_len);
      q_sent[slot] = 0;
      q_tag[slot]  = rd_req_tag;
      q_time[slot] = now + LAT;
    end
  end

  function automatic word_t mem_pat(logic [ADDR_W-1:0] a);
    return {a ^ 64'h0123_4567_89AB_CDEF, ~a, a * 3, a + 64'd7};
  endfunction
endmodule
