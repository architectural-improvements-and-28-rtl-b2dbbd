// pkt_arbiter: round-robin merge of N packet streams.
// A grant is held from a packet's first word to its last, so packets are never
// interleaved; after a packet the search starts at the next input. Used to
// merge the host and GPU transmit FIFOs in front of the links, and the
// receive buffers of all links in front of the packet queue. The merge points
// follow the published block diagrams; round-robin is this implementation's
// choice. Interface: arrays of valid/ready/data/last streams in, one out;
// out_sel tells which input the current word comes from. Combinational from
// inputs to outputs, no added latency.
module pkt_arbiter
  import apenet_pkg::*;
#(
  parameter int N = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  word_t        in_data [N],
  input  logic [N-1:0] in_last,
  output logic         out_valid,
  input  logic         out_ready,
  output word_t        out_data,
  output logic         out_last,
  output logic [$clog2(N+1)-1:0] out_sel
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr, cur, pick;
  logic          locked, found;

  always_comb begin
    found = 1'b0;
    pick  = ptr;
    for (int k = N-1; k >= 0; k--) begin
      if (in_valid[(int'(ptr) + k) % N]) begin
        found = 1'b1;
        pick  = IW'((int'(ptr) + k) % N);
      end
    end
  end

  assign cur       = locked ? ptr : pick;
  assign out_valid = locked ? in_valid[ptr] : found;
  assign out_data  = in_data[cur];
  assign out_last  = in_last[cur];
  assign out_sel   = ($clog2(N+1))'(cur);
  always_comb begin
    in_ready = '0;
    in_ready[cur] = out_ready && out_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
      locked <= 1'b0;
    end else if (out_valid && out_ready) begin
      if (out_last) begin
        locked <= 1'b0;
        ptr <= (cur == IW'(N-1)) ? '0 : cur + 1'b1;
      end else begin
        locked <= 1'b1;
        ptr <= cur;
      end
    end
  end
endmodule
