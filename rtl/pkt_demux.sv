// pkt_demux: steers each packet to one of N outputs by the port field of its
// header word (hdr_t.port). The port is taken from the first word and held
// until the last word has passed. A port number of N or more is folded with
// modulo N. Interface: one valid/ready/data/last stream in, arrays out.
// Combinational, no added latency. The header field that selects the link is
// this implementation's stand-in for the torus router, which is not part of
// this design.
module pkt_demux
  import apenet_pkg::*;
#(
  parameter int N = NLINK
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  word_t        in_data,
  input  logic         in_last,
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output word_t        out_data,
  output logic         out_last
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic          mid;
  logic [IW-1:0] sel_q, sel;
  hdr_t          h;
  assign h        = hdr_t'(in_data);
  assign sel      = mid ? sel_q : IW'(int'(h.port) % N);
  assign out_data = in_data;
  assign out_last = in_last;
  always_comb begin
    out_valid = '0;
    out_valid[sel] = in_valid;
  end
  assign in_ready = out_ready[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mid <= 1'b0;
      sel_q <= '0;
    end else if (in_valid && in_ready) begin
      mid <= !in_last;
      sel_q <= sel;
    end
  end
endmodule
