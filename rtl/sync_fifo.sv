// sync_fifo: single-clock first-word-fall-through FIFO.
// Used for every buffer of the core: the host-side FIFOs (HOST TX, HOST RX,
// NIOS, CMD INST, GPU TX, TARGET, EQ), the packet queue in front of the RX DMA
// controller and the TX/RX buffers of each off-board channel. The published
// design names these FIFOs; depth, width and the valid/ready handshake are
// this implementation's choice. Any DEPTH >= 2 is allowed (not only powers of
// two). out_data shows the oldest entry whenever out_valid is high; a word
// moves when valid and ready are both high on a rising clock edge. A write and
// a read may happen in the same cycle. Reset empties the FIFO (storage itself
// is not cleared).
module sync_fifo #(
  parameter int W     = 257,
  parameter int DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end
endmodule
