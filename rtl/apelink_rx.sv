// apelink_rx: receive half of the off-board link control logic.
// Undoes the word stuffing of apelink_tx. SOP opens a frame, EOP closes it,
// ESC makes the following word data whatever it holds, CREDIT and DIAG are
// passed out on their own ports at any time. Because the end of a packet is
// only known when EOP arrives, each packet word is held for one word time and
// released when the next word (with last = 0) or EOP (with last = 1) is seen.
// The receiver never stalls the link: the credit scheme guarantees that the
// receive buffer behind out_* has room. A data word outside a frame or a
// control word of unknown type raises err for one cycle.
// Interface: link_valid/link_data one word per cycle; out_valid/out_data/
// out_last packet words; credit_* and diag_* one-cycle pulses.
// The decoding of a word-stuffed stream follows the published design; the
// encoding itself is this implementation's own.
module apelink_rx
  import apenet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        link_valid,
  input  word_t       link_data,
  output logic        out_valid,
  output word_t       out_data,
  output logic        out_last,
  output logic        credit_valid,
  output logic [15:0] credit_cnt,
  output logic        diag_valid,
  output logic [31:0] diag_data,
  output logic        err
);
  logic  in_frame, esc, have;
  word_t held;
  logic  ctrl;
  assign ctrl = link_valid && !esc && is_ctrl(link_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0;
      esc <= 1'b0;
      have <= 1'b0;
      held <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
      out_last <= 1'b0;
      credit_valid <= 1'b0;
      credit_cnt <= '0;
      diag_valid <= 1'b0;
      diag_data <= '0;
      err <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last <= 1'b0;
      credit_valid <= 1'b0;
      diag_valid <= 1'b0;
      err <= 1'b0;
      if (ctrl) begin
        unique case (ctrl_type(link_data))
          C_SOP: begin in_frame <= 1'b1; have <= 1'b0; end
          C_EOP: begin
            if (have) begin
              out_valid <= 1'b1;
              out_data  <= held;
              out_last  <= 1'b1;
            end
            in_frame <= 1'b0;
            have <= 1'b0;
          end
          C_ESC: esc <= 1'b1;
          C_CREDIT: begin credit_valid <= 1'b1; credit_cnt <= link_data[15:0]; end
          C_DIAG: begin diag_valid <= 1'b1; diag_data <= link_data[31:0]; end
          default: err <= 1'b1;
        endcase
      end else if (link_valid) begin
        esc <= 1'b0;
        if (in_frame) begin
          if (have) begin
            out_valid <= 1'b1;
            out_data  <= held;
          end
          held <= link_data;
          have <= 1'b1;
        end else begin
          err <= 1'b1;
        end
      end
    end
  end
endmodule
