// apelink_tx: transmit half of the off-board link control logic.
// Packets are framed with a light word-stuffing protocol: an SOP control word,
// the packet words, and an EOP control word. Control words are recognised by
// CTRL_MAGIC in the top 16 bits; a packet word that happens to start with the
// magic is preceded by an ESC control word so the receiver takes it as data.
// Two more control words share the link and may appear anywhere, also inside
// a frame: CREDIT returns buffer space freed at this end's receiver to the far
// transmitter, and DIAG carries a 32-bit fault-monitor message to the
// neighbour (diagnostic traffic is hidden inside the link protocol).
//
// Flow control is credit based: the transmitter starts with CREDITS (the far
// receive buffer size in words) and spends one per packet word; credits come
// back through credit_add_* when the local receiver decodes a CREDIT word.
// ret_inc counts words freed in the local receive buffer; they are reported
// in a CREDIT word once RET_THRESH have gathered, or earlier when the link has
// nothing else to send.
//
// Interface: in_* packet stream; link_* one word per cycle when link_valid and
// link_ready; diag_* a one-word message, accepted when it is sent. Priority
// per cycle: pending escaped word, EOP, credit return, diagnostic, packet.
// Framing by word stuffing follows the published design; the encoding, the
// credit scheme and the priorities are this implementation's own.
module apelink_tx
  import apenet_pkg::*;
#(
  parameter int CREDITS    = 1024,
  parameter int RET_THRESH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  input  logic        in_last,
  input  logic        credit_add_valid,
  input  logic [15:0] credit_add,
  input  logic        ret_inc,
  input  logic        diag_valid,
  output logic        diag_ready,
  input  logic [31:0] diag_data,
  output logic        link_valid,
  input  logic        link_ready,
  output word_t       link_data,
  output logic [15:0] credits
);
  logic        in_frame, esc_pend, eop_pend;
  word_t       esc_word;
  logic [15:0] ret_pend;
  logic        can_data;

  typedef enum logic [2:0] {K_NONE, K_ESCW, K_EOP, K_CRED, K_DIAG, K_SOP, K_DATA, K_ESC} kind_e;
  kind_e k;

  assign can_data = in_valid && (credits != '0);

  always_comb begin
    k = K_NONE;
    if (esc_pend)                                        k = K_ESCW;
    else if (eop_pend)                                   k = K_EOP;
    else if (ret_pend >= 16'(RET_THRESH) ||
             (ret_pend != '0 && !can_data))              k = K_CRED;
    else if (diag_valid)                                 k = K_DIAG;
    else if (can_data && !in_frame)                      k = K_SOP;
    else if (can_data)                                   k = is_ctrl(in_data) ? K_ESC : K_DATA;
  end

  always_comb begin
    link_valid = (k != K_NONE);
    unique case (k)
      K_ESCW:  link_data = esc_word;
      K_EOP:   link_data = mk_ctrl(C_EOP, 32'd0);
      K_CRED:  link_data = mk_ctrl(C_CREDIT, {16'd0, ret_pend});
      K_DIAG:  link_data = mk_ctrl(C_DIAG, diag_data);
      K_SOP:   link_data = mk_ctrl(C_SOP, 32'd0);
      K_ESC:   link_data = mk_ctrl(C_ESC, 32'd0);
      K_DATA:  link_data = in_data;
      default: link_data = '0;
    endcase
  end

  logic fire;
  assign fire       = link_valid && link_ready;
  assign in_ready   = fire && (k == K_DATA || k == K_ESC);
  assign diag_ready = fire && (k == K_DIAG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0;
      esc_pend <= 1'b0;
      eop_pend <= 1'b0;
      esc_word <= '0;
      ret_pend <= '0;
      credits  <= 16'(CREDITS);
    end else begin
      credits  <= credits - 16'(in_ready) + (credit_add_valid ? credit_add : 16'd0);
      ret_pend <= ((fire && k == K_CRED) ? 16'd0 : ret_pend) + 16'(ret_inc);
      if (fire) begin
        unique case (k)
          K_ESCW: esc_pend <= 1'b0;
          K_EOP:  begin eop_pend <= 1'b0; in_frame <= 1'b0; end
          K_SOP:  in_frame <= 1'b1;
          K_ESC:  begin esc_pend <= 1'b1; esc_word <= in_data; eop_pend <= in_last; end
          K_DATA: eop_pend <= in_last;
          default: ;
        endcase
      end
    end
  end
endmodule
