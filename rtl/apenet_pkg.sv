// apenet_pkg: types and constants shared by the APEnet+ core.
// The core moves 256-bit words (the back-end datapath width of the PCIe Gen3
// interface). A packet is a run of words, the first of which is a header; a
// separate "last" flag marks the final word. Header, command, write-header and
// event layouts, and the control-word encoding of the off-board link, are
// choices of this implementation: only the 256-bit and 32-bit widths and the
// six links come from the published design.
package apenet_pkg;
  localparam int DATA_W  = 256;   // back-end datapath width
  localparam int NLINK   = 6;     // off-board links of a 3D torus node
  localparam int PORT_W  = 3;     // link index in a header
  localparam int LEN_W   = 16;    // length in 256-bit words
  localparam int ADDR_W  = 64;

  typedef logic [DATA_W-1:0] word_t;

  // TX command written by the host into the command queue.
  typedef struct packed {
    logic [DATA_W-PORT_W-LEN_W-2*ADDR_W-1:0] rsvd;
    logic [PORT_W-1:0] port;      // output link
    logic [LEN_W-1:0]  len;       // payload words
    logic [ADDR_W-1:0] dst_vaddr; // virtual address at the receiver
    logic [ADDR_W-1:0] src_addr;  // host address to read
  } cmd_t;

  // Header word of a network packet.
  typedef struct packed {
    logic [DATA_W-PORT_W-LEN_W-ADDR_W-1:0] rsvd;
    logic [PORT_W-1:0] port;
    logic [LEN_W-1:0]  len;
    logic [ADDR_W-1:0] vaddr;
  } hdr_t;

  // Header word of a PCIe write issued by the RX DMA controller.
  typedef struct packed {
    logic [DATA_W-1-LEN_W-ADDR_W-1:0] rsvd;
    logic              gpu;       // target is GPU memory
    logic [LEN_W-1:0]  len;
    logic [ADDR_W-1:0] paddr;
  } wrhdr_t;

  // Completion event posted to the event queue after a packet is written.
  typedef struct packed {
    logic [DATA_W-2-LEN_W-ADDR_W-1:0] rsvd;
    logic              tlb_hit;
    logic              gpu;
    logic [LEN_W-1:0]  len;
    logic [ADDR_W-1:0] vaddr;
  } event_t;

  // Off-board link word stuffing: a word whose top 16 bits equal CTRL_MAGIC is
  // a control word. A data word that happens to carry the magic is sent after
  // an ESC control word.
  localparam logic [15:0] CTRL_MAGIC = 16'hBC5A;
  typedef enum logic [7:0] {
    C_SOP = 8'h01, C_EOP = 8'h02, C_ESC = 8'h03, C_CREDIT = 8'h04, C_DIAG = 8'h05
  } ctrl_e;

  function automatic logic is_ctrl(word_t w);
    return w[DATA_W-1 -: 16] == CTRL_MAGIC;
  endfunction

  function automatic word_t mk_ctrl(ctrl_e c, logic [31:0] payload);
    word_t w;
    w = '0;
    w[DATA_W-1 -: 16] = CTRL_MAGIC;
    w[DATA_W-17 -: 8] = c;
    w[31:0] = payload;
    return w;
  endfunction

  function automatic ctrl_e ctrl_type(word_t w);
    return ctrl_e'(w[DATA_W-17 -: 8]);
  endfunction
endpackage
