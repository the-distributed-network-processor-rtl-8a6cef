// dnp_pkg: types and constants shared by the Distributed Network Processor (DNP) RTL.
//
// The DNP moves data between tiles with RDMA-style commands (LOOPBACK, PUT, SEND, GET).
// Data travel as packets of 32-bit words: a 2-word network header (NET HDR), a 3-word
// RDMA header (RDMA HDR), up to 256 payload words and a 1-word footer. The header and
// footer sizes, the 256-word payload limit, the 18-bit DNP address, the 7-word command and
// the list of header and footer fields follow the paper. The bit positions of every field,
// the command word layout and the completion-event layout are this design's own choices,
// documented next to each helper below.
package dnp_pkg;

  localparam int unsigned WORD_W         = 32;
  localparam int unsigned DNP_ADDR_W     = 18;   // every DNP has an 18-bit address
  localparam int unsigned COORD_W        = 6;    // 18 bits split evenly into (x,y,z)
  localparam int unsigned MAX_PAYLOAD    = 256;  // payload words per packet
  localparam int unsigned CMD_WORDS      = 7;    // words per command
  localparam int unsigned NET_HDR_WORDS  = 2;
  localparam int unsigned RDMA_HDR_WORDS = 3;
  localparam int unsigned HDR_WORDS      = NET_HDR_WORDS + RDMA_HDR_WORDS;
  localparam int unsigned EVT_WORDS      = 4;    // completion event size (own choice)
  localparam int unsigned LEN_W          = 24;   // command length field (own choice)

  typedef logic [WORD_W-1:0]     word_t;
  typedef logic [DNP_ADDR_W-1:0] dnp_addr_t;
  typedef logic [COORD_W-1:0]    coord_t;

  typedef enum logic [1:0] {
    OP_LOOPBACK = 2'd0,
    OP_PUT      = 2'd1,
    OP_SEND     = 2'd2,
    OP_GET      = 2'd3
  } opcode_t;

  // One word travelling through the switch, with packet delimiters.
  typedef struct packed {
    word_t data;
    logic  sop;
    logic  eop;
  } flit_t;

  // A decoded 7-word command.
  //  word0: [1:0] opcode, [2] write a completion event, [5:4] master port that reads
  //         the source data, [7:6] master port that writes at the destination
  //  word1: [17:0] destination DNP   word2: [17:0] source DNP (used by GET)
  //  word3: source memory address    word4: destination memory address
  //  word5: [23:0] length in words   word6: user tag, echoed in the completion event
  typedef struct packed {
    opcode_t        op;
    logic           cq_en;
    logic [1:0]     rd_port;
    logic [1:0]     wr_port;
    dnp_addr_t      dst_dnp;
    dnp_addr_t      src_dnp;
    word_t          src_addr;
    word_t          dst_addr;
    logic [LEN_W-1:0] len;
    word_t          tag;
  } cmd_t;

  // Header of one packet, before it is laid out in words.
  typedef struct packed {
    dnp_addr_t      dst_dnp;
    dnp_addr_t      src_dnp;
    logic           vchan;
    logic [1:0]     wr_port;
    logic [8:0]     pkt_len;   // payload words, 0..256
    opcode_t        op;
    logic           get_resp;  // data packet that answers a GET request
    logic           cq_en;
    logic [LEN_W-1:0] cmd_len;
    word_t          src_addr;
    word_t          dst_addr;
  } hdr_t;

  // Header words:
  //  NH0 = {dst_dnp[31:14], vchan[13], wr_port[12:11], 0[10:9], pkt_len[8:0]}
  //  NH1 = {src_dnp[31:14], 0[13:0]}
  //  RH0 = {op[31:30], get_resp[29], cq_en[28], 0[27:24], cmd_len[23:0]}
  //  RH1 = source memory address, RH2 = destination memory address
  // Footer = {crc[31:16], hops[15:8], 0[7:1], err[0]}
  function automatic word_t hdr_word(input hdr_t h, input int unsigned i);
    case (i)
      0:       return {h.dst_dnp, h.vchan, h.wr_port, 2'b00, h.pkt_len};
      1:       return {h.src_dnp, 14'd0};
      2:       return {h.op, h.get_resp, h.cq_en, 4'd0, h.cmd_len};
      3:       return h.src_addr;
      default: return h.dst_addr;
    endcase
  endfunction

  function automatic dnp_addr_t nh0_dst(input word_t w);
    return w[31:14];
  endfunction
  function automatic logic nh0_vchan(input word_t w);
    return w[13];
  endfunction
  function automatic logic [1:0] nh0_wr_port(input word_t w);
    return w[12:11];
  endfunction
  function automatic logic [8:0] nh0_len(input word_t w);
    return w[8:0];
  endfunction
  function automatic word_t nh0_set_vchan(input word_t w, input logic vc);
    word_t r;
    r = w;
    r[13] = vc;
    return r;
  endfunction

  function automatic word_t footer_word(input logic [15:0] crc, input logic [7:0] hops,
                                        input logic err);
    return {crc, hops, 7'd0, err};
  endfunction

  // CRC-16 with generator x^16 + x^15 + x^2 + 1 (0x8005), MSB first, one 32-bit word
  // per call. The paper names "the industry-standard CRC-16"; bit order and the zero
  // initial value are own choices.
  localparam logic [15:0] CRC16_POLY = 16'h8005;
  function automatic logic [15:0] crc16_word(input logic [15:0] crc_in, input word_t w);
    logic [15:0] c;
    c = crc_in;
    for (int i = 31; i >= 0; i--) begin
      if (c[15] ^ w[i]) c = {c[14:0], 1'b0} ^ CRC16_POLY;
      else              c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

  // Completion events (4 words) written into the completion queue ring.
  //  EV0 = {type[31:28], err[27], 0[26:18], peer DNP[17:0]}
  //  EV1 = memory address, EV2 = length in words, EV3 = tag (commands) or footer (packets)
  typedef enum logic [3:0] {
    EV_NONE       = 4'd0,
    EV_CMD_DONE   = 4'd1,   // a local command finished
    EV_PUT_RX     = 4'd2,   // a PUT packet was written into a registered buffer
    EV_SEND_RX    = 4'd3,   // a SEND packet was written into a registered buffer
    EV_GET_DONE   = 4'd4,   // a GET request was served (source data read)
    EV_LOOP_RX    = 4'd5,   // a LOOPBACK packet was written
    EV_NO_BUFFER  = 4'd6    // no LUT entry matched; the payload was discarded
  } evt_type_t;

  typedef struct packed {
    evt_type_t      etype;
    logic           err;
    dnp_addr_t      peer;
    word_t          addr;
    logic [LEN_W-1:0] len;
    word_t          info;
  } event_t;

  function automatic word_t event_word(input event_t e, input int unsigned i);
    case (i)
      0:       return {e.etype, e.err, 9'd0, e.peer};
      1:       return e.addr;
      2:       return {8'd0, e.len};
      default: return e.info;
    endcase
  endfunction

  // Run-time configuration exported by the register block.
  typedef struct packed {
    logic           eng_en;      // engine fetches commands
    logic           rx_en;       // master ports accept incoming packets
    logic           arb_fixed;   // 0: round robin, 1: fixed priority
    logic [3:0]     arb_prio;    // highest-priority switch input in fixed mode
    dnp_addr_t      my_dnp;
    logic [5:0]     route_order; // {third, second, first} dimension, 0=X 1=Y 2=Z
    coord_t         size_x;
    coord_t         size_y;
    coord_t         size_z;
    dnp_addr_t      chip_mask;   // address bits that name the chip
    word_t          cq_base;
    logic [15:0]    cq_size;     // ring size in words (multiple of 4)
    logic [15:0]    cq_rp;       // software read pointer (words)
    logic [15:0]    timeout;     // handshake time-out threshold in cycles
  } cfg_t;

endpackage
