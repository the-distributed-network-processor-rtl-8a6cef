// dnp_offchip_if: the off-chip inter-tile interface (one per torus direction). It carries
// DNP packets over a narrow serial link and keeps them from being lost or misrouted.
// From the paper: serialization factor 16 (32-bit words over 2 lines, double data rate,
// i.e. 4 bits per clock), DC balance by inverting transmitted words so that ones and
// zeros even out, CRC-16 error detection, a buffer that re-transmits the header and the
// footer after a transmission error, payload errors only flagged in the footer, and flow
// control so that no packet is dropped. Virtual channels: two, selected per packet.
// Own choices (the paper gives no protocol details):
//  * Link = LANE_W = 2*LINES bits per clock; the DDR pad cells are outside this module.
//    Each symbol is 36 bits, sent most significant nibble first over 36/LANE_W clocks:
//    {type[1:0], inv, vc, data[31:0]}. An all-zero nibble is idle; a symbol always starts
//    with a non-zero nibble, so the receiver frames itself.
//    type 01 DATA: a packet word (data inverted when inv=1).
//    type 10 CHECK: {~crc, crc}, the CRC-16 of the header (5 words) or of the footer.
//    type 11 CTRL: {~x, x} with x = {ack, nack, stop[1:0]}; flows back on the other
//    direction of the same link pair.
//  * The sender keeps the header words and the footer; after each it sends a CHECK and
//    waits for ACK or NACK. NACK: the header (or footer) is sent again. The receiver writes
//    them speculatively and commits them only when the CHECK matches (dnp_spec_fifo).
//  * The payload CRC travels in the footer's CRC field; on a mismatch the receiver sets the
//    footer's error bit. The footer's hop counter is incremented on every hop.
//  * Flow control: the receiver tells the sender to stop a VC while that VC's receive FIFO
//    has fewer than STOP_THRESH free slots; the sender checks it before each DATA symbol.
//  * DC balance: a word is inverted when its own disparity has the same sign as the
//    running disparity of the words sent so far. CHECK and CTRL symbols are balanced.
//  * A wait for ACK longer than cfg.timeout cycles raises `timeout_exc` (the paper's
//    time-out based handshakes with exception rising); the sender keeps waiting.
//  * CTRL and framing nibbles are assumed to arrive intact (a malformed CTRL is ignored).
//  * One clock for both ends: the mesochronous phase-alignment stage the paper mentions is
//    not included.
module dnp_offchip_if
  import dnp_pkg::*;
#(
  parameter int unsigned LINES       = 2,
  parameter int unsigned RX_DEPTH    = 32,
  parameter int unsigned STOP_THRESH = 10,
  localparam int unsigned LANE_W     = 2 * LINES,
  localparam int unsigned SYM_NIB    = (36 + LANE_W - 1) / LANE_W,
  localparam int unsigned SYM_W      = SYM_NIB * LANE_W
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  // from the switch (to send)
  input  logic        sw_out_valid,
  output logic        sw_out_ready,
  input  flit_t       sw_out_flit,
  input  logic        sw_out_vc,
  // to the switch (received)
  output logic        sw_in_valid,
  input  logic [1:0]  sw_in_ready,
  output flit_t       sw_in_flit,
  output logic        sw_in_vc,
  // serial link
  output logic [LANE_W-1:0] tx_lanes,
  input  logic [LANE_W-1:0] rx_lanes,
  // events
  output logic        crc_error,     // pulse: a CHECK or payload CRC mismatch was seen
  output logic        timeout_exc,   // pulse: ACK wait exceeded cfg.timeout
  output logic        retransmit     // pulse: an envelope part is being sent again
);
  localparam logic [1:0] T_DATA = 2'b01, T_CHECK = 2'b10, T_CTRL = 2'b11;

  // ======================= receive side =======================
  logic [SYM_W-1:0] rx_sr;
  logic [$clog2(SYM_NIB+1)-1:0] rx_cnt;
  logic        rx_sym_v;
  logic [35:0] rx_sym;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_sr    <= '0;
      rx_cnt   <= '0;
      rx_sym_v <= 1'b0;
    end else begin
      rx_sym_v <= 1'b0;
      if (rx_cnt == 0) begin
        if (rx_lanes != '0) begin
          rx_sr  <= {rx_sr[SYM_W-LANE_W-1:0], rx_lanes};
          rx_cnt <= 1;
        end
      end else begin
        rx_sr <= {rx_sr[SYM_W-LANE_W-1:0], rx_lanes};
        if (32'(rx_cnt) == SYM_NIB - 1) begin
          rx_cnt   <= '0;
          rx_sym_v <= 1'b1;
        end else begin
          rx_cnt <= rx_cnt + 1'b1;
        end
      end
    end
  end
  assign rx_sym = rx_sr[SYM_W-1 -: 36];

  wire [1:0]  rs_type = rx_sym[35:34];
  wire        rs_vc   = rx_sym[32];
  wire [31:0] rs_data = rx_sym[33] ? ~rx_sym[31:0] : rx_sym[31:0];
  wire        rs_pair = (rs_data[31:16] == ~rs_data[15:0]);

  // peer status received in CTRL symbols
  logic [1:0] peer_stop;
  logic       got_ack, got_nack;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      peer_stop <= '0;
      got_ack   <= 1'b0;
      got_nack  <= 1'b0;
    end else begin
      got_ack  <= 1'b0;
      got_nack <= 1'b0;
      if (rx_sym_v && rs_type == T_CTRL && rs_pair) begin
        peer_stop <= rs_data[1:0];
        got_ack   <= rs_data[3];
        got_nack  <= rs_data[2];
      end
    end
  end

  // receive packet state machine
  typedef enum logic [2:0] {Q_HDR, Q_HCHK, Q_PAY, Q_FTR, Q_FCHK} qstate_t;
  qstate_t q;
  logic [2:0]  q_hidx;
  logic [8:0]  q_len, q_cnt;
  logic        q_vc;
  logic [15:0] q_crc;       // CRC of the envelope part being received
  logic [15:0] q_pcrc;      // CRC of the payload
  logic        send_ack, send_nack;

  logic [1:0]  f_wr, f_commit, f_rollback, f_valid, f_ready;
  flit_t       f_wdata;
  flit_t       f_out [2];
  logic [$clog2(RX_DEPTH):0] f_free [2];

  wire rx_data = rx_sym_v && rs_type == T_DATA;
  wire rx_chk  = rx_sym_v && rs_type == T_CHECK;
  wire chk_ok  = rs_pair && (rs_data[15:0] == q_crc);

  always_comb begin
    f_wr       = '0;
    f_commit   = '0;
    f_rollback = '0;
    f_wdata    = '0;
    f_wdata.data = rs_data;
    send_ack   = 1'b0;
    send_nack  = 1'b0;
    case (q)
      Q_HDR: begin
        f_wdata.sop = (q_hidx == 0);
        if (rx_data) f_wr[(q_hidx == 0) ? rs_vc : q_vc] = 1'b1;
      end
      Q_HCHK: if (rx_chk) begin
        send_ack           = chk_ok;
        send_nack          = !chk_ok;
        f_commit[q_vc]     = chk_ok;
        f_rollback[q_vc]   = !chk_ok;
      end
      Q_PAY: if (rx_data) begin
        f_wr[q_vc]     = 1'b1;
        f_commit[q_vc] = 1'b1;
      end
      Q_FTR: begin
        f_wdata.eop        = 1'b1;
        f_wdata.data[15:8] = rs_data[15:8] + 8'd1;
        f_wdata.data[0]    = rs_data[0] | (rs_data[31:16] != q_pcrc);
        if (rx_data) f_wr[q_vc] = 1'b1;
      end
      Q_FCHK: if (rx_chk) begin
        send_ack         = chk_ok;
        send_nack        = !chk_ok;
        f_commit[q_vc]   = chk_ok;
        f_rollback[q_vc] = !chk_ok;
      end
      default: ;
    endcase
  end

  assign crc_error = (rx_chk && (q == Q_HCHK || q == Q_FCHK) && !chk_ok) ||
                     (rx_data && q == Q_FTR && rs_data[31:16] != q_pcrc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q      <= Q_HDR;
      q_hidx <= '0;
      q_len  <= '0;
      q_cnt  <= '0;
      q_vc   <= 1'b0;
      q_crc  <= '0;
      q_pcrc <= '0;
    end else begin
      case (q)
        Q_HDR: if (rx_data) begin
          q_crc <= crc16_word((q_hidx == 0) ? 16'd0 : q_crc, rs_data);
          if (q_hidx == 0) begin
            q_vc  <= rs_vc;
            q_len <= nh0_len(rs_data);
          end
          if (q_hidx == 3'(HDR_WORDS - 1)) begin
            q_hidx <= '0;
            q      <= Q_HCHK;
          end else q_hidx <= q_hidx + 1'b1;
        end
        Q_HCHK: if (rx_chk) begin
          q_cnt  <= '0;
          q_pcrc <= '0;
          if (chk_ok) q <= (q_len == 0) ? Q_FTR : Q_PAY;
          else        q <= Q_HDR;
        end
        Q_PAY: if (rx_data) begin
          q_pcrc <= crc16_word(q_pcrc, rs_data);
          q_cnt  <= q_cnt + 1'b1;
          if (q_cnt + 1'b1 == q_len) q <= Q_FTR;
        end
        Q_FTR: if (rx_data) begin
          q_crc <= crc16_word(16'd0, rs_data);
          q     <= Q_FCHK;
        end
        Q_FCHK: if (rx_chk) q <= chk_ok ? Q_HDR : Q_FTR;
        default: q <= Q_HDR;
      endcase
    end
  end

  for (genvar c = 0; c < 2; c++) begin : g_rxq
    dnp_spec_fifo #(.WIDTH($bits(flit_t)), .DEPTH(RX_DEPTH)) u_q (
      .clk, .rst_n,
      .wr_en    (f_wr[c]),
      .wr_data  (f_wdata),
      .commit   (f_commit[c]),
      .rollback (f_rollback[c]),
      .out_valid(f_valid[c]),
      .out_ready(f_ready[c]),
      .out_data (f_out[c]),
      .free     (f_free[c])
    );
  end

  // Output towards the switch: VC1 first when both hold words (own choice).
  wire out_sel = f_valid[1] && sw_in_ready[1];
  assign sw_in_valid = out_sel ? 1'b1 : f_valid[0];
  assign sw_in_flit  = out_sel ? f_out[1] : f_out[0];
  assign sw_in_vc    = out_sel;
  assign f_ready[1]  = out_sel;
  assign f_ready[0]  = !out_sel && sw_in_ready[0];

  // Own stop status, reported to the peer.
  logic [1:0] my_stop, sent_stop;
  always_comb
    for (int c = 0; c < 2; c++) my_stop[c] = (32'(f_free[c]) < STOP_THRESH);

  // ======================= transmit side =======================
  typedef enum logic [2:0] {X_IDLE, X_HDR, X_HCHK, X_HWAIT, X_PAY, X_FTR, X_FCHK, X_FWAIT}
    xstate_t;
  xstate_t x;
  word_t       hbuf [HDR_WORDS];
  word_t       fbuf;
  logic        x_resend;
  logic [2:0]  x_hidx;
  logic [8:0]  x_len, x_cnt;
  logic        x_vc;
  logic [15:0] x_crc, x_pcrc;
  logic [15:0] x_wait;

  logic ack_pend, nack_pend;

  // serializer
  logic [SYM_W-1:0] tx_sr;
  logic [$clog2(SYM_NIB+1)-1:0] tx_cnt;
  wire  slot = (tx_cnt == 0);

  // DC balance
  logic signed [15:0] rd;        // running disparity (ones minus zeros) of DATA words
  function automatic logic signed [7:0] disp(input word_t w);
    return 8'($countones(w)) * 8'sd2 - 8'sd32;
  endfunction

  // Symbol chosen for this slot
  logic        sym_v;
  logic [35:0] sym;
  logic        take_sw;     // a word is taken from the switch
  logic        ctrl_go;
  word_t       data_w;
  logic        data_v;

  wire ctrl_need = ack_pend || nack_pend || (my_stop != sent_stop);

  always_comb begin
    data_v  = 1'b0;
    data_w  = '0;
    take_sw = 1'b0;
    case (x)
      X_IDLE: if (sw_out_valid && !peer_stop[sw_out_vc]) begin
        data_v = 1'b1; data_w = sw_out_flit.data; take_sw = 1'b1;
      end
      X_HDR: if (!peer_stop[x_vc]) begin
        if (x_resend) begin
          data_v = 1'b1; data_w = hbuf[x_hidx];
        end else if (sw_out_valid) begin
          data_v = 1'b1; data_w = sw_out_flit.data; take_sw = 1'b1;
        end
      end
      X_PAY: if (!peer_stop[x_vc] && sw_out_valid) begin
        data_v = 1'b1; data_w = sw_out_flit.data; take_sw = 1'b1;
      end
      X_FTR: if (!peer_stop[x_vc]) begin
        if (x_resend) begin
          data_v = 1'b1; data_w = fbuf;
        end else if (sw_out_valid) begin
          data_v = 1'b1; data_w = {x_pcrc, sw_out_flit.data[15:0]}; take_sw = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_comb begin
    logic signed [7:0] d;
    logic inv;
    d       = disp(data_w);
    inv     = (rd > 0 && d > 0) || (rd < 0 && d < 0);
    sym_v   = 1'b0;
    sym     = '0;
    ctrl_go = 1'b0;
    if (slot) begin
      if (ctrl_need) begin
        sym_v   = 1'b1;
        ctrl_go = 1'b1;
        sym     = {T_CTRL, 1'b0, 1'b0, ~{12'd0, ack_pend, nack_pend, my_stop},
                   {12'd0, ack_pend, nack_pend, my_stop}};
      end else if (x == X_HCHK || x == X_FCHK) begin
        sym_v = 1'b1;
        sym   = {T_CHECK, 1'b0, x_vc, ~x_crc, x_crc};
      end else if (data_v) begin
        sym_v = 1'b1;
        sym   = {T_DATA, inv, (x == X_IDLE) ? sw_out_vc : x_vc, inv ? ~data_w : data_w};
      end
    end
  end

  wire data_sent = slot && !ctrl_need && data_v && !(x == X_HCHK || x == X_FCHK);
  wire chk_sent  = slot && !ctrl_need && (x == X_HCHK || x == X_FCHK);
  assign sw_out_ready = data_sent && take_sw;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_sr     <= '0;
      tx_cnt    <= '0;
      tx_lanes  <= '0;
      rd        <= '0;
      ack_pend  <= 1'b0;
      nack_pend <= 1'b0;
      sent_stop <= '0;
    end else begin
      // serializer
      if (slot) begin
        if (sym_v) begin
          tx_sr    <= SYM_W'({sym, {(SYM_W-36){1'b0}}}) << LANE_W;
          tx_lanes <= sym[35 -: LANE_W];
          tx_cnt   <= 1;
        end else begin
          tx_lanes <= '0;
        end
      end else begin
        tx_lanes <= tx_sr[SYM_W-1 -: LANE_W];
        tx_sr    <= tx_sr << LANE_W;
        tx_cnt   <= (32'(tx_cnt) == SYM_NIB - 1) ? '0 : tx_cnt + 1'b1;
      end
      if (data_sent) rd <= rd + (sym[33] ? -16'(disp(data_w)) : 16'(disp(data_w)));
      // pending control
      if (ctrl_go) begin
        ack_pend  <= send_ack;
        nack_pend <= send_nack;
        sent_stop <= my_stop;
      end else begin
        if (send_ack)  ack_pend  <= 1'b1;
        if (send_nack) nack_pend <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x        <= X_IDLE;
      x_resend <= 1'b0;
      x_hidx   <= '0;
      x_len    <= '0;
      x_cnt    <= '0;
      x_vc     <= 1'b0;
      x_crc    <= '0;
      x_pcrc   <= '0;
      x_wait   <= '0;
      fbuf     <= '0;
      timeout_exc <= 1'b0;
      retransmit  <= 1'b0;
      for (int i = 0; i < HDR_WORDS; i++) hbuf[i] <= '0;
    end else begin
      timeout_exc <= 1'b0;
      retransmit  <= 1'b0;
      case (x)
        X_IDLE: if (data_sent) begin
          hbuf[0]  <= data_w;
          x_vc     <= sw_out_vc;
          x_len    <= nh0_len(data_w);
          x_crc    <= crc16_word(16'd0, data_w);
          x_hidx   <= 3'd1;
          x_resend <= 1'b0;
          x        <= X_HDR;
        end
        X_HDR: if (data_sent) begin
          if (!x_resend) hbuf[x_hidx] <= data_w;
          x_crc <= crc16_word(x_crc, data_w);
          if (x_hidx == 3'(HDR_WORDS - 1)) x <= X_HCHK;
          else x_hidx <= x_hidx + 1'b1;
        end
        X_HCHK: if (chk_sent) begin
          x_wait <= '0;
          x      <= X_HWAIT;
        end
        X_HWAIT: begin
          x_wait <= x_wait + 1'b1;
          if (x_wait == cfg.timeout) timeout_exc <= 1'b1;
          if (got_ack) begin
            x_resend <= 1'b0;
            x_cnt    <= '0;
            x_pcrc   <= '0;
            x        <= (x_len == 0) ? X_FTR : X_PAY;
          end else if (got_nack) begin
            x_resend   <= 1'b1;
            retransmit <= 1'b1;
            x_hidx     <= '0;
            x_crc      <= '0;
            x          <= X_HDR;
          end
        end
        X_PAY: if (data_sent) begin
          x_pcrc <= crc16_word(x_pcrc, data_w);
          x_cnt  <= x_cnt + 1'b1;
          if (x_cnt + 1'b1 == x_len) x <= X_FTR;
        end
        X_FTR: if (data_sent) begin
          fbuf  <= data_w;
          x_crc <= crc16_word(16'd0, data_w);
          x     <= X_FCHK;
        end
        X_FCHK: if (chk_sent) begin
          x_wait <= '0;
          x      <= X_FWAIT;
        end
        X_FWAIT: begin
          x_wait <= x_wait + 1'b1;
          if (x_wait == cfg.timeout) timeout_exc <= 1'b1;
          if (got_ack) begin
            x_resend <= 1'b0;
            x        <= X_IDLE;
          end else if (got_nack) begin
            x_resend   <= 1'b1;
            retransmit <= 1'b1;
            x          <= X_FTR;
          end
        end
        default: x <= X_IDLE;
      endcase
    end
  end
endmodule
