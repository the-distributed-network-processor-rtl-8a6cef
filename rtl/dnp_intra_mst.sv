// dnp_intra_mst: one intra-tile master port (INTRA-TILE MST). It sits between a switch
// port and the tile bus and works in both directions, like the TX/RX pair in the paper's
// block diagram.
//  TX: takes a packet job from the engine (header plus payload source), pushes the five
//      header words, the payload read from tile memory and a footer into the switch. Reads
//      are issued ahead, up to PREFETCH outstanding, so the payload streams at one word
//      per cycle when memory keeps up (the paper gives 1 word/cycle per intra-tile port).
//  RX: receives a packet from the switch. LOOPBACK data are written at the destination
//      address. PUT/SEND data are written only if the LUT (through the RDMA controller)
//      finds a registered buffer; otherwise the payload is discarded and an EV_NO_BUFFER
//      event is raised (own choice: the paper says only that the operation is carried on
//      only on a match). A GET request packet becomes a GET-serve request to the engine.
//      After the footer a completion event goes to the RDMA controller if the packet asks
//      for one.
// Tile bus (own choice, the paper calls it a proprietary DNP bus): a read channel
// (rd_req/rd_addr accepted by rd_gnt; data back in order on rd_rvalid/rd_rdata, one or more
// cycles later) and a write channel (wr_req/wr_addr/wr_data accepted by wr_gnt). Word
// addresses. The completion-queue writer shares the write channel (cq_wr_*), at lower
// priority than packet data.
module dnp_intra_mst
  import dnp_pkg::*;
#(
  parameter int unsigned PORT_IDX = 0,
  parameter int unsigned PREFETCH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  cfg_t   cfg,
  // jobs from the engine
  input  logic   job_valid,
  output logic   job_ready,
  input  hdr_t   job_hdr,
  input  word_t  job_rd_addr,
  input  logic   job_inline,
  input  word_t  job_word,
  output logic   job_done,
  // into the switch
  output logic   sw_in_valid,
  input  logic   sw_in_ready,
  output flit_t  sw_in_flit,
  // out of the switch
  input  logic   sw_out_valid,
  output logic   sw_out_ready,
  input  flit_t  sw_out_flit,
  // LUT lookup
  output logic   lk_req,
  output logic   lk_send,
  output word_t  lk_addr,
  output logic [LEN_W-1:0] lk_len,
  input  logic   lk_done,
  input  logic   lk_hit,
  input  word_t  lk_base,
  // GET-serve request to the engine
  output logic   gs_valid,
  input  logic   gs_ready,
  output cmd_t   gs_cmd,
  // completion event
  output logic   ev_valid,
  input  logic   ev_ready,
  output event_t ev,
  // completion-queue writes sharing this port's write channel
  input  logic   cq_wr_req,
  input  word_t  cq_wr_addr,
  input  word_t  cq_wr_data,
  output logic   cq_wr_gnt,
  // tile bus
  output logic   rd_req,
  output word_t  rd_addr,
  input  logic   rd_gnt,
  input  logic   rd_rvalid,
  input  word_t  rd_rdata,
  output logic   wr_req,
  output word_t  wr_addr,
  output word_t  wr_data,
  input  logic   wr_gnt
);
  localparam int unsigned PFW = $clog2(PREFETCH) + 1;

  // ===================== TX =====================
  typedef enum logic [1:0] {T_IDLE, T_HDR, T_PAY, T_FTR} tstate_t;
  tstate_t tstate;
  hdr_t    thdr;
  word_t   t_base;
  logic    t_inline;
  word_t   t_word;
  logic [2:0] t_hidx;
  logic [8:0] t_issued, t_sent;
  logic [PFW-1:0] t_outst;

  logic  pf_valid, pf_pop;
  word_t pf_data;
  logic [PFW-1:0] pf_cnt;
  logic  unused_pf_ready;

  dnp_fifo #(.WIDTH(WORD_W), .DEPTH(PREFETCH)) u_pf (
    .clk, .rst_n,
    .in_valid (rd_rvalid),
    .in_ready (unused_pf_ready),
    .in_data  (rd_rdata),
    .out_valid(pf_valid),
    .out_ready(pf_pop),
    .out_data (pf_data),
    .count    (pf_cnt)
  );

  assign job_ready = (tstate == T_IDLE);
  assign rd_req    = (tstate == T_HDR || tstate == T_PAY) && !t_inline &&
                     (t_issued < thdr.pkt_len) && (32'(t_outst) + 32'(pf_cnt) < PREFETCH);
  assign rd_addr   = t_base + 32'(t_issued);

  always_comb begin
    sw_in_valid = 1'b0;
    sw_in_flit  = '0;
    pf_pop      = 1'b0;
    case (tstate)
      T_HDR: begin
        sw_in_valid     = 1'b1;
        sw_in_flit.data = hdr_word(thdr, 32'(t_hidx));
        sw_in_flit.sop  = (t_hidx == 3'd0);
      end
      T_PAY: begin
        sw_in_valid     = t_inline || pf_valid;
        sw_in_flit.data = t_inline ? t_word : pf_data;
        pf_pop          = !t_inline && sw_in_ready;
      end
      T_FTR: begin
        sw_in_valid     = 1'b1;
        sw_in_flit.data = footer_word(16'd0, 8'd0, 1'b0);
        sw_in_flit.eop  = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate   <= T_IDLE;
      thdr     <= '0;
      t_base   <= '0;
      t_inline <= 1'b0;
      t_word   <= '0;
      t_hidx   <= '0;
      t_issued <= '0;
      t_sent   <= '0;
      t_outst  <= '0;
      job_done <= 1'b0;
    end else begin
      job_done <= 1'b0;
      t_outst  <= t_outst + PFW'(rd_req && rd_gnt) - PFW'(rd_rvalid);
      if (rd_req && rd_gnt) t_issued <= t_issued + 1'b1;
      case (tstate)
        T_IDLE: if (job_valid) begin
          thdr     <= job_hdr;
          t_base   <= job_rd_addr;
          t_inline <= job_inline;
          t_word   <= job_word;
          t_hidx   <= '0;
          t_issued <= '0;
          t_sent   <= '0;
          tstate   <= T_HDR;
        end
        T_HDR: if (sw_in_ready) begin
          t_hidx <= t_hidx + 1'b1;
          if (t_hidx == 3'(HDR_WORDS - 1))
            tstate <= (thdr.pkt_len == 0) ? T_FTR : T_PAY;
        end
        T_PAY: if (sw_in_valid && sw_in_ready) begin
          t_sent <= t_sent + 1'b1;
          if (t_sent + 1'b1 == thdr.pkt_len) tstate <= T_FTR;
        end
        T_FTR: if (sw_in_ready) begin
          job_done <= 1'b1;
          tstate   <= T_IDLE;
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // ===================== RX =====================
  typedef enum logic [2:0] {R_HDR, R_LK, R_PAY, R_FTR, R_GS, R_EV} rstate_t;
  rstate_t rstate;
  word_t   rh [HDR_WORDS];
  logic [2:0] r_hidx;
  logic [8:0] r_cnt;
  logic    r_hit;
  word_t   r_base;
  word_t   r_ftr;
  word_t   r_getdst;

  opcode_t    r_op;
  logic [8:0] r_len;
  logic       r_cq;
  assign r_op  = opcode_t'(rh[2][31:30]);
  assign r_len = nh0_len(rh[0]);
  assign r_cq  = rh[2][28];

  wire r_wr = (rstate == R_PAY) && r_hit && sw_out_valid && (r_op != OP_GET);

  always_comb begin
    case (rstate)
      R_HDR:   sw_out_ready = cfg.rx_en;
      R_PAY:   sw_out_ready = r_wr ? wr_gnt : 1'b1;
      R_FTR:   sw_out_ready = 1'b1;
      default: sw_out_ready = 1'b0;
    endcase
  end

  assign lk_req  = (rstate == R_LK);
  assign lk_send = (r_op == OP_SEND);
  assign lk_addr = rh[4];
  assign lk_len  = LEN_W'(r_len);

  // write channel: packet data first, then completion-queue words
  assign wr_req    = r_wr || cq_wr_req;
  assign wr_addr   = r_wr ? r_base + 32'(r_cnt) : cq_wr_addr;
  assign wr_data   = r_wr ? sw_out_flit.data : cq_wr_data;
  assign cq_wr_gnt = wr_gnt && !r_wr;

  always_comb begin
    gs_cmd          = '0;
    gs_cmd.op       = OP_PUT;
    gs_cmd.cq_en    = r_cq;
    gs_cmd.rd_port  = 2'(PORT_IDX);
    gs_cmd.wr_port  = nh0_wr_port(rh[0]);
    gs_cmd.dst_dnp  = r_getdst[DNP_ADDR_W-1:0];
    gs_cmd.src_dnp  = cfg.my_dnp;
    gs_cmd.src_addr = rh[3];
    gs_cmd.dst_addr = rh[4];
    gs_cmd.len      = rh[2][LEN_W-1:0];
    gs_cmd.tag      = {14'd0, rh[1][31:14]};
  end
  assign gs_valid = (rstate == R_GS);

  always_comb begin
    ev      = '0;
    ev.peer = rh[1][31:14];
    ev.addr = r_base;
    ev.len  = LEN_W'(r_len);
    ev.info = r_ftr;
    ev.err  = r_ftr[0] || !r_hit;
    if (!r_hit) ev.etype = EV_NO_BUFFER;
    else case (r_op)
      OP_LOOPBACK: ev.etype = EV_LOOP_RX;
      OP_SEND:     ev.etype = EV_SEND_RX;
      default:     ev.etype = EV_PUT_RX;
    endcase
  end
  assign ev_valid = (rstate == R_EV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate   <= R_HDR;
      r_hidx   <= '0;
      r_cnt    <= '0;
      r_hit    <= 1'b0;
      r_base   <= '0;
      r_ftr    <= '0;
      r_getdst <= '0;
      for (int i = 0; i < HDR_WORDS; i++) rh[i] <= '0;
    end else begin
      case (rstate)
        R_HDR: if (sw_out_valid && sw_out_ready) begin
          rh[r_hidx] <= sw_out_flit.data;
          r_cnt      <= '0;
          if (r_hidx == 3'(HDR_WORDS - 1)) begin
            r_hidx <= '0;
            r_base <= sw_out_flit.data;          // destination address
            case (opcode_t'(rh[2][31:30]))
              OP_LOOPBACK: begin
                r_hit  <= 1'b1;
                rstate <= (nh0_len(rh[0]) == 0) ? R_FTR : R_PAY;
              end
              OP_GET: begin
                r_hit  <= 1'b1;
                rstate <= (nh0_len(rh[0]) == 0) ? R_FTR : R_PAY;
              end
              default: rstate <= R_LK;
            endcase
          end else begin
            r_hidx <= r_hidx + 1'b1;
          end
        end
        R_LK: if (lk_done) begin
          r_hit  <= lk_hit;
          r_base <= lk_base;
          rstate <= (r_len == 0) ? R_FTR : R_PAY;
        end
        R_PAY: if (sw_out_valid && sw_out_ready) begin
          if (r_cnt == 0) r_getdst <= sw_out_flit.data;
          r_cnt <= r_cnt + 1'b1;
          if (r_cnt + 1'b1 == r_len) rstate <= R_FTR;
        end
        R_FTR: if (sw_out_valid) begin
          r_ftr <= sw_out_flit.data;
          if (r_op == OP_GET)        rstate <= R_GS;
          else if (r_cq || !r_hit)   rstate <= R_EV;
          else                       rstate <= R_HDR;
        end
        R_GS: if (gs_ready) rstate <= R_HDR;
        R_EV: if (ev_ready) rstate <= R_HDR;
        default: rstate <= R_HDR;
      endcase
    end
  end

  a_sop_first: assert property (@(posedge clk) disable iff (!rst_n)
    (rstate == R_HDR && r_hidx == 0 && sw_out_valid) |-> sw_out_flit.sop);
  a_eop_last: assert property (@(posedge clk) disable iff (!rst_n)
    (rstate == R_FTR && sw_out_valid) |-> sw_out_flit.eop);
endmodule
