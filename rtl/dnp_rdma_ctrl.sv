// dnp_rdma_ctrl: the RDMA controller (RDMA ctrl). It wraps the LUT and writes completion
// events into the completion queue (CQ).
//  Lookups: the L master ports ask for LUT lookups; one is served at a time, the lowest
//  requesting port first (own choice), and the answer is returned to that port only.
//  Events: the engine (source L) and the L master ports (sources 0..L-1) post completion
//  events. One at a time, the lowest source index first, each 4-word event is written into
//  the CQ, a ring buffer in tile memory at cfg.cq_base of cfg.cq_size words, through the
//  cq_wr_* channel (shared with master port 0's write channel). The write pointer (words)
//  is published to the registers; software publishes its read pointer in cfg.cq_rp. The
//  writer starts an event only while the ring has room for two events (8 words), so a full ring is never
//  overwritten (own choice; the paper says only that the CQ is a ring buffer the DNP writes
//  and software reads).
module dnp_rdma_ctrl
  import dnp_pkg::*;
#(
  parameter int unsigned L           = 2,
  parameter int unsigned LUT_ENTRIES = 16,
  localparam int unsigned SW_AW      = $clog2(LUT_ENTRIES) + 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  cfg_t   cfg,
  // software access to the LUT
  input  logic   sw_wr,
  input  logic [SW_AW-1:0] sw_addr,
  input  word_t  sw_wdata,
  output word_t  sw_rdata,
  // lookups from the master ports
  input  logic [L-1:0] lk_req,
  input  logic [L-1:0] lk_send,
  input  word_t  lk_addr [L],
  input  logic [LEN_W-1:0] lk_len [L],
  output logic [L-1:0] lk_done,
  output logic   lk_hit,
  output word_t  lk_base,
  // events: 0..L-1 master ports, L engine
  input  logic [L:0] ev_valid,
  output logic [L:0] ev_ready,
  input  event_t ev_in [L+1],
  // CQ writes
  output logic   cq_wr_req,
  output word_t  cq_wr_addr,
  output word_t  cq_wr_data,
  input  logic   cq_wr_gnt,
  output logic [15:0] cq_wp
);
  // ---------------- LUT lookups ----------------
  logic       lk_busy;
  logic [1:0] lk_owner;
  logic       lut_done;
  logic [$clog2(LUT_ENTRIES)-1:0] unused_idx;

  logic       lk_any;
  logic [1:0] lk_sel;
  always_comb begin
    lk_any = 1'b0;
    lk_sel = '0;
    for (int i = L - 1; i >= 0; i--)
      if (lk_req[i]) begin
        lk_any = 1'b1;
        lk_sel = 2'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_busy  <= 1'b0;
      lk_owner <= '0;
    end else if (!lk_busy) begin
      if (lk_any) begin
        lk_busy  <= 1'b1;
        lk_owner <= lk_sel;
      end
    end else if (lut_done) begin
      lk_busy <= 1'b0;
    end
  end

  always_comb begin
    lk_done = '0;
    if (lut_done) lk_done[lk_owner] = 1'b1;
  end

  dnp_lut #(.ENTRIES(LUT_ENTRIES)) u_lut (
    .clk, .rst_n,
    .sw_wr, .sw_addr, .sw_wdata, .sw_rdata,
    .lk_req  (lk_busy && !lut_done),
    .lk_send (lk_send[lk_owner]),
    .lk_addr (lk_addr[lk_owner]),
    .lk_len  (lk_len[lk_owner]),
    .lk_done (lut_done),
    .lk_hit  (lk_hit),
    .lk_base (lk_base),
    .lk_index(unused_idx)
  );

  // ---------------- completion queue writer ----------------
  logic       ev_busy;
  event_t     ev_cur;
  logic [1:0] ev_widx;
  logic [15:0] wp;

  logic       ev_any;
  logic [1:0] ev_sel;
  always_comb begin
    ev_any = 1'b0;
    ev_sel = '0;
    for (int i = L; i >= 0; i--)
      if (ev_valid[i]) begin
        ev_any = 1'b1;
        ev_sel = 2'(i);
      end
  end

  // Unread words in the ring; the writer needs room for a whole event plus one slot.
  logic [15:0] used;
  assign used  = (wp >= cfg.cq_rp) ? wp - cfg.cq_rp : wp + cfg.cq_size - cfg.cq_rp;
  wire   room  = (32'(used) + 2 * EVT_WORDS <= 32'(cfg.cq_size));

  always_comb begin
    ev_ready = '0;
    if (!ev_busy && ev_any && room) ev_ready[ev_sel] = 1'b1;
  end

  assign cq_wr_req  = ev_busy;
  assign cq_wr_addr = cfg.cq_base + 32'(wp);
  assign cq_wr_data = event_word(ev_cur, 32'(ev_widx));
  assign cq_wp      = wp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_busy <= 1'b0;
      ev_cur  <= '0;
      ev_widx <= '0;
      wp      <= '0;
    end else begin
      if (!ev_busy) begin
        if (ev_any && room) begin
          ev_busy <= 1'b1;
          ev_cur  <= ev_in[ev_sel];
          ev_widx <= '0;
        end
      end else if (cq_wr_gnt) begin
        ev_widx <= ev_widx + 1'b1;
        wp      <= (wp + 16'd1 >= cfg.cq_size) ? 16'd0 : wp + 16'd1;
        if (ev_widx == 2'(EVT_WORDS - 1)) ev_busy <= 1'b0;
      end
    end
  end
endmodule
