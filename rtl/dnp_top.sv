// dnp_top: one Distributed Network Processor (DNP), in the configuration of the SHAPES
// tile: L = 2 intra-tile master ports, M = 6 off-chip ports (a 3D torus, X+ X- Y+ Y- Z+
// Z-) and N = 1 on-chip port to the NoC (numbers from the paper).
// Structure (the paper's block diagram): the core holds the command FIFO, registers,
// engine, RDMA controller with LUT, the switch with its routing and arbitration, and one
// intra-tile master block per master port. Around it are the interfaces: an AHB-Lite slave
// (software programs the DNP here), L AHB-Lite masters (data in and out of tile memory),
// M off-chip serial interfaces and N on-chip NoC interfaces (DNI).
// Switch port numbering: 0..L-1 master ports, L..L+M-1 off-chip, L+M..L+M+N-1 on-chip.
// The register soft-reset bit resets everything except the registers and the slave port.
// Exception bits (STATUS[15:8]): 0 off-chip CRC error, 1 off-chip ACK time-out,
// 2 on-chip CRC error, 3 off-chip retransmission.
module dnp_top
  import dnp_pkg::*;
#(
  parameter int unsigned L           = 2,
  parameter int unsigned M           = 6,
  parameter int unsigned N           = 1,
  parameter int unsigned BUF_DEPTH   = 16,
  parameter int unsigned CMD_DEPTH   = 8,
  parameter int unsigned LUT_ENTRIES = 16,
  parameter int unsigned LINES       = 2,
  parameter logic [17:0] RESET_DNP   = '0,
  localparam int unsigned P          = L + M + N,
  localparam int unsigned LANE_W     = 2 * LINES
) (
  input  logic        clk,
  input  logic        rst_n,
  // AHB-Lite slave (configuration, LUT, commands)
  input  logic        s_hsel,
  input  logic [31:0] s_haddr,
  input  logic [1:0]  s_htrans,
  input  logic        s_hwrite,
  input  logic [2:0]  s_hsize,
  input  logic [31:0] s_hwdata,
  input  logic        s_hready,
  output logic        s_hreadyout,
  output logic [31:0] s_hrdata,
  output logic        s_hresp,
  // AHB-Lite masters (tile memory)
  output logic [31:0] m_haddr  [L],
  output logic [1:0]  m_htrans [L],
  output logic [L-1:0] m_hwrite,
  output logic [2:0]  m_hsize  [L],
  output logic [2:0]  m_hburst [L],
  output logic [31:0] m_hwdata [L],
  input  logic [L-1:0] m_hready,
  input  logic [31:0] m_hrdata [L],
  input  logic [L-1:0] m_hresp,
  // off-chip serial links
  output logic [LANE_W-1:0] tx_lanes [M],
  input  logic [LANE_W-1:0] rx_lanes [M],
  // on-chip NoC ports
  output logic [N-1:0] noc_tx_req,
  output flit_t       noc_tx_flit [N],
  input  logic [N-1:0] noc_tx_gnt,
  input  logic [N-1:0] noc_rx_req,
  input  flit_t       noc_rx_flit [N],
  output logic [N-1:0] noc_rx_gnt
);
  localparam int unsigned LUT_AW = $clog2(LUT_ENTRIES) + 2;

  cfg_t  cfg;
  logic  soft_reset;
  logic  crst_n;
  assign crst_n = rst_n && !soft_reset;

  // ---------------- slave port, registers, command FIFO ----------------
  logic  reg_wr, lut_wr, cw_valid, cw_ready;
  logic [3:0] reg_addr;
  logic [LUT_AW-1:0] lut_addr;
  word_t reg_wdata, reg_rdata, lut_wdata, lut_rdata, cw_data;
  logic [$clog2(CMD_DEPTH):0] cmd_count;
  logic  cmd_valid, cmd_ready;
  cmd_t  cmd;
  logic [15:0] cq_wp;
  logic  eng_busy;
  logic [7:0] exc_set;

  dnp_ahb_slave #(.LUT_AW(LUT_AW)) u_slave (
    .hclk(clk), .hresetn(rst_n),
    .hsel(s_hsel), .haddr(s_haddr), .htrans(s_htrans), .hwrite(s_hwrite), .hsize(s_hsize),
    .hwdata(s_hwdata), .hready(s_hready), .hreadyout(s_hreadyout), .hrdata(s_hrdata),
    .hresp(s_hresp),
    .reg_wr, .reg_addr, .reg_wdata, .reg_rdata,
    .lut_wr, .lut_addr, .lut_wdata, .lut_rdata,
    .cmd_valid(cw_valid), .cmd_ready(cw_ready), .cmd_data(cw_data),
    .cmd_count(32'(cmd_count))
  );

  dnp_regs #(.RESET_DNP(RESET_DNP)) u_regs (
    .clk, .rst_n,
    .wr_en(reg_wr), .addr(reg_addr), .wdata(reg_wdata), .rdata(reg_rdata),
    .cfg, .soft_reset, .cq_wp, .cmd_empty(!cmd_valid), .eng_busy, .exc_set
  );

  dnp_cmd_fifo #(.CMD_DEPTH(CMD_DEPTH)) u_cmdq (
    .clk, .rst_n(crst_n),
    .word_valid(cw_valid), .word_ready(cw_ready), .word_data(cw_data),
    .cmd_valid, .cmd_ready, .cmd, .cmd_count
  );

  // ---------------- switch ----------------
  logic [P-1:0] si_valid, so_valid, so_ready, si_vc, so_vc;
  flit_t        si_flit [P];
  flit_t        so_flit [P];
  logic [1:0]   si_ready [P];

  dnp_switch #(.L(L), .M(M), .N(N), .BUF_DEPTH(BUF_DEPTH)) u_switch (
    .clk, .rst_n(crst_n), .cfg,
    .in_valid(si_valid), .in_flit(si_flit), .in_vc(si_vc), .in_ready(si_ready),
    .out_valid(so_valid), .out_flit(so_flit), .out_vc(so_vc), .out_ready(so_ready)
  );

  // ---------------- engine, RDMA controller, master ports ----------------
  logic [L-1:0] gs_valid, gs_ready, job_valid, job_ready, job_done;
  cmd_t         gs_cmd [L];
  hdr_t         job_hdr;
  word_t        job_rd_addr, job_word;
  logic         job_inline;
  logic [L:0]   ev_valid, ev_ready;
  event_t       ev_in [L+1];

  dnp_engine #(.L(L)) u_eng (
    .clk, .rst_n(crst_n), .cfg,
    .cmd_valid, .cmd_ready, .cmd,
    .gs_valid, .gs_ready, .gs_cmd,
    .job_valid, .job_ready, .job_hdr, .job_rd_addr, .job_inline, .job_word, .job_done,
    .ev_valid(ev_valid[L]), .ev_ready(ev_ready[L]), .ev(ev_in[L]), .busy(eng_busy)
  );

  logic [L-1:0] lk_req, lk_send, lk_done;
  word_t        lk_addr [L];
  logic [LEN_W-1:0] lk_len [L];
  logic         lk_hit;
  word_t        lk_base;
  logic         cq_wr_req, cq_wr_gnt;
  word_t        cq_wr_addr, cq_wr_data;

  dnp_rdma_ctrl #(.L(L), .LUT_ENTRIES(LUT_ENTRIES)) u_rdma (
    .clk, .rst_n(crst_n), .cfg,
    .sw_wr(lut_wr), .sw_addr(lut_addr), .sw_wdata(lut_wdata), .sw_rdata(lut_rdata),
    .lk_req, .lk_send, .lk_addr, .lk_len, .lk_done, .lk_hit, .lk_base,
    .ev_valid, .ev_ready, .ev_in,
    .cq_wr_req, .cq_wr_addr, .cq_wr_data, .cq_wr_gnt, .cq_wp
  );

  logic [L-1:0] cq_gnt_p;
  assign cq_wr_gnt = cq_gnt_p[0];

  for (genvar i = 0; i < L; i++) begin : g_mst
    logic  rd_req, rd_gnt, rd_rvalid, wr_req, wr_gnt;
    word_t rd_addr, rd_rdata, wr_addr, wr_data;

    dnp_intra_mst #(.PORT_IDX(i)) u_mst (
      .clk, .rst_n(crst_n), .cfg,
      .job_valid(job_valid[i]), .job_ready(job_ready[i]), .job_hdr, .job_rd_addr,
      .job_inline, .job_word, .job_done(job_done[i]),
      .sw_in_valid(si_valid[i]), .sw_in_ready(si_ready[i][0]), .sw_in_flit(si_flit[i]),
      .sw_out_valid(so_valid[i]), .sw_out_ready(so_ready[i]), .sw_out_flit(so_flit[i]),
      .lk_req(lk_req[i]), .lk_send(lk_send[i]), .lk_addr(lk_addr[i]), .lk_len(lk_len[i]),
      .lk_done(lk_done[i]), .lk_hit, .lk_base,
      .gs_valid(gs_valid[i]), .gs_ready(gs_ready[i]), .gs_cmd(gs_cmd[i]),
      .ev_valid(ev_valid[i]), .ev_ready(ev_ready[i]), .ev(ev_in[i]),
      .cq_wr_req (i == 0 ? cq_wr_req : 1'b0),
      .cq_wr_addr(cq_wr_addr), .cq_wr_data(cq_wr_data), .cq_wr_gnt(cq_gnt_p[i]),
      .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata,
      .wr_req, .wr_addr, .wr_data, .wr_gnt
    );
    assign si_vc[i] = 1'b0;

    dnp_ahb_master u_ahbm (
      .hclk(clk), .hresetn(crst_n),
      .haddr(m_haddr[i]), .htrans(m_htrans[i]), .hwrite(m_hwrite[i]), .hsize(m_hsize[i]),
      .hburst(m_hburst[i]), .hwdata(m_hwdata[i]), .hready(m_hready[i]),
      .hrdata(m_hrdata[i]), .hresp(m_hresp[i]),
      .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata,
      .wr_req, .wr_addr, .wr_data, .wr_gnt
    );
  end

  // ---------------- off-chip interfaces ----------------
  logic [M-1:0] oc_crc, oc_tmo, oc_rtx;
  for (genvar j = 0; j < M; j++) begin : g_off
    dnp_offchip_if #(.LINES(LINES)) u_off (
      .clk, .rst_n(crst_n), .cfg,
      .sw_out_valid(so_valid[L+j]), .sw_out_ready(so_ready[L+j]),
      .sw_out_flit(so_flit[L+j]), .sw_out_vc(so_vc[L+j]),
      .sw_in_valid(si_valid[L+j]), .sw_in_ready(si_ready[L+j]),
      .sw_in_flit(si_flit[L+j]), .sw_in_vc(si_vc[L+j]),
      .tx_lanes(tx_lanes[j]), .rx_lanes(rx_lanes[j]),
      .crc_error(oc_crc[j]), .timeout_exc(oc_tmo[j]), .retransmit(oc_rtx[j])
    );
  end

  // ---------------- on-chip interfaces ----------------
  logic [N-1:0] dni_crc;
  for (genvar k = 0; k < N; k++) begin : g_dni
    dnp_dni u_dni (
      .clk, .rst_n(crst_n),
      .sw_out_valid(so_valid[L+M+k]), .sw_out_ready(so_ready[L+M+k]),
      .sw_out_flit(so_flit[L+M+k]),
      .sw_in_valid(si_valid[L+M+k]), .sw_in_ready(si_ready[L+M+k][0]),
      .sw_in_flit(si_flit[L+M+k]),
      .noc_tx_req(noc_tx_req[k]), .noc_tx_flit(noc_tx_flit[k]), .noc_tx_gnt(noc_tx_gnt[k]),
      .noc_rx_req(noc_rx_req[k]), .noc_rx_flit(noc_rx_flit[k]), .noc_rx_gnt(noc_rx_gnt[k]),
      .crc_error(dni_crc[k])
    );
    assign si_vc[L+M+k] = 1'b0;
  end

  assign exc_set = {4'd0, |oc_rtx, |dni_crc, |oc_tmo, |oc_crc};
endmodule
