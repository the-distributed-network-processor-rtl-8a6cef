// tb_dnp_top: end-to-end test of two DNPs at their full default size (L=2, M=6, N=1, no
// parameter overrides). DNP A is (0,0,0) and DNP B is (1,0,0) on a 2x1x1 torus: A's X+
// link goes to B's X- input and B's X+ link (the wrap-around) comes back to A's X- input.
// The two DNI ports are joined by a NoC model with random grants. Every master port has
// its own behavioural AHB memory (random wait states on port 0 of B).
// Software actions go through the AHB slave port: registers, LUT records and commands.
// Sequence: LOOPBACK on A; PUT A->B of 600 words (3 packets) with CHECK symbols corrupted
// on the A->B link; SEND A->B; GET issued at A for data in B (served by B, sent back on
// the wrap-around link in VC1); PUT to an unregistered address (LUT miss); then, with the
// chip mask cleared so that both DNPs count as one chip, a PUT over the NoC and one with a
// payload word corrupted on the NoC. Memory contents, completion-queue events and the
// exception bits are checked. Each mechanism is counted and counts a failure if it never
// happened: fragmentation, back-pressure stall, retransmission, VC1, LUT miss, on-chip
// transfer, CRC error flag, GET service, SEND, LOOPBACK.
// Timing: latency from a command entering the FIFO to the first payload write on the
// destination bus is checked against the original figures (LOOPBACK <= 100 cycles,
// one-word on-chip PUT <= 130, one-word single-hop off-chip PUT <= 250). A 256-word
// LOOPBACK between zero-wait memories must write 256 words in about 256 cycles.
module tb_dnp_top;
  import dnp_pkg::*;
  localparam int L = 2, M = 6, N = 1;
  localparam int CQB = 3000, CQS = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- two DNPs ----------------
  logic        s_hsel [2], s_hwrite [2], s_hreadyout [2], s_hresp [2];
  logic [31:0] s_haddr [2], s_hwdata [2], s_hrdata [2];
  logic [1:0]  s_htrans [2];
  logic [31:0] m_haddr [2][L], m_hwdata [2][L], m_hrdata [2][L];
  logic [1:0]  m_htrans [2][L];
  logic [2:0]  m_hsize [2][L], m_hburst [2][L];
  logic [L-1:0] m_hwrite [2], m_hready [2];
  logic [3:0]  tx_lanes [2][M], rx_lanes [2][M];
  logic [N-1:0] noc_tx_req [2], noc_tx_gnt [2], noc_rx_req [2], noc_rx_gnt [2];
  flit_t       noc_tx_flit [2][N], noc_rx_flit [2][N];

  for (genvar d = 0; d < 2; d++) begin : g_dnp
    dnp_top u_dnp (
      .clk, .rst_n,
      .s_hsel(s_hsel[d]), .s_haddr(s_haddr[d]), .s_htrans(s_htrans[d]),
      .s_hwrite(s_hwrite[d]), .s_hsize(3'd2), .s_hwdata(s_hwdata[d]),
      .s_hready(s_hreadyout[d]), .s_hreadyout(s_hreadyout[d]), .s_hrdata(s_hrdata[d]),
      .s_hresp(s_hresp[d]),
      .m_haddr(m_haddr[d]), .m_htrans(m_htrans[d]), .m_hwrite(m_hwrite[d]),
      .m_hsize(m_hsize[d]), .m_hburst(m_hburst[d]), .m_hwdata(m_hwdata[d]),
      .m_hready(m_hready[d]), .m_hrdata(m_hrdata[d]), .m_hresp('0),
      .tx_lanes(tx_lanes[d]), .rx_lanes(rx_lanes[d]),
      .noc_tx_req(noc_tx_req[d]), .noc_tx_flit(noc_tx_flit[d]), .noc_tx_gnt(noc_tx_gnt[d]),
      .noc_rx_req(noc_rx_req[d]), .noc_rx_flit(noc_rx_flit[d]), .noc_rx_gnt(noc_rx_gnt[d])
    );
    for (genvar p = 0; p < L; p++) begin : g_mem
      tb_ahb_mem #(.WORDS(4096), .WAIT_PCT((d == 1 && p == 0) ? 20 : 0)) u_mem (
        .hclk(clk), .haddr(m_haddr[d][p]), .htrans(m_htrans[d][p]), .hwrite(m_hwrite[d][p]),
        .hwdata(m_hwdata[d][p]), .hready(m_hready[d][p]), .hrdata(m_hrdata[d][p])
      );
    end
  end

  function automatic word_t mem_rd(int d, int p, int a);
    case ({d[0], p[0]})
      2'b00: return g_dnp[0].g_mem[0].u_mem.mem[a];
      2'b01: return g_dnp[0].g_mem[1].u_mem.mem[a];
      2'b10: return g_dnp[1].g_mem[0].u_mem.mem[a];
      default: return g_dnp[1].g_mem[1].u_mem.mem[a];
    endcase
  endfunction
  task automatic mem_wr(int d, int p, int a, word_t v);
    case ({d[0], p[0]})
      2'b00: g_dnp[0].g_mem[0].u_mem.mem[a] = v;
      2'b01: g_dnp[0].g_mem[1].u_mem.mem[a] = v;
      2'b10: g_dnp[1].g_mem[0].u_mem.mem[a] = v;
      default: g_dnp[1].g_mem[1].u_mem.mem[a] = v;
    endcase
  endtask

  // ---------------- off-chip links, CHECK corruption on A->B ----------------
  int   arm_chk = 0, chk_corrupted = 0;
  int   fr_cnt = 0;
  logic [1:0] fr_type = '0;
  logic [3:0] a2b, flip;
  always_comb begin
    logic [1:0] t;
    int k;
    a2b = tx_lanes[0][0];
    t = (fr_cnt == 0) ? a2b[3:2] : fr_type;
    k = (fr_cnt == 0) ? 0 : fr_cnt;
    flip = (arm_chk > 0 && t == 2'b10 && k == 5 && (fr_cnt != 0)) ? 4'b0001 : 4'b0000;
  end
  always @(posedge clk) begin
    if (fr_cnt == 0) begin
      if (a2b != '0) begin fr_cnt <= 1; fr_type <= a2b[3:2]; end
    end else begin
      if (flip != '0) begin arm_chk <= arm_chk - 1; chk_corrupted++; end
      fr_cnt <= (fr_cnt == 8) ? 0 : fr_cnt + 1;
    end
  end
  always_comb begin
    for (int j = 0; j < M; j++) begin
      rx_lanes[0][j] = '0;
      rx_lanes[1][j] = '0;
    end
    rx_lanes[1][1] = a2b ^ flip;          // A X+ -> B X-
    rx_lanes[0][0] = tx_lanes[1][1];      // B X- -> A X+ (other direction of that pair)
    rx_lanes[0][1] = tx_lanes[1][0];      // B X+ (wrap) -> A X-
    rx_lanes[1][0] = tx_lanes[0][1];      // A X- -> B X+
  end

  // ---------------- NoC model ----------------
  logic noc_ok [2];
  int   arm_noc = 0, noc_flits = 0, noc_corrupted = 0, noc_widx = 0;
  always @(negedge clk) begin
    noc_ok[0] <= ($urandom % 4) != 0;
    noc_ok[1] <= ($urandom % 4) != 0;
  end
  always_comb begin
    for (int d = 0; d < 2; d++) begin
      noc_rx_req[1-d][0]  = noc_tx_req[d][0] && noc_ok[d];
      noc_rx_flit[1-d][0] = noc_tx_flit[d][0];
      noc_tx_gnt[d][0]    = noc_rx_gnt[1-d][0] && noc_ok[d];
    end
    if (arm_noc > 0 && noc_widx == 7) noc_rx_flit[1][0].data = noc_tx_flit[0][0].data ^ 32'h0000_0100;
  end
  always @(posedge clk) begin
    if (noc_tx_req[0][0] && noc_tx_gnt[0][0]) begin
      noc_flits++;
      if (arm_noc > 0 && noc_widx == 7) begin arm_noc <= arm_noc - 1; noc_corrupted++; end
      noc_widx <= noc_tx_flit[0][0].eop ? 0 : noc_widx + 1;
    end
    if (noc_tx_req[1][0] && noc_tx_gnt[1][0]) noc_flits++;
  end

  // ---------------- bus write monitor (latency and rate) ----------------
  int cyc = 0;
  int first_wr [2][L], last_wr [2][L], n_wr [2][L];
  always @(posedge clk) begin
    cyc++;
    for (int d = 0; d < 2; d++)
      for (int p = 0; p < L; p++)
        if (m_htrans[d][p] == 2'b10 && m_hwrite[d][p] && m_hready[d][p]) begin
          if (first_wr[d][p] < 0) first_wr[d][p] = cyc;
          last_wr[d][p] = cyc;
          n_wr[d][p]++;
        end
  end
  task automatic arm_wr();
    for (int d = 0; d < 2; d++)
      for (int p = 0; p < L; p++) begin first_wr[d][p] = -1; n_wr[d][p] = 0; end
  endtask

  // ---------------- mechanism counters ----------------
  int stall_cycles = 0, rtx = 0, vc1_pkts = 0, frag_pkts = 0;
  always @(posedge clk) begin
    if (g_dnp[0].u_dnp.so_valid[L] && !g_dnp[0].u_dnp.so_ready[L]) stall_cycles++;
    if (g_dnp[0].u_dnp.g_off[0].u_off.retransmit) rtx++;
    if (g_dnp[1].u_dnp.so_valid[L] && g_dnp[1].u_dnp.so_ready[L] &&
        g_dnp[1].u_dnp.so_flit[L].sop && g_dnp[1].u_dnp.so_vc[L]) vc1_pkts++;
    if (g_dnp[0].u_dnp.so_valid[L] && g_dnp[0].u_dnp.so_ready[L] &&
        g_dnp[0].u_dnp.so_flit[L].sop) frag_pkts++;
  end

  // ---------------- AHB slave access ----------------
  initial for (int d = 0; d < 2; d++) begin
    s_hsel[d] = 1'b0; s_haddr[d] = '0; s_htrans[d] = '0; s_hwrite[d] = 1'b0; s_hwdata[d] = '0;
  end

  task automatic ahb_wr(int d, logic [31:0] addr, word_t data);
    @(negedge clk);
    s_hsel[d] = 1'b1; s_haddr[d] = addr; s_htrans[d] = 2'b10; s_hwrite[d] = 1'b1;
    @(posedge clk); while (!s_hreadyout[d]) @(posedge clk);
    #1 s_htrans[d] = 2'b00; s_hsel[d] = 1'b0; s_hwdata[d] = data;
    @(posedge clk); while (!s_hreadyout[d]) @(posedge clk);
  endtask
  task automatic ahb_rd(int d, logic [31:0] addr, output word_t data);
    @(negedge clk);
    s_hsel[d] = 1'b1; s_haddr[d] = addr; s_htrans[d] = 2'b10; s_hwrite[d] = 1'b0;
    @(posedge clk); while (!s_hreadyout[d]) @(posedge clk);
    #1 s_htrans[d] = 2'b00; s_hsel[d] = 1'b0;
    @(posedge clk); while (!s_hreadyout[d]) @(posedge clk);
    data = s_hrdata[d];
  endtask
  task automatic reg_wr(int d, int r, word_t v);   ahb_wr(d, 32'(r) * 4, v); endtask
  task automatic lut_wr(int d, int e, int f, word_t v); ahb_wr(d, 32'h1000 + 32'(4 * e + f) * 4, v); endtask
  task automatic cmd_push(int d, opcode_t op, int rdp, int wrp, logic [17:0] dst, logic [17:0] src,
                          int sa, int da, int len, int tag);
    ahb_wr(d, 32'h2000, {24'd0, 2'(wrp), 2'(rdp), 1'b0, 1'b1, op});
    ahb_wr(d, 32'h2000, 32'(dst));
    ahb_wr(d, 32'h2000, 32'(src));
    ahb_wr(d, 32'h2000, 32'(sa));
    ahb_wr(d, 32'h2000, 32'(da));
    ahb_wr(d, 32'h2000, 32'(len));
    ahb_wr(d, 32'h2000, 32'(tag));
  endtask

  // wait until a copy is complete in memory (or give up), then let events settle
  task automatic wait_copy(int sd, int sp, int sa, int dd, int dp, int da, int len, string what);
    int ok, t;
    t = 0;
    do begin
      repeat (100) @(posedge clk);
      t += 100;
      ok = 1;
      for (int i = 0; i < len; i++) if (mem_rd(dd, dp, da + i) !== mem_rd(sd, sp, sa + i)) ok = 0;
    end while (!ok && t < 60000);
    check(ok == 1, $sformatf("%s: data arrived (%0d cycles)", what, t));
    $display("%s done after ~%0d cycles", what, t);
    repeat (800) @(posedge clk);
  endtask

  // count events of a type in a DNP's completion queue
  function automatic int ev_count(int d, evt_type_t t, int need_err);
    int n, wp;
    n = 0;
    wp = int'(d == 0 ? g_dnp[0].u_dnp.cq_wp : g_dnp[1].u_dnp.cq_wp);
    for (int i = 0; i < wp; i += 4) begin
      word_t w;
      w = mem_rd(d, 0, CQB + i);
      if (w[31:28] == t && (need_err < 0 || int'(w[27]) == need_err)) n++;
    end
    return n;
  endfunction

  localparam logic [17:0] DA = 18'h00000, DB = 18'h01000;
  initial begin
    #30000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    word_t v;
    int t0;
    for (int d = 0; d < 2; d++) for (int a = 0; a < 1024; a++) begin
      mem_wr(d, 0, a, $urandom);
      mem_wr(d, 1, a, $urandom);
    end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    // configuration
    for (int d = 0; d < 2; d++) begin
      reg_wr(d, 1, d == 0 ? 32'(DA) : 32'(DB));
      reg_wr(d, 3, 32'h0001_0102);      // torus 2 x 1 x 1
      reg_wr(d, 5, CQB);
      reg_wr(d, 6, CQS);
      reg_wr(d, 9, 5000);               // ACK time-out
      lut_wr(d, 0, 0, 1000); lut_wr(d, 0, 1, 1024); lut_wr(d, 0, 2, 1);
      lut_wr(d, 1, 0, 2048); lut_wr(d, 1, 1, 256);  lut_wr(d, 1, 2, 3);   // SEND buffer
    end
    ahb_rd(1, 32'h1000 + 32'(4 * 1 + 0) * 4, v);
    check(v == 2048, "LUT readback");
    ahb_rd(0, 32'd4, v);
    check(v == 32'(DA), "MY_DNP readback");

    // LOOPBACK on A: port0 -> port1. Latency: command in the FIFO to the first write on
    // the destination bus (about 100 cycles in the original design).
    arm_wr();
    cmd_push(0, OP_LOOPBACK, 0, 1, DA, DA, 0, 1000, 40, 1);
    t0 = cyc;
    wait_copy(0, 0, 0, 0, 1, 1000, 40, "LOOPBACK");
    $display("LOOPBACK latency %0d cycles", first_wr[0][1] - t0);
    check(first_wr[0][1] - t0 <= 100, "LOOPBACK latency within 100 cycles");

    // 256-word LOOPBACK with zero-wait memories: one word per cycle on the master ports
    arm_wr();
    cmd_push(0, OP_LOOPBACK, 0, 1, DA, DA, 100, 1100, 256, 8);
    wait_copy(0, 0, 100, 0, 1, 1100, 256, "LOOPBACK 256");
    $display("256 words written in %0d cycles", last_wr[0][1] - first_wr[0][1] + 1);
    check(n_wr[0][1] == 256 && last_wr[0][1] - first_wr[0][1] + 1 <= 256 + 8,
          "intra-tile rate of about 1 word/cycle");

    // single-hop off-chip PUT of one word (about 250 cycles in the original design)
    arm_wr();
    cmd_push(0, OP_PUT, 0, 0, DB, DA, 50, 1050, 1, 9);
    t0 = cyc;
    wait_copy(0, 0, 50, 1, 0, 1050, 1, "PUT 1 word");
    $display("off-chip single-hop latency %0d cycles", first_wr[1][0] - t0);
    check(first_wr[1][0] - t0 <= 250, "off-chip latency within 250 cycles");

    // PUT A->B, 600 words, CHECK symbols corrupted on the way
    arm_chk = 3;
    cmd_push(0, OP_PUT, 0, 0, DB, DA, 100, 1100, 600, 2);
    wait_copy(0, 0, 100, 1, 0, 1100, 600, "PUT");

    // SEND A->B lands in B's SEND buffer (LUT entry 1)
    cmd_push(0, OP_SEND, 1, 0, DB, DA, 200, 0, 50, 3);
    wait_copy(0, 1, 200, 1, 0, 2048, 50, "SEND");

    // GET at A: B's words 300..369 (port 0) into A's port 0 at 1500
    cmd_push(0, OP_GET, 0, 0, DA, DB, 300, 1500, 70, 4);
    wait_copy(1, 0, 300, 0, 0, 1500, 70, "GET");

    // PUT to an address no LUT entry covers
    mem_wr(1, 0, 3500, 32'h5A5A_5A5A);
    cmd_push(0, OP_PUT, 0, 0, DB, DA, 0, 3500, 10, 5);
    repeat (3000) @(posedge clk);
    check(mem_rd(1, 0, 3500) == 32'h5A5A_5A5A, "LUT miss: nothing written");

    // on-chip: everything is the same chip now
    reg_wr(0, 4, 0); reg_wr(1, 4, 0);
    // single-hop on-chip PUT of one word (about 130 cycles in the original design)
    arm_wr();
    cmd_push(0, OP_PUT, 1, 1, DB, DA, 60, 1060, 1, 10);
    t0 = cyc;
    wait_copy(0, 1, 60, 1, 1, 1060, 1, "on-chip PUT 1 word");
    $display("on-chip single-hop latency %0d cycles", first_wr[1][1] - t0);
    check(first_wr[1][1] - t0 <= 130, "on-chip latency within 130 cycles");
    cmd_push(0, OP_PUT, 1, 1, DB, DA, 0, 1800, 200, 6);
    wait_copy(0, 1, 0, 1, 1, 1800, 200, "on-chip PUT");
    arm_noc = 1;
    cmd_push(0, OP_PUT, 0, 0, DB, DA, 0, 1300, 8, 7);
    repeat (2000) @(posedge clk);

    // events and exceptions
    check(ev_count(0, EV_CMD_DONE, -1) == 10, $sformatf("A: CMD_DONE events %0d", ev_count(0, EV_CMD_DONE, -1)));
    check(ev_count(0, EV_LOOP_RX, 0) == 2, "A: LOOP_RX event");
    check(ev_count(0, EV_PUT_RX, 0) == 1, "A: PUT_RX event for the GET data");
    check(ev_count(1, EV_PUT_RX, 0) == 6, $sformatf("B: clean PUT_RX events %0d", ev_count(1, EV_PUT_RX, 0)));
    check(ev_count(1, EV_PUT_RX, 1) == 1, "B: PUT_RX event with the error flag");
    check(ev_count(1, EV_SEND_RX, 0) == 1, "B: SEND_RX event");
    check(ev_count(1, EV_GET_DONE, -1) == 1, "B: GET_DONE event");
    check(ev_count(1, EV_NO_BUFFER, 1) == 1, "B: NO_BUFFER event");
    ahb_rd(0, 32'd40, v);
    check(v[8 + 3] == 1'b1, "A: retransmit exception");
    ahb_rd(1, 32'd40, v);
    check(v[8 + 0] == 1'b1, "B: off-chip CRC exception");
    check(v[8 + 2] == 1'b1, "B: on-chip CRC exception");
    ahb_rd(1, 32'd28, v);
    check(v == 32'(g_dnp[1].u_dnp.cq_wp), "CQ_WP readback");

    // mechanism counters
    $display("fragments %0d stall %0d retransmit %0d chk-corrupt %0d vc1 %0d noc flits %0d",
             frag_pkts, stall_cycles, rtx, chk_corrupted, vc1_pkts, noc_flits);
    check(frag_pkts >= 3, "fragmentation: several packets left A");
    check(stall_cycles > 0, "back-pressure stall happened");
    check(rtx > 0, "retransmission happened");
    check(vc1_pkts > 0, "VC1 used on the wrap-around link");
    check(noc_flits > 200, "on-chip transfer happened");
    check(noc_corrupted == 1, "NoC corruption injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
