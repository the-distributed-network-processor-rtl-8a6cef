// tb_dnp_hops: multi-hop test on a ring of four DNPs along X (torus 4 x 1 x 1), every
// DNP at its default size. Node k has address x = k; its X+ port drives the X- port of
// node k+1 and its X- port drives the X+ port of node k-1, so each port pair carries
// both directions, as in a real cable. Each master port has a zero-wait behavioural
// AHB memory; the NoC ports are left idle.
// Measurement: a one-word PUT from node 0 to node 1 (one hop) and to node 2 (two hops,
// through node 1, which holds the packet only in its switch and writes nothing to its
// own memories). Latency runs from the command entering the CMD FIFO to the first
// payload write on the destination bus. The original design reports about 250 cycles
// for one off-chip hop and about 100 more per extra hop, thanks to wormhole forwarding;
// both are checked as upper bounds. A 256-word PUT over two hops checks the data and
// that the forwarding node stays off its own buses. The 2-hop packet leaves node 0 on
// X+ and never crosses the wrap-around link 3 -> 0, so it stays on VC0.

`timescale 1ns/1ps
module tb_dnp_hops;
  import dnp_pkg::*;
  localparam int L = 2, M = 6, N = 1, K = 4;
  localparam int CQB = 3000, CQS = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- four DNPs ----------------
  logic        s_hsel [K], s_hwrite [K], s_hreadyout [K], s_hresp [K];
  logic [31:0] s_haddr [K], s_hwdata [K], s_hrdata [K];
  logic [1:0]  s_htrans [K];
  logic [31:0] m_haddr [K][L], m_hwdata [K][L], m_hrdata [K][L];
  logic [1:0]  m_htrans [K][L];
  logic [2:0]  m_hsize [K][L], m_hburst [K][L];
  logic [L-1:0] m_hwrite [K], m_hready [K];
  logic [3:0]  tx_lanes [K][M], rx_lanes [K][M];
  logic [N-1:0] noc_tx_req [K], noc_rx_gnt [K];
  flit_t       noc_tx_flit [K][N];
  flit_t       noc_idle [N];

  assign noc_idle[0] = '0;

  for (genvar d = 0; d < K; d++) begin : g_dnp
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
      .noc_tx_req(noc_tx_req[d]), .noc_tx_flit(noc_tx_flit[d]), .noc_tx_gnt('0),
      .noc_rx_req('0), .noc_rx_flit(noc_idle), .noc_rx_gnt(noc_rx_gnt[d])
    );
    for (genvar p = 0; p < L; p++) begin : g_mem
      tb_ahb_mem #(.WORDS(4096), .WAIT_PCT(0)) u_mem (
        .hclk(clk), .haddr(m_haddr[d][p]), .htrans(m_htrans[d][p]), .hwrite(m_hwrite[d][p]),
        .hwdata(m_hwdata[d][p]), .hready(m_hready[d][p]), .hrdata(m_hrdata[d][p])
      );
    end
  end

  function automatic word_t mem_rd(int d, int p, int a);
    case (d * 2 + p)
      0: return g_dnp[0].g_mem[0].u_mem.mem[a];
      1: return g_dnp[0].g_mem[1].u_mem.mem[a];
      2: return g_dnp[1].g_mem[0].u_mem.mem[a];
      3: return g_dnp[1].g_mem[1].u_mem.mem[a];
      4: return g_dnp[2].g_mem[0].u_mem.mem[a];
      5: return g_dnp[2].g_mem[1].u_mem.mem[a];
      6: return g_dnp[3].g_mem[0].u_mem.mem[a];
      default: return g_dnp[3].g_mem[1].u_mem.mem[a];
    endcase
  endfunction
  task automatic mem_wr(int d, int p, int a, word_t v);
    case (d * 2 + p)
      0: g_dnp[0].g_mem[0].u_mem.mem[a] = v;
      1: g_dnp[0].g_mem[1].u_mem.mem[a] = v;
      2: g_dnp[1].g_mem[0].u_mem.mem[a] = v;
      3: g_dnp[1].g_mem[1].u_mem.mem[a] = v;
      4: g_dnp[2].g_mem[0].u_mem.mem[a] = v;
      5: g_dnp[2].g_mem[1].u_mem.mem[a] = v;
      6: g_dnp[3].g_mem[0].u_mem.mem[a] = v;
      default: g_dnp[3].g_mem[1].u_mem.mem[a] = v;
    endcase
  endtask

  // ---------------- X ring: port 0 is X+, port 1 is X- ----------------
  always_comb begin
    for (int d = 0; d < K; d++) begin
      for (int j = 0; j < M; j++) rx_lanes[d][j] = '0;
      rx_lanes[d][1] = tx_lanes[(d + K - 1) % K][0];   // X+ of node d-1 -> X- of node d
      rx_lanes[d][0] = tx_lanes[(d + 1) % K][1];       // X- of node d+1 -> X+ of node d
    end
  end

  // ---------------- bus write monitor ----------------
  int cyc = 0;
  int first_wr [K][L], n_wr [K][L];
  always @(posedge clk) begin
    cyc++;
    for (int d = 0; d < K; d++)
      for (int p = 0; p < L; p++)
        if (m_htrans[d][p] == 2'b10 && m_hwrite[d][p] && m_hready[d][p]) begin
          if (first_wr[d][p] < 0) first_wr[d][p] = cyc;
          n_wr[d][p]++;
        end
  end
  task automatic arm_wr();
    for (int d = 0; d < K; d++)
      for (int p = 0; p < L; p++) begin first_wr[d][p] = -1; n_wr[d][p] = 0; end
  endtask

  // ---------------- AHB slave access ----------------
  initial for (int d = 0; d < K; d++) begin
    s_hsel[d] = 1'b0; s_haddr[d] = '0; s_htrans[d] = '0; s_hwrite[d] = 1'b0; s_hwdata[d] = '0;
  end

  task automatic ahb_wr(int d, logic [31:0] addr, word_t data);
    @(negedge clk);
    s_hsel[d] = 1'b1; s_haddr[d] = addr; s_htrans[d] = 2'b10; s_hwrite[d] = 1'b1;
    @(posedge clk); while (!s_hreadyout[d]) @(posedge clk);
    #1 s_htrans[d] = 2'b00; s_hsel[d] = 1'b0; s_hwdata[d] = data;
    @(posedge clk); while (!s_hreadyout[d]) @(posedge clk);
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

  task automatic wait_copy(int sd, int sa, int dd, int da, int len, string what);
    int ok, t;
    t = 0;
    do begin
      repeat (50) @(posedge clk);
      t += 50;
      ok = 1;
      for (int i = 0; i < len; i++) if (mem_rd(dd, 0, da + i) !== mem_rd(sd, 0, sa + i)) ok = 0;
    end while (!ok && t < 20000);
    check(ok == 1, $sformatf("%s: data arrived", what));
    repeat (300) @(posedge clk);
  endtask

  function automatic logic [17:0] node(int k);
    return 18'(k) << 12;
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0, lat1, lat2;
    for (int d = 0; d < K; d++) for (int a = 0; a < 1024; a++) mem_wr(d, 0, a, $urandom);
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    for (int d = 0; d < K; d++) begin
      reg_wr(d, 1, 32'(node(d)));
      reg_wr(d, 3, 32'h0001_0104);      // torus 4 x 1 x 1
      reg_wr(d, 5, CQB);
      reg_wr(d, 6, CQS);
      reg_wr(d, 9, 5000);
      lut_wr(d, 0, 0, 1000); lut_wr(d, 0, 1, 1024); lut_wr(d, 0, 2, 1);
    end

    // one hop: node 0 -> node 1
    arm_wr();
    cmd_push(0, OP_PUT, 0, 0, node(1), node(0), 10, 1010, 1, 1);
    t0 = cyc;
    wait_copy(0, 10, 1, 1010, 1, "1-hop PUT");
    lat1 = first_wr[1][0] - t0;

    // two hops: node 0 -> node 1 -> node 2
    arm_wr();
    cmd_push(0, OP_PUT, 0, 0, node(2), node(0), 20, 1020, 1, 2);
    t0 = cyc;
    wait_copy(0, 20, 2, 1020, 1, "2-hop PUT");
    lat2 = first_wr[2][0] - t0;
    check(n_wr[1][0] == 0 && n_wr[1][1] == 0, "forwarding node writes nothing to its buses");

    $display("latency: 1 hop %0d cycles, 2 hops %0d cycles, extra hop %0d cycles",
             lat1, lat2, lat2 - lat1);
    check(lat1 > 0 && lat1 <= 250, "single-hop off-chip latency within 250 cycles");
    check(lat2 > lat1 && lat2 - lat1 <= 100, "extra hop costs at most 100 cycles");

    // 256 words over two hops
    arm_wr();
    cmd_push(0, OP_PUT, 0, 0, node(2), node(0), 100, 1100, 256, 3);
    wait_copy(0, 100, 2, 1100, 256, "2-hop PUT 256");
    check(n_wr[1][0] == 0 && n_wr[1][1] == 0, "forwarding node idle on its buses (256 words)");
    check(n_wr[2][0] == 256 + 4, "destination writes payload and one 4-word event");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
