// tb_dnp_offchip_if: two off-chip interfaces joined back to back (A's lanes to B and B's
// lanes to A). Both sides send random packets (random VC, 0..40 payload words, some of
// them all-ones words to stress DC balance) and receive with random back-pressure so that
// flow-control stops happen. The A->B wire model frames the 36-bit symbols and flips one
// data bit in some CHECK symbols (forcing a NACK and a resend of a header or footer) and
// in some DATA symbols. Checks: every packet arrives, in order per VC, with exact header
// words and a hop count of 1; the footer error bit is set exactly when the payload
// differs; retransmissions, payload error flags, stops and both VCs each happen; the
// running disparity of the DATA words on the wire stays small.
module tb_dnp_offchip_if;
  import dnp_pkg::*;
  localparam int NPKT = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  cfg_t cfg;
  logic  o_valid [2], o_ready [2], o_vc [2], i_valid [2], i_vc [2];
  logic [1:0] i_ready [2];
  flit_t o_flit [2], i_flit [2];
  logic [3:0] tx [2], rx [2];
  logic crc_err [2], tmo [2], rtx [2];

  for (genvar s = 0; s < 2; s++) begin : g_if
    dnp_offchip_if u_if (
      .clk, .rst_n, .cfg,
      .sw_out_valid(o_valid[s]), .sw_out_ready(o_ready[s]), .sw_out_flit(o_flit[s]), .sw_out_vc(o_vc[s]),
      .sw_in_valid(i_valid[s]), .sw_in_ready(i_ready[s]), .sw_in_flit(i_flit[s]), .sw_in_vc(i_vc[s]),
      .tx_lanes(tx[s]), .rx_lanes(rx[s]),
      .crc_error(crc_err[s]), .timeout_exc(tmo[s]), .retransmit(rtx[s])
    );
  end

  // ---- wire model: A->B with bit flips, B->A clean ----
  int fr_cnt = 0, n_chk_flip = 0, n_dat_flip = 0;
  logic [1:0] fr_type = '0;
  logic fr_hit = 1'b0;
  logic [3:0] flip;
  logic signed [31:0] wire_rd = 0;
  logic [35:0] fr_sym = '0;
  always_comb begin
    flip = (fr_cnt == 5 && fr_hit) ? 4'b0010 : 4'b0000;
    rx[1] = tx[0] ^ flip;
    rx[0] = tx[1];
  end
  always @(posedge clk) begin
    if (fr_cnt == 0) begin
      if (tx[0] != '0) begin
        fr_cnt  <= 1;
        fr_type <= tx[0][3:2];
        fr_sym  <= {32'd0, tx[0]};
        fr_hit  <= (tx[0][3:2] == 2'b10) ? ($urandom % 6 == 0) :
                   (tx[0][3:2] == 2'b01) ? ($urandom % 60 == 0) : 1'b0;
      end
    end else begin
      if (flip != '0) begin
        if (fr_type == 2'b10) n_chk_flip++; else n_dat_flip++;
      end
      fr_sym <= {fr_sym[31:0], tx[0]};
      if (fr_cnt == 8) begin
        fr_cnt <= 0;
        fr_hit <= 1'b0;
        if (fr_type == 2'b01) wire_rd <= wire_rd + 2 * $countones({fr_sym[27:0], tx[0]}) - 32;
      end else fr_cnt <= fr_cnt + 1;
    end
  end

  // ---- traffic ----
  typedef struct { int len; int vc; word_t w[$]; } pkt_t;
  pkt_t exp_q [2][2][$];       // [receiving side][vc]
  int got = 0, err_pkts = 0, vc_used [2] = '{0, 0}, stops = 0, max_rd = 0;

  function automatic word_t ftr0(); return 32'h0000_0000; endfunction

  for (genvar s = 0; s < 2; s++) begin : g_src
    initial begin
      o_valid[s] = 1'b0; o_vc[s] = 1'b0; o_flit[s] = '0;
      @(posedge rst_n);
      for (int q = 0; q < NPKT; q++) begin
        pkt_t p;
        p.w = {};
        p.len = $urandom % 41;
        p.vc  = $urandom % 2;
        p.w.push_back({6'(q), 12'(s), 1'b0, 2'd0, 2'b00, 9'(p.len)});
        p.w.push_back({18'(q * 7 + s), 14'd0});
        for (int k = 0; k < 3; k++) p.w.push_back($urandom);
        for (int k = 0; k < p.len; k++) p.w.push_back(q % 3 == 0 ? 32'hFFFF_FFFF - k : $urandom);
        p.w.push_back(ftr0());
        exp_q[1-s][p.vc].push_back(p);
        vc_used[p.vc]++;
        for (int k = 0; k < p.w.size(); k++) begin
          @(negedge clk);
          o_valid[s] = 1'b1; o_vc[s] = 1'(p.vc);
          o_flit[s].data = p.w[k]; o_flit[s].sop = (k == 0); o_flit[s].eop = (k == p.w.size() - 1);
          @(posedge clk); while (!o_ready[s]) @(posedge clk);
          #1 o_valid[s] = 1'b0;
        end
      end
    end

    initial begin
      pkt_t cur [2];
      int k [2];
      logic bad [2];
      k = '{0, 0};
      bad = '{0, 0};
      i_ready[s] = '0;
      forever begin
        @(negedge clk);
        // long pauses so that the receive FIFOs fill and stop the sender
        i_ready[s] = ((($time / 4000) % 3) == 2) ? 2'b00 : {$urandom % 4 != 0, $urandom % 4 != 0};
        @(posedge clk);
        if (i_valid[s] && i_ready[s][i_vc[s]]) begin
          int v;
          v = i_vc[s];
          if (k[v] == 0) begin
            check(i_flit[s].sop, "sop");
            if (exp_q[s][v].size() == 0) begin check(0, "unexpected packet"); cur[v].w = {}; end
            else cur[v] = exp_q[s][v].pop_front();
            bad[v] = 1'b0;
          end
          if (k[v] < cur[v].w.size()) begin
            if (k[v] < 5) check(i_flit[s].data == cur[v].w[k[v]], $sformatf("header word %0d side %0d", k[v], s));
            else if (k[v] < cur[v].w.size() - 1) begin
              if (i_flit[s].data != cur[v].w[k[v]]) bad[v] = 1'b1;
            end else begin
              check(i_flit[s].eop, "eop at footer");
              check(i_flit[s].data[15:8] == 8'd1, "hop count incremented");
              check(i_flit[s].data[0] == bad[v], $sformatf("error bit matches payload damage side %0d", s));
              if (bad[v]) err_pkts++;
              got++;
            end
          end
          k[v] = i_flit[s].eop ? 0 : k[v] + 1;
        end
      end
    end
  end

  always @(posedge clk) begin
    if (g_if[0].u_if.peer_stop != '0) stops++;
    if (wire_rd > max_rd) max_rd = wire_rd;
    if (-wire_rd > max_rd) max_rd = -wire_rd;
  end
  int n_rtx = 0, n_crc = 0, n_tmo = 0;
  always @(posedge clk) begin
    if (rtx[0]) n_rtx++;
    if (crc_err[1]) n_crc++;
    if (rst_n && (tmo[0] || tmo[1])) n_tmo++;
  end

  initial begin
    #40000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    cfg = '0;
    cfg.timeout = 16'd2000;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (got == 2 * NPKT);
    repeat (50) @(posedge clk);
    $display("packets %0d payload-error %0d rtx %0d chk-flips %0d data-flips %0d stop-cycles %0d max|disparity| %0d vc0 %0d vc1 %0d",
             got, err_pkts, n_rtx, n_chk_flip, n_dat_flip, stops, max_rd, vc_used[0], vc_used[1]);
    check(n_rtx > 0, "retransmission happened");
    check(n_rtx >= n_chk_flip, "every corrupted CHECK caused a resend");
    check(err_pkts > 0, "payload error flagged");
    check(n_crc > 0, "crc_error pulses");
    check(stops > 0, "flow-control stop happened");
    check(vc_used[0] > 0 && vc_used[1] > 0, "both VCs used");
    check(max_rd < 200, "running disparity bounded");
    check(n_tmo == 0, "no time-out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
