// tb_dnp_dni: one DNI with its NoC side looped back through a NoC model that grants at
// random (so both req/gnt handshakes stall) and, for some packets, flips a bit of one
// payload word. Checks per packet: header and payload words unchanged (apart from the
// flipped one), the footer carries the CRC-16 of header and payload (reference model from
// the package), the hop count went up by one, the error bit and the crc_error pulse
// appear exactly for the damaged packets. Stalls and damaged packets are counted and
// must happen.
module tb_dnp_dni;
  import dnp_pkg::*;
  localparam int NPKT = 80;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic  so_valid = 1'b0, so_ready, si_valid, si_ready = 1'b0;
  flit_t so_flit = '0, si_flit;
  logic  tx_req, tx_gnt, rx_req, rx_gnt, crc_error;
  flit_t tx_flit, rx_flit;

  dnp_dni dut (
    .clk, .rst_n,
    .sw_out_valid(so_valid), .sw_out_ready(so_ready), .sw_out_flit(so_flit),
    .sw_in_valid(si_valid), .sw_in_ready(si_ready), .sw_in_flit(si_flit),
    .noc_tx_req(tx_req), .noc_tx_flit(tx_flit), .noc_tx_gnt(tx_gnt),
    .noc_rx_req(rx_req), .noc_rx_flit(rx_flit), .noc_rx_gnt(rx_gnt),
    .crc_error
  );

  // NoC model: a small FIFO with random acceptance and delivery
  flit_t nq [$];
  logic  acc = 1'b0, dlv = 1'b0;
  logic  dmg [NPKT];
  int    tx_pkt = 0, tx_w = 0, stalls = 0, n_dmg = 0, n_crc = 0;
  assign tx_gnt = acc && nq.size() < 4;
  assign rx_req = dlv && nq.size() > 0;
  always_comb rx_flit = (nq.size() > 0) ? nq[0] : '0;
  always @(negedge clk) begin
    acc <= ($urandom % 3) != 0;
    dlv <= ($urandom % 3) != 0;
  end
  always @(posedge clk) begin
    if (rx_req && rx_gnt) void'(nq.pop_front());
    if (tx_req && tx_gnt) begin
      flit_t f;
      f = tx_flit;
      if (tx_w == 6 && dmg[tx_pkt]) f.data[3] = ~f.data[3];
      nq.push_back(f);
      tx_w = f.eop ? 0 : tx_w + 1;
      if (f.eop) tx_pkt++;
    end
    if ((tx_req && !tx_gnt) || (si_valid && !si_ready)) stalls++;
    if (rst_n && crc_error) n_crc++;
  end

  int plen [NPKT];
  function automatic word_t pw(int q, int k);
    return {8'(q), 8'(k), 16'hBEEF ^ 16'(q * 31 + k)};
  endfunction

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int q = 0; q < NPKT; q++) begin
      plen[q] = $urandom % 20;
      dmg[q]  = (plen[q] >= 2) && ($urandom % 5 == 0);
      if (dmg[q]) n_dmg++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int q = 0; q < NPKT; q++) begin
      int n;
      n = 5 + plen[q] + 1;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        so_valid = 1'b1;
        so_flit.data = (k == n - 1) ? footer_word(16'h0, 8'd3, 1'b0) : pw(q, k);
        so_flit.sop = (k == 0);
        so_flit.eop = (k == n - 1);
        @(posedge clk); while (!so_ready) @(posedge clk);
        #1 so_valid = 1'b0;
      end
    end
  end

  initial begin
    int q, k;
    logic [15:0] crc;
    q = 0; k = 0; crc = '0;
    wait (rst_n);
    while (q < NPKT) begin
      @(negedge clk);
      si_ready = ($urandom % 4) != 0;
      @(posedge clk);
      if (si_valid && si_ready) begin
        if (k < 5 + plen[q]) begin
          crc = crc16_word(crc, pw(q, k));
          if (!(dmg[q] && k == 6)) check(si_flit.data == pw(q, k), $sformatf("word %0d of packet %0d", k, q));
          check(si_flit.sop == (k == 0) && !si_flit.eop, "delimiters");
          k++;
        end else begin
          check(si_flit.eop, "eop on footer");
          check(si_flit.data[31:16] == crc, "footer CRC field");
          check(si_flit.data[15:8] == 8'd4, "hop count incremented");
          check(si_flit.data[0] == dmg[q], $sformatf("error bit packet %0d", q));
          k = 0; crc = '0; q++;
        end
      end
    end
    repeat (5) @(posedge clk);
    $display("packets %0d damaged %0d crc pulses %0d stalls %0d", q, n_dmg, n_crc, stalls);
    check(n_dmg > 0 && n_crc == n_dmg, "one crc_error pulse per damaged packet");
    check(stalls > 0, "handshake stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
