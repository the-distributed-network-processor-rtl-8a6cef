// dnp_dni: the DNP Network-on-Chip Interface (DNI), the on-chip inter-tile port that
// connects a DNP switch port to the NoC. Both directions use a request/grant handshake, as
// the paper describes: a word moves when req and gnt are high together.
// TX (switch to NoC): a CRC-16 is computed over the header and payload words of each
// packet and sent in the footer's CRC field (bits 31:16).
// RX (NoC to switch): the CRC is recomputed; if it differs from the one in the footer, the
// footer's error bit (bit 0) is set and the packet goes on its way, as in the paper. The
// footer's hop counter (bits 15:8) is incremented on every inter-tile hop (own reading of
// the "HOPs number" footer field).
// Flits carry sop/eop delimiters on the NoC side too (own choice). No added latency: both
// directions are combinational apart from the running CRC registers.
module dnp_dni
  import dnp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // from the switch (outgoing)
  input  logic  sw_out_valid,
  output logic  sw_out_ready,
  input  flit_t sw_out_flit,
  // to the switch (incoming)
  output logic  sw_in_valid,
  input  logic  sw_in_ready,
  output flit_t sw_in_flit,
  // NoC, outgoing
  output logic  noc_tx_req,
  output flit_t noc_tx_flit,
  input  logic  noc_tx_gnt,
  // NoC, incoming
  input  logic  noc_rx_req,
  input  flit_t noc_rx_flit,
  output logic  noc_rx_gnt,
  output logic  crc_error     // pulse: a received packet failed the CRC check
);
  logic [15:0] tx_crc, tx_crc_next, rx_crc, rx_crc_next;

  wire tx_fire = noc_tx_req && noc_tx_gnt;
  wire rx_fire = noc_rx_req && noc_rx_gnt;

  dnp_crc16 u_tx_crc (
    .clk, .rst_n,
    .clear   (tx_fire && sw_out_flit.eop),
    .en      (tx_fire),
    .data    (sw_out_flit.data),
    .crc     (tx_crc),
    .crc_next(tx_crc_next)
  );
  dnp_crc16 u_rx_crc (
    .clk, .rst_n,
    .clear   (rx_fire && noc_rx_flit.eop),
    .en      (rx_fire),
    .data    (noc_rx_flit.data),
    .crc     (rx_crc),
    .crc_next(rx_crc_next)
  );

  logic unused_next;
  assign unused_next = ^{tx_crc_next, rx_crc_next};

  always_comb begin
    noc_tx_req   = sw_out_valid;
    noc_tx_flit  = sw_out_flit;
    sw_out_ready = noc_tx_gnt;
    if (sw_out_flit.eop) noc_tx_flit.data[31:16] = tx_crc;
  end

  always_comb begin
    sw_in_valid = noc_rx_req;
    sw_in_flit  = noc_rx_flit;
    noc_rx_gnt  = sw_in_ready;
    crc_error   = 1'b0;
    if (noc_rx_flit.eop) begin
      sw_in_flit.data[15:8] = noc_rx_flit.data[15:8] + 8'd1;
      if (noc_rx_flit.data[31:16] != rx_crc) begin
        sw_in_flit.data[0] = 1'b1;
        crc_error          = rx_fire;
      end
    end
  end
endmodule
