// dnp_crc16: running CRC-16 over a stream of 32-bit words, as used by both inter-tile
// interfaces to protect packets. The paper names the industry-standard CRC-16; the
// generator x^16 + x^15 + x^2 + 1 is used (see dnp_pkg::crc16_word). One word is folded in
// per cycle when `en` is high; `clear` restarts from zero (clear wins over en). `crc` is the
// registered value after the words accepted so far; `crc_next` includes the current word.
module dnp_crc16
  import dnp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        en,
  input  word_t       data,
  output logic [15:0] crc,
  output logic [15:0] crc_next
);
  assign crc_next = crc16_word(crc, data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     crc <= '0;
    else if (clear) crc <= '0;
    else if (en)    crc <= crc_next;
  end
endmodule
