// dnp_cmd_fifo: the DNP command queue (CMD FIFO). Software pushes RDMA commands here
// through the intra-tile slave port, one 32-bit word at a time; seven consecutive words
// make one command (the seven-word size follows the paper). The words are gathered in
// an assembly register; the seventh word pushes the whole decoded command (cmd_t) into a
// FIFO of CMD_DEPTH entries, from which the engine pops it with valid/ready. Word layout:
// see dnp_pkg::cmd_t. The depth is this design's own choice (the paper gives none).
// Timing: a command pushed with its 7th word is visible on cmd_valid the next cycle.
// When the FIFO is full, word_ready is low for the 7th word (earlier words are accepted).
module dnp_cmd_fifo
  import dnp_pkg::*;
#(
  parameter int unsigned CMD_DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  word_valid,
  output logic  word_ready,
  input  word_t word_data,
  output logic  cmd_valid,
  input  logic  cmd_ready,
  output cmd_t  cmd,
  output logic [$clog2(CMD_DEPTH):0] cmd_count
);
  logic [2:0] widx;
  word_t      wbuf [CMD_WORDS-1];
  cmd_t       asm_cmd;
  logic       fifo_in_ready;

  // The seventh word completes the command.
  wire last_word = (widx == 3'(CMD_WORDS-1));
  assign word_ready = last_word ? fifo_in_ready : 1'b1;

  always_comb begin
    asm_cmd          = '0;
    asm_cmd.op       = opcode_t'(wbuf[0][1:0]);
    asm_cmd.cq_en    = wbuf[0][2];
    asm_cmd.rd_port  = wbuf[0][5:4];
    asm_cmd.wr_port  = wbuf[0][7:6];
    asm_cmd.dst_dnp  = wbuf[1][DNP_ADDR_W-1:0];
    asm_cmd.src_dnp  = wbuf[2][DNP_ADDR_W-1:0];
    asm_cmd.src_addr = wbuf[3];
    asm_cmd.dst_addr = wbuf[4];
    asm_cmd.len      = wbuf[5][LEN_W-1:0];
    asm_cmd.tag      = word_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx <= '0;
    end else if (word_valid && word_ready) begin
      widx <= last_word ? '0 : widx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (word_valid && word_ready && !last_word) wbuf[widx] <= word_data;
  end

  dnp_fifo #(.WIDTH($bits(cmd_t)), .DEPTH(CMD_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (word_valid && last_word),
    .in_ready (fifo_in_ready),
    .in_data  (asm_cmd),
    .out_valid(cmd_valid),
    .out_ready(cmd_ready),
    .out_data (cmd),
    .count    (cmd_count)
  );
endmodule
