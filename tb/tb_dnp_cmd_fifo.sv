// tb_dnp_cmd_fifo: pushes 7-word commands, checks the decoded fields, FIFO order and the
// back-pressure on the seventh word when the queue is full (depth 2 here).
module tb_dnp_cmd_fifo;
  import dnp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  word_valid = 1'b0, cmd_ready = 1'b0;
  word_t word_data = '0;
  logic  word_ready, cmd_valid;
  cmd_t  cmd;
  logic [1:0] cmd_count;

  dnp_cmd_fifo #(.CMD_DEPTH(2)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  word_t w [3][7];

  task automatic push_word(input word_t d);
    @(negedge clk);
    word_valid = 1'b1; word_data = d;
    while (!word_ready) @(negedge clk);
    @(posedge clk); #1;
    word_valid = 1'b0;
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 3; c++) for (int i = 0; i < 7; i++) w[c][i] = $urandom;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(!cmd_valid, "empty after reset");
    for (int c = 0; c < 2; c++) for (int i = 0; i < 7; i++) push_word(w[c][i]);
    @(posedge clk); #1;
    check(cmd_valid && cmd_count == 2, "two commands queued");
    // third command: 6 words accepted, 7th must stall
    for (int i = 0; i < 6; i++) push_word(w[2][i]);
    @(negedge clk);
    word_valid = 1'b1; word_data = w[2][6];
    #1 check(!word_ready, "7th word stalls when full");
    // pop and compare
    for (int c = 0; c < 3; c++) begin
      @(negedge clk);
      while (!cmd_valid) @(negedge clk);
      check(cmd.op == opcode_t'(w[c][0][1:0]) && cmd.cq_en == w[c][0][2] &&
            cmd.rd_port == w[c][0][5:4] && cmd.wr_port == w[c][0][7:6], "word0 fields");
      check(cmd.dst_dnp == w[c][1][17:0] && cmd.src_dnp == w[c][2][17:0], "dnp fields");
      check(cmd.src_addr == w[c][3] && cmd.dst_addr == w[c][4], "addresses");
      check(cmd.len == w[c][5][23:0] && cmd.tag == w[c][6], "len and tag");
      cmd_ready = 1'b1;
      @(posedge clk); #1;
      cmd_ready = 1'b0;
      if (c == 0) begin
        // the stalled word goes in once there is room
        check(word_ready, "7th word accepted after a pop");
        @(posedge clk); #1;
        word_valid = 1'b0;
      end
    end
    @(posedge clk); #1;
    check(!cmd_valid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
