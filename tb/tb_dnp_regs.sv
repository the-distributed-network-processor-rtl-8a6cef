// tb_dnp_regs: reset values, write/read of every configuration register, the read-only
// status inputs, the self-clearing soft reset and the sticky, write-1-to-clear exceptions.
module tb_dnp_regs;
  import dnp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 1'b0;
  logic [3:0] addr = '0;
  word_t wdata = '0, rdata;
  cfg_t  cfg;
  logic  soft_reset;
  logic [15:0] cq_wp = 16'h1234;
  logic  cmd_empty = 1'b1, eng_busy = 1'b0;
  logic [7:0] exc_set = '0;

  dnp_regs #(.RESET_DNP(18'h2A5A5)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [3:0] a, input word_t d);
    @(negedge clk); wr_en = 1'b1; addr = a; wdata = d;
    @(negedge clk); wr_en = 1'b0;
  endtask
  task automatic rd(input logic [3:0] a, output word_t d);
    @(negedge clk); addr = a; #1 d = rdata;
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    word_t d;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    rd(4'd1, d); check(d == 32'h2A5A5 && cfg.my_dnp == 18'h2A5A5, "reset DNP address");
    rd(4'd2, d); check(d[5:0] == {2'd0, 2'd1, 2'd2}, "reset route order Z,Y,X");
    check(cfg.eng_en && cfg.rx_en && !cfg.arb_fixed, "reset enables");
    wr(4'd0, 32'h0000_0054);   // engine off, rx off, fixed priority, prio 5
    check(!cfg.eng_en && !cfg.rx_en && cfg.arb_fixed && cfg.arb_prio == 4'd5, "CTRL fields");
    rd(4'd0, d); check(d[7:0] == 8'h54, "CTRL readback");
    wr(4'd2, 32'h0000_0024);   // X first, Y second, Z third
    check(cfg.route_order == 6'h24, "ORDER");
    wr(4'd3, 32'h0004_0803);
    check(cfg.size_x == 6'd3 && cfg.size_y == 6'd8 && cfg.size_z == 6'd4, "TORUS sizes");
    rd(4'd3, d); check(d == 32'h0004_0803, "TORUS readback");
    wr(4'd4, 32'h0003_F000); check(cfg.chip_mask == 18'h3F000, "CHIPMASK");
    wr(4'd5, 32'h0000_8000); check(cfg.cq_base == 32'h8000, "CQ_BASE");
    wr(4'd6, 32'd128);       check(cfg.cq_size == 16'd128, "CQ_SIZE");
    rd(4'd7, d);             check(d == 32'h1234, "CQ_WP read-only value");
    wr(4'd8, 32'd12);        check(cfg.cq_rp == 16'd12, "CQ_RP");
    wr(4'd1, 32'h0001_ABCD); check(cfg.my_dnp == 18'h1ABCD, "MY_DNP");
    wr(4'd9, 32'd999);       check(cfg.timeout == 16'd999, "TIMEOUT");
    // soft reset pulse
    @(negedge clk); wr_en = 1'b1; addr = 4'd0; wdata = 32'h103;
    @(posedge clk); #1; wr_en = 1'b0;
    check(soft_reset, "soft reset asserted");
    @(posedge clk); #1;
    check(!soft_reset, "soft reset self-clears");
    // exceptions
    @(negedge clk); exc_set = 8'h05; @(negedge clk); exc_set = 8'h00;
    eng_busy = 1'b1; cmd_empty = 1'b0;
    rd(4'd10, d); check(d[15:8] == 8'h05 && d[1:0] == 2'b10, "STATUS sticky exceptions");
    wr(4'd10, 32'h0000_0100);
    rd(4'd10, d); check(d[15:8] == 8'h04, "exception write-1-clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
