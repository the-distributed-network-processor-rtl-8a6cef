// tb_dnp_lut: programs buffer records and checks PUT lookups (hit inside a buffer, miss
// past its end, miss on an invalid record), SEND lookups (first record with the SEND flag
// and room; the flag is then cleared so the next SEND gets the next buffer) and the scan
// latency (at most ENTRIES+2 cycles).
module tb_dnp_lut;
  import dnp_pkg::*;
  localparam int E = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  sw_wr = 1'b0;
  logic [$clog2(E)+1:0] sw_addr = '0;
  word_t sw_wdata = '0, sw_rdata;
  logic  lk_req = 1'b0, lk_send = 1'b0;
  word_t lk_addr = '0;
  logic [LEN_W-1:0] lk_len = '0;
  logic  lk_done, lk_hit;
  word_t lk_base;
  logic [$clog2(E)-1:0] lk_index;

  dnp_lut #(.ENTRIES(E)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input int ent, input int fld, input word_t d);
    @(negedge clk); sw_wr = 1'b1; sw_addr = ($clog2(E)+2)'(ent * 4 + fld); sw_wdata = d;
    @(negedge clk); sw_wr = 1'b0;
  endtask
  task automatic lookup(input logic send, input word_t a, input int len,
                        output logic hit, output word_t base, output int idx, output int cyc);
    @(negedge clk); lk_req = 1'b1; lk_send = send; lk_addr = a; lk_len = LEN_W'(len);
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!lk_done);
    hit = lk_hit; base = lk_base; idx = int'(lk_index);
    lk_req = 1'b0;
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic hit; word_t base; int idx, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // entry 1: PUT buffer 0x1000..0x10FF; entry 3 and 5: SEND buffers; entry 6 invalid
    wr(1, 0, 32'h1000); wr(1, 1, 256); wr(1, 2, 1);
    wr(3, 0, 32'h2000); wr(3, 1, 16);  wr(3, 2, 3);
    wr(5, 0, 32'h3000); wr(5, 1, 64);  wr(5, 2, 3);
    wr(6, 0, 32'h4000); wr(6, 1, 64);  wr(6, 2, 0);
    @(negedge clk); sw_addr = 4'(1 * 4 + 1); #1 check(sw_rdata == 256, "software readback");
    lookup(0, 32'h1010, 32, hit, base, idx, cyc);
    check(hit && base == 32'h1010 && idx == 1, "PUT hit inside buffer");
    check(cyc <= E + 2, $sformatf("lookup latency %0d", cyc));
    lookup(0, 32'h1000, 256, hit, base, idx, cyc);
    check(hit && base == 32'h1000 && idx == 1, "PUT filling the whole buffer hits");
    lookup(0, 32'h0FFF, 4, hit, base, idx, cyc);
    check(!hit, "PUT starting before the buffer misses");
    lookup(0, 32'h10F0, 32, hit, base, idx, cyc);
    check(!hit, "PUT past buffer end misses");
    lookup(0, 32'h4000, 4, hit, base, idx, cyc);
    check(!hit, "invalid record misses");
    check(cyc <= E + 2, $sformatf("miss latency bounded %0d", cyc));
    lookup(1, 32'h0, 8, hit, base, idx, cyc);
    check(hit && base == 32'h2000 && idx == 3, "first SEND buffer");
    lookup(1, 32'h0, 8, hit, base, idx, cyc);
    check(hit && base == 32'h3000 && idx == 5, "SEND buffer retired, next one used");
    lookup(1, 32'h0, 8, hit, base, idx, cyc);
    check(!hit, "no SEND buffer left");
    wr(3, 2, 3);  // software re-arms entry 3
    lookup(1, 32'h0, 20, hit, base, idx, cyc);
    check(!hit, "SEND larger than the buffer misses");
    lookup(1, 32'h0, 16, hit, base, idx, cyc);
    check(hit && idx == 3, "re-armed SEND buffer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
