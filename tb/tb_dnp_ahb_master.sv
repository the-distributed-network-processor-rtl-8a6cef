// tb_dnp_ahb_master: the AHB-Lite master adaptor against a behavioural AHB memory with
// 30% random wait states. Random single reads and writes are requested on the read and
// write channels (often both at once). A reference copy of the memory is updated when a
// write is granted; the expected value of a read is taken when the read is granted, so
// the test also checks that the bus keeps the order of granted requests. Read data must
// come back in order, and the number of wait-state cycles and same-cycle conflicts is
// counted (both must happen).
module tb_dnp_ahb_master;
  import dnp_pkg::*;
  localparam int WORDS = 256, NOPS = 3000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] haddr, hwdata, hrdata;
  logic [1:0]  htrans;
  logic        hwrite, hready;
  logic [2:0]  hsize, hburst;
  logic        rd_req = 1'b0, rd_gnt, rd_rvalid, wr_req = 1'b0, wr_gnt;
  word_t       rd_addr = '0, rd_rdata, wr_addr = '0, wr_data = '0;

  dnp_ahb_master dut (
    .hclk(clk), .hresetn(rst_n), .haddr, .htrans, .hwrite, .hsize, .hburst, .hwdata,
    .hready, .hrdata, .hresp(1'b0),
    .rd_req, .rd_addr, .rd_gnt, .rd_rvalid, .rd_rdata, .wr_req, .wr_addr, .wr_data, .wr_gnt
  );
  tb_ahb_mem #(.WORDS(WORDS), .WAIT_PCT(30)) u_mem (
    .hclk(clk), .haddr, .htrans, .hwrite, .hwdata, .hready, .hrdata
  );

  word_t ref_m [WORDS];
  word_t exp_rd [$];
  int n_rd = 0, n_wr = 0, n_back = 0, waits = 0, both = 0;

  always @(posedge clk) if (rst_n) begin
    if (!hready) waits++;
    if (rd_req && wr_req) both++;
    check(hsize == 3'd2 && hburst == 3'd0 || htrans == 2'b00, "32-bit single transfers");
    if (wr_req && wr_gnt) begin ref_m[wr_addr] = wr_data; n_wr++; end
    if (rd_req && rd_gnt) begin exp_rd.push_back(ref_m[rd_addr]); n_rd++; end
    if (rd_rvalid) begin
      if (exp_rd.size() == 0) check(0, "read data without a request");
      else check(rd_rdata == exp_rd.pop_front(), "read data");
      n_back++;
    end
  end

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      ref_m[a] = 32'(a) * 32'h01010101;
      u_mem.mem[a] = ref_m[a];
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (n_rd + n_wr < NOPS) begin
      @(negedge clk);
      if (!rd_req && ($urandom % 2)) begin rd_req = 1'b1; rd_addr = $urandom % 16; end
      if (!wr_req && ($urandom % 3 == 0)) begin wr_req = 1'b1; wr_addr = $urandom % 16; wr_data = $urandom; end
      @(posedge clk);
      #1;
      if (rd_gnt) rd_req = 1'b0;
      if (wr_gnt) wr_req = 1'b0;
    end
    @(negedge clk); rd_req = 1'b0; wr_req = 1'b0;
    repeat (20) @(posedge clk);
    check(n_back == n_rd, "every read returned");
    for (int a = 0; a < 16; a++) check(u_mem.mem[a] == ref_m[a], "memory content");
    $display("reads %0d writes %0d wait cycles %0d both-requested cycles %0d", n_rd, n_wr, waits, both);
    check(waits > 0 && both > 0, "wait states and conflicts happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
