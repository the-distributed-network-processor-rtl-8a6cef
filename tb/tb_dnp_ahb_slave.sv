// tb_dnp_ahb_slave: the intra-tile AHB-Lite slave port with simple models behind it (a
// 16-word register file, a LUT memory and a command queue that accepts words at random).
// A pipelined AHB driver issues random back-to-back or idle-separated reads and writes
// to the three regions. Checks: writes reach the right region with the right word index
// and data; reads return the model's value (or the queued-command count); writes into a
// busy command queue are stretched with HREADYOUT low and are not lost or doubled.
module tb_dnp_ahb_slave;
  import dnp_pkg::*;
  localparam int LUT_AW = 6, NOPS = 3000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic        hsel = 1'b0, hwrite = 1'b0, hreadyout, hresp;
  logic [31:0] haddr = '0, hwdata = '0, hrdata;
  logic [1:0]  htrans = '0;
  logic        reg_wr, lut_wr, cmd_valid, cmd_ready = 1'b0;
  logic [3:0]  reg_addr;
  logic [LUT_AW-1:0] lut_addr;
  word_t       reg_wdata, reg_rdata, lut_wdata, lut_rdata, cmd_data, cmd_count;

  dnp_ahb_slave #(.LUT_AW(LUT_AW)) dut (
    .hclk(clk), .hresetn(rst_n), .hsel, .haddr, .htrans, .hwrite, .hsize(3'd2), .hwdata,
    .hready(hreadyout), .hreadyout, .hrdata, .hresp,
    .reg_wr, .reg_addr, .reg_wdata, .reg_rdata, .lut_wr, .lut_addr, .lut_wdata, .lut_rdata,
    .cmd_valid, .cmd_ready, .cmd_data, .cmd_count
  );

  // models
  word_t regs [16], lut [64], ref_regs [16], ref_lut [64];
  word_t cmdq [$], ref_cmdq [$];
  assign reg_rdata = regs[reg_addr];
  assign lut_rdata = lut[lut_addr];
  assign cmd_count = 32'(cmdq.size());
  int stretch = 0;
  always @(negedge clk) cmd_ready <= ($urandom % 3) == 0;
  always @(posedge clk) begin
    if (reg_wr) regs[reg_addr] <= reg_wdata;
    if (lut_wr) lut[lut_addr] <= lut_wdata;
    if (cmd_valid && cmd_ready) cmdq.push_back(cmd_data);
    if (cmd_valid && !cmd_ready) stretch++;
  end

  // pipelined driver: the data phase of transfer n overlaps the address phase of n+1
  typedef struct { logic v; logic w; logic [31:0] a; word_t d; } xfer_t;
  xfer_t dp;
  int n_rd = 0, n_wr = 0;

  function automatic logic [31:0] rand_addr(output int region, output int idx);
    region = $urandom % 3;
    idx = (region == 0) ? $urandom % 16 : (region == 1) ? $urandom % 64 : 0;
    return (32'(region) << 12) | (32'(idx) << 2);
  endfunction

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    dp.v = 1'b0;
    for (int i = 0; i < 16; i++) begin regs[i] = '0; ref_regs[i] = '0; end
    for (int i = 0; i < 64; i++) begin lut[i] = '0; ref_lut[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n <= NOPS; n++) begin
      xfer_t nx;
      int region, idx;
      @(negedge clk);
      nx.v = (n < NOPS) && ($urandom % 4 != 0);
      nx.w = $urandom % 2;
      nx.a = rand_addr(region, idx);
      nx.d = $urandom;
      hsel = nx.v; htrans = nx.v ? 2'b10 : 2'b00; hwrite = nx.w; haddr = nx.a;
      if (dp.v && dp.w) hwdata = dp.d;
      // end of cycle: wait until the current data phase completes
      @(posedge clk);
      while (!hreadyout) @(posedge clk);
      if (dp.v) begin
        if (dp.w) begin
          case (dp.a[13:12])
            2'd0: ref_regs[dp.a[5:2]] = dp.d;
            2'd1: ref_lut[dp.a[7:2]] = dp.d;
            default: ref_cmdq.push_back(dp.d);
          endcase
          n_wr++;
        end else begin
          word_t e;
          case (dp.a[13:12])
            2'd0: e = ref_regs[dp.a[5:2]];
            2'd1: e = ref_lut[dp.a[7:2]];
            default: e = 32'(ref_cmdq.size());
          endcase
          check(hrdata == e, $sformatf("read region %0d", dp.a[13:12]));
          n_rd++;
        end
      end
      dp = nx;
    end
    repeat (3) @(posedge clk);
    for (int i = 0; i < 16; i++) check(regs[i] == ref_regs[i], "register file content");
    for (int i = 0; i < 64; i++) check(lut[i] == ref_lut[i], "LUT content");
    check(cmdq.size() == ref_cmdq.size(), "command words count");
    foreach (cmdq[i]) if (i < ref_cmdq.size()) check(cmdq[i] == ref_cmdq[i], "command word");
    $display("reads %0d writes %0d stretched cycles %0d", n_rd, n_wr, stretch);
    check(stretch > 0, "HREADYOUT stretch happened");
    check(hresp == 1'b0, "OKAY response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
