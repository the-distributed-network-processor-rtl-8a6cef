// tb_dnp_arbiter: round robin (each of several always-requesting inputs wins in turn,
// one-hot grant) and fixed priority (the programmed input first, then upwards, wrapping).
module tb_dnp_arbiter;
  localparam int NR = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NR-1:0] req = '0, grant;
  logic fixed_mode = 1'b0, advance = 1'b0, grant_valid;
  logic [2:0] prio = '0, grant_idx;

  dnp_arbiter #(.NREQ(NR)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int last, wins[NR];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    req = 5'b10110; advance = 1'b1;
    last = -1;
    for (int k = 0; k < NR; k++) wins[k] = 0;
    for (int c = 0; c < 30; c++) begin
      #1;
      check(grant_valid && grant == (5'b1 << grant_idx) && req[grant_idx], "one-hot grant of a requester");
      if (last >= 0) begin
        int e;
        e = last + 1;
        while (!req[e % NR]) e++;
        check(int'(grant_idx) == e % NR, "round robin order");
      end
      last = grant_idx;
      wins[grant_idx]++;
      @(negedge clk);
    end
    check(wins[1] == 10 && wins[2] == 10 && wins[4] == 10 && wins[0] == 0, "fair shares");
    fixed_mode = 1'b1; prio = 3'd3;
    #1 check(grant_idx == 3'd4, "fixed priority from 3 picks 4");
    req = 5'b01111;
    #1 check(grant_idx == 3'd3, "fixed priority picks 3");
    @(negedge clk);
    #1 check(grant_idx == 3'd3, "fixed priority does not rotate");
    req = 5'b00000;
    #1 check(!grant_valid && grant == '0, "no request no grant");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
