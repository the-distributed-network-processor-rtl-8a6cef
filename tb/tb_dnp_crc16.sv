// tb_dnp_crc16: checks the running CRC-16 against a bit-at-a-time reference written here
// from the generator polynomial, after first checking that reference against the
// published check value of CRC-16/BUYPASS ("123456789" -> 0xFEE8).
module tb_dnp_crc16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, en = 1'b0;
  logic [31:0] data = '0;
  logic [15:0] crc, crc_next;

  dnp_crc16 dut (.clk, .rst_n, .clear, .en, .data, .crc, .crc_next);

  function automatic logic [15:0] ref_bits(input logic [15:0] c, input logic [31:0] w, input int n);
    for (int i = n - 1; i >= 0; i--) begin
      logic fb;
      fb = c[15] ^ w[i];
      c  = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h8005;
    end
    return c;
  endfunction

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] r;
    string s = "123456789";
    r = 16'h0;
    for (int i = 0; i < 9; i++) r = ref_bits(r, 32'(s[i]), 8);
    check(r == 16'hFEE8, "reference model check value");
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(crc == 16'h0, "reset value");
    r = 16'h0;
    for (int i = 0; i < 60; i++) begin
      data = $urandom;
      en   = 1'b1;
      #1 check(crc_next == ref_bits(r, data, 32), $sformatf("crc_next %h ref %h in %h r %h d %h", crc_next, ref_bits(r, data, 32), crc, r, data));
      @(posedge clk); #1;
      r = ref_bits(r, data, 32);
      check(crc == r, $sformatf("crc after word %0d dut %h ref %h data %h", i, crc, r, data));
      if (i == 30) begin
        en = 1'b0; clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
        check(crc == 16'h0, "clear");
        r = 16'h0;
      end
    end
    en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
