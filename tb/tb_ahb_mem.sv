// tb_ahb_mem: behavioural AHB-Lite memory used by the testbenches as tile memory. Word
// array `mem` (WORDS words, byte address bits [..:2]) can be read and written directly
// by the testbench. With WAIT_PCT > 0 the data phase is stretched by random wait states.
module tb_ahb_mem #(
  parameter int unsigned WORDS    = 4096,
  parameter int unsigned WAIT_PCT = 0
) (
  input  logic        hclk,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [31:0] hwdata,
  output logic        hready,
  output logic [31:0] hrdata
);
  logic [31:0] mem [WORDS];
  logic        dp_v = 1'b0, dp_w = 1'b0;
  logic [31:0] dp_a = '0;
  logic        wait_now = 1'b0;

  assign hready = !(dp_v && wait_now);
  assign hrdata = mem[dp_a[$clog2(WORDS)+1:2]];

  always @(posedge hclk) begin
    if (hready) begin
      if (dp_v && dp_w) mem[dp_a[$clog2(WORDS)+1:2]] <= hwdata;
      dp_v <= htrans[1];
      dp_w <= hwrite;
      dp_a <= haddr;
      wait_now <= (WAIT_PCT > 0) && (($urandom % 100) < WAIT_PCT);
    end else begin
      wait_now <= (($urandom % 100) < WAIT_PCT);
    end
  end
endmodule
