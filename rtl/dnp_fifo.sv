// dnp_fifo: synchronous FIFO used for every buffer in the DNP (switch port buffers, the
// command queue, request queues). Valid/ready on both sides: a word moves when valid and
// ready are high in the same cycle. Data written in one cycle can be read in the next.
// DEPTH must be a power of two. Storage is a plain array so it can map to a memory macro.
module dnp_fifo #(
  parameter int unsigned WIDTH = 34,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, rp;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign count     = wp - rp;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

  // Neither overflow nor underflow can happen through the handshake.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
