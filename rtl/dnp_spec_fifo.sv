// dnp_spec_fifo: receive FIFO with speculative writes, used by the off-chip interface.
// Words are written at the write pointer but become visible to the reader only when
// `commit` is pulsed; `rollback` throws away every word written since the last commit.
// This lets the receiver hold a packet's header or footer until its check symbol has
// been verified, and drop it when the sender must retransmit it. `free` counts the slots
// not taken by committed or speculative words. commit and rollback act on words written in
// earlier cycles; a write in the same cycle as commit is committed too.
module dnp_spec_fifo #(
  parameter int unsigned WIDTH = 34,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             commit,
  input  logic             rollback,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] free
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, cp, rp;

  assign out_valid = (cp != rp);
  assign out_data  = mem[rp[AW-1:0]];
  assign free      = (AW+1)'(DEPTH) - (wp - rp);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      cp <= '0;
      rp <= '0;
    end else begin
      if (rollback)   wp <= cp;
      else if (wr_en) wp <= wp + 1'b1;
      if (commit)     cp <= wr_en ? wp + 1'b1 : wp;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> free != 0);
endmodule
