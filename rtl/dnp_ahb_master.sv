// dnp_ahb_master: AMBA AHB-Lite master adaptor for one intra-tile master port (MASTER P
// in the paper's block diagram). It turns the DNP tile-bus read and write channels of a
// dnp_intra_mst into single (HBURST=SINGLE) 32-bit NONSEQ transfers. The paper says AHB
// master adaptors are provided; this particular mapping is own choice.
// Address and data phases are pipelined, so one transfer per cycle is possible, matching
// the paper's 1 word/cycle per intra-tile port. Writes win over reads when both wait.
// DNP word addresses become byte addresses (x4). A request is granted (rd_gnt/wr_gnt) in
// the cycle its address phase is accepted (HREADY high); write data follow in the next
// cycle's data phase; read data return on rd_rvalid at the end of the data phase.
// HRESP errors are not reported back (own simplification).
module dnp_ahb_master
  import dnp_pkg::*;
(
  input  logic        hclk,
  input  logic        hresetn,
  output logic [31:0] haddr,
  output logic [1:0]  htrans,
  output logic        hwrite,
  output logic [2:0]  hsize,
  output logic [2:0]  hburst,
  output logic [31:0] hwdata,
  input  logic        hready,
  input  logic [31:0] hrdata,
  input  logic        hresp,
  // DNP tile bus
  input  logic        rd_req,
  input  word_t       rd_addr,
  output logic        rd_gnt,
  output logic        rd_rvalid,
  output word_t       rd_rdata,
  input  logic        wr_req,
  input  word_t       wr_addr,
  input  word_t       wr_data,
  output logic        wr_gnt
);
  logic  dp_valid, dp_write;
  word_t dp_wdata;
  logic  unused_hresp;
  assign unused_hresp = hresp;

  assign hsize  = 3'b010;
  assign hburst = 3'b000;
  assign hwrite = wr_req;
  assign haddr  = wr_req ? {wr_addr[29:0], 2'b00} : {rd_addr[29:0], 2'b00};
  assign htrans = (wr_req || rd_req) ? 2'b10 : 2'b00;

  assign wr_gnt    = hready && wr_req;
  assign rd_gnt    = hready && rd_req && !wr_req;
  assign hwdata    = dp_wdata;
  assign rd_rvalid = dp_valid && !dp_write && hready;
  assign rd_rdata  = hrdata;

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      dp_valid <= 1'b0;
      dp_write <= 1'b0;
      dp_wdata <= '0;
    end else if (hready) begin
      dp_valid <= wr_req || rd_req;
      dp_write <= wr_req;
      dp_wdata <= wr_data;
    end
  end
endmodule
