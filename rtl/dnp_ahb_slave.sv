// dnp_ahb_slave: the intra-tile slave port (INTRA-TILE SLAVE) with an AMBA AHB-Lite
// adaptor. Software configures and programs the DNP through it. It maps three regions
// (byte address bits [13:12]): 0 = registers (word index HADDR[5:2]), 1 = LUT records
// (word index HADDR[11:2]), 2 = command FIFO (every write pushes one command word; a read
// returns the number of queued commands). The paper states that this slave maps the
// registers, the LUT and the command queue and that AHB adaptors are provided; the address
// map is this design's choice. Only 32-bit transfers are meaningful (HSIZE is ignored).
// Timing: zero-wait-state reads and writes; a write to a full command FIFO is stretched
// with HREADYOUT low until the FIFO accepts it. HRESP is always OKAY.
module dnp_ahb_slave
  import dnp_pkg::*;
#(
  parameter int unsigned LUT_AW = 6
) (
  input  logic        hclk,
  input  logic        hresetn,
  input  logic        hsel,
  input  logic [31:0] haddr,
  input  logic [1:0]  htrans,
  input  logic        hwrite,
  input  logic [2:0]  hsize,
  input  logic [31:0] hwdata,
  input  logic        hready,
  output logic        hreadyout,
  output logic [31:0] hrdata,
  output logic        hresp,
  // registers
  output logic        reg_wr,
  output logic [3:0]  reg_addr,
  output word_t       reg_wdata,
  input  word_t       reg_rdata,
  // LUT
  output logic        lut_wr,
  output logic [LUT_AW-1:0] lut_addr,
  output word_t       lut_wdata,
  input  word_t       lut_rdata,
  // command FIFO
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output word_t       cmd_data,
  input  word_t       cmd_count
);
  logic        dp_valid, dp_write;
  logic [13:0] dp_addr;
  logic        unused_hsize;
  assign unused_hsize = ^hsize;

  wire [1:0] region = dp_addr[13:12];
  wire       act    = dp_valid && dp_write;

  assign reg_addr  = dp_addr[5:2];
  assign lut_addr  = dp_addr[LUT_AW+1:2];
  assign reg_wdata = hwdata;
  assign lut_wdata = hwdata;
  assign cmd_data  = hwdata;
  assign reg_wr    = act && region == 2'd0;
  assign lut_wr    = act && region == 2'd1;
  assign cmd_valid = act && region == 2'd2;

  assign hreadyout = !(cmd_valid && !cmd_ready);
  assign hresp     = 1'b0;

  always_comb begin
    case (region)
      2'd0:    hrdata = reg_rdata;
      2'd1:    hrdata = lut_rdata;
      2'd2:    hrdata = cmd_count;
      default: hrdata = '0;
    endcase
  end

  always_ff @(posedge hclk or negedge hresetn) begin
    if (!hresetn) begin
      dp_valid <= 1'b0;
      dp_write <= 1'b0;
      dp_addr  <= '0;
    end else if (hready) begin
      dp_valid <= hsel && htrans[1];
      dp_write <= hwrite;
      dp_addr  <= haddr[13:0];
    end
  end
endmodule
