// dnp_regs: the DNP register block (REG). Software reads status and writes configuration
// through the intra-tile slave port. The paper says the registers expose status, set the
// time-out thresholds of block handshakes, the arbitration policy and port priority, allow
// enabling/disabling and resetting blocks, and that a priority register selects the order
// in which the torus coordinates are consumed by routing. The register map, widths and
// reset values are this design's own choices:
//   0 CTRL     [0] engine enable  [1] receive enable  [2] fixed-priority arbitration
//              [7:4] highest-priority switch input    [8] soft reset (write 1, self-clears)
//   1 MY_DNP   [17:0] own DNP address
//   2 ORDER    [1:0] first, [3:2] second, [5:4] third dimension (0=X,1=Y,2=Z); reset Z,Y,X
//   3 TORUS    [5:0] X size, [13:8] Y size, [21:16] Z size
//   4 CHIPMASK [17:0] address bits naming the chip (on-chip port used inside the chip)
//   5 CQ_BASE  6 CQ_SIZE (words)  7 CQ_WP (read only)  8 CQ_RP (software read pointer)
//   9 TIMEOUT  [15:0] handshake time-out in cycles
//  10 STATUS   [0] CMD FIFO empty [1] engine busy [15:8] sticky exceptions (write 1 clears)
// Reads return data in the same cycle (combinational read, registered by the slave port).
module dnp_regs
  import dnp_pkg::*;
#(
  parameter logic [DNP_ADDR_W-1:0] RESET_DNP = '0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [3:0]  addr,
  input  word_t       wdata,
  output word_t       rdata,
  output cfg_t        cfg,
  output logic        soft_reset,
  input  logic [15:0] cq_wp,
  input  logic        cmd_empty,
  input  logic        eng_busy,
  input  logic [7:0]  exc_set     // exception pulses from the blocks
);
  logic [7:0] exc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg             <= '0;
      cfg.eng_en      <= 1'b1;
      cfg.rx_en       <= 1'b1;
      cfg.my_dnp      <= RESET_DNP;
      cfg.route_order <= {2'd0, 2'd1, 2'd2};   // Z first, then Y, then X
      cfg.size_x      <= 6'd2;
      cfg.size_y      <= 6'd2;
      cfg.size_z      <= 6'd2;
      cfg.chip_mask   <= '1;
      cfg.cq_size     <= 16'd64;
      cfg.timeout     <= 16'd64;
      soft_reset      <= 1'b0;
      exc             <= '0;
    end else begin
      soft_reset <= 1'b0;
      exc        <= exc | exc_set;
      if (wr_en) begin
        case (addr)
          4'd0: begin
            cfg.eng_en    <= wdata[0];
            cfg.rx_en     <= wdata[1];
            cfg.arb_fixed <= wdata[2];
            cfg.arb_prio  <= wdata[7:4];
            soft_reset    <= wdata[8];
          end
          4'd1:  cfg.my_dnp      <= wdata[DNP_ADDR_W-1:0];
          4'd2:  cfg.route_order <= wdata[5:0];
          4'd3:  begin
            cfg.size_x <= wdata[5:0];
            cfg.size_y <= wdata[13:8];
            cfg.size_z <= wdata[21:16];
          end
          4'd4:  cfg.chip_mask <= wdata[DNP_ADDR_W-1:0];
          4'd5:  cfg.cq_base   <= wdata;
          4'd6:  cfg.cq_size   <= wdata[15:0];
          4'd8:  cfg.cq_rp     <= wdata[15:0];
          4'd9:  cfg.timeout   <= wdata[15:0];
          4'd10: exc           <= (exc & ~wdata[15:8]) | exc_set;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    case (addr)
      4'd0:    rdata = {24'd0, cfg.arb_prio, 1'b0, cfg.arb_fixed, cfg.rx_en, cfg.eng_en};
      4'd1:    rdata = {14'd0, cfg.my_dnp};
      4'd2:    rdata = {26'd0, cfg.route_order};
      4'd3:    rdata = {10'd0, cfg.size_z, 2'd0, cfg.size_y, 2'd0, cfg.size_x};
      4'd4:    rdata = {14'd0, cfg.chip_mask};
      4'd5:    rdata = cfg.cq_base;
      4'd6:    rdata = {16'd0, cfg.cq_size};
      4'd7:    rdata = {16'd0, cq_wp};
      4'd8:    rdata = {16'd0, cfg.cq_rp};
      4'd9:    rdata = {16'd0, cfg.timeout};
      4'd10:   rdata = {16'd0, exc, 6'd0, eng_busy, cmd_empty};
      default: rdata = '0;
    endcase
  end
endmodule
