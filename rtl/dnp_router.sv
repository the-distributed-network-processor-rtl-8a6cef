// dnp_router: routing logic (RTR). From the destination DNP address in a packet's first
// header word it picks the switch output port, combinationally.
// Following the paper: every DNP has an 18-bit address, split evenly into a 3D-torus
// triplet (x = [17:12], y = [11:6], z = [5:0]); routing is deterministic and
// dimension-ordered, and the order in which the coordinates are consumed is taken at run
// time from the priority register (cfg.route_order, Z then Y then X after reset).
// Own choices: inside a dimension the shorter way round the ring is taken (ties go +);
// a destination equal to this DNP goes to the intra-tile master port named in the header;
// a destination on the same chip (equal under cfg.chip_mask, not equal to this DNP) goes to
// on-chip port 0; off-chip ports are ordered X+, X-, Y+, Y-, Z+, Z- (the order drawn in the
// SHAPES tile figure). Switch ports: 0..L-1 intra-tile, L..L+M-1 off-chip, L+M.. on-chip.
// Virtual channel (deadlock avoidance on the torus rings, dateline scheme, own choice): a
// packet travels on VC1 while its remaining path in the current dimension still crosses
// the ring's wrap-around link, and on VC0 afterwards; the choice needs no state.
module dnp_router
  import dnp_pkg::*;
#(
  parameter int unsigned L = 2,
  parameter int unsigned M = 6,
  parameter int unsigned N = 1,
  localparam int unsigned P  = L + M + N,
  localparam int unsigned PW = $clog2(P)
) (
  input  dnp_addr_t   dst,
  input  logic [1:0]  wr_port,
  input  cfg_t        cfg,
  output logic [PW-1:0] out_port,
  output logic        out_vc,
  output logic        is_local
);
  coord_t my_c [3];
  coord_t ds_c [3];
  coord_t sz_c [3];

  always_comb begin
    my_c[0] = cfg.my_dnp[17:12];  ds_c[0] = dst[17:12];  sz_c[0] = cfg.size_x;
    my_c[1] = cfg.my_dnp[11:6];   ds_c[1] = dst[11:6];   sz_c[1] = cfg.size_y;
    my_c[2] = cfg.my_dnp[5:0];    ds_c[2] = dst[5:0];    sz_c[2] = cfg.size_z;
  end

  always_comb begin
    logic       found;
    logic [1:0] dim;
    logic [6:0] delta;
    logic       minus;
    logic [1:0] d;
    d        = '0;
    out_port = '0;
    out_vc   = 1'b0;
    is_local = 1'b0;
    found    = 1'b0;
    dim      = '0;
    delta    = '0;
    minus    = 1'b0;
    if (dst == cfg.my_dnp) begin
      is_local = 1'b1;
      out_port = (32'(wr_port) < L) ? PW'(wr_port) : '0;
    end else if (N > 0 && ((dst & cfg.chip_mask) == (cfg.my_dnp & cfg.chip_mask))) begin
      out_port = PW'(L + M);
    end else begin
      for (int k = 0; k < 3; k++) begin
        d = cfg.route_order[2*k +: 2];
        if (!found && d != 2'd3 && ds_c[d] != my_c[d]) begin
          found = 1'b1;
          dim   = d;
        end
      end
      if (ds_c[dim] >= my_c[dim]) delta = 7'(ds_c[dim]) - 7'(my_c[dim]);
      else                        delta = 7'(ds_c[dim]) + 7'(sz_c[dim]) - 7'(my_c[dim]);
      minus    = (delta > 7'(sz_c[dim] >> 1));
      out_port = PW'(L + 2 * 32'(dim) + 32'(minus));
      out_vc   = minus ? (ds_c[dim] > my_c[dim]) : (ds_c[dim] < my_c[dim]);
    end
  end
endmodule
