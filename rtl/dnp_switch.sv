// dnp_switch: the DNP crossbar (SWITCH) with its port buffers, routing (RTR) and
// arbitration (ARB). It connects P = L+M+N ports: L intra-tile master ports, M off-chip
// and N on-chip inter-tile ports, and can move one word per cycle through every output at
// once, so up to L+M+N packets are in flight together, as the paper states.
// Each input port has a FIFO buffer; off-chip inputs have two, one per virtual channel
// (PORT_VCH in the paper's block diagram, where virtual channels sit on incoming switch
// ports). Every buffer is a "virtual input". When a packet's first word reaches the head of
// a virtual input, dnp_router picks the output and outgoing VC; dnp_arbiter, one per output,
// grants the output to one requester. Switching is wormhole: the output stays with that
// input until the last word (eop) has passed. The outgoing VC is written into the VCHAN
// field of the first header word and given on out_vc.
// Own choices: buffer depth; a grant is registered, so a packet's first word leaves one
// cycle after its head arrives at the buffer head (two cycles after it entered an empty
// buffer); on-chip ports carry one VC only.
// Port numbering: 0..L-1 intra-tile, L..L+M-1 off-chip (X+,X-,Y+,Y-,Z+,Z-), L+M.. on-chip.
module dnp_switch
  import dnp_pkg::*;
#(
  parameter int unsigned L         = 2,
  parameter int unsigned M         = 6,
  parameter int unsigned N         = 1,
  parameter int unsigned BUF_DEPTH = 16,
  localparam int unsigned P   = L + M + N,
  localparam int unsigned VI  = L + 2 * M + N,
  localparam int unsigned PW  = $clog2(P),
  localparam int unsigned VIW = $clog2(VI)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  cfg_t         cfg,
  // inputs (towards the switch)
  input  logic [P-1:0] in_valid,
  input  flit_t        in_flit  [P],
  input  logic [P-1:0] in_vc,
  output logic [1:0]   in_ready [P],   // per VC; bit 0 only for ports without VCs
  // outputs (away from the switch)
  output logic [P-1:0] out_valid,
  output flit_t        out_flit [P],
  output logic [P-1:0] out_vc,
  input  logic [P-1:0] out_ready
);
  // ---- virtual input buffers ----
  logic [VI-1:0] vi_in_valid, vi_in_ready, vi_valid, vi_pop;
  flit_t         vi_in_data [VI];
  flit_t         vi_head    [VI];
  logic [PW-1:0] vi_phys    [VI];    // physical port of each virtual input

  always_comb begin
    for (int v = 0; v < VI; v++) begin
      vi_in_valid[v] = 1'b0;
      vi_in_data[v]  = '0;
      vi_phys[v]     = '0;
    end
    for (int p = 0; p < P; p++) begin
      in_ready[p] = 2'b00;
      if (p < L) begin
        vi_phys[p]     = PW'(p);
        vi_in_valid[p] = in_valid[p];
        vi_in_data[p]  = in_flit[p];
        in_ready[p][0] = vi_in_ready[p];
      end else if (p < L + M) begin
        for (int c = 0; c < 2; c++) begin
          vi_phys[L + 2*(p-L) + c]     = PW'(p);
          vi_in_valid[L + 2*(p-L) + c] = in_valid[p] && (32'(in_vc[p]) == c);
          vi_in_data[L + 2*(p-L) + c]  = in_flit[p];
          in_ready[p][c]               = vi_in_ready[L + 2*(p-L) + c];
        end
      end else begin
        vi_phys[p + M]     = PW'(p);
        vi_in_valid[p + M] = in_valid[p];
        vi_in_data[p + M]  = in_flit[p];
        in_ready[p][0]     = vi_in_ready[p + M];
      end
    end
  end

  for (genvar v = 0; v < VI; v++) begin : g_buf
    logic [$clog2(BUF_DEPTH):0] unused_cnt;
    dnp_fifo #(.WIDTH($bits(flit_t)), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .in_valid (vi_in_valid[v]),
      .in_ready (vi_in_ready[v]),
      .in_data  (vi_in_data[v]),
      .out_valid(vi_valid[v]),
      .out_ready(vi_pop[v]),
      .out_data (vi_head[v]),
      .count    (unused_cnt)
    );
  end

  // ---- routing of the packet at each buffer head ----
  logic [PW-1:0] rt_port [VI];
  logic [VI-1:0] rt_vc;
  logic [VI-1:0] vi_busy;            // granted, packet in transit
  logic [VI-1:0] unused_local;

  for (genvar v = 0; v < VI; v++) begin : g_rtr
    dnp_router #(.L(L), .M(M), .N(N)) u_rtr (
      .dst      (nh0_dst(vi_head[v].data)),
      .wr_port  (nh0_wr_port(vi_head[v].data)),
      .cfg      (cfg),
      .out_port (rt_port[v]),
      .out_vc   (rt_vc[v]),
      .is_local (unused_local[v])
    );
  end

  // ---- per-output arbitration and wormhole lock ----
  logic [P-1:0]   locked;
  logic [VIW-1:0] owner [P];
  logic [P-1:0]   lock_vc;
  logic [VI-1:0]  req   [P];
  logic [VI-1:0]  gnt   [P];
  logic [VIW-1:0] gidx  [P];
  logic [P-1:0]   gval;

  always_comb begin
    for (int o = 0; o < P; o++)
      for (int v = 0; v < VI; v++)
        req[o][v] = !locked[o] && vi_valid[v] && vi_head[v].sop && !vi_busy[v] &&
                    (rt_port[v] == PW'(o)) && (vi_phys[v] != PW'(o) || o < L);
  end

  for (genvar o = 0; o < P; o++) begin : g_arb
    dnp_arbiter #(.NREQ(VI)) u_arb (
      .clk, .rst_n,
      .req        (req[o]),
      .fixed_mode (cfg.arb_fixed),
      .prio       (VIW'(cfg.arb_prio)),
      .advance    (gval[o]),
      .grant      (gnt[o]),
      .grant_idx  (gidx[o]),
      .grant_valid(gval[o])
    );
  end

  // ---- datapath ----
  always_comb begin
    for (int o = 0; o < P; o++) begin
      out_valid[o] = locked[o] && vi_valid[owner[o]];
      out_flit[o]  = vi_head[owner[o]];
      out_vc[o]    = lock_vc[o];
      if (vi_head[owner[o]].sop)
        out_flit[o].data = nh0_set_vchan(vi_head[owner[o]].data, lock_vc[o]);
    end
  end

  // kept apart from the block above so that out_valid does not appear to depend on out_ready
  always_comb begin
    vi_pop = '0;
    for (int o = 0; o < P; o++)
      if (locked[o] && vi_valid[owner[o]] && out_ready[o]) vi_pop[owner[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked  <= '0;
      lock_vc <= '0;
      vi_busy <= '0;
      for (int o = 0; o < P; o++) owner[o] <= '0;
    end else begin
      for (int o = 0; o < P; o++) begin
        if (locked[o]) begin
          if (out_valid[o] && out_ready[o] && out_flit[o].eop) begin
            locked[o]        <= 1'b0;
            vi_busy[owner[o]] <= 1'b0;
          end
        end else if (gval[o]) begin
          locked[o]       <= 1'b1;
          owner[o]        <= gidx[o];
          lock_vc[o]      <= rt_vc[gidx[o]];
          vi_busy[gidx[o]] <= 1'b1;
        end
      end
    end
  end

  // A virtual input is granted at most one output at a time.
  for (genvar o = 0; o < P; o++) begin : g_chk
    a_one_owner: assert property (@(posedge clk) disable iff (!rst_n)
      gval[o] |-> !vi_busy[gidx[o]]);
  end
endmodule
