// dnp_lut: the RDMA look-up table (LUT). Software registers each destination buffer as a
// record {start address, length, flags} through the slave port; a record is three words at
// LUT word offset 4*entry + {0: start, 1: length, 2: flags}. Flags: [0] valid, [1] may
// receive a SEND. When a packet arrives, the receiving side asks for a lookup and the LUT
// is scanned one record per cycle from entry 0, as the paper describes ("scanned in search
// for an entry matching the packet destination buffer"). A PUT matches the first valid
// record that holds the whole range [dst_addr, dst_addr+len). A SEND (null destination
// address) takes the first valid record with the SEND flag and room for len words; that
// record's SEND flag is cleared so the next SEND gets the next buffer (own choice: the paper
// does not say how a used SEND buffer is retired). Record format, entry count and the
// SEND flag handling are this design's choices.
// Timing: lk_done comes at most ENTRIES+2 cycles after lk_req is raised (earlier on a hit).
module dnp_lut
  import dnp_pkg::*;
#(
  parameter int unsigned ENTRIES = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // software access
  input  logic        sw_wr,
  input  logic [$clog2(ENTRIES)+1:0] sw_addr,
  input  word_t       sw_wdata,
  output word_t       sw_rdata,
  // lookup
  input  logic        lk_req,       // start a lookup (held until lk_done)
  input  logic        lk_send,
  input  word_t       lk_addr,
  input  logic [LEN_W-1:0] lk_len,
  output logic        lk_done,      // one-cycle pulse
  output logic        lk_hit,
  output word_t       lk_base,      // address to write the payload at
  output logic [$clog2(ENTRIES)-1:0] lk_index
);
  localparam int unsigned IW = $clog2(ENTRIES);

  word_t            start_a [ENTRIES];
  logic [LEN_W-1:0] len_a   [ENTRIES];
  logic [1:0]       flag_a  [ENTRIES];

  logic          busy;
  logic [IW-1:0] idx;

  wire [IW-1:0] sw_ent = sw_addr[IW+1:2];
  wire [1:0]    sw_fld = sw_addr[1:0];

  always_comb begin
    case (sw_fld)
      2'd0:    sw_rdata = start_a[sw_ent];
      2'd1:    sw_rdata = {8'd0, len_a[sw_ent]};
      2'd2:    sw_rdata = {30'd0, flag_a[sw_ent]};
      default: sw_rdata = '0;
    endcase
  end

  // Match of the record under the scan pointer (33-bit sums: no wrap-around).
  logic match;
  always_comb begin
    if (lk_send)
      match = flag_a[idx][0] && flag_a[idx][1] && (lk_len <= len_a[idx]);
    else
      match = flag_a[idx][0] && (lk_addr >= start_a[idx]) &&
              ({1'b0, lk_addr} + 33'(lk_len) <= {1'b0, start_a[idx]} + 33'(len_a[idx]));
  end

  wire last = (idx == IW'(ENTRIES-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      idx      <= '0;
      lk_done  <= 1'b0;
      lk_hit   <= 1'b0;
      lk_base  <= '0;
      lk_index <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        flag_a[i]  <= '0;
        start_a[i] <= '0;
        len_a[i]   <= '0;
      end
    end else begin
      lk_done <= 1'b0;
      if (sw_wr) begin
        case (sw_fld)
          2'd0: start_a[sw_ent] <= sw_wdata;
          2'd1: len_a[sw_ent]   <= sw_wdata[LEN_W-1:0];
          2'd2: flag_a[sw_ent]  <= sw_wdata[1:0];
          default: ;
        endcase
      end
      if (!busy) begin
        if (lk_req && !lk_done) begin
          busy <= 1'b1;
          idx  <= '0;
        end
      end else if (match || last) begin
        busy     <= 1'b0;
        lk_done  <= 1'b1;
        lk_hit   <= match;
        lk_index <= idx;
        lk_base  <= lk_send ? start_a[idx] : lk_addr;
        if (match && lk_send) flag_a[idx][1] <= 1'b0;
      end else begin
        idx <= idx + 1'b1;
      end
    end
  end
endmodule
