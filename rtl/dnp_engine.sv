// dnp_engine: the command engine (ENG). It takes RDMA commands from the CMD FIFO and
// GET requests that arrived from the network, fills out packet headers and hands one packet
// at a time ("job") to an intra-tile master port, which reads the payload from tile memory
// and pushes the packet into the switch. This is the paper's fragmenter: a command of any
// length is cut into packets of at most MAX_PAYLOAD (256) words.
//  LOOPBACK  data packets addressed to this DNP; the destination master port writes them
//  PUT/SEND  data packets addressed to the destination DNP (SEND: null destination address)
//  GET       one request packet to the source DNP; its one payload word is the destination
//            DNP. The source DNP's receive side turns it into a "GET-serve" request, which
//            the engine runs like a PUT (packets flagged get_resp) towards the destination.
// After the last packet of a command has left the master port, and if the command asks for
// it, a completion event (EV_CMD_DONE, or EV_GET_DONE for a served GET) goes to the RDMA
// controller for the completion queue. Pending GET-serve requests go before new commands.
// Own choices: one packet in flight per engine (the next job starts when the master port
// reports the previous one done); a zero-length command sends one packet without payload.
module dnp_engine
  import dnp_pkg::*;
#(
  parameter int unsigned L           = 2,
  parameter int unsigned MAX_PAYLOAD_W = MAX_PAYLOAD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  cfg_t       cfg,
  // commands from the CMD FIFO
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  cmd_t       cmd,
  // GET requests to serve (from the master ports' receive side)
  input  logic [L-1:0] gs_valid,
  output logic [L-1:0] gs_ready,
  input  cmd_t       gs_cmd [L],
  // packet jobs to the master ports
  output logic [L-1:0] job_valid,
  input  logic [L-1:0] job_ready,
  output hdr_t       job_hdr,
  output word_t      job_rd_addr,
  output logic       job_inline,     // payload is job_word, not read from memory
  output word_t      job_word,
  input  logic [L-1:0] job_done,
  // completion events
  output logic       ev_valid,
  input  logic       ev_ready,
  output event_t     ev,
  output logic       busy
);
  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_EVENT} state_t;
  state_t state;

  cmd_t             cur;
  logic             cur_gs;       // serving a GET request
  logic [LEN_W-1:0] off;          // words already packetised
  logic [1:0]       port;

  logic [LEN_W-1:0] remain;
  logic [8:0]       this_len;
  logic             last_pkt;

  assign remain   = cur.len - off;
  assign this_len = (cur.op == OP_GET && !cur_gs) ? 9'd1 :
                    (remain > LEN_W'(MAX_PAYLOAD_W)) ? 9'(MAX_PAYLOAD_W) : 9'(remain);
  assign last_pkt = (cur.op == OP_GET && !cur_gs) || (remain <= LEN_W'(MAX_PAYLOAD_W));

  // Which GET-serve request, if any, is taken (lowest index).
  logic       gs_any;
  logic [1:0] gs_sel;
  always_comb begin
    gs_any = 1'b0;
    gs_sel = '0;
    for (int i = L - 1; i >= 0; i--)
      if (gs_valid[i]) begin
        gs_any = 1'b1;
        gs_sel = 2'(i);
      end
  end

  always_comb begin
    gs_ready  = '0;
    cmd_ready = 1'b0;
    if (state == S_IDLE) begin
      if (gs_any)                      gs_ready[gs_sel] = 1'b1;
      else if (cfg.eng_en)             cmd_ready = 1'b1;
    end
  end

  // Header of the packet being issued.
  always_comb begin
    job_hdr          = '0;
    job_hdr.src_dnp  = cfg.my_dnp;
    job_hdr.wr_port  = cur.wr_port;
    job_hdr.pkt_len  = this_len;
    job_hdr.cq_en    = cur.cq_en;
    job_hdr.cmd_len  = cur.len;
    job_hdr.src_addr = cur.src_addr + off;
    job_hdr.dst_addr = cur.dst_addr + off;
    job_inline       = 1'b0;
    job_word         = '0;
    case (cur.op)
      OP_LOOPBACK: begin
        job_hdr.op      = OP_LOOPBACK;
        job_hdr.dst_dnp = cfg.my_dnp;
      end
      OP_PUT: begin
        job_hdr.op       = OP_PUT;
        job_hdr.dst_dnp  = cur.dst_dnp;
        job_hdr.get_resp = cur_gs;
      end
      OP_SEND: begin
        job_hdr.op       = OP_SEND;
        job_hdr.dst_dnp  = cur.dst_dnp;
        job_hdr.dst_addr = '0;
      end
      default: begin  // GET request
        job_hdr.op       = OP_GET;
        job_hdr.dst_dnp  = cur.src_dnp;
        job_hdr.src_addr = cur.src_addr;
        job_hdr.dst_addr = cur.dst_addr;
        job_inline       = 1'b1;
        job_word         = {14'd0, cur.dst_dnp};
      end
    endcase
  end

  assign job_rd_addr = cur.src_addr + off;
  assign busy        = (state != S_IDLE);

  always_comb begin
    job_valid = '0;
    if (state == S_ISSUE) job_valid[port] = 1'b1;
  end

  always_comb begin
    ev       = '0;
    ev.etype = cur_gs ? EV_GET_DONE : EV_CMD_DONE;
    ev.peer  = (cur.op == OP_GET) ? cur.src_dnp : cur.dst_dnp;
    ev.addr  = cur.src_addr;
    ev.len   = cur.len;
    ev.info  = cur.tag;
  end
  assign ev_valid = (state == S_EVENT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '0;
      cur_gs <= 1'b0;
      off    <= '0;
      port   <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          off <= '0;
          if (gs_any) begin
            cur    <= gs_cmd[gs_sel];
            cur_gs <= 1'b1;
            port   <= (32'(gs_cmd[gs_sel].rd_port) < L) ? gs_cmd[gs_sel].rd_port : 2'd0;
            state  <= S_ISSUE;
          end else if (cfg.eng_en && cmd_valid) begin
            cur    <= cmd;
            cur_gs <= 1'b0;
            port   <= (32'(cmd.rd_port) < L) ? cmd.rd_port : 2'd0;
            state  <= S_ISSUE;
          end
        end
        S_ISSUE: if (job_ready[port]) state <= S_WAIT;
        S_WAIT: if (job_done[port]) begin
          if (last_pkt) state <= cur.cq_en ? S_EVENT : S_IDLE;
          else begin
            off   <= off + LEN_W'(this_len);
            state <= S_ISSUE;
          end
        end
        S_EVENT: if (ev_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
