// tb_dnp_engine: the command engine with models of two master ports (random job_ready,
// job_done after a random delay) and of the completion queue (random ev_ready).
// Random LOOPBACK, PUT, SEND and GET commands of 0..700 words are given; a reference
// model expands each into the packets it must become (fragments of at most 256 words,
// addresses advancing, header fields, GET as a single 1-word inline request to the source
// DNP) followed by the completion event when asked for. A GET-serve request raised while a
// command also waits must be served first (flagged get_resp, event EV_GET_DONE).
// Fragmented commands, GET requests and GET-serve priority are counted and must happen.
module tb_dnp_engine;
  import dnp_pkg::*;
  localparam int L = 2, NCMD = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  cfg_t cfg;
  logic cmd_valid = 1'b0, cmd_ready, ev_valid, ev_ready = 1'b0, busy;
  cmd_t cmd;
  logic [L-1:0] gs_valid = '0, gs_ready, job_valid, job_ready = '0, job_done = '0;
  cmd_t gs_cmd [L];
  hdr_t job_hdr;
  word_t job_rd_addr, job_word;
  logic job_inline;
  event_t ev;

  dnp_engine #(.L(L)) dut (.*);

  // expected packet: header fields that matter
  typedef struct { int port; opcode_t op; dnp_addr_t dst; int len; word_t sa; word_t da;
                   logic gr; logic inl; word_t iw; } pkt_t;
  typedef struct { logic v; evt_type_t t; word_t tag; } evx_t;
  pkt_t exp_p [$];
  evx_t exp_e [$];
  int n_frag = 0, n_get = 0, n_gs_first = 0, pkts = 0, evs = 0;

  task automatic expand(cmd_t c, logic gs);
    int off, n;
    off = 0;
    if (c.op == OP_GET && !gs) begin
      pkt_t p;
      p.port = c.rd_port; p.op = OP_GET; p.dst = c.src_dnp; p.len = 1; p.sa = c.src_addr;
      p.da = c.dst_addr; p.gr = 0; p.inl = 1; p.iw = 32'(c.dst_dnp);
      exp_p.push_back(p);
    end else begin
      do begin
        pkt_t p;
        n = (int'(c.len) - off > 256) ? 256 : int'(c.len) - off;
        p.port = c.rd_port; p.len = n; p.sa = c.src_addr + off; p.gr = gs; p.inl = 0; p.iw = 0;
        p.op  = c.op;
        p.dst = (c.op == OP_LOOPBACK) ? cfg.my_dnp : c.dst_dnp;
        p.da  = (c.op == OP_SEND) ? 0 : c.dst_addr + off;
        if (gs) p.op = OP_PUT;
        exp_p.push_back(p);
        off += n;
      end while (off < int'(c.len));
      if (int'(c.len) > 256) n_frag++;
    end
    if (c.cq_en) begin
      evx_t e;
      e.v = 1; e.t = gs ? EV_GET_DONE : EV_CMD_DONE; e.tag = c.tag;
      exp_e.push_back(e);
    end
  endtask

  function automatic cmd_t rand_cmd();
    cmd_t c;
    c = '0;
    c.op = opcode_t'($urandom % 4);
    c.cq_en = $urandom % 2;
    c.rd_port = 2'($urandom % 2);
    c.wr_port = 2'($urandom % 2);
    c.dst_dnp = 18'($urandom);
    c.src_dnp = 18'($urandom);
    c.src_addr = $urandom % 100000;
    c.dst_addr = $urandom % 100000;
    c.len = ($urandom % 4 == 0) ? 24'($urandom % 700) : 24'($urandom % 40);
    c.tag = $urandom;
    return c;
  endfunction

  // master port models
  for (genvar i = 0; i < L; i++) begin : g_port
    initial begin
      forever begin
        @(negedge clk);
        job_ready[i] = ($urandom % 3) != 0;
        job_done[i] = 1'b0;
        @(posedge clk);
        if (job_valid[i] && job_ready[i]) begin
          pkt_t p;
          if (exp_p.size() == 0) check(0, "unexpected packet");
          else begin
            p = exp_p.pop_front();
            check(p.port == i, "master port");
            check(job_hdr.op == p.op && job_hdr.dst_dnp == p.dst && int'(job_hdr.pkt_len) == p.len,
                  $sformatf("op/dst/len (got %0d want %0d)", job_hdr.pkt_len, p.len));
            check(job_rd_addr == p.sa && job_hdr.dst_addr == p.da, "addresses");
            check(job_hdr.get_resp == p.gr && job_inline == p.inl && (!p.inl || job_word == p.iw),
                  "GET fields");
            check(job_hdr.src_dnp == cfg.my_dnp, "source DNP");
          end
          pkts++;
          @(negedge clk); job_ready[i] = 1'b0;
          repeat ($urandom % 8) @(negedge clk);
          job_done[i] = 1'b1;
          @(negedge clk); job_done[i] = 1'b0;
        end
      end
    end
  end

  always @(negedge clk) ev_ready <= ($urandom % 2) == 0;
  always @(posedge clk) if (ev_valid && ev_ready) begin
    evx_t e;
    if (exp_e.size() == 0) check(0, "unexpected event");
    else begin
      e = exp_e.pop_front();
      check(ev.etype == e.t && ev.info == e.tag, "event type and tag");
    end
    evs++;
  end

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0;
    cfg.eng_en = 1'b1;
    cfg.my_dnp = 18'h0ABCD;
    for (int i = 0; i < L; i++) gs_cmd[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NCMD; n++) begin
      cmd_t c;
      c = rand_cmd();
      if (c.op == OP_GET) n_get++;
      @(negedge clk);
      // sometimes a GET-serve request arrives together with the command: it goes first
      if (n % 5 == 4) begin
        cmd_t g;
        int gi;
        g = rand_cmd();
        g.op = OP_PUT;
        gi = $urandom % L;
        gs_cmd[gi] = g;
        gs_valid[gi] = 1'b1;
        wait (!busy);
        @(negedge clk);
        expand(g, 1'b1);
        cmd_valid = 1'b1; cmd = c;
        @(posedge clk);
        check(gs_ready[gi] && !cmd_ready, "GET-serve before the command");
        if (gs_ready[gi]) n_gs_first++;
        #1 gs_valid[gi] = 1'b0;
        expand(c, 1'b0);
      end else begin
        expand(c, 1'b0);
        cmd_valid = 1'b1; cmd = c;
      end
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      #1 cmd_valid = 1'b0;
    end
    wait (exp_p.size() == 0 && exp_e.size() == 0);
    repeat (20) @(posedge clk);
    check(!busy, "idle at the end");
    $display("packets %0d events %0d fragmented %0d get %0d gs-first %0d", pkts, evs, n_frag, n_get, n_gs_first);
    check(n_frag > 0 && n_get > 0 && n_gs_first > 0, "fragmentation, GET and GET-serve priority happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
