// tb_dnp_switch: every one of the 9 ports sends packets of random length (0..20 payload
// words) to destinations chosen from a table whose output port and VC were worked out by
// hand for this DNP (1,1,3) on a 4x4x4 torus, order Z,Y,X, chip mask = X and Z. Sinks
// take words with random back-pressure. Each output must deliver whole packets, unbroken
// (wormhole), in order per source, with the expected VC in the header. Output contention
// (two packets asking for one output in the same cycle) and the VC1 path are counted and
// must happen.
module tb_dnp_switch;
  import dnp_pkg::*;
  localparam int L = 2, M = 6, N = 1, P = L + M + N;
  localparam int NPKT = 40;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t cfg;
  logic [P-1:0] in_valid = '0, in_vc = '0, out_valid, out_vc, out_ready = '0;
  flit_t in_flit [P];
  logic [1:0] in_ready [P];
  flit_t out_flit [P];

  dnp_switch #(.L(L), .M(M), .N(N), .BUF_DEPTH(8)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // destination table: {x,y,z}, wr_port, expected port, expected vc
  localparam int ND = 8;
  int d_x[ND]  = '{1, 1, 1, 1, 2, 0, 1, 3};
  int d_y[ND]  = '{1, 1, 1, 1, 1, 1, 2, 0};
  int d_z[ND]  = '{3, 3, 0, 2, 3, 3, 3, 0};
  int d_wp[ND] = '{0, 1, 0, 0, 0, 0, 0, 0};
  int d_op[ND] = '{0, 1, 6, 7, 2, 3, 8, 6};
  int d_vc[ND] = '{0, 0, 1, 0, 0, 0, 0, 1};

  // per-source packet plan
  int plan_dst [P][NPKT];
  int plan_len [P][NPKT];
  int exp_q [P][P][$];       // [src][out] queue of sequence numbers
  int got_pkts = 0, total_pkts = 0, contention = 0, vc1_seen = 0;

  function automatic word_t pay(int src, int seq, int i);
    return {8'(src), 8'(seq), 16'(i)};
  endfunction
  function automatic word_t pkt_word(int src, int seq, int k, int len);
    int d;
    d = plan_dst[src][seq];
    if (k == 0) return {6'(d_x[d]), 6'(d_y[d]), 6'(d_z[d]), 1'b0, 2'(d_wp[d]), 2'b00, 9'(len)};
    if (k == 1) return {18'(src * 256 + seq), 14'd0};
    if (k < 5)  return {8'hA0 + 8'(k), 8'(src), 16'(seq)};
    if (k < 5 + len) return pay(src, seq, k - 5);
    return 32'hF00D_0000 + 32'(seq);
  endfunction

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0;
    cfg.my_dnp = {6'd1, 6'd1, 6'd3};
    cfg.size_x = 6'd4; cfg.size_y = 6'd4; cfg.size_z = 6'd4;
    cfg.route_order = {2'd0, 2'd1, 2'd2};
    cfg.chip_mask = 18'h3F03F;
    for (int s = 0; s < P; s++) begin
      in_flit[s] = '0;
      for (int q = 0; q < NPKT; q++) begin
        int d;
        do d = $urandom % ND; while (s >= L && d_op[d] == s);
        plan_dst[s][q] = d;
        plan_len[s][q] = $urandom % 21;
        exp_q[s][d_op[d]].push_back(q);
        total_pkts++;
      end
    end
  end

  // sources
  for (genvar s = 0; s < P; s++) begin : g_src
    initial begin
      @(posedge rst_n);
      for (int q = 0; q < NPKT; q++) begin
        int len, vc;
        len = plan_len[s][q];
        vc  = (s >= L && s < L + M) ? $urandom % 2 : 0;
        for (int k = 0; k < 6 + len; k++) begin
          @(negedge clk);
          while ($urandom % 4 == 0) @(negedge clk);
          in_valid[s] = 1'b1;
          in_vc[s]    = 1'(vc);
          in_flit[s].data = pkt_word(s, q, k, len);
          in_flit[s].sop  = (k == 0);
          in_flit[s].eop  = (k == 5 + len);
          #1;
          while (!in_ready[s][vc]) begin @(negedge clk); #1; end
          @(posedge clk); #1;
          in_valid[s] = 1'b0;
        end
      end
    end
  end

  // sinks
  for (genvar o = 0; o < P; o++) begin : g_snk
    initial begin
      int src, seq, k, len;
      k = 0; src = 0; seq = 0; len = 0;
      forever begin
        @(negedge clk);
        out_ready[o] = ($urandom % 10) < 7;
        @(posedge clk);
        if (out_valid[o] && out_ready[o]) begin
          if (k == 0) begin
            check(out_flit[o].sop, "packet starts with sop");
          end else begin
            check(!out_flit[o].sop, "no sop inside a packet (wormhole)");
          end
          if (k == 0) begin
            len = 0;
            if (nh0_vchan(out_flit[o].data)) vc1_seen++;
          end
          if (k == 1) begin
            src = int'(out_flit[o].data[31:14]) / 256;
            seq = int'(out_flit[o].data[31:14]) % 256;
            if (exp_q[src][o].size() == 0) check(0, "unexpected packet");
            else begin
              // packets of one off-chip input may pass each other on different VCs
              int idx;
              idx = -1;
              foreach (exp_q[src][o][j]) if (idx < 0 && exp_q[src][o][j] == seq) idx = j;
              if (src < L || src >= L + M) check(idx == 0, $sformatf("order src %0d out %0d", src, o));
              else check(idx >= 0, "packet expected");
              if (idx >= 0) exp_q[src][o].delete(idx);
            end
            len = plan_len[src][seq];
            check(d_op[plan_dst[src][seq]] == o, "right output port");
          end
          if (k >= 2) begin
            check(out_flit[o].data == pkt_word(src, seq, k, len), $sformatf("word %0d", k));
            if (k == 2) check(out_vc[o] == 1'(d_vc[plan_dst[src][seq]]), "output VC");
          end
          check(out_flit[o].eop == (k >= 2 && k == 5 + len), "eop position");
          if (out_flit[o].eop) begin
            k = 0;
            got_pkts++;
          end else k++;
        end
      end
    end
  end

  // contention monitor
  always @(posedge clk) begin
    for (int o = 0; o < P; o++)
      if ($countones(dut.req[o]) > 1) contention++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (got_pkts == total_pkts);
    repeat (5) @(posedge clk);
    check(contention > 0, $sformatf("output contention happened (%0d)", contention));
    check(vc1_seen > 0, "VC1 header seen");
    for (int s = 0; s < P; s++) for (int o = 0; o < P; o++)
      check(exp_q[s][o].size() == 0, "all packets delivered");
    $display("packets %0d contention cycles %0d vc1 %0d", got_pkts, contention, vc1_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
