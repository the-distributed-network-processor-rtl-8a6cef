// tb_dnp_router: random destinations, torus sizes and dimension orders; the port and VC
// are compared with a reference written here: local delivery, the on-chip port for
// same-chip addresses, otherwise the first differing coordinate in the programmed order,
// the shorter way round its ring, VC1 while the remaining path still wraps.
module tb_dnp_router;
  import dnp_pkg::*;
  localparam int L = 2, M = 6, N = 1;
  int checks = 0, failures = 0;

  dnp_addr_t dst;
  logic [1:0] wr_port;
  cfg_t cfg;
  logic [3:0] out_port;
  logic out_vc, is_local;

  dnp_router #(.L(L), .M(M), .N(N)) dut (.*);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int exp_port, exp_vc, sz[3], my[3], ds[3], ord[3], dim, plus_dist;
    int cnt_local = 0, cnt_onchip = 0, cnt_wrap = 0;
    int perms[6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2}, '{1,2,0}, '{2,0,1}, '{2,1,0}};
    cfg = '0;
    for (int t = 0; t < 3000; t++) begin
      int p;
      for (int k = 0; k < 3; k++) begin
        sz[k] = 1 + $urandom % 8;
        my[k] = $urandom % sz[k];
        ds[k] = $urandom % sz[k];
      end
      if (t % 10 == 0) for (int k = 0; k < 3; k++) ds[k] = my[k];
      p = $urandom % 6;
      for (int k = 0; k < 3; k++) ord[k] = perms[p][k];
      cfg.size_x = 6'(sz[0]); cfg.size_y = 6'(sz[1]); cfg.size_z = 6'(sz[2]);
      cfg.my_dnp = {6'(my[0]), 6'(my[1]), 6'(my[2])};
      cfg.route_order = {2'(ord[2]), 2'(ord[1]), 2'(ord[0])};
      cfg.chip_mask = (t % 7 == 0) ? 18'h3F000 : 18'h3FFFF;   // chip = X coordinate
      dst = {6'(ds[0]), 6'(ds[1]), 6'(ds[2])};
      wr_port = 2'($urandom % 2);
      #1;
      exp_vc = 0;
      if (dst == cfg.my_dnp) begin
        exp_port = wr_port; cnt_local++;
      end else if ((dst & cfg.chip_mask) == (cfg.my_dnp & cfg.chip_mask)) begin
        exp_port = L + M; cnt_onchip++;
      end else begin
        dim = -1;
        for (int k = 0; k < 3; k++) if (dim < 0 && ds[ord[k]] != my[ord[k]]) dim = ord[k];
        plus_dist = (ds[dim] - my[dim] + sz[dim]) % sz[dim];
        if (plus_dist <= sz[dim] / 2) begin
          exp_port = L + 2 * dim;     exp_vc = (ds[dim] < my[dim]);
        end else begin
          exp_port = L + 2 * dim + 1; exp_vc = (ds[dim] > my[dim]);
        end
        cnt_wrap += exp_vc;
      end
      check(out_port == 4'(exp_port) && out_vc == 1'(exp_vc) && is_local == (dst == cfg.my_dnp),
            $sformatf("dst %h my %h order %h: port %0d/%0d vc %0d/%0d", dst, cfg.my_dnp,
                      cfg.route_order, out_port, exp_port, out_vc, exp_vc));
    end
    check(cnt_local > 0 && cnt_onchip > 0 && cnt_wrap > 0, "all route kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
