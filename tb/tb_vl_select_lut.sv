// tb_vl_select_lut: checks the VL-selection table against an independent optimisation.
// For every fault scenario the testbench (1) checks that no router is sent to a broken VL,
// (2) computes the cost C_s = sum_v (0.01 * D_v + |l_v - l_avg| / l_avg) of the table's
// selection under uniform traffic, and (3) finds the minimum cost over all selections itself
// (dynamic programming over per-VL router counts, min total distance per count vector) and
// requires the table to reach it. The fault-free entry must also be the quadrant split of
// the worked example (routers 0,1,4,5 -> VL0; 2,3,6,7 -> VL1; 8,9,12,13 -> VL2; rest -> VL3).
module tb_vl_select_lut;
  import defft_pkg::*;
  logic [3:0] fault_mask, router_idx;
  logic [1:0] vl;
  logic       connected;
  int checks = 0, failures = 0;

  vl_select_lut dut (.*);

  int dst [17][17][17][17];
  int ndst[17][17][17][17];

  function automatic int manh(int r, int k);
    int x, y, vx, vy;
    x = r % 4; y = r / 4;
    vx = (k % 2 == 0) ? 1 : 2; vy = (k < 2) ? 0 : 3;
    return ((x > vx) ? x - vx : vx - x) + ((y > vy) ? y - vy : vy - y);
  endfunction

  function automatic real load_cost(int n0, int n1, int n2, int n3, logic [3:0] m);
    int n[4];
    int nv; real avg, c;
    nv = 0; c = 0.0;
    n = '{n0, n1, n2, n3};
    for (int k = 0; k < 4; k++) if (!m[k]) nv++;
    avg = 16.0 / nv;
    for (int k = 0; k < 4; k++) if (!m[k]) c += ((n[k] - avg) < 0 ? avg - n[k] : n[k] - avg) / avg;
    return c;
  endfunction

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fig3a [16] = '{0,0,1,1, 0,0,1,1, 2,2,3,3, 2,2,3,3};
    for (int m = 0; m < 16; m++) begin
      int cnt[4];
      int d;
      real tcost, best;
      cnt = '{0, 0, 0, 0};
      d = 0;
      fault_mask = 4'(m);
      if (m == 15) begin
        router_idx = 0; #1;
        checks++; if (connected !== 1'b0) begin failures++; $display("all-faulty not flagged"); end
        continue;
      end
      for (int r = 0; r < 16; r++) begin
        router_idx = 4'(r); #1;
        checks++;
        if (!connected || fault_mask[vl]) begin
          failures++; $display("mask %h router %0d -> faulty VL %0d", m, r, vl);
        end
        if (m == 0) begin
          checks++;
          if (vl != 2'(fig3a[r])) begin failures++; $display("fault-free router %0d -> VL %0d", r, vl); end
        end
        cnt[vl]++; d += manh(r, int'(vl));
      end
      tcost = 0.01 * d + load_cost(cnt[0], cnt[1], cnt[2], cnt[3], 4'(m));
      // independent optimum
      foreach (dst[a, b, c, e]) dst[a][b][c][e] = 1 << 20;
      dst[0][0][0][0] = 0;
      for (int r = 0; r < 16; r++) begin
        foreach (ndst[a, b, c, e]) ndst[a][b][c][e] = 1 << 20;
        for (int a = 0; a <= r; a++) for (int b = 0; a + b <= r; b++)
          for (int c = 0; a + b + c <= r; c++) begin
            int e;
            e = r - a - b - c;
            if (dst[a][b][c][e] < (1 << 20)) begin
              for (int k = 0; k < 4; k++) if (!m[k]) begin
                int nd, na, nb, nc, ne;
                nd = dst[a][b][c][e] + manh(r, k);
                na = a + int'(k == 0); nb = b + int'(k == 1); nc = c + int'(k == 2); ne = e + int'(k == 3);
                if (nd < ndst[na][nb][nc][ne]) ndst[na][nb][nc][ne] = nd;
              end
            end
          end
        dst = ndst;
      end
      best = 1.0e9;
      for (int a = 0; a <= 16; a++) for (int b = 0; a + b <= 16; b++)
        for (int c = 0; a + b + c <= 16; c++) begin
          int e;
          real cc;
          e = 16 - a - b - c;
          if (dst[a][b][c][e] < (1 << 20)) begin
            cc = 0.01 * dst[a][b][c][e] + load_cost(a, b, c, e, 4'(m));
            if (cc < best) best = cc;
          end
        end
      checks++;
      if (best > 1.0e8 || tcost > best + 1e-9) begin
        failures++; $display("mask %h: table cost %f above optimum %f", m, tcost, best);
      end else $display("mask %h: cost %f (optimum %f) counts %0d %0d %0d %0d", m, tcost, best, cnt[0], cnt[1], cnt[2], cnt[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
