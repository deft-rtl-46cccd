// tb_deft_router: one boundary router of chiplet 0 (position (1,0), VL 0) under random load.
//
// Credit-respecting sources drive eight-flit packets into the Local, East, South, West and
// Vertical (Up) inputs; sinks on all six outputs accept flits and return credits, sometimes
// after a random delay so that buffers fill and the router stalls. Every packet must leave
// whole, in order, on the output port of the XY/intermediate-destination reference, in one
// VN, and in a VN allowed by the DeFT assignment: VN.0 for an inter-chiplet packet injected
// here that heads off horizontally; VN.1 for a packet coming up from the interposer; the
// packet's own VN for a horizontal transit; either VN where round robin applies. One phase
// marks VL 0 faulty, so inter-chiplet packets from here must go East towards VL 1.
// The test also measures the zero-load latency (head presented -> head on output: 2 cycles)
// and counts stalls, round-robin use of both VNs and VN.0 -> VN.1 changes.
module tb_deft_router;
  import defft_pkg::*;
  localparam int RX = 1, RY = 0;

  logic clk = 0, rst_n = 0;
  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault = '0;
  link_t             in_link    [NUM_PORTS];
  logic [NUM_VC-1:0] in_credit  [NUM_PORTS];
  link_t             out_link   [NUM_PORTS];
  logic [NUM_VC-1:0] out_credit [NUM_PORTS];

  deft_router #(.IS_INTERPOSER(0), .LAYER(0), .X(RX), .Y(RY)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_stall = 0, n_rr0 = 0, n_rr1 = 0, n_to1 = 0, n_pkts = 0, n_sent = 0;
  logic [1:0] tbl [256];
  bit sink_slow = 0;

  typedef struct {
    flit_t       flits[PKT_LEN];
    port_e       exp_port;
    int          exp_vn;     // 0, 1, or -1 for either
  } pkt_t;

  pkt_t expect_q[$];          // packets in flight, searched by tag
  int   cred [NUM_PORTS][NUM_VC];

  always_ff @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference ----------------
  function automatic port_e ref_port(head_t h, port_e ip);
    int tx, ty; bit fin;
    logic [1:0] s1 = h.sel1;
    if (h.dst_layer == 3'd0) begin tx = int'(h.dst_x); ty = int'(h.dst_y); fin = 1; end
    else begin
      if (ip == P_LOCAL) s1 = tbl[{vl_fault[0], 4'(RY * 4 + RX)}];
      tx = (s1[0] == 0) ? 1 : 2; ty = (s1[1] == 0) ? 0 : 3; fin = 0;
    end
    if (tx > RX) return P_EAST;
    if (tx < RX) return P_WEST;
    if (ty > RY) return P_SOUTH;
    if (ty < RY) return P_NORTH;
    return fin ? P_LOCAL : P_VERT;
  endfunction

  // ---------------- sinks ----------------
  int   cur_tag [NUM_PORTS][NUM_VC];
  int   cur_idx [NUM_PORTS][NUM_VC];
  int   pend    [NUM_PORTS][NUM_VC];   // credits waiting to be returned
  always @(posedge clk) begin
    for (int o = 0; o < NUM_PORTS; o++) begin
      for (int v = 0; v < NUM_VC; v++) begin
        out_credit[o][v] <= 1'b0;
        if (pend[o][v] > 0 && (!sink_slow || $urandom_range(0, 3) == 0)) begin
          out_credit[o][v] <= 1'b1;
          pend[o][v]--;
        end
      end
      if (rst_n && out_link[o].valid) begin
        flit_t f;
        int v;
        f = out_link[o].flit;
        v = int'(f.vn);
        pend[o][v]++;
        if (f.head) begin
          head_t h;
          int k;
          h = head_t'(f.data);
          k = -1;
          foreach (expect_q[i]) if (expect_q[i].flits[0].data[9:0] == h.tag) k = i;
          checks++;
          if (k < 0) begin failures++; $display("unknown head tag %0d", h.tag); end
          else begin
            if (expect_q[k].exp_port != port_e'(o) ||
                (expect_q[k].exp_vn >= 0 && expect_q[k].exp_vn != v)) begin
              failures++;
              $display("tag %0d: out port %0d vn %0d, expected port %0d vn %0d",
                       h.tag, o, v, expect_q[k].exp_port, expect_q[k].exp_vn);
            end
            if (expect_q[k].exp_vn < 0) begin if (v == 0) n_rr0++; else n_rr1++; end
            if (expect_q[k].flits[0].vn == 1'b0 && v == 1) n_to1++;
          end
          cur_tag[o][v] = int'(h.tag);
          cur_idx[o][v] = 1;
        end else begin
          checks++;
          if (f.data != {16'(cur_tag[o][v]), 16'(cur_idx[o][v])} ||
              f.tail != (cur_idx[o][v] == PKT_LEN - 1)) begin
            failures++; $display("port %0d vc %0d: body flit %0d of tag %0d wrong: %h tail %b", o, v, cur_idx[o][v], cur_tag[o][v], f.data, f.tail);
          end
          if (f.tail) begin
            foreach (expect_q[i]) if (int'(expect_q[i].flits[0].data[9:0]) == cur_tag[o][v]) begin
              expect_q.delete(i); break;
            end
            n_pkts++;
          end
          cur_idx[o][v]++;
        end
      end
    end
  end

  // stall: some input VC holds a flit while the router grants nothing to it
  always @(posedge clk)
    if (rst_n) for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++)
      if (dut.front_v[p][v] && !dut.pop[p][v]) n_stall++;

  // ---------------- sources ----------------
  always @(posedge clk)
    for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++)
      if (rst_n && in_credit[p][v]) cred[p][v]++;

  task automatic send_pkt(port_e ip, int tag);
    pkt_t pk;
    head_t h;
    int vn;
    h = head_t'($urandom);
    h.tag = 10'(tag);
    h.dst_x = 3'($urandom_range(0, 3));
    h.dst_y = 3'($urandom_range(0, 3));
    if (ip == P_VERT) h.dst_layer = 3'd0;            // coming up: destination is here
    else h.dst_layer = ($urandom_range(0, 1) == 0) ? 3'd0 : 3'($urandom_range(1, 3));
    if (h.dst_layer != 3'd0 && ip != P_LOCAL) h.sel1 = 2'($urandom_range(0, 1)); // VL0 or VL1
    // VN the packet occupies on arrival
    if (ip == P_LOCAL || ip == P_VERT || h.dst_layer == 3'd0) vn = $urandom_range(0, 1);
    else vn = 0;                                      // inter-chiplet transit is in VN.0
    pk.flits[0] = '{head: 1'b1, tail: 1'b0, vn: 1'(vn), data: h};
    for (int i = 1; i < PKT_LEN; i++)
      pk.flits[i] = '{head: 1'b0, tail: (i == PKT_LEN - 1), vn: 1'(vn), data: {16'(tag), 16'(i)}};
    pk.exp_port = ref_port(h, ip);
    if (ip == P_LOCAL)
      pk.exp_vn = (h.dst_layer == 3'd0 || pk.exp_port == P_VERT) ? -1 : 0;
    else if (ip == P_VERT) pk.exp_vn = 1;
    else if (pk.exp_port == P_VERT && vn == 0) pk.exp_vn = -1;
    else pk.exp_vn = vn;
    expect_q.push_back(pk);
    for (int i = 0; i < PKT_LEN; i++) begin
      while (cred[ip][vn] == 0) begin
        @(negedge clk); in_link[ip] = '0;
      end
      @(negedge clk);
      in_link[ip] = '{valid: 1'b1, flit: pk.flits[i]};
      cred[ip][vn]--;
    end
    @(negedge clk); in_link[ip] = '0;
    n_sent++;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog: %0d packets outstanding", expect_q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tagc = 0;
    $readmemh("rtl/vl_select_lut.mem", tbl);
    for (int p = 0; p < NUM_PORTS; p++) begin
      in_link[p] = '0; out_credit[p] = '0;
      for (int v = 0; v < NUM_VC; v++) begin cred[p][v] = BUF_DEPTH; pend[p][v] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // zero-load latency of one packet, Local -> somewhere
    begin
      int t0, t1;
      fork
        send_pkt(P_LOCAL, tagc++);
        begin
          @(negedge clk); t0 = cyc;
          while (!(out_link[0].valid || out_link[1].valid || out_link[2].valid ||
                   out_link[3].valid || out_link[4].valid || out_link[5].valid)) @(negedge clk);
          t1 = cyc;
        end
      join
      checks++;
      if (t1 - t0 != 2) begin failures++; $display("zero-load router latency %0d, expected 2", t1 - t0); end
      repeat (20) @(posedge clk);
    end

    for (int phase = 0; phase < 3; phase++) begin
      sink_slow = (phase == 1);
      vl_fault[0] = (phase == 2) ? 4'b0001 : 4'b0000;
      fork
        for (int i = 0; i < 60; i++) send_pkt(P_LOCAL, tagc++);
        for (int i = 0; i < 60; i++) send_pkt(P_EAST,  200 + phase * 60 + i);
        for (int i = 0; i < 60; i++) send_pkt(P_SOUTH, 400 + phase * 60 + i);
        for (int i = 0; i < 60; i++) send_pkt(P_WEST,  600 + phase * 60 + i);
        for (int i = 0; i < 40; i++) send_pkt(P_VERT,  800 + phase * 40 + i);
      join
      while (expect_q.size() != 0) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (n_pkts != n_sent) begin failures++; $display("sent %0d delivered %0d", n_sent, n_pkts); end
    checks++;
    if (n_stall == 0 || n_rr0 == 0 || n_rr1 == 0 || n_to1 == 0) begin
      failures++; $display("mechanism missing");
    end
    $display("packets=%0d stalls=%0d rr_vn0=%0d rr_vn1=%0d vn0_to_vn1=%0d", n_pkts, n_stall, n_rr0, n_rr1, n_to1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
