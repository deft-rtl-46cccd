// tb_deft_system: end-to-end test of the four-chiplet DeFT network at its full size.
//
// All 64 processing-element ports and the four DRAM ports (interposer corners) inject
// eight-flit packets to random destinations (any PE; PEs also address the DRAMs), obeying
// credits; every Local port has a sink that returns credits, at times slowly so that
// back-pressure builds up. Three phases: no VL faults; one broken VL on every chiplet; and
// 25 % of the VLs broken (three of chiplet 3's, two of chiplet 0's, one each elsewhere). The
// network is drained between phases, since a fault mask is static while traffic flows.
//
// Checks: every packet arrives once, whole and in order, at its destination; no flit is
// lost on a broken VL (so no router ever chose one). Mechanisms counted, each of which must
// occur: intra-chiplet packets delivered in both VNs (round-robin assignment), inter-chiplet
// heads going down in VN.0 and in VN.1 (re-assignment at the boundary router), heads going
// up in both VNs (both VNs used on the interposer), packets sent to a VL other than the
// fault-free choice because of a fault, and stalled flits (credit back-pressure).
module tb_deft_system;
  import defft_pkg::*;
  localparam int NPE = NUM_CHIPLETS * CHIP_NODES;
  localparam int NN  = NPE + IP_NODES;       // node ids: PEs, then interposer locals
  localparam int PKTS_PER_SRC = 12;

  logic clk = 0, rst_n = 0;
  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault = '0;
  link_t             pe_in [NPE];
  logic [NUM_VC-1:0] pe_in_credit [NPE];
  link_t             pe_out [NPE];
  logic [NUM_VC-1:0] pe_out_credit [NPE];
  link_t             ip_in [IP_NODES];
  logic [NUM_VC-1:0] ip_in_credit [IP_NODES];
  link_t             ip_out [IP_NODES];
  logic [NUM_VC-1:0] ip_out_credit [IP_NODES];
  int unsigned       vl_lost [NUM_CHIPLETS][NUM_VLS];

  deft_system dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int sent = 0, recv = 0, next_id = 1;
  bit sink_slow = 0;
  int expect_dst [int];                       // packet id -> destination node
  logic [1:0] tbl [256];

  // mechanism counters
  int n_intra_vn [2];
  int n_down_vn  [2];
  int n_up_vn    [2];
  int n_reroute = 0, n_stall = 0;

  always_ff @(posedge clk) cyc <= cyc + 1;

  function automatic bit is_dram(int n);
    return n == NPE + 0 || n == NPE + 3 || n == NPE + 12 || n == NPE + 15;
  endfunction

  function automatic link_t out_of(int n);
    return (n < NPE) ? pe_out[n] : ip_out[n - NPE];
  endfunction
  function automatic logic [NUM_VC-1:0] credit_of(int n);
    return (n < NPE) ? pe_in_credit[n] : ip_in_credit[n - NPE];
  endfunction

  // ---------------- sinks ----------------
  int    cur_id   [NN][NUM_VC];
  int    cur_idx  [NN][NUM_VC];
  int    pend     [NN][NUM_VC];
  head_t cur_head [NN][NUM_VC];
  always @(posedge clk) begin
    for (int n = 0; n < NN; n++) begin
      link_t l;
      for (int v = 0; v < NUM_VC; v++) begin
        logic c;
        c = 1'b0;
        if (pend[n][v] > 0 && (!sink_slow || $urandom_range(0, 2) == 0)) begin
          c = 1'b1; pend[n][v]--;
        end
        if (n < NPE) pe_out_credit[n][v] <= c; else ip_out_credit[n - NPE][v] <= c;
      end
      l = out_of(n);
      if (rst_n && l.valid) begin
        int v;
        v = int'(l.flit.vn);
        pend[n][v]++;
        if (l.flit.head) begin
          cur_head[n][v] = head_t'(l.flit.data);
          cur_idx[n][v] = 1;
          checks++;
          if (n < NPE) begin
            if (int'(cur_head[n][v].dst_layer) != n / CHIP_NODES ||
                int'(cur_head[n][v].dst_y) * CHIP_DIM + int'(cur_head[n][v].dst_x) != n % CHIP_NODES) begin
              failures++; $display("node %0d got a head for another node", n);
            end
            if (cur_head[n][v].src_layer == cur_head[n][v].dst_layer) n_intra_vn[v]++;
          end else if (cur_head[n][v].dst_layer != LAYER_IP) begin
            failures++; $display("interposer node %0d got a chiplet packet", n);
          end
          // re-routing around a fault: the source chose a VL other than its fault-free one
          if (cur_head[n][v].src_layer != LAYER_IP && cur_head[n][v].src_layer != cur_head[n][v].dst_layer &&
              cur_head[n][v].sel1 != tbl[{4'b0000, cur_head[n][v].src_y[1:0], cur_head[n][v].src_x[1:0]}])
            n_reroute++;
        end else begin
          int id;
          id = int'(l.flit.data[31:16]);
          checks++;
          if (cur_idx[n][v] == 1) cur_id[n][v] = id;
          if (id != cur_id[n][v] || int'(l.flit.data[15:0]) != cur_idx[n][v] ||
              l.flit.tail != (cur_idx[n][v] == PKT_LEN - 1)) begin
            failures++; $display("node %0d vc %0d: flit %0d of packet %0d wrong", n, v, cur_idx[n][v], cur_id[n][v]);
          end
          if (l.flit.tail) begin
            checks++;
            if (!expect_dst.exists(id) || expect_dst[id] != n) begin
              failures++; $display("packet %0d delivered to node %0d wrongly", id, n);
            end else expect_dst.delete(id);
            recv++;
          end
          cur_idx[n][v]++;
        end
      end
    end
  end

  // ---------------- VL observers ----------------
  for (genvar c = 0; c < NUM_CHIPLETS; c++) begin : g_obs
    for (genvar k = 0; k < NUM_VLS; k++) begin : g_obs_vl
      always @(posedge clk) if (rst_n) begin
        if (dut.g_chip[c].g_vl[k].u_vl.chip_out.valid && dut.g_chip[c].g_vl[k].u_vl.chip_out.flit.head)
          n_down_vn[dut.g_chip[c].g_vl[k].u_vl.chip_out.flit.vn]++;
        if (dut.g_chip[c].g_vl[k].u_vl.ip_out.valid && dut.g_chip[c].g_vl[k].u_vl.ip_out.flit.head)
          n_up_vn[dut.g_chip[c].g_vl[k].u_vl.ip_out.flit.vn]++;
      end
    end
  end
  // stalls seen at one busy interposer router
  always @(posedge clk)
    if (rst_n) for (int p = 0; p < NUM_PORTS; p++) for (int v = 0; v < NUM_VC; v++)
      if (dut.u_interposer.g_y[1].g_x[1].u_router.front_v[p][v] &&
          !dut.u_interposer.g_y[1].g_x[1].u_router.pop[p][v]) n_stall++;

  // ---------------- sources ----------------
  int cred [NN][NUM_VC];
  always @(posedge clk)
    if (rst_n) for (int n = 0; n < NN; n++) for (int v = 0; v < NUM_VC; v++)
      if (credit_of(n)[v]) cred[n][v]++;

  task automatic drive(int n, link_t l);
    if (n < NPE) pe_in[n] = l; else ip_in[n - NPE] = l;
  endtask

  task automatic source(int n, int npk);
    for (int i = 0; i < npk; i++) begin
      int d, id, vn;
      head_t h;
      flit_t f;
      if (is_dram(n)) d = $urandom_range(0, NPE - 1);
      else if ($urandom_range(0, 9) == 0) d = NPE + ((i % 4 == 0) ? 0 : (i % 4 == 1) ? 3 : (i % 4 == 2) ? 12 : 15);
      else d = $urandom_range(0, NPE - 1);
      if (d == n) d = (n + 1) % NPE;
      id = next_id++;
      expect_dst[id] = d;
      h = '0;
      h.tag = 10'(id);
      if (d < NPE) begin
        h.dst_layer = 3'(d / CHIP_NODES);
        h.dst_x = 3'((d % CHIP_NODES) % CHIP_DIM);
        h.dst_y = 3'((d % CHIP_NODES) / CHIP_DIM);
      end else begin
        h.dst_layer = LAYER_IP;
        h.dst_x = 3'((d - NPE) % IP_DIM_X);
        h.dst_y = 3'((d - NPE) / IP_DIM_X);
      end
      if (n < NPE) begin
        h.src_layer = 3'(n / CHIP_NODES);
        h.src_x = 3'((n % CHIP_NODES) % CHIP_DIM);
        h.src_y = 3'((n % CHIP_NODES) / CHIP_DIM);
      end else begin
        h.src_layer = LAYER_IP;
        h.src_x = 3'((n - NPE) % IP_DIM_X);
        h.src_y = 3'((n - NPE) / IP_DIM_X);
      end
      vn = $urandom_range(0, 1);
      for (int j = 0; j < PKT_LEN; j++) begin
        f.head = (j == 0); f.tail = (j == PKT_LEN - 1); f.vn = 1'(vn);
        f.data = (j == 0) ? FLIT_W'(h) : {16'(id), 16'(j)};
        while (cred[n][vn] == 0) begin @(negedge clk); drive(n, '0); end
        @(negedge clk);
        drive(n, '{valid: 1'b1, flit: f});
        cred[n][vn]--;
      end
      @(negedge clk); drive(n, '0);
      sent++;
      repeat ($urandom_range(0, 8)) @(negedge clk);
    end
  endtask

  task automatic run_phase(int npk);
    for (int n = 0; n < NN; n++) begin
      if (n < NPE || is_dram(n)) begin
        fork
          automatic int nn = n;
          source(nn, npk);
        join_none
      end
    end
    wait fork;
    while (expect_dst.size() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog: %0d packets outstanding", expect_dst.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("rtl/vl_select_lut.mem", tbl);
    n_intra_vn = '{0, 0}; n_down_vn = '{0, 0}; n_up_vn = '{0, 0};
    for (int n = 0; n < NN; n++) for (int v = 0; v < NUM_VC; v++) begin
      cred[n][v] = BUF_DEPTH; pend[n][v] = 0;
    end
    for (int n = 0; n < NPE; n++) begin pe_in[n] = '0; pe_out_credit[n] = '0; end
    for (int n = 0; n < IP_NODES; n++) begin ip_in[n] = '0; ip_out_credit[n] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // phase 0: fault-free, fast sinks
    run_phase(PKTS_PER_SRC);
    // phase 1: one broken VL per chiplet (12.5 %), slow sinks
    vl_fault[0] = 4'b0001; vl_fault[1] = 4'b1000; vl_fault[2] = 4'b0010; vl_fault[3] = 4'b0100;
    sink_slow = 1;
    run_phase(PKTS_PER_SRC);
    // phase 2: eight broken VLs (25 %)
    vl_fault[0] = 4'b1001; vl_fault[1] = 4'b0100; vl_fault[2] = 4'b1000; vl_fault[3] = 4'b0111;
    sink_slow = 0;
    run_phase(PKTS_PER_SRC);

    for (int c = 0; c < NUM_CHIPLETS; c++) for (int k = 0; k < NUM_VLS; k++) begin
      checks++;
      if (vl_lost[c][k] != 0) begin failures++; $display("VL %0d.%0d lost %0d flits", c, k, vl_lost[c][k]); end
    end
    checks++;
    if (recv != sent) begin failures++; $display("sent %0d received %0d", sent, recv); end
    $display("packets=%0d intra_vn0=%0d intra_vn1=%0d down_vn0=%0d down_vn1=%0d up_vn0=%0d up_vn1=%0d reroute=%0d stall=%0d cycles=%0d",
             recv, n_intra_vn[0], n_intra_vn[1], n_down_vn[0], n_down_vn[1], n_up_vn[0], n_up_vn[1], n_reroute, n_stall, cyc);
    checks++;
    if (n_intra_vn[0] == 0 || n_intra_vn[1] == 0 || n_down_vn[0] == 0 || n_down_vn[1] == 0 ||
        n_up_vn[0] == 0 || n_up_vn[1] == 0 || n_reroute == 0 || n_stall == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
