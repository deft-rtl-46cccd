// tb_mesh_layer: one chiplet (number 1) as a 4x4 mesh of DeFT routers.
//
// Every Local port injects eight-flit packets: intra-chiplet ones to random nodes of the
// chiplet and inter-chiplet ones addressed to other chiplets. Local and Vertical outputs
// end in sinks that return credits. An intra-chiplet packet must arrive whole at its node;
// an inter-chiplet one must leave through the Vertical port of the VL the selection table
// gives its source router under the current fault mask, in VN.0 or VN.1 (round robin at the
// boundary). Two phases: fault-free, then VL 2 and VL 3 broken. Mechanisms counted: both
// VNs leaving by the Down ports, and packets steered to a VL that is not the fault-free one.
module tb_mesh_layer;
  import defft_pkg::*;
  localparam int N = CHIP_NODES;
  localparam int PKTS = 10;
  localparam int LAY = 1;

  logic clk = 0, rst_n = 0;
  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault = '0;
  link_t             loc_in [N], loc_out [N], vert_in [N], vert_out [N];
  logic [NUM_VC-1:0] loc_in_credit [N], loc_out_credit [N], vert_in_credit [N], vert_out_credit [N];

  mesh_layer #(.IS_INTERPOSER(1'b0), .LAYER(LAY)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, sent = 0, recv = 0, next_id = 1;
  int expect_dst [int];     // id -> node (0..15 local, 16+k = VL k)
  logic [1:0] tbl [256];
  int n_down_vn [2];
  int n_steer = 0;

  int cur_id [2*N][NUM_VC], cur_idx [2*N][NUM_VC], pend [2*N][NUM_VC], cred [N][NUM_VC];

  always @(posedge clk) begin
    for (int s = 0; s < 2 * N; s++) begin
      link_t l;
      for (int v = 0; v < NUM_VC; v++) begin
        logic c;
        c = pend[s][v] > 0;
        if (c) pend[s][v]--;
        if (s < N) loc_out_credit[s][v] <= c; else vert_out_credit[s - N][v] <= c;
      end
      l = (s < N) ? loc_out[s] : vert_out[s - N];
      if (rst_n && l.valid) begin
        int v;
        v = int'(l.flit.vn);
        pend[s][v]++;
        if (l.flit.head) begin
          head_t h;
          h = head_t'(l.flit.data);
          cur_idx[s][v] = 1;
          if (s >= N) begin
            n_down_vn[v]++;
            if (h.sel1 != tbl[{4'b0000, h.src_y[1:0], h.src_x[1:0]}]) n_steer++;
          end
        end else begin
          int id;
          id = int'(l.flit.data[31:16]);
          if (cur_idx[s][v] == 1) cur_id[s][v] = id;
          checks++;
          if (id != cur_id[s][v] || int'(l.flit.data[15:0]) != cur_idx[s][v]) begin
            failures++; $display("sink %0d: flit %0d of packet %0d wrong", s, cur_idx[s][v], cur_id[s][v]);
          end
          if (l.flit.tail) begin
            int exp_s;
            exp_s = expect_dst.exists(id) ? expect_dst[id] : -1;
            checks++;
            if (exp_s != s) begin failures++; $display("packet %0d at sink %0d, expected %0d", id, s, exp_s); end
            expect_dst.delete(id);
            recv++;
          end
          cur_idx[s][v]++;
        end
      end
    end
  end

  always @(posedge clk)
    if (rst_n) for (int n = 0; n < N; n++) for (int v = 0; v < NUM_VC; v++)
      if (loc_in_credit[n][v]) cred[n][v]++;

  task automatic source(int n);
    for (int i = 0; i < PKTS; i++) begin
      int d, id, vn, k;
      head_t h;
      flit_t f;
      h = '0;
      id = next_id++;
      h.tag = 10'(id);
      h.src_layer = 3'(LAY); h.src_x = 3'(n % 4); h.src_y = 3'(n / 4);
      if ($urandom_range(0, 1) == 0) begin
        d = $urandom_range(0, N - 1);
        h.dst_layer = 3'(LAY); h.dst_x = 3'(d % 4); h.dst_y = 3'(d / 4);
        expect_dst[id] = d;
      end else begin
        h.dst_layer = ($urandom_range(0, 3) == 0) ? LAYER_IP : 3'(2);
        h.dst_x = 3'($urandom_range(0, 3)); h.dst_y = 3'($urandom_range(0, 3));
        k = int'(tbl[{vl_fault[LAY], 4'(n)}]);
        d = N + int'(vl_chip_y(2'(k))) * 4 + int'(vl_chip_x(2'(k)));
        expect_dst[id] = d;
      end
      vn = $urandom_range(0, 1);
      for (int j = 0; j < PKT_LEN; j++) begin
        f.head = (j == 0); f.tail = (j == PKT_LEN - 1); f.vn = 1'(vn);
        f.data = (j == 0) ? FLIT_W'(h) : {16'(id), 16'(j)};
        while (cred[n][vn] == 0) begin @(negedge clk); loc_in[n] = '0; end
        @(negedge clk);
        loc_in[n] = '{valid: 1'b1, flit: f};
        cred[n][vn]--;
      end
      @(negedge clk); loc_in[n] = '0;
      sent++;
    end
  endtask

  task automatic run_phase();
    for (int n = 0; n < N; n++) begin
      fork
        automatic int nn = n;
        source(nn);
      join_none
    end
    wait fork;
    while (expect_dst.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog: %0d outstanding", expect_dst.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("rtl/vl_select_lut.mem", tbl);
    n_down_vn = '{0, 0};
    for (int s = 0; s < 2 * N; s++) for (int v = 0; v < NUM_VC; v++) pend[s][v] = 0;
    for (int n = 0; n < N; n++) begin
      loc_in[n] = '0; vert_in[n] = '0;
      for (int v = 0; v < NUM_VC; v++) cred[n][v] = BUF_DEPTH;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_phase();
    vl_fault[LAY] = 4'b1100;
    run_phase();
    checks++;
    if (sent != recv) begin failures++; $display("sent %0d received %0d", sent, recv); end
    checks++;
    if (n_down_vn[0] == 0 || n_down_vn[1] == 0 || n_steer == 0) begin
      failures++; $display("mechanism missing: down vn0 %0d vn1 %0d steer %0d", n_down_vn[0], n_down_vn[1], n_steer);
    end
    $display("packets=%0d down_vn0=%0d down_vn1=%0d steered=%0d", recv, n_down_vn[0], n_down_vn[1], n_steer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
