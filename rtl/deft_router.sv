// deft_router: six-port, two-VC wormhole router running the DeFT routing algorithm.
//
// Ports 0..5 are Local, North, East, South, West and Vertical (Down on a chiplet, Up on the
// interposer). Every input port has one vc_fifo of BUF_DEPTH flits per VC; VC n belongs to
// virtual network n, so the VC a packet takes on the next hop is the VN that vn_assign gives
// it. Per input VC, a route_compute unit looks at the head flit, fills in the intermediate
// destinations from the VL-selection table and names the output port.
//
// One cycle per hop inside the router:
//   - an input VC is eligible when its front flit can move: a head needs its output VC to be
//     free (not held by another packet) and a credit; a body or tail flit needs a credit for
//     the output VC its packet holds;
//   - each input port picks one eligible VC (round robin), each output port grants one of
//     the requesting input ports (round robin);
//   - the granted flit is popped, re-labelled with its output VN (and, for a head, the filled
//     head fields) and registered onto the output link; a head reserves the output VC, the
//     tail releases it.
// Flow control is credit based: one credit per buffer slot, the receiver returns a one-cycle
// credit pulse per VC when it pops a flit. Credits from a downstream that never answers (an
// unconnected mesh edge) are never needed, since minimal routing never points off the mesh.
// A round-robin bit per router feeds vn_assign and advances whenever a granted head used it.
//
// The VC/VN organisation, buffer depth, rules and VL table follow the method; the allocator
// structure, single-cycle pipeline and credit protocol are this design's own choices.
module deft_router
  import defft_pkg::*;
#(
  parameter bit          IS_INTERPOSER = 1'b0,
  parameter int unsigned LAYER         = 0,
  parameter int unsigned X             = 0,
  parameter int unsigned Y             = 0
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault,
  input  link_t                                in_link    [NUM_PORTS],
  output logic  [NUM_VC-1:0]                   in_credit  [NUM_PORTS],  // to upstream
  output link_t                                out_link   [NUM_PORTS],
  input  logic  [NUM_VC-1:0]                   out_credit [NUM_PORTS]   // from downstream
);
  localparam bit IS_BOUNDARY = !IS_INTERPOSER && (chip_vl_index(int'(X), int'(Y)) >= 0);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  // ---------------- input side ----------------
  flit_t  front     [NUM_PORTS][NUM_VC];
  logic   front_v   [NUM_PORTS][NUM_VC];
  logic   pop       [NUM_PORTS][NUM_VC];
  port_e  rc_port   [NUM_PORTS][NUM_VC];
  head_t  rc_head   [NUM_PORTS][NUM_VC];
  logic   rc_inter  [NUM_PORTS][NUM_VC];
  logic   va_vn     [NUM_PORTS][NUM_VC];
  logic   va_rr     [NUM_PORTS][NUM_VC];

  logic   active    [NUM_PORTS][NUM_VC];   // packet holds an output VC
  port_e  act_port  [NUM_PORTS][NUM_VC];
  logic   act_vn    [NUM_PORTS][NUM_VC];

  logic   rr_vn;                            // round-robin VN pointer

  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_port
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      logic fifo_full;
      vc_fifo #(.DEPTH(BUF_DEPTH)) u_fifo (
        .clk      (clk),
        .rst_n    (rst_n),
        .wr_en    (in_link[p].valid && (in_link[p].flit.vn == 1'(v))),
        .wr_data  (in_link[p].flit),
        .rd_en    (pop[p][v]),
        .rd_valid (front_v[p][v]),
        .rd_data  (front[p][v]),
        .full     (fifo_full)
      );

      route_compute #(.IS_INTERPOSER(IS_INTERPOSER), .LAYER(LAYER), .X(X), .Y(Y)) u_rc (
        .head_in     (head_t'(front[p][v].data)),
        .in_port     (port_e'(p)),
        .vl_fault    (vl_fault),
        .out_port    (rc_port[p][v]),
        .head_out    (rc_head[p][v]),
        .inter_layer (rc_inter[p][v])
      );

      vn_assign u_va (
        .is_interposer (IS_INTERPOSER),
        .is_boundary   (IS_BOUNDARY),
        .in_port       (port_e'(p)),
        .out_port      (rc_port[p][v]),
        .inter_layer   (rc_inter[p][v]),
        .cur_vn        (1'(v)),
        .rr_vn         (rr_vn),
        .out_vn        (va_vn[p][v]),
        .use_rr        (va_rr[p][v])
      );

      logic unused_full;
      assign unused_full = fifo_full;
    end
  end

  // ---------------- output side state ----------------
  logic [CW-1:0] credits  [NUM_PORTS][NUM_VC];
  logic          ovc_busy [NUM_PORTS][NUM_VC];
  logic          in_rr    [NUM_PORTS];           // VC priority per input port
  logic [2:0]    out_rr   [NUM_PORTS];           // input-port priority per output port

  // ---------------- allocation ----------------
  logic   elig     [NUM_PORTS][NUM_VC];
  port_e  want_p   [NUM_PORTS][NUM_VC];
  logic   want_vn  [NUM_PORTS][NUM_VC];
  logic   req      [NUM_PORTS];      // input port has a chosen VC
  logic   req_vc   [NUM_PORTS];
  logic   gnt      [NUM_PORTS];      // per output port: a grant was made
  logic [2:0] gnt_in [NUM_PORTS];    // per output port: granted input port

  always_comb begin
    for (int p = 0; p < NUM_PORTS; p++) begin
      for (int v = 0; v < NUM_VC; v++) begin
        if (active[p][v]) begin
          want_p[p][v]  = act_port[p][v];
          want_vn[p][v] = act_vn[p][v];
          elig[p][v]    = front_v[p][v] && (credits[act_port[p][v]][act_vn[p][v]] != '0);
        end else begin
          want_p[p][v]  = rc_port[p][v];
          want_vn[p][v] = va_vn[p][v];
          elig[p][v]    = front_v[p][v] && front[p][v].head
                          && !ovc_busy[rc_port[p][v]][va_vn[p][v]]
                          && (credits[rc_port[p][v]][va_vn[p][v]] != '0);
        end
      end
      // stage 1: one VC per input port
      if (elig[p][in_rr[p]]) begin
        req[p] = 1'b1; req_vc[p] = in_rr[p];
      end else if (elig[p][!in_rr[p]]) begin
        req[p] = 1'b1; req_vc[p] = !in_rr[p];
      end else begin
        req[p] = 1'b0; req_vc[p] = 1'b0;
      end
    end
    // stage 2: one input port per output port
    for (int o = 0; o < NUM_PORTS; o++) begin
      gnt[o]    = 1'b0;
      gnt_in[o] = '0;
      for (int k = 0; k < NUM_PORTS; k++) begin
        int p;
        p = (int'(out_rr[o]) + k) % NUM_PORTS;
        if (!gnt[o] && req[p] && want_p[p][req_vc[p]] == port_e'(o)) begin
          gnt[o]    = 1'b1;
          gnt_in[o] = 3'(p);
        end
      end
    end
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) pop[p][v] = 1'b0;
    for (int o = 0; o < NUM_PORTS; o++)
      if (gnt[o]) pop[gnt_in[o]][req_vc[gnt_in[o]]] = 1'b1;
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk) begin
    logic              rr_used;
    logic [NUM_VC-1:0] dec;
    int                gp, gv;
    logic              gvn;
    flit_t             f;
    if (!rst_n) begin
      rr_vn <= 1'b0;
      for (int p = 0; p < NUM_PORTS; p++) begin
        in_rr[p]     <= 1'b0;
        out_rr[p]    <= '0;
        out_link[p]  <= '0;
        in_credit[p] <= '0;
        for (int v = 0; v < NUM_VC; v++) begin
          credits[p][v]  <= CW'(BUF_DEPTH);
          ovc_busy[p][v] <= 1'b0;
          active[p][v]   <= 1'b0;
          act_port[p][v] <= P_LOCAL;
          act_vn[p][v]   <= 1'b0;
        end
      end
    end else begin
      rr_used = 1'b0;
      for (int p = 0; p < NUM_PORTS; p++)
        for (int v = 0; v < NUM_VC; v++) in_credit[p][v] <= pop[p][v];

      for (int o = 0; o < NUM_PORTS; o++) begin
        dec = '0;
        out_link[o].valid <= 1'b0;
        if (gnt[o]) begin
          gp  = int'(gnt_in[o]);
          gv  = int'(req_vc[gp]);
          gvn = want_vn[gp][gv];
          f   = front[gp][gv];
          f.vn = gvn;
          if (f.head && !active[gp][gv]) begin
            f.data = rc_head[gp][gv];
            if (va_rr[gp][gv]) rr_used = 1'b1;
          end
          out_link[o].valid <= 1'b1;
          out_link[o].flit  <= f;
          dec[gvn] = 1'b1;
          in_rr[gp] <= !1'(gv);
          out_rr[o] <= 3'((gp + 1) % NUM_PORTS);
          if (f.tail) begin
            active[gp][gv]   <= 1'b0;
            ovc_busy[o][gvn] <= 1'b0;
          end else if (f.head) begin
            active[gp][gv]   <= 1'b1;
            act_port[gp][gv] <= port_e'(o);
            act_vn[gp][gv]   <= gvn;
            ovc_busy[o][gvn] <= 1'b1;
          end
        end
        for (int v = 0; v < NUM_VC; v++)
          credits[o][v] <= credits[o][v] - CW'(dec[v]) + CW'(out_credit[o][v]);
      end
      if (rr_used) rr_vn <= !rr_vn;
    end
  end

  // ---------------- protocol and DeFT-rule checks ----------------
  for (genvar p = 0; p < NUM_PORTS; p++) begin : g_chk
    for (genvar v = 0; v < NUM_VC; v++) begin : g_chk_vc
      // Wormhole: a VC that holds no output VC must show a head flit at its front.
      a_head_first : assert property (@(posedge clk) disable iff (!rst_n)
        (front_v[p][v] && !active[p][v]) |-> front[p][v].head);
      // Rule 1: never from VN.1 back to VN.0 (except at injection, where no VN is held yet).
      if (p != 0 && v == 1) begin : g_r1
        a_rule1 : assert property (@(posedge clk) disable iff (!rst_n)
          pop[p][v] |-> want_vn[p][v] == 1'b1);
      end
    end
  end
endmodule
