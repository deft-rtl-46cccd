// deft_system: the baseline 2.5D chiplet network running DeFT routing.
//
// Four 4x4 chiplet meshes (64 routers, one per processing element) stand on an active
// interposer, itself a 4x4 mesh (16 routers). Each chiplet connects to the interposer by four
// bidirectional vertical links (VLs) from its boundary routers (1,0), (2,0), (1,3), (2,3) to
// the 2x2 interposer quadrant beneath it. Inter-chiplet packets go down a VL chosen on the
// source chiplet, cross the interposer and go up a VL chosen for the destination, both from
// the fault-aware VL-selection tables; the two virtual networks keep the whole network free of
// deadlock while letting any working VL be used.
//
// Interface (all plain arrays of link_t, the flit-plus-valid bundle, with one credit bit per
// VC flowing back):
//   pe_*   Local ports of the 64 chiplet routers, node = chiplet*16 + y*4 + x. A processing
//          element injects on pe_in (obeying pe_in_credit) and receives on pe_out, returning
//          a credit on pe_out_credit for each flit it consumes.
//   ip_*   Local ports of the 16 interposer routers, node = y*4 + x. DRAM controllers
//          attach at the corners (0,0), (3,0), (0,3), (3,3); the other ports may stay idle.
//   vl_fault  bit [c][k] = VL k of chiplet c is broken. It both opens the link (behavioural
//          vertical_link) and steers the routers' VL selection away from it.
//   vl_lost   flits lost on each VL (simulation statistic; zero when routing is correct).
// Timing: one cycle per router hop, zero-delay vertical links, credits one cycle after a pop.
module deft_system
  import defft_pkg::*;
(
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault,
  input  link_t                                pe_in          [NUM_CHIPLETS*CHIP_NODES],
  output logic  [NUM_VC-1:0]                   pe_in_credit   [NUM_CHIPLETS*CHIP_NODES],
  output link_t                                pe_out         [NUM_CHIPLETS*CHIP_NODES],
  input  logic  [NUM_VC-1:0]                   pe_out_credit  [NUM_CHIPLETS*CHIP_NODES],
  input  link_t                                ip_in          [IP_NODES],
  output logic  [NUM_VC-1:0]                   ip_in_credit   [IP_NODES],
  output link_t                                ip_out         [IP_NODES],
  input  logic  [NUM_VC-1:0]                   ip_out_credit  [IP_NODES],
  output int unsigned                          vl_lost        [NUM_CHIPLETS][NUM_VLS]
);
  // interposer vertical ports
  link_t             ipv_in   [IP_NODES];
  logic [NUM_VC-1:0] ipv_inc  [IP_NODES];
  link_t             ipv_out  [IP_NODES];
  logic [NUM_VC-1:0] ipv_outc [IP_NODES];

  mesh_layer #(.IS_INTERPOSER(1'b1), .LAYER(0)) u_interposer (
    .clk             (clk),
    .rst_n           (rst_n),
    .vl_fault        (vl_fault),
    .loc_in          (ip_in),
    .loc_in_credit   (ip_in_credit),
    .loc_out         (ip_out),
    .loc_out_credit  (ip_out_credit),
    .vert_in         (ipv_in),
    .vert_in_credit  (ipv_inc),
    .vert_out        (ipv_out),
    .vert_out_credit (ipv_outc)
  );

  for (genvar c = 0; c < NUM_CHIPLETS; c++) begin : g_chip
    link_t             cv_in   [CHIP_NODES];
    logic [NUM_VC-1:0] cv_inc  [CHIP_NODES];
    link_t             cv_out  [CHIP_NODES];
    logic [NUM_VC-1:0] cv_outc [CHIP_NODES];
    link_t             pin     [CHIP_NODES];
    logic [NUM_VC-1:0] pinc    [CHIP_NODES];
    link_t             pout    [CHIP_NODES];
    logic [NUM_VC-1:0] poutc   [CHIP_NODES];

    for (genvar n = 0; n < CHIP_NODES; n++) begin : g_pe
      assign pin[n]                          = pe_in[c*CHIP_NODES + n];
      assign pe_in_credit[c*CHIP_NODES + n]  = pinc[n];
      assign pe_out[c*CHIP_NODES + n]        = pout[n];
      assign poutc[n]                        = pe_out_credit[c*CHIP_NODES + n];
    end

    mesh_layer #(.IS_INTERPOSER(1'b0), .LAYER(c)) u_chiplet (
      .clk             (clk),
      .rst_n           (rst_n),
      .vl_fault        (vl_fault),
      .loc_in          (pin),
      .loc_in_credit   (pinc),
      .loc_out         (pout),
      .loc_out_credit  (poutc),
      .vert_in         (cv_in),
      .vert_in_credit  (cv_inc),
      .vert_out        (cv_out),
      .vert_out_credit (cv_outc)
    );

    for (genvar n = 0; n < CHIP_NODES; n++) begin : g_tie
      if (chip_vl_index(n % CHIP_DIM, n / CHIP_DIM) < 0) begin : g_none
        assign cv_in[n]   = '0;
        assign cv_outc[n] = '0;
      end
    end

    for (genvar k = 0; k < NUM_VLS; k++) begin : g_vl
      localparam int unsigned CN = int'(vl_chip_y(2'(k))) * CHIP_DIM + int'(vl_chip_x(2'(k)));
      localparam int unsigned IN = int'(vl_ip_y(3'(c), 2'(k))) * IP_DIM_X + int'(vl_ip_x(3'(c), 2'(k)));
      vertical_link u_vl (
        .clk             (clk),
        .fault           (vl_fault[c][k]),
        .chip_out        (cv_out[CN]),
        .chip_out_credit (cv_outc[CN]),
        .chip_in         (cv_in[CN]),
        .chip_in_credit  (cv_inc[CN]),
        .ip_in           (ipv_in[IN]),
        .ip_in_credit    (ipv_inc[IN]),
        .ip_out          (ipv_out[IN]),
        .ip_out_credit   (ipv_outc[IN]),
        .lost_flits      (vl_lost[c][k])
      );
    end
  end
endmodule
