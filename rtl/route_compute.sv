// route_compute: output-port computation of a DeFT router for one head flit.
//
// Inter-chiplet packets travel source chiplet -> interposer -> destination chiplet and reach
// two intermediate destinations on the way: a VL of the source chiplet (sel1) and, on the
// interposer, the landing point of a VL of the destination chiplet (sel2). Both are taken
// from the VL-selection table using the current fault mask of the chiplet concerned:
//   - a chiplet router fills sel1 when the packet is injected at its Local port
//     (table indexed by this router);
//   - an interposer router fills sel2 when the packet enters the interposer, from the Vertical
//     port or from its Local port (table indexed by the destination router on its chiplet).
// Between destinations the packet is routed minimally with XY dimension order on the mesh of
// its current layer (x first; North is y-1). The routed port is P_VERT at the chosen VL and
// P_LOCAL at the final destination. Combinational; head_out is the head flit with the new
// fields, which the router forwards in place of the received head.
//
// Intra-layer XY routing and the point at which the two table look-ups happen are this
// design's choices; the two-intermediate-destination scheme and the table are the method's.
// A chiplet whose four VLs are all broken is disconnected; its table entry is then VL 0
// and packets for it are not deliverable (the method excludes that case).
module route_compute
  import defft_pkg::*;
#(
  parameter bit          IS_INTERPOSER = 1'b0,
  parameter int unsigned LAYER         = 0,   // chiplet number (ignored on the interposer)
  parameter int unsigned X             = 0,
  parameter int unsigned Y             = 0
) (
  input  head_t                           head_in,
  input  port_e                           in_port,
  input  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault,  // per chiplet, bit k = VL k broken
  output port_e                           out_port,
  output head_t                           head_out,
  output logic                            inter_layer
);
  localparam logic [2:0] MY_LAYER = IS_INTERPOSER ? LAYER_IP : 3'(LAYER);

  logic [NUM_VLS-1:0] lut_mask;
  logic [3:0]         lut_idx;
  logic [1:0]         lut_vl;
  logic               lut_conn;

  vl_select_lut u_lut (
    .fault_mask (lut_mask),
    .router_idx (lut_idx),
    .vl         (lut_vl),
    .connected  (lut_conn)
  );

  always_comb begin
    if (IS_INTERPOSER) begin
      lut_mask = (head_in.dst_layer < 3'(NUM_CHIPLETS)) ? vl_fault[head_in.dst_layer[$clog2(NUM_CHIPLETS)-1:0]] : '0;
      lut_idx  = {head_in.dst_y[1:0], head_in.dst_x[1:0]};
    end else begin
      lut_mask = vl_fault[LAYER];
      lut_idx  = 4'(Y * CHIP_DIM + X);
    end
  end

  logic [2:0] tx, ty;
  logic       at_final;  // target is the final destination (else a VL)

  always_comb begin
    head_out    = head_in;
    inter_layer = (head_in.dst_layer != MY_LAYER);

    if (IS_INTERPOSER) begin
      if (inter_layer && (in_port == P_VERT || in_port == P_LOCAL)) head_out.sel2 = lut_vl;
    end else begin
      if (inter_layer && in_port == P_LOCAL) head_out.sel1 = lut_vl;
    end

    if (!inter_layer) begin
      tx = head_in.dst_x;
      ty = head_in.dst_y;
      at_final = 1'b1;
    end else if (IS_INTERPOSER) begin
      tx = vl_ip_x(head_in.dst_layer, head_out.sel2);
      ty = vl_ip_y(head_in.dst_layer, head_out.sel2);
      at_final = 1'b0;
    end else begin
      tx = vl_chip_x(head_out.sel1);
      ty = vl_chip_y(head_out.sel1);
      at_final = 1'b0;
    end

    if      (tx > 3'(X)) out_port = P_EAST;
    else if (tx < 3'(X)) out_port = P_WEST;
    else if (ty > 3'(Y)) out_port = P_SOUTH;
    else if (ty < 3'(Y)) out_port = P_NORTH;
    else                 out_port = at_final ? P_LOCAL : P_VERT;
  end

  // lut_conn is informative only: a disconnected chiplet is outside the method's scope.
  logic unused_conn;
  assign unused_conn = lut_conn;
endmodule
