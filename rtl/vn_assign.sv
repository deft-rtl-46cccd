// vn_assign: DeFT virtual-network (VN) assignment for a head flit at one router.
//
// Two VNs, VN.0 and VN.1, each with one VC. Deadlock freedom comes from three rules:
//   Rule 1  a packet may move from VN.0 to VN.1, never from VN.1 to VN.0;
//   Rule 2  in VN.0 no turn from an Up port (interposer -> chiplet) to a Horizontal port;
//   Rule 3  in VN.1 no turn from a Horizontal port to a Down port (chiplet -> interposer).
// The assignment that keeps them while balancing VC use is:
//   at the source router (input = Local):
//     source on the interposer, intra-chiplet packet, or a boundary router sending straight
//     down its own VL                       -> round robin between VN.0 and VN.1
//     packet for another layer otherwise    -> VN.0
//   at a boundary router (chiplet router with a VL):
//     leaving through the Down port         -> round robin (VN.0 packets only; VN.1 stays)
//     arriving through the Up port          -> VN.1
//   anywhere else                           -> keep the VN the packet has.
// The source rule for boundary routers whose table-selected VL is another router's VL is this
// design's reading: such a packet travels horizontally first, so it must start in VN.0 or
// Rule 3 would be broken at the Down port it reaches. Purely combinational; rr_vn is the
// router's round-robin pointer and use_rr tells the router to advance it when the head leaves.
module vn_assign
  import defft_pkg::*;
(
  input  logic  is_interposer,  // this router is on the interposer
  input  logic  is_boundary,    // this chiplet router is attached to a VL
  input  port_e in_port,        // port the head flit arrived on
  input  port_e out_port,       // port it leaves by
  input  logic  inter_layer,    // destination is on another layer than this router
  input  logic  cur_vn,         // VN the packet occupies now
  input  logic  rr_vn,          // round-robin choice offered by the router
  output logic  out_vn,         // VN for the next hop
  output logic  use_rr          // out_vn was taken from the round robin
);
  always_comb begin
    out_vn = cur_vn;
    use_rr = 1'b0;
    if (in_port == P_LOCAL) begin
      if (is_interposer || !inter_layer || (is_boundary && out_port == P_VERT)) begin
        out_vn = rr_vn;
        use_rr = 1'b1;
      end else begin
        out_vn = 1'b0;
      end
    end else if (is_boundary && !is_interposer) begin
      if (out_port == P_VERT) begin
        // Rule 1: only a VN.0 packet may be re-assigned; VN.1 stays VN.1.
        if (cur_vn == 1'b0) begin
          out_vn = rr_vn;
          use_rr = 1'b1;
        end
      end else if (in_port == P_VERT) begin
        out_vn = 1'b1;
      end
    end
  end
endmodule
