// tb_route_compute: route computation of three kinds of router against a reference model.
// Devices under test: an inner chiplet router (chiplet 1, (0,2)), a boundary chiplet router
// (chiplet 2, (2,3), VL 3) and an interposer router ((1,2), under chiplet 2). Random head
// flits, input ports and VL fault masks are applied. The reference computes, independently
// of the design, the intermediate destination (the VL from the selection table on a
// chiplet at injection, the destination chiplet's VL on the interposer at entry), its mesh
// position, and the XY output port (East/West first, then South/North, then Local/Vertical).
module tb_route_compute;
  import defft_pkg::*;
  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault;
  head_t head_in;
  port_e in_port;
  port_e op   [3];
  head_t ho   [3];
  logic  il   [3];
  logic [1:0] tbl [256];
  int checks = 0, failures = 0;
  int n_vert = 0, n_local = 0, n_sel = 0;

  route_compute #(.IS_INTERPOSER(0), .LAYER(1), .X(0), .Y(2)) dut0 (
    .head_in, .in_port, .vl_fault, .out_port(op[0]), .head_out(ho[0]), .inter_layer(il[0]));
  route_compute #(.IS_INTERPOSER(0), .LAYER(2), .X(2), .Y(3)) dut1 (
    .head_in, .in_port, .vl_fault, .out_port(op[1]), .head_out(ho[1]), .inter_layer(il[1]));
  route_compute #(.IS_INTERPOSER(1), .LAYER(0), .X(1), .Y(2)) dut2 (
    .head_in, .in_port, .vl_fault, .out_port(op[2]), .head_out(ho[2]), .inter_layer(il[2]));

  function automatic port_e xy(int x, int y, int tx, int ty, bit final_dest);
    if (tx > x) return P_EAST;
    if (tx < x) return P_WEST;
    if (ty > y) return P_SOUTH;
    if (ty < y) return P_NORTH;
    return final_dest ? P_LOCAL : P_VERT;
  endfunction

  initial begin : watchdog
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("rtl/vl_select_lut.mem", tbl);
    for (int it = 0; it < 3000; it++) begin
      int lay [3] = '{1, 2, 7};
      int rx  [3] = '{0, 2, 1};
      int ry  [3] = '{2, 3, 2};
      head_in = head_t'($urandom);
      head_in.dst_layer = ($urandom_range(0, 4) == 4) ? LAYER_IP : 3'($urandom_range(0, 3));
      head_in.dst_x = 3'($urandom_range(0, 3));
      head_in.dst_y = 3'($urandom_range(0, 3));
      in_port = port_e'($urandom_range(0, 5));
      for (int c = 0; c < 4; c++) begin
        vl_fault[c] = 4'($urandom_range(0, 14));
        if ($urandom_range(0, 2) == 0) vl_fault[c] = '0;
      end
      #1;
      for (int d = 0; d < 3; d++) begin
        bit inter, fin;
        logic [1:0] s1, s2;
        int tx, ty;
        port_e ep;
        inter = (int'(head_in.dst_layer) != lay[d]);
        s1 = head_in.sel1; s2 = head_in.sel2;
        if (d < 2 && inter && in_port == P_LOCAL)
          s1 = tbl[{vl_fault[lay[d]], 4'(ry[d] * 4 + rx[d])}];
        if (d == 2 && inter && (in_port == P_VERT || in_port == P_LOCAL))
          s2 = tbl[{vl_fault[head_in.dst_layer[1:0]], head_in.dst_y[1:0], head_in.dst_x[1:0]}];
        if (!inter) begin
          tx = int'(head_in.dst_x); ty = int'(head_in.dst_y); fin = 1;
        end else if (d < 2) begin
          tx = (s1[0] == 0) ? 1 : 2; ty = (s1[1] == 0) ? 0 : 3; fin = 0;
        end else begin
          tx = int'(head_in.dst_layer[0]) * 2 + int'(s2[0]);
          ty = int'(head_in.dst_layer[1]) * 2 + int'(s2[1]);
          fin = 0;
        end
        ep = xy(rx[d], ry[d], tx, ty, fin);
        checks++;
        if (op[d] != ep || il[d] != inter || ho[d].sel1 != s1 || ho[d].sel2 != s2 ||
            ho[d].dst_layer != head_in.dst_layer || ho[d].tag != head_in.tag) begin
          failures++;
          $display("dut%0d it %0d: port %0d exp %0d, sel %0d/%0d exp %0d/%0d", d, it,
                   op[d], ep, ho[d].sel1, ho[d].sel2, s1, s2);
        end
        if (ep == P_VERT) n_vert++;
        if (ep == P_LOCAL) n_local++;
        if ((d < 2 && s1 != head_in.sel1) || (d == 2 && s2 != head_in.sel2)) n_sel++;
      end
    end
    checks++;
    if (n_vert == 0 || n_local == 0 || n_sel == 0) begin
      failures++; $display("coverage: vert=%0d local=%0d sel=%0d", n_vert, n_local, n_sel);
    end
    $display("vert=%0d local=%0d sel-updates=%0d", n_vert, n_local, n_sel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
