// tb_vn_assign: exhaustive test of the DeFT VN-assignment logic.
// Every combination of router kind, input port, output port, inter-layer flag, current VN
// and round-robin bit is applied. The output is compared with a reference written from the
// assignment algorithm, and the three deadlock rules are checked directly:
//   Rule 1: a packet already in VN.1 (not at injection) stays in VN.1;
//   Rule 2: on a chiplet, a packet arriving from the interposer (Up) and turning to a
//           horizontal port is in VN.1;
//   Rule 3: at injection a packet that will later travel horizontally to a Down port starts
//           in VN.0 (so it cannot be in VN.1 when it turns Horizontal -> Down).
module tb_vn_assign;
  import defft_pkg::*;
  logic  is_interposer, is_boundary, inter_layer, cur_vn, rr_vn, out_vn, use_rr;
  port_e in_port, out_port;
  int checks = 0, failures = 0;
  int n_rr = 0, n_to_vn1 = 0;

  vn_assign dut (.*);

  function automatic logic horiz(port_e p);
    return p inside {P_NORTH, P_EAST, P_SOUTH, P_WEST};
  endfunction

  initial begin : watchdog
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ip = 0; ip < 2; ip++)
    for (int bd = 0; bd < 2; bd++)
    for (int i = 0; i < NUM_PORTS; i++)
    for (int o = 0; o < NUM_PORTS; o++)
    for (int il = 0; il < 2; il++)
    for (int cv = 0; cv < 2; cv++)
    for (int rr = 0; rr < 2; rr++) begin
      logic exp_vn, exp_rr;
      if (ip == 1 && bd == 1) continue;           // interposer routers are not "boundary"
      if (bd == 0 && ip == 0 && (i == 5 || o == 5)) continue;  // no Vertical port there
      is_interposer = 1'(ip); is_boundary = 1'(bd);
      in_port = port_e'(i); out_port = port_e'(o);
      inter_layer = 1'(il); cur_vn = 1'(cv); rr_vn = 1'(rr);
      #1;
      // reference, written from the algorithm
      exp_rr = 1'b0; exp_vn = 1'(cv);
      if (i == 0) begin
        if (ip == 1 || il == 0 || (bd == 1 && o == 5)) begin exp_vn = 1'(rr); exp_rr = 1'b1; end
        else exp_vn = 1'b0;
      end else if (bd == 1) begin
        if (o == 5) begin
          if (cv == 0) begin exp_vn = 1'(rr); exp_rr = 1'b1; end
        end else if (i == 5) exp_vn = 1'b1;
      end
      checks++;
      if (out_vn !== exp_vn || use_rr !== exp_rr) begin
        failures++;
        $display("ip=%0d bd=%0d in=%0d out=%0d inter=%0d cur=%0d rr=%0d: got vn=%b rr=%b exp vn=%b rr=%b",
                 ip, bd, i, o, il, cv, rr, out_vn, use_rr, exp_vn, exp_rr);
      end
      // rule checks
      if (i != 0 && cv == 1) begin
        checks++; if (out_vn !== 1'b1) begin failures++; $display("Rule 1 broken"); end
      end
      if (ip == 0 && bd == 1 && i == 5 && horiz(port_e'(o))) begin
        checks++; if (out_vn !== 1'b1) begin failures++; $display("Rule 2 broken"); end
        n_to_vn1++;
      end
      if (ip == 0 && i == 0 && il == 1 && horiz(port_e'(o))) begin
        checks++; if (out_vn !== 1'b0) begin failures++; $display("Rule 3 source broken"); end
      end
      if (use_rr) n_rr++;
    end
    checks++;
    if (n_rr == 0 || n_to_vn1 == 0) begin failures++; $display("mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
