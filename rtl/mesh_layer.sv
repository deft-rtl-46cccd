// mesh_layer: one layer of the 2.5D network, a DIM_X x DIM_Y mesh of deft_routers.
//
// With IS_INTERPOSER = 0 it is a chiplet: a 4x4 mesh whose routers at (1,0), (2,0), (1,3)
// and (2,3) are boundary routers, each with a VL to the interposer on its Vertical port.
// With IS_INTERPOSER = 1 it is the active interposer: a (2*CHIP_COLS) x (2*CHIP_ROWS) mesh
// whose every router has a Vertical (Up) port to one VL; the 2x2 quadrant under chiplet c
// carries c's VLs 0..3 in the order (0,0), (1,0), (0,1), (1,1) of the quadrant.
// Node n = y*DIM_X + x. Neighbouring routers are joined by direct wires (link register
// inside the sending router, so one cycle per hop). Local ports and Vertical ports are
// brought out as arrays indexed by node; on a chiplet only the four boundary nodes' Vertical
// ports are used (the others are tied off inside). Mesh edges are tied off.
module mesh_layer
  import defft_pkg::*;
#(
  parameter bit          IS_INTERPOSER = 1'b0,
  parameter int unsigned LAYER         = 0,
  parameter int unsigned DIM_X         = IS_INTERPOSER ? IP_DIM_X : CHIP_DIM,
  parameter int unsigned DIM_Y         = IS_INTERPOSER ? IP_DIM_Y : CHIP_DIM
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [NUM_CHIPLETS-1:0][NUM_VLS-1:0] vl_fault,
  // Local ports (processing elements, or DRAM on the interposer)
  input  link_t                                loc_in         [DIM_X*DIM_Y],
  output logic  [NUM_VC-1:0]                   loc_in_credit  [DIM_X*DIM_Y],
  output link_t                                loc_out        [DIM_X*DIM_Y],
  input  logic  [NUM_VC-1:0]                   loc_out_credit [DIM_X*DIM_Y],
  // Vertical ports
  input  link_t                                vert_in         [DIM_X*DIM_Y],
  output logic  [NUM_VC-1:0]                   vert_in_credit  [DIM_X*DIM_Y],
  output link_t                                vert_out        [DIM_X*DIM_Y],
  input  logic  [NUM_VC-1:0]                   vert_out_credit [DIM_X*DIM_Y]
);
  localparam int unsigned N = DIM_X * DIM_Y;

  link_t             r_in    [N][NUM_PORTS];
  logic [NUM_VC-1:0] r_inc   [N][NUM_PORTS];
  link_t             r_out   [N][NUM_PORTS];
  logic [NUM_VC-1:0] r_outc  [N][NUM_PORTS];

  for (genvar y = 0; y < DIM_Y; y++) begin : g_y
    for (genvar x = 0; x < DIM_X; x++) begin : g_x
      localparam int unsigned n = y * DIM_X + x;
      localparam bit HAS_VL = IS_INTERPOSER || (chip_vl_index(x, y) >= 0);

      deft_router #(.IS_INTERPOSER(IS_INTERPOSER), .LAYER(LAYER), .X(x), .Y(y)) u_router (
        .clk        (clk),
        .rst_n      (rst_n),
        .vl_fault   (vl_fault),
        .in_link    (r_in[n]),
        .in_credit  (r_inc[n]),
        .out_link   (r_out[n]),
        .out_credit (r_outc[n])
      );

      // Local
      assign r_in[n][P_LOCAL]  = loc_in[n];
      assign loc_in_credit[n]  = r_inc[n][P_LOCAL];
      assign loc_out[n]        = r_out[n][P_LOCAL];
      assign r_outc[n][P_LOCAL] = loc_out_credit[n];

      // Vertical
      if (HAS_VL) begin : g_vl
        assign r_in[n][P_VERT]   = vert_in[n];
        assign vert_in_credit[n] = r_inc[n][P_VERT];
        assign vert_out[n]       = r_out[n][P_VERT];
        assign r_outc[n][P_VERT] = vert_out_credit[n];
      end else begin : g_novl
        assign r_in[n][P_VERT]   = '0;
        assign vert_in_credit[n] = '0;
        assign vert_out[n]       = '0;
        assign r_outc[n][P_VERT] = '0;
      end

      // North (y-1) / South (y+1)
      if (y > 0) begin : g_n
        assign r_in[n][P_NORTH]  = r_out[n-DIM_X][P_SOUTH];
        assign r_outc[n][P_NORTH] = r_inc[n-DIM_X][P_SOUTH];
      end else begin : g_n_edge
        assign r_in[n][P_NORTH]  = '0;
        assign r_outc[n][P_NORTH] = '0;
      end
      if (y < DIM_Y - 1) begin : g_s
        assign r_in[n][P_SOUTH]  = r_out[n+DIM_X][P_NORTH];
        assign r_outc[n][P_SOUTH] = r_inc[n+DIM_X][P_NORTH];
      end else begin : g_s_edge
        assign r_in[n][P_SOUTH]  = '0;
        assign r_outc[n][P_SOUTH] = '0;
      end
      // West (x-1) / East (x+1)
      if (x > 0) begin : g_w
        assign r_in[n][P_WEST]  = r_out[n-1][P_EAST];
        assign r_outc[n][P_WEST] = r_inc[n-1][P_EAST];
      end else begin : g_w_edge
        assign r_in[n][P_WEST]  = '0;
        assign r_outc[n][P_WEST] = '0;
      end
      if (x < DIM_X - 1) begin : g_e
        assign r_in[n][P_EAST]  = r_out[n+1][P_WEST];
        assign r_outc[n][P_EAST] = r_inc[n+1][P_WEST];
      end else begin : g_e_edge
        assign r_in[n][P_EAST]  = '0;
        assign r_outc[n][P_EAST] = '0;
      end
    end
  end
endmodule
