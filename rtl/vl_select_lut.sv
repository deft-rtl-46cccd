// vl_select_lut: fault-tolerant, load-balancing vertical-link (VL) selection table.
//
// Given the fault mask of a chiplet's four VLs (bit k set = VL k broken) and the index
// y*4+x of a router on that chiplet, the table returns the VL that router's inter-chiplet
// traffic should use. On the source chiplet it names the first intermediate destination
// (the VL a packet goes down); on the interposer, indexed by the destination router, it names
// the second (the VL a packet goes up). The mask of the chiplet selects one of the sixteen
// fault scenarios: fault-free, the fourteen with one to three broken VLs, and the all-broken
// case, which has no answer (connected = 0). Purely combinational ROM; no clock.
//
// The contents come from a design-time search, as the method prescribes: for each fault
// scenario, over all assignments s of the 16 routers to working VLs, minimise
//   C_s = sum_v ( rho * D_v + | (l_v - l_avg) / l_avg | ),   rho = 0.01,
// where l_v is the inter-chiplet traffic through VL v (uniform traffic assumed at design
// time), l_avg its mean over working VLs and D_v the sum of Manhattan distances from the
// routers that use v to v. The search is exact (dynamic programming over per-VL router
// counts). Ties are broken by the lowest count vector, then the first assignment found.
// File format: 256 hex digits, address {fault_mask, router_index}, data = VL index.
module vl_select_lut
  import defft_pkg::*;
#(
  parameter string INIT_FILE = "rtl/vl_select_lut.mem"
) (
  input  logic [NUM_VLS-1:0] fault_mask,
  input  logic [3:0]         router_idx,
  output logic [1:0]         vl,
  output logic               connected
);
  logic [1:0] rom [256];

  initial $readmemh(INIT_FILE, rom);

  always_comb begin
    vl        = rom[{fault_mask, router_idx}];
    connected = (fault_mask != '1);
  end
endmodule
