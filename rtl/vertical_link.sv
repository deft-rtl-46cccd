// vertical_link: behavioural model of one bidirectional chiplet-to-interposer vertical link
// (a bundle of microbumps), for simulation only.
//
// The real part is a set of passive wires through microbumps; it has no logic of its own.
// This model carries the down channel (chiplet -> interposer flits, interposer -> chiplet
// credits) and the up channel (interposer -> chiplet flits, chiplet -> interposer credits)
// with zero delay while `fault` is low. While `fault` is high the link is open: nothing it
// carries arrives, which is how a microbump failure (mismatch, electromigration,
// thermomigration) shows itself. A flit lost this way is counted in `lost_flits`. The same
// `fault` bit is what the routers see in their VL fault mask, so in a correctly working
// DeFT network `lost_flits` stays zero: no router selects a faulty VL.
module vertical_link
  import defft_pkg::*;
(
  input  logic              clk,             // only for the lost-flit count
  input  logic              fault,
  // chiplet side (boundary router Down port)
  input  link_t             chip_out,        // flits going down
  output logic [NUM_VC-1:0] chip_out_credit, // credits for them, from the interposer
  output link_t             chip_in,         // flits coming up
  input  logic [NUM_VC-1:0] chip_in_credit,  // credits the chiplet returns
  // interposer side (interposer router Up port)
  output link_t             ip_in,
  input  logic [NUM_VC-1:0] ip_in_credit,
  input  link_t             ip_out,
  output logic [NUM_VC-1:0] ip_out_credit,
  // simulation statistic
  output int unsigned       lost_flits
);
  assign ip_in           = fault ? '0 : chip_out;
  assign chip_out_credit = fault ? '0 : ip_in_credit;
  assign chip_in         = fault ? '0 : ip_out;
  assign ip_out_credit   = fault ? '0 : chip_in_credit;

  initial lost_flits = 0;
  always @(posedge clk)
    if (fault) lost_flits <= lost_flits + 32'(chip_out.valid) + 32'(ip_out.valid);
endmodule
