// Normal/test mode multiplexers around the router.
//
// Inputs: in test mode the router's five input links come from the test
// packet generator, otherwise from the neighbours (and the local core).
// In test mode the ready levels shown to the neighbours are forced low, so
// nothing is sent in. While test mode is only requested (test_req, the
// router is draining) a VC stays open only if a packet is part-way through
// it (rtr_in_open), so packets already started can finish but no new packet
// enters.
// Outputs: in test mode the router's output links are hidden from the
// neighbours (valid forced low) and the router sees every VC of every output
// as ready, since the signature generator, which observes the outputs
// directly, accepts a flit every cycle. Purely combinational.
//
// The paper uses MUXs to switch between normal and test mode; the exact
// set of switched signals is this design's.
module test_mux
  import noc_pkg::*;
(
  input  logic                         test_mode,
  input  logic                         test_req,
  // neighbour side
  input  link_t     [NPORTS-1:0]       nbr_in_link,
  output vc_ready_t [NPORTS-1:0]       nbr_in_ready,
  output link_t     [NPORTS-1:0]       nbr_out_link,
  input  vc_ready_t [NPORTS-1:0]       nbr_ds_ready,
  // test packet generator
  input  link_t     [NPORTS-1:0]       tpg_link,
  // router side
  output link_t     [NPORTS-1:0]       rtr_in_link,
  input  vc_ready_t [NPORTS-1:0]       rtr_in_ready,
  input  vc_ready_t [NPORTS-1:0]       rtr_in_open,
  input  link_t     [NPORTS-1:0]       rtr_out_link,
  output vc_ready_t [NPORTS-1:0]       rtr_ds_ready
);
  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rtr_in_link[p]  = test_mode ? tpg_link[p] : nbr_in_link[p];
      if (test_mode)     nbr_in_ready[p] = '0;
      else if (test_req) nbr_in_ready[p] = rtr_in_ready[p] & rtr_in_open[p];
      else               nbr_in_ready[p] = rtr_in_ready[p];
      nbr_out_link[p] = rtr_out_link[p];
      if (test_mode) nbr_out_link[p].valid = 1'b0;
      rtr_ds_ready[p] = test_mode ? '1 : nbr_ds_ready[p];
    end
  end
endmodule
