// Five-port 2D-mesh router: buffer ports, XY routing logic, switch arbiter
// and crossbar.
//
// Ports are numbered N=0, S=1, W=2, E=3, L=4 (local core). A flit accepted on
// in_link[p] is stored in the VC FIFO of buffer port p; its route is found by
// XY routing inside the port; the arbiter switches it through the crossbar,
// and it appears on out_link[o] one cycle after it won. The minimum latency
// from a flit on in_link to the same flit on out_link is 2 cycles (FIFO write,
// then arbitration with the registered crossbar). ds_ready[o][v] tells the
// router that the next hop on output o has room in VC v; in_ready[p][v] tells
// the upstream the same about this router; in_open[p][v] says that a
// packet has started to enter VC v of port p and its tail is still to come.
// idle is high when no flit is held
// anywhere in the router and no output is held by a packet.
//
// The five ports, the two VCs per input buffer, bufferless outputs and XY
// routing follow the paper; the internals are this design's own.
module router
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [COORD_W-1:0]           my_row,
  input  logic [COORD_W-1:0]           my_col,
  input  link_t     [NPORTS-1:0]       in_link,
  output vc_ready_t [NPORTS-1:0]       in_ready,
  output vc_ready_t [NPORTS-1:0]       in_open,
  output link_t     [NPORTS-1:0]       out_link,
  input  vc_ready_t [NPORTS-1:0]       ds_ready,
  output logic                         idle
);
  sw_req_t [NPORTS-1:0]             req;
  flit_t   [NPORTS-1:0]             req_flit;
  logic    [NPORTS-1:0][VC_W-1:0]   req_vc;
  logic    [NPORTS-1:0]             grant, sel_valid, out_locked, port_empty, out_valid;
  logic    [NPORTS-1:0][PID_W-1:0] sel;

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    buffer_port #(.DEPTH(DEPTH)) u_bp (
      .clk, .rst_n, .my_row, .my_col,
      .in_link   (in_link[p]),
      .in_ready  (in_ready[p]),
      .in_open   (in_open[p]),
      .ds_ready,
      .out_locked,
      .req       (req[p]),
      .req_flit  (req_flit[p]),
      .grant     (grant[p]),
      .empty     (port_empty[p])
    );
    assign req_vc[p]    = req[p].vc;
    assign out_valid[p] = out_link[p].valid;
  end

  router_arbiter u_arb (
    .clk, .rst_n, .req, .grant, .sel_valid, .sel, .out_locked
  );

  crossbar u_xbar (
    .clk, .rst_n,
    .in_flit  (req_flit),
    .in_vc    (req_vc),
    .sel_valid,
    .sel,
    .out_link
  );

  assign idle = (&port_empty) && !(|out_valid) && !(|out_locked);
endmodule
