// Router input port ("buffer port") with NVC virtual channels.
//
// A flit arriving on in_link is written into the FIFO of the VC named by its
// VC id. For each VC the XY routing logic computes the output port from the
// head flit's destination; the port is remembered until the packet's tail has
// left, so body and tail flits follow their head. Every cycle one VC whose
// front flit can move is chosen (round robin between the VCs) and bids for
// its output through req; when grant is high the flit leaves and the FIFO is
// popped in the same cycle. A flit can move when the next hop has room in the
// same VC (ds_ready) and, for a head flit, when the output is not held by
// another packet (out_locked).
//
// in_ready[v] is a level meaning "one more flit for VC v fits"; it already
// counts the flit on in_link in the current cycle, so an upstream that
// registers its output cannot overflow the FIFO. in_open[v] is high while a
// packet has entered VC v through its head but its tail has not yet arrived;
// it lets the test logic close the port to new packets without cutting one
// in half.
//
// The paper gives two VCs per input buffer port and XY routing; FIFO depth,
// round-robin VC choice and the ready-level flow control are this design's
// choices. Reset: synchronous, active low.
module buffer_port
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [COORD_W-1:0]           my_row,
  input  logic [COORD_W-1:0]           my_col,
  input  link_t                        in_link,
  output vc_ready_t                    in_ready,
  output vc_ready_t                    in_open,
  input  vc_ready_t [NPORTS-1:0]       ds_ready,
  input  logic [NPORTS-1:0]            out_locked,
  output sw_req_t                      req,
  output flit_t                        req_flit,
  input  logic                         grant,
  output logic                         empty
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  flit_t           head_flit [NVC];
  logic [NVC-1:0]  vc_empty, vc_full, vc_pop, vc_push, eligible;
  logic [CW-1:0]   vc_count  [NVC];
  port_e           route_cur [NVC];
  port_e           route_q   [NVC];
  logic [VC_W-1:0] rr_q, sel_vc;
  logic            sel_ok;

  for (genvar v = 0; v < NVC; v++) begin : g_vc
    logic  in_flight;
    port_e head_route;

    assign vc_push[v] = in_link.valid && (in_link.vc == VC_W'(v));
    assign in_flight  = vc_push[v];
    assign in_ready[v] = (32'(vc_count[v]) + 32'(in_flight)) < DEPTH;

    vc_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push (vc_push[v]), .din (in_link.flit),
      .pop  (vc_pop[v]),  .dout(head_flit[v]),
      .empty(vc_empty[v]), .full(vc_full[v]), .count(vc_count[v])
    );

    xy_route u_route (
      .my_row, .my_col,
      .dst_row (head_flit[v].dst_row),
      .dst_col (head_flit[v].dst_col),
      .out_port(head_route)
    );

    assign route_cur[v] = is_head(head_flit[v].ftype) ? head_route : route_q[v];

    always_comb begin
      eligible[v] = !vc_empty[v] && ds_ready[route_cur[v]][v];
      if (is_head(head_flit[v].ftype) && out_locked[route_cur[v]]) eligible[v] = 1'b0;
    end

    assign vc_pop[v] = grant && sel_ok && (sel_vc == VC_W'(v));

    always_ff @(posedge clk) begin
      if (!rst_n)
        in_open[v] <= 1'b0;
      else if (vc_push[v] && is_head(in_link.flit.ftype) && !is_tail(in_link.flit.ftype))
        in_open[v] <= 1'b1;
      else if (vc_push[v] && is_tail(in_link.flit.ftype))
        in_open[v] <= 1'b0;
    end

    always_ff @(posedge clk) begin
      if (!rst_n)                                      route_q[v] <= PORT_L;
      else if (vc_pop[v] && is_head(head_flit[v].ftype)) route_q[v] <= head_route;
    end
  end

  // Round robin between the VCs, starting at rr_q.
  always_comb begin
    sel_ok = 1'b0;
    sel_vc = rr_q;
    for (int k = 0; k < NVC; k++) begin
      automatic logic [VC_W-1:0] cand = VC_W'((32'(rr_q) + k) % NVC);
      if (!sel_ok && eligible[cand]) begin
        sel_ok = 1'b1;
        sel_vc = cand;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                rr_q <= '0;
    else if (grant && sel_ok)  rr_q <= VC_W'((32'(sel_vc) + 1) % NVC);
  end

  assign req.valid = sel_ok;
  assign req.vc    = sel_vc;
  assign req.port  = route_cur[sel_vc];
  assign req.head  = is_head(head_flit[sel_vc].ftype);
  assign req.tail  = is_tail(head_flit[sel_vc].ftype);
  assign req_flit  = head_flit[sel_vc];
  assign empty     = &vc_empty;

  a_ready_means_room: assert property (@(posedge clk) disable iff (!rst_n) (in_ready & vc_full) == '0);
  a_grant_needs_req: assert property (@(posedge clk) disable iff (!rst_n) grant |-> sel_ok);
endmodule
