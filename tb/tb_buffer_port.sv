// Self-checking testbench of buffer_port (DEPTH 4, router at row 1, col 2).
//
// The testbench plays a registered upstream sending well-formed packets
// (single-flit, or head, bodies and tail) on both VCs, a random next hop
// (ds_ready), random output holds (out_locked) and a random arbiter (grant).
// A reference model keeps each VC's queue with the route of every flit,
// worked out from the XY rule and its packet's head. Checked every cycle:
// in_ready against the queue lengths, in_open against the packets
// part-way sent, the bid (flit, VC, output, head/tail)
// against the front of that VC's queue, that a bid is made exactly when some
// VC's front flit may move, and that every flit sent is eventually bid.
module tb_buffer_port;
  import noc_pkg::*;
  localparam int unsigned DEPTH = 4;
  localparam logic [COORD_W-1:0] ROW = 1, COL = 2;

  logic clk = 0, rst_n = 0;
  link_t in_link;
  vc_ready_t in_ready, in_open;
  vc_ready_t [NPORTS-1:0] ds_ready;
  logic [NPORTS-1:0] out_locked;
  sw_req_t req;
  flit_t req_flit;
  logic grant, empty;
  int checks = 0, failures = 0, sent = 0, popped = 0, full_seen = 0, both_eligible = 0;

  typedef struct { flit_t f; int route; } entry_t;
  entry_t q [NVC][$];
  int     pkt_route [NVC];
  int     pkt_left  [NVC];   // flits still to send in the current packet
  bit     open_before [NVC];

  buffer_port dut (
    .clk, .rst_n, .my_row(ROW), .my_col(COL),
    .in_link, .in_ready, .in_open, .ds_ready, .out_locked, .req, .req_flit, .grant, .empty
  );
  always #5 clk = ~clk;

  function automatic int xy(logic [COORD_W-1:0] r, logic [COORD_W-1:0] c);
    if (int'(c) > int'(COL)) return 3;
    if (int'(c) < int'(COL)) return 2;
    if (int'(r) > int'(ROW)) return 1;
    if (int'(r) < int'(ROW)) return 0;
    return 4;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_link = '0; ds_ready = '0; out_locked = '0; grant = 0;
    foreach (pkt_left[v]) begin pkt_left[v] = 0; pkt_route[v] = 4; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 8000; t++) begin
      automatic bit elig [NVC];
      automatic bit any = 0, send;
      automatic int v;
      @(negedge clk);
      foreach (open_before[w]) open_before[w] = (pkt_left[w] > 0);
      // Upstream: the link is registered, so decide on the queue state alone.
      v = $urandom_range(0, NVC - 1);
      send = (t < 7000) && ($urandom_range(0, 3) != 0) && (q[v].size() < DEPTH);
      in_link = '0;
      if (send) begin
        flit_t f;
        entry_t e;
        f = flit_t'({$urandom, $urandom});
        if (pkt_left[v] == 0) begin
          pkt_left[v] = $urandom_range(1, 4);
          f.ftype = (pkt_left[v] == 1) ? FLIT_SINGLE : FLIT_HEAD;
          pkt_route[v] = xy(f.dst_row, f.dst_col);
        end else begin
          f.ftype = (pkt_left[v] == 1) ? FLIT_TAIL : FLIT_BODY;
        end
        pkt_left[v]--;
        in_link.valid = 1; in_link.vc = VC_W'(v); in_link.flit = f;
        e.f = f; e.route = pkt_route[v];
        q[v].push_back(e);
        sent++;
      end
      for (int o = 0; o < NPORTS; o++) ds_ready[o] = vc_ready_t'($urandom_range(0, 3) == 0 ? 0 : $urandom | 1);
      out_locked = NPORTS'($urandom) & NPORTS'($urandom);
      #1;
      // in_ready: room for one more, counting the flit on the link.
      for (int w = 0; w < NVC; w++) begin
        automatic int stored = q[w].size() - ((send && w == v) ? 1 : 0);
        automatic bit exp_ready = (stored + ((send && w == v) ? 1 : 0)) < DEPTH;
        if (!exp_ready) full_seen++;
        checks++;
        if (in_ready[w] !== exp_ready) begin
          failures++; $display("FAIL t=%0d in_ready[%0d]=%0b expected %0b", t, w, in_ready[w], exp_ready);
        end
      end
      // in_open: a packet has started to arrive and its tail has not.
      for (int w = 0; w < NVC; w++) begin
        automatic bit exp_open = open_before[w];
        checks++;
        if (in_open[w] !== exp_open) begin
          failures++; $display("FAIL t=%0d in_open[%0d]=%0b expected %0b", t, w, in_open[w], exp_open);
        end
      end
      // Which VCs may move (flits on the link are not yet stored).
      for (int w = 0; w < NVC; w++) begin
        automatic int stored = q[w].size() - ((send && w == v) ? 1 : 0);
        elig[w] = 0;
        if (stored > 0) begin
          automatic entry_t e = q[w][0];
          elig[w] = ds_ready[e.route][w] && !(is_head(e.f.ftype) && out_locked[e.route]);
        end
        any |= elig[w];
      end
      if (elig[0] && elig[1]) both_eligible++;
      checks++;
      if (req.valid !== any) begin
        failures++; $display("FAIL t=%0d req.valid=%0b expected %0b", t, req.valid, any);
      end
      grant = 0;
      if (req.valid && any) begin
        automatic int w = int'(req.vc);
        automatic entry_t e = q[w][0];
        checks++;
        if (!elig[w] || req_flit !== e.f || int'(req.port) != e.route ||
            req.head !== is_head(e.f.ftype) || req.tail !== is_tail(e.f.ftype)) begin
          failures++;
          $display("FAIL t=%0d bid vc %0d port %0d (exp %0d) flit %h (exp %h)", t, w, req.port, e.route, req_flit, e.f);
        end
        grant = $urandom_range(0, 3) != 0;
        if (grant) begin void'(q[w].pop_front()); popped++; end
      end
    end
    checks++;
    if (popped != sent || !empty) begin
      failures++; $display("FAIL: sent %0d flits, %0d left the port, empty=%0b", sent, popped, empty);
    end
    checks++;
    if (full_seen == 0 || both_eligible == 0) begin
      failures++; $display("FAIL: a VC never filled (%0d) or VCs never competed (%0d)", full_seen, both_eligible);
    end
    $display("flits %0d, cycles with a full VC %0d, cycles with both VCs eligible %0d", sent, full_seen, both_eligible);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
