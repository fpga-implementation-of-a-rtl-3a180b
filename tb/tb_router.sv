// Self-checking testbench of the five-port router (DEPTH 4, at row 1, col 1
// of a 4x4 mesh).
//
// First the minimum latency is measured: one single-flit packet from the
// local port to East must leave two cycles after it was on the input link.
// Then all five inputs send random packets (1 to 4 flits, random VC, random
// destination in the mesh) while every output's next hop is randomly not
// ready. Each flit carries its packet number and index in its data. Checked:
// every packet leaves on the output the XY rule gives, with its VC, its
// flits back to back on that output in order and unchanged, the packets of
// one input VC in the order sent, and all packets delivered.
module tb_router;
  import noc_pkg::*;
  localparam logic [COORD_W-1:0] ROW = 1, COL = 1;
  localparam int NPKT = 400;   // packets per input port

  logic clk = 0, rst_n = 0;
  link_t     [NPORTS-1:0] in_link, out_link;
  vc_ready_t [NPORTS-1:0] in_ready, ds_ready;
  logic idle;
  int checks = 0, failures = 0, delivered = 0, stalls = 0, cycle = 0;

  // Per output: packet in progress (-1 when none) and next expected index.
  int cur_pkt [NPORTS], cur_idx [NPORTS], cur_len [NPORTS];
  // Packet table: length, source stream, expected output and VC.
  int pkt_len [int], pkt_out [int], pkt_vc [int], pkt_src [int];
  flit_t pkt_head [int];
  int last_seq [NPORTS*NVC];

  router dut (.clk, .rst_n, .my_row(ROW), .my_col(COL), .in_link, .in_ready, .out_link, .ds_ready, .idle);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  function automatic int xy(logic [COORD_W-1:0] r, logic [COORD_W-1:0] c);
    if (int'(c) > int'(COL)) return 3;
    if (int'(c) < int'(COL)) return 2;
    if (int'(r) > int'(ROW)) return 1;
    if (int'(r) < int'(ROW)) return 0;
    return 4;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) begin
      if (out_link[o].valid) begin
        automatic flit_t f = out_link[o].flit;
        automatic int id = int'(f.data[31:8]);
        automatic int idx = int'(f.data[7:0]);
        checks++;
        if (!pkt_len.exists(id)) begin
          failures++; $display("FAIL: unknown packet %0d on output %0d", id, o);
        end else if (cur_pkt[o] < 0) begin
          // must be the head of a new packet for this output
          if (idx != 0 || !is_head(f.ftype) || pkt_out[id] != o || int'(out_link[o].vc) != pkt_vc[id] || f !== pkt_head[id]) begin
            failures++; $display("FAIL: output %0d got pkt %0d idx %0d (expected out %0d)", o, id, idx, pkt_out[id]);
          end
          if (id <= last_seq[pkt_src[id]]) begin
            failures++; $display("FAIL: packet %0d out of order in its input VC", id);
          end
          last_seq[pkt_src[id]] = id;
          if (is_tail(f.ftype)) begin delivered++; end
          else begin cur_pkt[o] = id; cur_idx[o] = 1; end
        end else begin
          if (id != cur_pkt[o] || idx != cur_idx[o] || int'(out_link[o].vc) != pkt_vc[id] ||
              is_head(f.ftype) || is_tail(f.ftype) != (idx == pkt_len[id] - 1)) begin
            failures++; $display("FAIL: output %0d interleaved: pkt %0d idx %0d, expected pkt %0d idx %0d", o, id, idx, cur_pkt[o], cur_idx[o]);
          end
          cur_idx[o]++;
          if (is_tail(f.ftype)) begin delivered++; cur_pkt[o] = -1; end
        end
      end
    end
  end

  // One driver per input port; each keeps one packet per VC in progress.
  for (genvar p = 0; p < NPORTS; p++) begin : g_drv
    initial begin
      int left [NVC], id [NVC], idx [NVC], made;
      made = 0;
      foreach (left[v]) begin left[v] = 0; id[v] = 0; idx[v] = 0; end
      in_link[p] = '0;
      wait (rst_n);
      @(negedge clk);
      wait (cycle > 20);
      while (made < NPKT || left[0] > 0 || left[1] > 0) begin
        automatic int v;
        @(negedge clk);
        in_link[p] = '0;
        #1;
        v = $urandom_range(0, NVC - 1);
        if (left[v] == 0 && made < NPKT && $urandom_range(0, 1) == 0) begin
          flit_t h;
          id[v] = (p * NPKT + made) * 2 + 2 + v;   // increasing within each (p, v)
          made++;
          left[v] = $urandom_range(1, 4);
          idx[v] = 0;
          h = flit_t'({$urandom, $urandom});
          h.ftype = (left[v] == 1) ? FLIT_SINGLE : FLIT_HEAD;
          h.data = {24'(id[v]), 8'd0};
          pkt_len[id[v]] = left[v];
          pkt_out[id[v]] = xy(h.dst_row, h.dst_col);
          pkt_vc[id[v]] = v;
          pkt_src[id[v]] = p * NVC + v;
          pkt_head[id[v]] = h;
        end
        if (left[v] > 0) begin
          if (!in_ready[p][v]) stalls++;
          else begin
            flit_t f;
            f = pkt_head[id[v]];
            if (idx[v] > 0) f.ftype = (left[v] == 1) ? FLIT_TAIL : FLIT_BODY;
            f.data = {24'(id[v]), 8'(idx[v])};
            in_link[p].valid = 1; in_link[p].vc = VC_W'(v); in_link[p].flit = f;
            idx[v]++; left[v]--;
          end
        end
      end
      @(negedge clk);
      in_link[p] = '0;
    end
  end

  always @(negedge clk) begin
    for (int o = 0; o < NPORTS; o++) ds_ready[o] = ($urandom_range(0, 4) == 0) ? vc_ready_t'($urandom) : '1;
  end

  initial begin
    foreach (cur_pkt[o]) cur_pkt[o] = -1;
    foreach (last_seq[s]) last_seq[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Minimum latency: local input to East output.
    begin
      flit_t f;
      int t0;
      f = '0;
      f.ftype = FLIT_SINGLE; f.dst_row = ROW; f.dst_col = COL + 1; f.data = {24'd1, 8'd0};
      pkt_len[1] = 1; pkt_out[1] = 3; pkt_vc[1] = 0; pkt_src[1] = 9; pkt_head[1] = f;
      wait (cycle == 5);
      force ds_ready = '1;
      @(negedge clk);
      in_link[PORT_L] = link_t'{valid: 1'b1, vc: 1'b0, flit: f};
      t0 = cycle;
      @(negedge clk);
      in_link[PORT_L] = '0;
      while (!out_link[PORT_E].valid && cycle < t0 + 10) @(negedge clk);
      checks++;
      if (cycle - t0 != 2) begin failures++; $display("FAIL: latency %0d cycles, expected 2", cycle - t0); end
      release ds_ready;
    end
    wait (delivered == NPORTS * NPKT + 1);
    repeat (5) @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL: router not idle at the end"); end
    $display("packets delivered %0d, upstream stalls %0d, cycles %0d", delivered, stalls, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
